// tb_rc_alu: random and corner-case check of the RC ALU against a reference
// model written here with plain integer arithmetic (64-bit longint product,
// explicit shifts).
module tb_rc_alu;
  import vwr2a_pkg::*;

  alu_op_e op;
  word_t   a, b, y;
  int      checks = 0, failures = 0;

  rc_alu dut (.op(op), .a(a), .b(b), .y(y));

  function automatic word_t ref_model(alu_op_e o, word_t x, word_t z);
    longint p;
    p = longint'(signed'(x)) * longint'(signed'(z));
    case (o)
      ALU_ADD:   return x + z;
      ALU_SUB:   return x - z;
      ALU_MUL:   return word_t'(p);
      ALU_MULFP: return word_t'(p >>> 16);
      ALU_AND:   return x & z;
      ALU_OR:    return x | z;
      ALU_XOR:   return x ^ z;
      ALU_SLL:   return x << z[4:0];
      ALU_SRL:   return x >> z[4:0];
      ALU_SRA:   return word_t'(signed'(x) >>> z[4:0]);
      default:   return '0;
    endcase
  endfunction

  task automatic check(alu_op_e o, word_t x, word_t z);
    word_t exp;
    op = o; a = x; b = z;
    #1;
    exp = ref_model(o, x, z);
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, x, z, y, exp);
    end
  endtask

  initial begin
    // fixed-point: 0.5 * 0.5 = 0.25 in 16.15 style (1.0 = 1<<16 here)
    check(ALU_MULFP, 32'h0000_8000, 32'h0000_8000);
    if (y !== 32'h0000_4000) begin failures++; $display("FAIL mulfp corner"); end
    checks++;
    check(ALU_MULFP, 32'hFFFF_0000, 32'h0003_0000);  // -1 * 3 = -3
    check(ALU_SRA,   32'h8000_0000, 32'd31);
    check(ALU_SUB,   32'd0, 32'd1);
    check(ALU_NOP,   32'h1234_5678, 32'h9abc_def0);
    for (int i = 0; i < 4000; i++)
      check(alu_op_e'($urandom_range(0, 10)), $urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
