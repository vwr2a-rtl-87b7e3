// rc_alu: the 32-bit ALU of one reconfigurable cell (RC).
//
// Purely combinational; the result is produced in the same cycle, as the
// paper states that all operations take one clock cycle. Operations (paper):
// signed add, subtract and multiply, bitwise AND/OR/XOR, logical and
// arithmetic shifts. The multiplier has two modes (paper): ALU_MUL keeps
// bits [31:0] of the 64-bit signed product; ALU_MULFP drops the lower 16
// bits and keeps bits [47:16], giving a single-cycle 16.15 fixed-point
// multiply. Every operator has operand isolation (paper): its inputs are
// forced to zero unless it is the selected operation, so idle operators do
// not toggle. The shift amount is b[4:0] (this design's choice).
module rc_alu
  import vwr2a_pkg::*;
(
  input  alu_op_e op,
  input  word_t   a,
  input  word_t   b,
  output word_t   y
);

  logic sel_add, sel_mul, sel_log, sel_sh;
  word_t add_a, add_b, mul_a, mul_b, log_a, log_b, sh_a;
  logic [4:0] sh_n;
  word_t add_y, log_y, sh_y;
  logic signed [2*DATA_W-1:0] prod;

  always_comb begin
    sel_add = (op == ALU_ADD) || (op == ALU_SUB);
    sel_mul = (op == ALU_MUL) || (op == ALU_MULFP);
    sel_log = (op == ALU_AND) || (op == ALU_OR) || (op == ALU_XOR);
    sel_sh  = (op == ALU_SLL) || (op == ALU_SRL) || (op == ALU_SRA);

    // operand isolation
    add_a = sel_add ? a : '0;
    add_b = sel_add ? b : '0;
    mul_a = sel_mul ? a : '0;
    mul_b = sel_mul ? b : '0;
    log_a = sel_log ? a : '0;
    log_b = sel_log ? b : '0;
    sh_a  = sel_sh  ? a : '0;
    sh_n  = sel_sh  ? b[4:0] : '0;

    add_y = (op == ALU_SUB) ? add_a - add_b : add_a + add_b;
    prod  = $signed(mul_a) * $signed(mul_b);

    unique case (op)
      ALU_AND: log_y = log_a & log_b;
      ALU_OR:  log_y = log_a | log_b;
      default: log_y = log_a ^ log_b;
    endcase

    unique case (op)
      ALU_SLL: sh_y = sh_a << sh_n;
      ALU_SRL: sh_y = sh_a >> sh_n;
      default: sh_y = word_t'($signed(sh_a) >>> sh_n);
    endcase

    unique case (op)
      ALU_ADD, ALU_SUB:         y = add_y;
      ALU_MUL:                  y = prod[DATA_W-1:0];
      ALU_MULFP:                y = prod[DATA_W+15:16];
      ALU_AND, ALU_OR, ALU_XOR: y = log_y;
      ALU_SLL, ALU_SRL, ALU_SRA: y = sh_y;
      default:                  y = '0;
    endcase
  end

endmodule
