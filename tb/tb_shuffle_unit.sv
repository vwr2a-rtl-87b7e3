// tb_shuffle_unit: fills VWRs A and B with random words and checks every
// output word of all eight shuffle modes against index formulas evaluated
// here (interleave, even/odd pruning, 8-bit index reversal, circular shift
// of the 256-word concatenation by 32 words).
module tb_shuffle_unit;
  import vwr2a_pkg::*;

  vwr_t       a, b, y;
  shuf_mode_e mode;
  int         checks = 0, failures = 0;

  shuffle_unit dut (.a(a), .b(b), .mode(mode), .y(y));

  function automatic word_t xcat(int unsigned j);
    return (j < 128) ? a[j] : b[j - 128];
  endfunction

  function automatic int unsigned rev8(int unsigned v);
    int unsigned r = 0;
    for (int i = 0; i < 8; i++) if (v[i]) r += (1 << (7 - i));
    return r;
  endfunction

  function automatic word_t expected(shuf_mode_e m, int unsigned i);
    int unsigned j;
    case (m)
      SH_ILV_LO, SH_ILV_HI: begin
        j = i + ((m == SH_ILV_HI) ? 128 : 0);
        return (j % 2 == 0) ? a[j/2] : b[j/2];
      end
      SH_PRUNE_E: return (i < 64) ? a[2*i + 1] : b[2*(i-64) + 1];
      SH_PRUNE_O: return (i < 64) ? a[2*i]     : b[2*(i-64)];
      SH_BREV_LO: return xcat(rev8(i));
      SH_BREV_HI: return xcat(rev8(i + 128));
      SH_CSH_LO:  return xcat((i + 256 - 32) % 256);
      default:    return xcat((i + 128 + 256 - 32) % 256);
    endcase
  endfunction

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < 128; i++) begin
        a[i] = (rep == 0) ? 32'(i) : $urandom;
        b[i] = (rep == 0) ? 32'(1000 + i) : $urandom;
      end
      for (int m = 0; m < 8; m++) begin
        mode = shuf_mode_e'(m);
        #1;
        for (int i = 0; i < 128; i++) begin
          checks++;
          if (y[i] !== expected(mode, i)) begin
            failures++;
            if (failures < 10) $display("FAIL mode=%0d i=%0d y=%h exp=%h", m, i, y[i], expected(mode, i));
          end
        end
      end
    end
    // spot checks with values worked out by hand (rep 0 pattern)
    for (int i = 0; i < 128; i++) begin a[i] = 32'(i); b[i] = 32'(1000 + i); end
    mode = SH_ILV_LO;  #1; checks++; if (y[3]   !== 32'd1001) failures++;
    mode = SH_BREV_LO; #1; checks++; if (y[1]   !== 32'd1000) failures++;  // rev8(1)=128 -> B[0]
    mode = SH_CSH_LO;  #1; checks++; if (y[0]   !== 32'd1096) failures++;  // X[224] = B[96]
    mode = SH_CSH_HI;  #1; checks++; if (y[127] !== 32'd1095) failures++;  // X[223] = B[95]
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
