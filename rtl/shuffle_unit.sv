// shuffle_unit: hard-wired word permutations between VWRs A and B, whose
// result the LSU writes into VWR C.
//
// Combinational. Let X be the 256-word concatenation with A in words 0..127
// and B in words 128..255. The four operations are the paper's; the exact
// index formulas and the half-select encoding are this design's reading of
// the paper's one-line descriptions:
//   interleave : F[2i] = A[i], F[2i+1] = B[i]; output F lower or upper half
//   even prune : even-index words dropped: out = A[1,3,..,127], B[1,3,..,127]
//   odd prune  : odd-index words dropped:  out = A[0,2,..,126], B[0,2,..,126]
//   bit reverse: F[j] = X[bitrev8(j)]; output F lower or upper half
//   circ. shift: F[j] = X[(j - 32) mod 256] (upper 32 words wrap to the
//                bottom); output F lower or upper half
module shuffle_unit
  import vwr2a_pkg::*;
(
  input  vwr_t       a,
  input  vwr_t       b,
  input  shuf_mode_e mode,
  output vwr_t       y
);

  localparam int unsigned N2 = 2 * VWR_WORDS;       // 256
  localparam int unsigned LB = $clog2(N2);          // 8
  localparam int unsigned H  = VWR_WORDS / 2;       // 64

  function automatic int unsigned bitrev(int unsigned v);
    int unsigned r;
    r = 0;
    for (int i = 0; i < LB; i++) r |= ((v >> i) & 1) << (LB - 1 - i);
    return r;
  endfunction

  // X: the A|B concatenation, word j of it in x[j]
  word_t x [N2];
  for (genvar j = 0; j < VWR_WORDS; j++) begin : g_x
    assign x[j]             = a[j];
    assign x[j + VWR_WORDS] = b[j];
  end

  // Each output word is an 8:1 selection among fixed wires; all indices are
  // elaboration-time constants, so the unit is pure wiring plus one mux level.
  for (genvar i = 0; i < VWR_WORDS; i++) begin : g_w
    localparam int unsigned IL = i;                 // interleave, lower half
    localparam int unsigned IH = i + VWR_WORDS;     // interleave, upper half
    localparam int unsigned PI = (i % H) * 2;       // pruning source (even)
    localparam int unsigned BL = bitrev(i);
    localparam int unsigned BH = bitrev(i + VWR_WORDS);
    localparam int unsigned CL = (i + N2 - SLICE_WORDS) % N2;
    localparam int unsigned CH = (i + VWR_WORDS + N2 - SLICE_WORDS) % N2;
    word_t ysel, ilv_lo, ilv_hi, pre, pro, brv_lo, brv_hi, csh_lo, csh_hi;
    assign ilv_lo = (IL % 2 == 0) ? a[IL / 2] : b[IL / 2];
    assign ilv_hi = (IH % 2 == 0) ? a[IH / 2] : b[IH / 2];
    assign pre    = (i < H) ? a[PI + 1] : b[PI + 1];
    assign pro    = (i < H) ? a[PI]     : b[PI];
    assign brv_lo = x[BL];
    assign brv_hi = x[BH];
    assign csh_lo = x[CL];
    assign csh_hi = x[CH];
    always_comb begin
      unique case (mode)
        SH_ILV_LO:  ysel = ilv_lo;
        SH_ILV_HI:  ysel = ilv_hi;
        SH_PRUNE_E: ysel = pre;
        SH_PRUNE_O: ysel = pro;
        SH_BREV_LO: ysel = brv_lo;
        SH_BREV_HI: ysel = brv_hi;
        SH_CSH_LO:  ysel = csh_lo;
        default:    ysel = csh_hi;
      endcase
    end
    assign y[i] = ysel;
  end

endmodule
