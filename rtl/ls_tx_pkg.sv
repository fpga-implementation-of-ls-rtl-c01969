// ls_tx_pkg -- shared types, constants and code-construction functions of the
// LS-code BPSK sounder transmitter.
//
// A chip of a loosely synchronous (LS) code takes one of three values, 0, +1
// or -1, and travels through the design as a 2-bit two's-complement number
// (chip_t). The numeric defaults follow the transmitter described for a 2x2
// CDM MIMO channel sounder: LS codes of 8190 chips, a chip rate of 7.68 Mchip/s
// up-sampled by 4 to the 30.72 MHz DAC rate, an 11-tap RRC filter and a
// 16-bit DAC word. The split of the 8190 chips into two Golay halves of 2048
// chips and two zero runs of 2047 chips is this design's reading of the
// published correlation plots (peak of about 4096, interference-free window
// of about 4000 chips); it is not stated in words.
//
// golay_chip() gives element n of the Golay complementary pair (a_m, b_m) built
// by the recursion a_{k+1} = a_k | b_k, b_{k+1} = a_k | -b_k from a_0 = b_0 = (+1),
// walking the index bits from the most significant one down. ls_chip() lays
// out one LS code as ZEROS C ZEROS S. Code 0 uses (C, S) = (a, b); code 1 uses
// the complementary mate (C, S) = (reverse(b), -reverse(a)), the other code of
// the same node of the LS code tree, so the two codes have zero aperiodic
// cross-correlation sum everywhere between their halves.
package ls_tx_pkg;

  typedef logic signed [1:0] chip_t;

  localparam chip_t CHIP_ZERO = 2'sb00;
  localparam chip_t CHIP_POS  = 2'sb01;
  localparam chip_t CHIP_NEG  = 2'sb11;

  // Code layout (chips)
  localparam int unsigned LS_GOLAY_LOG2 = 11;                      // C and S: 2048 chips each
  localparam int unsigned LS_ZERO_LEN   = 2047;                    // zero run before C and before S
  localparam int unsigned LS_CODE_LEN   = 2 * ((1 << LS_GOLAY_LOG2) + LS_ZERO_LEN);  // 8190

  // Rates
  localparam int unsigned UPSAMPLE   = 4;                        // 7.68 Mchip/s -> 30.72 MS/s

  // RRC filter: 11 taps, coefficients in units of 2^-10 (0.03808 ... 0.1484)
  localparam int unsigned RRC_TAPS   = 11;
  typedef logic signed [9:0] coef_t;
  typedef coef_t coef_arr_t [RRC_TAPS];
  localparam coef_arr_t RRC_COEF = '{10'sd39, 10'sd69, 10'sd100, 10'sd127, 10'sd146, 10'sd152,
                                     10'sd146, 10'sd127, 10'sd100, 10'sd69, 10'sd39};

  // Word widths
  localparam int unsigned RRC_OUT_W  = 12;   // sum of |coef| = 1115 < 2^11
  localparam int unsigned DAC_W      = 16;

  // Element n of a_m (second = 0) or b_m (second = 1).
  function automatic chip_t golay_chip(int unsigned n, int unsigned m, bit second);
    bit in_b = second;
    bit neg  = 1'b0;
    for (int k = int'(m) - 1; k >= 0; k--) begin
      if (n[k]) begin
        // second half: a_{k+1} -> b_k, b_{k+1} -> -b_k
        if (in_b) neg = ~neg;
        in_b = 1'b1;
      end else begin
        // first half of either is a_k
        in_b = 1'b0;
      end
    end
    return neg ? CHIP_NEG : CHIP_POS;
  endfunction

  // Chip idx of LS code code_sel (0 or 1): ZEROS C ZEROS S.
  function automatic chip_t ls_chip(int unsigned idx, int unsigned code_sel,
                                    int unsigned glog2, int unsigned zlen);
    int unsigned n = 1 << glog2;
    int unsigned j;
    chip_t v;
    if (idx < zlen) return CHIP_ZERO;
    if (idx < zlen + n) begin
      j = idx - zlen;                                   // C half
      if (code_sel == 0) return golay_chip(j, glog2, 1'b0);
      return golay_chip(n - 1 - j, glog2, 1'b1);        // reverse(b)
    end
    if (idx < 2 * zlen + n) return CHIP_ZERO;
    j = idx - 2 * zlen - n;                             // S half
    if (code_sel == 0) return golay_chip(j, glog2, 1'b1);
    v = golay_chip(n - 1 - j, glog2, 1'b0);             // -reverse(a)
    return -v;
  endfunction

endpackage
