// duc -- digital up-converter and output scaling to the 16-bit DAC word.
//
// Two mixers multiply the filtered I and Q samples by the NCO's cosine and
// sine, an adder sums them (the block diagram draws the sum with a plus), and
// the result is shifted left by SCALE_SHIFT and saturated to DAC_W bits: the
// 16-bit "data_out_scaled" sample. Because the carrier values are only 0 and
// +-1 the mixers reduce to select-and-negate, with no multiplier.
// SCALE_SHIFT = 6 is this design's choice: the largest RRC output for a
// zero-stuffed chip stream is 290 (2^-10 units), which becomes 18560 of a
// 32767 full scale; saturation only guards larger, non-LS inputs.
//
// Timing: one register; data_out_scaled(n+1) = sat((i_in*cos + q_in*sin)(n)
// << SCALE_SHIFT). Synchronous active-low reset clears the output.
module duc
  import ls_tx_pkg::*;
#(
  parameter int unsigned IN_W        = ls_tx_pkg::RRC_OUT_W,
  parameter int unsigned OUT_W       = ls_tx_pkg::DAC_W,
  parameter int unsigned SCALE_SHIFT = 6
) (
  input  logic                    clk,
  input  logic                    rstn,
  input  logic signed [IN_W-1:0]  i_in,
  input  logic signed [IN_W-1:0]  q_in,
  input  chip_t                   cos_in,
  input  chip_t                   sin_in,
  output logic signed [OUT_W-1:0] data_out_scaled
);

  localparam int unsigned SW = IN_W + 2;                 // I*cos + Q*sin, incl. -(-2^(IN_W-1)) twice
  localparam int unsigned WW = SW + SCALE_SHIFT;         // after scaling
  localparam logic signed [OUT_W-1:0] MAXV = {1'b0, {(OUT_W-1){1'b1}}};
  localparam logic signed [OUT_W-1:0] MINV = {1'b1, {(OUT_W-1){1'b0}}};

  logic signed [SW-1:0] mix_i, mix_q, sum;
  logic signed [WW-1:0] scaled;
  logic signed [OUT_W-1:0] sat;

  // mixer: x * c for c in {-1, 0, +1}
  function automatic logic signed [SW-1:0] mix(logic signed [IN_W-1:0] x, chip_t c);
    unique case (c)
      CHIP_POS: return SW'(x);
      CHIP_NEG: return -SW'(x);
      default:  return '0;
    endcase
  endfunction

  always_comb begin
    mix_i  = mix(i_in, cos_in);
    mix_q  = mix(q_in, sin_in);
    sum    = mix_i + mix_q;
    scaled = WW'(sum) <<< SCALE_SHIFT;
    if (scaled > WW'(MAXV))      sat = MAXV;
    else if (scaled < WW'(MINV)) sat = MINV;
    else                         sat = OUT_W'(scaled);
  end

  always_ff @(posedge clk) begin
    if (!rstn) data_out_scaled <= '0;
    else       data_out_scaled <= sat;
  end

endmodule
