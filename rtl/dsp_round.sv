// dsp_round: stochastic rounding and saturation of one accumulated result
// (the "DSP ROUND" unit at the top of every array column).
//
// The 48-bit accumulator holds a product-sum with twice the input fraction
// bits. The unit adds a RND_BITS-wide random number to it and drops the low
// RND_BITS bits; the sum rounds up exactly when the random number exceeds the
// complement of the dropped fraction, so the result rounds up with probability
// equal to that fraction (unbiased rounding). The bits above the OUT_W-bit
// result must then all equal its sign bit (the DSP pattern-detect test); if not,
// the result saturates to the largest or smallest OUT_W-bit two's-complement
// value. One register stage: out_* follows in_* by one clock.
// The add-then-drop method and the pattern test follow the paper; the fixed
// RND_BITS and the single pipeline stage are this design's choice.
module dsp_round #(
  parameter int unsigned ACC_W    = 48,
  parameter int unsigned OUT_W    = 16,
  parameter int unsigned RND_BITS = 14
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [ACC_W-1:0]    in_acc,
  input  logic [RND_BITS-1:0] rnd,
  output logic                out_valid,
  output logic [OUT_W-1:0]    out_data,
  output logic                out_sat
);
  localparam int unsigned SW = ACC_W + 1;          // one guard bit for the add
  localparam int unsigned HW = SW - RND_BITS;      // width after dropping LSBs

  logic signed [SW-1:0] sum;
  logic signed [HW-1:0] kept;
  logic                 all_same;
  logic [OUT_W-1:0]     rounded;
  logic                 sat;

  always_comb begin
    sum      = $signed({in_acc[ACC_W-1], in_acc}) + $signed({{(SW-RND_BITS){1'b0}}, rnd});
    kept     = sum[SW-1:RND_BITS];
    // excess MSBs (and the result sign) must be all 0s or all 1s
    all_same = (kept[HW-1:OUT_W-1] == '0) || (kept[HW-1:OUT_W-1] == '1);
    sat      = !all_same;
    if (all_same)          rounded = kept[OUT_W-1:0];
    else if (kept[HW-1])   rounded = {1'b1, {(OUT_W-1){1'b0}}};   // min
    else                   rounded = {1'b0, {(OUT_W-1){1'b1}}};   // max
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_sat   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_data  <= rounded;
      out_sat   <= in_valid && sat;
    end
  end

  initial assert (RND_BITS >= 1 && RND_BITS + OUT_W <= ACC_W)
    else $error("dsp_round: RND_BITS out of range");
endmodule
