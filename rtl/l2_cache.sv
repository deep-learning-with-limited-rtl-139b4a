// l2_cache: on-chip block-RAM store for the matrix blocks in use.
//
// The A store holds p*n rows of A (k <= K_MAX words each), the B store n
// columns of B. Both are double buffered: the READ engine fills one half while
// the L2-to-SA mover reads the other. To feed the array n words of A and n
// words of B per cycle, each store is split into n banks: row r of the A block
// lives in bank r mod n at word (half*P + r/n)*K_MAX + t, column j of the B
// block in bank j at word half*K_MAX + t.
// Write port: one memory-bus beat, BW consecutive words of one row or column,
// per cycle (wr_addr is a multiple of BW). To take it, every bank is split into
// BW lanes by word address mod BW. Read port: the same word address in every
// bank; data appears one clock after rd_en (block-RAM output register).
// Storing part of A and B on chip and double buffering follow the paper; the
// banking and the sizes P and K_MAX are this design's choice.
module l2_cache #(
  parameter int unsigned N      = 28,
  parameter int unsigned P      = 4,
  parameter int unsigned K_MAX  = 2048,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned BW     = 16,
  localparam int unsigned A_AW  = $clog2(2*P*K_MAX),
  localparam int unsigned B_AW  = $clog2(2*K_MAX),
  localparam int unsigned BK_W  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned LW    = (BW > 1) ? $clog2(BW) : 1
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic                 wr_is_b,
  input  logic [BK_W-1:0]      wr_bank,
  input  logic [A_AW-1:0]      wr_addr,
  input  logic [BW*DATA_W-1:0] wr_data,
  input  logic                 rd_en,
  input  logic [A_AW-1:0]      rd_addr_a,
  input  logic [B_AW-1:0]      rd_addr_b,
  output logic [DATA_W-1:0]    rd_a [N],
  output logic [DATA_W-1:0]    rd_b [N]
);
  localparam int unsigned AD = 2*P*K_MAX/BW;   // words per lane
  localparam int unsigned BD = 2*K_MAX/BW;

  function automatic int unsigned lane_of(input logic [A_AW-1:0] a);
    return (BW > 1) ? int'(a) % BW : 0;
  endfunction

  logic [LW-1:0] lane_a_q, lane_b_q;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      lane_a_q <= LW'(lane_of(rd_addr_a));
      lane_b_q <= LW'(lane_of(A_AW'(rd_addr_b)));
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_bank
    logic [DATA_W-1:0] ra [BW], rb [BW];
    for (genvar w = 0; w < BW; w++) begin : g_lane
      logic [DATA_W-1:0] amem [AD];
      logic [DATA_W-1:0] bmem [BD];

      always_ff @(posedge clk) begin
        if (wr_en && !wr_is_b && wr_bank == BK_W'(j)) amem[int'(wr_addr) / BW] <= wr_data[w*DATA_W +: DATA_W];
        if (wr_en &&  wr_is_b && wr_bank == BK_W'(j)) bmem[int'(wr_addr) / BW] <= wr_data[w*DATA_W +: DATA_W];
      end

      always_ff @(posedge clk) begin
        if (rd_en) begin
          ra[w] <= amem[int'(rd_addr_a) / BW];
          rb[w] <= bmem[int'(rd_addr_b) / BW];
        end
      end
    end
    assign rd_a[j] = ra[lane_a_q];
    assign rd_b[j] = rb[lane_b_q];
  end

  initial assert (K_MAX % BW == 0 && (BW & (BW - 1)) == 0)
    else $error("l2_cache: BW must be a power of two dividing K_MAX");
endmodule
