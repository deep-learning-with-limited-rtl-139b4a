// systolic_array: the n x n wavefront systolic array with its edge FIFOs,
// rounding units and output FIFOs.
//
// Inputs: one FIFO per row holds a row of A, one FIFO per column holds a column
// of B (both written in lock step by the L2-to-SA mover, one word per FIFO per
// push). A sequencer "fires" when the row-0 and column-0 FIFOs hold data; the
// fire, with its first/last tag, runs down a delay line so that row i and
// column j FIFOs are read i and j cycles after the fire. Each word then moves
// one node per clock, A to the right and B downward, and node (i,j) multiplies
// the pair it receives at fire + i + j + 1. With the first element fired in
// cycle 0, node (0,0) finishes an operation of inner length k in cycle k and
// node (n-1,n-1) in cycle k + 2n - 2, the wavefront of the paper.
//
// Finished sums move into each node's local register and are shifted up the
// column, one register per clock, into the column's stochastic rounding unit
// (LFSR + dsp_round) and from there into the column's output FIFO. Results of
// column j leave in row order 0..n-1, the result of row i 2i + j + 3 cycles
// after the last fire.
//
// Flow control, all this design's own: an operation starts only when every
// output FIFO has room for its n results (credit counter, freed as the
// last column is popped); the last element of an operation is held until 2n-1
// cycles after the previous operation's last element, so that a node never
// delivers while a result from below passes its register (matters only for
// k < 2n-1); in_space tells the mover that every input FIFO can take two more
// words. The stat_* outputs are one-cycle event strobes; stat_bubble marks a
// cycle in which the row-0/column-0 FIFOs had no data to read.
module systolic_array
  import gemm_pkg::*;
#(
  parameter int unsigned N         = 28,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned ACC_W     = 48,
  parameter int unsigned RND_BITS  = 14,
  parameter int unsigned IN_DEPTH  = 512,
  parameter int unsigned OUT_DEPTH = 512,
  parameter int unsigned K_W       = DIM_W,
  parameter logic [31:0] SEED      = 32'hACE1_0001
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [K_W-1:0]        k,
  // input side
  input  logic                  a_push,
  input  logic [DATA_W-1:0]     a_wdata [N],
  input  logic                  b_push,
  input  logic [DATA_W-1:0]     b_wdata [N],
  output logic                  in_space,
  // output side
  input  logic [N-1:0]          c_pop,
  output logic [DATA_W-1:0]     c_rdata [N],
  output logic [N-1:0]          c_empty,
  // events
  output logic                  stat_op_start,
  output logic                  stat_spacing_stall,
  output logic                  stat_credit_stall,
  output logic                  stat_bubble,
  output logic [$clog2(N+1)-1:0] stat_sat
);
  localparam int unsigned ICW = $clog2(IN_DEPTH+1);
  localparam int unsigned OCW = $clog2(OUT_DEPTH+1);
  localparam int unsigned GAP = 2*N - 1;          // minimum spacing of last elements
  localparam int unsigned GW  = $clog2(GAP+1);

  // ---------------- input FIFOs ----------------
  logic [DATA_W-1:0] a_head [N], b_head [N];
  logic [N-1:0]      a_empty, b_empty, a_room, b_room, a_pop, b_pop;
  logic [ICW-1:0]    a_cnt [N], b_cnt [N];

  for (genvar i = 0; i < N; i++) begin : g_in
    logic unused_full_a, unused_full_b;
    sync_fifo #(.WIDTH(DATA_W), .DEPTH(IN_DEPTH)) u_afifo (
      .clk, .rst_n, .push(a_push), .wdata(a_wdata[i]), .pop(a_pop[i]),
      .rdata(a_head[i]), .empty(a_empty[i]), .full(unused_full_a), .count(a_cnt[i]));
    sync_fifo #(.WIDTH(DATA_W), .DEPTH(IN_DEPTH)) u_bfifo (
      .clk, .rst_n, .push(b_push), .wdata(b_wdata[i]), .pop(b_pop[i]),
      .rdata(b_head[i]), .empty(b_empty[i]), .full(unused_full_b), .count(b_cnt[i]));
    assign a_room[i] = a_cnt[i] <= ICW'(IN_DEPTH - 2);
    assign b_room[i] = b_cnt[i] <= ICW'(IN_DEPTH - 2);
  end
  assign in_space = &a_room && &b_room;

  // ---------------- sequencer ----------------
  logic [K_W-1:0] t;              // index of the next element of the operation
  logic [GW-1:0]  since_last;     // cycles since the previous last element
  logic [OCW-1:0] reserved;       // output FIFO words promised to operations
  logic           have_data, is_first, is_last, credit_ok, spacing_ok, fire;
  tag_t           tag_d [N];

  always_comb begin
    have_data  = !a_empty[0] && !b_empty[0];
    is_first   = (t == '0);
    is_last    = (t == k - 1'b1);
    credit_ok  = (32'(reserved) + N <= OUT_DEPTH);
    spacing_ok = (32'(since_last) >= GAP);
    fire       = have_data && (!is_first || credit_ok) && (!is_last || spacing_ok);
    tag_d[0]   = '{valid: fire, first: is_first, last: is_last};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t          <= '0;
      since_last <= GW'(GAP);
    end else begin
      if (fire) t <= is_last ? '0 : t + 1'b1;
      if (fire && is_last)      since_last <= GW'(1);
      else if (since_last < GW'(GAP)) since_last <= since_last + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) reserved <= '0;
    else reserved <= reserved + ((fire && is_first) ? OCW'(N) : '0) - (c_pop[N-1] ? OCW'(1) : '0);
  end

  for (genvar i = 1; i < N; i++) begin : g_skew
    always_ff @(posedge clk) begin
      if (!rst_n) tag_d[i] <= '0;
      else        tag_d[i] <= tag_d[i-1];
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_pop
    assign a_pop[i] = tag_d[i].valid;
    assign b_pop[i] = tag_d[i].valid;
  end

  assign stat_op_start      = fire && is_first;
  assign stat_spacing_stall = have_data && is_last && !spacing_ok;
  assign stat_credit_stall  = have_data && is_first && !credit_ok;
  assign stat_bubble        = !have_data;

  // ---------------- MACC grid ----------------
  logic [DATA_W-1:0] a_h [N][N+1];   // a_h[i][j]: A entering node (i,j)
  tag_t              t_h [N][N+1];
  logic [DATA_W-1:0] b_v [N+1][N];   // b_v[i][j]: B entering node (i,j)
  logic              cv  [N+1][N];   // cascade valid out of row i (row N: none)
  logic [ACC_W-1:0]  cd  [N+1][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    assign a_h[i][0] = a_head[i];
    assign t_h[i][0] = tag_d[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      logic deliver;
      dsp_macc #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .a_in(a_h[i][j]), .tag_in(t_h[i][j]), .b_in(b_v[i][j]),
        .a_out(a_h[i][j+1]), .tag_out(t_h[i][j+1]), .b_out(b_v[i+1][j]),
        .casc_in_valid(cv[i+1][j]), .casc_in(cd[i+1][j]),
        .casc_out_valid(cv[i][j]), .casc_out(cd[i][j]),
        .deliver(deliver));
    end
  end

  // ---------------- per column: LFSR, DSP ROUND, output FIFO ----------------
  logic [N-1:0] sat_col;
  for (genvar j = 0; j < N; j++) begin : g_out
    logic [RND_BITS-1:0] rnd;
    logic                rv;
    logic [DATA_W-1:0]   rd;
    logic                unused_full;
    logic [OCW-1:0]      unused_cnt;
    assign b_v[0][j] = b_head[j];
    assign cv[N][j]  = 1'b0;
    assign cd[N][j]  = '0;
    lfsr #(.OUT_W(RND_BITS), .SEED(SEED ^ (32'h9E37_79B9 * (j + 1)))) u_lfsr (
      .clk, .rst_n, .en(1'b1), .rnd(rnd));
    dsp_round #(.ACC_W(ACC_W), .OUT_W(DATA_W), .RND_BITS(RND_BITS)) u_round (
      .clk, .rst_n, .in_valid(cv[0][j]), .in_acc(cd[0][j]), .rnd(rnd),
      .out_valid(rv), .out_data(rd), .out_sat(sat_col[j]));
    sync_fifo #(.WIDTH(DATA_W), .DEPTH(OUT_DEPTH)) u_cfifo (
      .clk, .rst_n, .push(rv), .wdata(rd), .pop(c_pop[j]),
      .rdata(c_rdata[j]), .empty(c_empty[j]), .full(unused_full), .count(unused_cnt));
  end

  always_comb begin
    stat_sat = '0;
    for (int j = 0; j < N; j++) stat_sat += ($clog2(N+1))'(sat_col[j]);
  end

  a_k_nonzero: assert property (@(posedge clk) disable iff (!rst_n) fire |-> k != '0);
  a_fifo_lockstep: assert property (@(posedge clk) disable iff (!rst_n) a_push == b_push);
endmodule
