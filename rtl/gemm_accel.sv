// gemm_accel: fixed-point matrix multiplier with stochastic rounding, top level.
//
// Computes C = A x B for 16-bit fixed-point matrices held in DDR memory, with
// 48-bit exact accumulation and one stochastic rounding per result. Data path:
// the READ engine fetches blocks of A and B over the AXI4 read channels into
// the double-buffered L2 cache; the L2-to-SA mover streams them into the edge
// FIFOs of the N x N wavefront systolic array; each array column rounds its
// results (LFSR + DSP ROUND) into an output FIFO; the WRITE engine drains those
// FIFOs to C over the AXI4 write channels. The TOP controller sequences the
// steps. The host writes the descriptor (cfg), pulses start and waits for done.
//
// Interface: one AXI4 master (BW 16-bit words per beat, 256 bits by default;
// byte addresses) toward the DDR
// memory controller, the host's start/cfg/busy/done/cfg_err, error flags for
// AXI error responses, and stat, a set of event counters (cleared at start)
// that shows how often each flow-control mechanism acted.
// The block structure follows the paper's block diagram; interface widths,
// memory layout and sizes other than N = 28, 16-bit data and 48-bit
// accumulators are this design's choice.
module gemm_accel
  import gemm_pkg::*;
#(
  parameter int unsigned N         = 28,
  parameter int unsigned P         = 4,
  parameter int unsigned K_MAX     = 2048,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned ACC_W     = 48,
  parameter int unsigned RND_BITS  = 14,
  parameter int unsigned IN_DEPTH  = 512,
  parameter int unsigned OUT_DEPTH = 512,
  parameter int unsigned BW        = 16,
  parameter int unsigned MAX_BURST = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  // host
  input  logic                start,
  input  cfg_t                cfg,
  output logic                busy,
  output logic                done,
  output logic                cfg_err,
  output logic                axi_err,
  output stat_t               stat,
  // AXI4 master toward the DDR interface
  output logic                m_axi_arvalid,
  input  logic                m_axi_arready,
  output logic [ADDR_W-1:0]   m_axi_araddr,
  output logic [7:0]          m_axi_arlen,
  output logic [2:0]          m_axi_arsize,
  output logic [1:0]          m_axi_arburst,
  input  logic                m_axi_rvalid,
  output logic                m_axi_rready,
  input  logic [BW*DATA_W-1:0] m_axi_rdata,
  input  logic                m_axi_rlast,
  input  logic [1:0]          m_axi_rresp,
  output logic                m_axi_awvalid,
  input  logic                m_axi_awready,
  output logic [ADDR_W-1:0]   m_axi_awaddr,
  output logic [7:0]          m_axi_awlen,
  output logic [2:0]          m_axi_awsize,
  output logic [1:0]          m_axi_awburst,
  output logic                m_axi_wvalid,
  input  logic                m_axi_wready,
  output logic [BW*DATA_W-1:0] m_axi_wdata,
  output logic [BW*DATA_W/8-1:0] m_axi_wstrb,
  output logic                m_axi_wlast,
  input  logic                m_axi_bvalid,
  output logic                m_axi_bready,
  input  logic [1:0]          m_axi_bresp
);
  localparam int unsigned A_AW = $clog2(2*P*K_MAX);
  localparam int unsigned B_AW = $clog2(2*K_MAX);
  localparam int unsigned BK_W = (N > 1) ? $clog2(N) : 1;

  cfg_t  cfg_q;
  step_t ld_job, cp_job, wr_job;
  logic  ld_valid, ld_ready, ld_done, ld_busy;
  logic  cp_valid, cp_ready, cp_done, cp_busy;
  logic  wr_valid, wr_ready, wr_done, wr_busy;
  logic  rd_err, wr_err;

  top_controller #(.N(N), .P(P), .K_MAX(K_MAX), .BW(BW)) u_ctrl (
    .clk, .rst_n, .start, .cfg_in(cfg), .cfg(cfg_q), .busy, .done, .cfg_err,
    .ld_valid, .ld_ready, .ld_job, .ld_done,
    .cp_valid, .cp_ready, .cp_job, .cp_done,
    .wr_valid, .wr_ready, .wr_job, .wr_done);

  // READ -> L2
  logic              l2_wr_en, l2_wr_is_b;
  logic [BK_W-1:0]   l2_wr_bank;
  logic [A_AW-1:0]   l2_wr_addr;
  logic [BW*DATA_W-1:0] l2_wr_data;

  read_engine #(.N(N), .P(P), .K_MAX(K_MAX), .DATA_W(DATA_W), .BW(BW), .MAX_BURST(MAX_BURST)) u_read (
    .clk, .rst_n, .cfg(cfg_q),
    .job_valid(ld_valid), .job_ready(ld_ready), .job(ld_job), .done(ld_done), .busy(ld_busy),
    .arvalid(m_axi_arvalid), .arready(m_axi_arready), .araddr(m_axi_araddr), .arlen(m_axi_arlen),
    .arsize(m_axi_arsize), .arburst(m_axi_arburst),
    .rvalid(m_axi_rvalid), .rready(m_axi_rready), .rdata(m_axi_rdata), .rlast(m_axi_rlast), .rresp(m_axi_rresp),
    .l2_wr_en, .l2_wr_is_b, .l2_wr_bank, .l2_wr_addr, .l2_wr_data, .err(rd_err));

  // L2 cache
  logic              l2_rd_en;
  logic [A_AW-1:0]   l2_rd_addr_a;
  logic [B_AW-1:0]   l2_rd_addr_b;
  logic [DATA_W-1:0] l2_rd_a [N], l2_rd_b [N];

  l2_cache #(.N(N), .P(P), .K_MAX(K_MAX), .DATA_W(DATA_W), .BW(BW)) u_l2 (
    .clk, .wr_en(l2_wr_en), .wr_is_b(l2_wr_is_b), .wr_bank(l2_wr_bank), .wr_addr(l2_wr_addr),
    .wr_data(l2_wr_data), .rd_en(l2_rd_en), .rd_addr_a(l2_rd_addr_a), .rd_addr_b(l2_rd_addr_b),
    .rd_a(l2_rd_a), .rd_b(l2_rd_b));

  // L2-to-SA
  logic              in_space, a_push, b_push;
  logic [DATA_W-1:0] a_wdata [N], b_wdata [N];

  l2_to_sa #(.N(N), .P(P), .K_MAX(K_MAX), .DATA_W(DATA_W)) u_l2sa (
    .clk, .rst_n, .k(cfg_q.k),
    .job_valid(cp_valid), .job_ready(cp_ready), .job(cp_job), .done(cp_done), .busy(cp_busy),
    .rd_en(l2_rd_en), .rd_addr_a(l2_rd_addr_a), .rd_addr_b(l2_rd_addr_b), .rd_a(l2_rd_a), .rd_b(l2_rd_b),
    .in_space, .a_push, .a_wdata, .b_push, .b_wdata);

  // systolic array
  logic [N-1:0]            c_pop, c_empty;
  logic [DATA_W-1:0]       c_rdata [N];
  logic                    ev_op, ev_spacing, ev_credit, ev_bubble;
  logic [$clog2(N+1)-1:0]  ev_sat;

  systolic_array #(.N(N), .DATA_W(DATA_W), .ACC_W(ACC_W), .RND_BITS(RND_BITS),
                   .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_sa (
    .clk, .rst_n, .k(cfg_q.k),
    .a_push, .a_wdata, .b_push, .b_wdata, .in_space,
    .c_pop, .c_rdata, .c_empty,
    .stat_op_start(ev_op), .stat_spacing_stall(ev_spacing), .stat_credit_stall(ev_credit),
    .stat_bubble(ev_bubble), .stat_sat(ev_sat));

  // WRITE
  write_engine #(.N(N), .DATA_W(DATA_W), .BW(BW), .MAX_BURST(MAX_BURST)) u_write (
    .clk, .rst_n, .cfg(cfg_q),
    .job_valid(wr_valid), .job_ready(wr_ready), .job(wr_job), .done(wr_done), .busy(wr_busy),
    .awvalid(m_axi_awvalid), .awready(m_axi_awready), .awaddr(m_axi_awaddr), .awlen(m_axi_awlen),
    .awsize(m_axi_awsize), .awburst(m_axi_awburst),
    .wvalid(m_axi_wvalid), .wready(m_axi_wready), .wdata(m_axi_wdata), .wstrb(m_axi_wstrb), .wlast(m_axi_wlast),
    .bvalid(m_axi_bvalid), .bready(m_axi_bready), .bresp(m_axi_bresp),
    .c_pop, .c_rdata, .c_empty, .err(wr_err));

  assign axi_err = rd_err || wr_err;

  // event counters
  logic unused_op;
  assign unused_op = ev_op;

  always_ff @(posedge clk) begin
    if (!rst_n || (start && !busy)) begin
      stat <= '0;
    end else begin
      if (wr_done)                              stat.steps         <= stat.steps + 1;
      if (ld_valid && ld_ready && ld_job.load_a) stat.a_loads      <= stat.a_loads + 1;
      if (ld_busy && (cp_busy || wr_busy))      stat.overlap       <= stat.overlap + 1;
      if (ev_spacing)                           stat.spacing_stall <= stat.spacing_stall + 1;
      if (ev_credit)                            stat.credit_stall  <= stat.credit_stall + 1;
      if (ev_bubble && busy)                    stat.bubble        <= stat.bubble + 1;
      stat.saturations <= stat.saturations + 32'(ev_sat);
    end
  end
endmodule
