// tb_gemm_accel: end-to-end test of the whole accelerator at a reduced size
// (4 x 4 array, p = 2, K_MAX = 64, shallow FIFOs, 4-word bus, 4-beat bursts) against the
// AXI memory model with random wait states. Runs several GEMMs of different
// shapes with random matrices and checks every element of C against the exact
// product computed here (floor or floor + 1 of z / 2^R, clipped to 16 bits;
// exact when no bits are dropped), that memory around C is untouched, and that
// every mechanism happened: A fetched once per row block and reused across all
// column blocks, fetch overlapping computation (double buffering), bursts split
// at 4 KB pages, spacing stalls (k < 2n-1), output-credit stalls, input
// bubbles, saturation, and a refused descriptor.
module tb_gemm_accel;
  import gemm_pkg::*;
  localparam int N = 4, P = 2, KM = 64, DW = 16, R = 14, W = 65536, BW = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done, cfg_err, axi_err;
  cfg_t cfg = '0;
  stat_t stat;
  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [ADDR_W-1:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic [BW*DW-1:0] rdata, wdata;
  logic [BW*DW/8-1:0] wstrb;
  int checks = 0, failures = 0;

  gemm_accel #(.N(N), .P(P), .K_MAX(KM), .RND_BITS(R), .IN_DEPTH(16), .OUT_DEPTH(8), .BW(BW), .MAX_BURST(4)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .cfg_err, .axi_err, .stat,
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_araddr(araddr), .m_axi_arlen(arlen),
    .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_rvalid(rvalid), .m_axi_rready(rready), .m_axi_rdata(rdata), .m_axi_rlast(rlast), .m_axi_rresp(rresp),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_awaddr(awaddr), .m_axi_awlen(awlen),
    .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready), .m_axi_bresp(bresp));
  axi_mem_model #(.WORDS(W), .STALL_PCT(15), .BW(BW)) u_mem (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  longint s_spacing, s_credit, s_bubble, s_sat, s_overlap;

  task automatic gemm(input int l, input int k, input int m, input int range, input int abase, input int bbase, input int cbase);
    int a0, b0, c0, nrb, ncb;
    longint z, lo, e0, e1, v;
    a0 = abase / 2; b0 = bbase / 2; c0 = cbase / 2;
    for (int w = 0; w < W; w++) u_mem.mem[w] = 16'h5A5A;
    for (int i = 0; i < l * k; i++) u_mem.mem[a0 + i] = (range == 0) ? DW'($urandom) : DW'($urandom_range(2 * range) - range);
    for (int i = 0; i < m * k; i++) u_mem.mem[b0 + i] = (range == 0) ? DW'($urandom) : DW'($urandom_range(2 * range) - range);
    @(negedge clk);
    cfg.a_base = ADDR_W'(abase); cfg.b_base = ADDR_W'(bbase); cfg.c_base = ADDR_W'(cbase);
    cfg.l = DIM_W'(l); cfg.k = DIM_W'(k); cfg.m = DIM_W'(m);
    start = 1;
    @(negedge clk); start = 0;
    chk(busy && !cfg_err, "started");
    @(posedge done); @(negedge clk);
    for (int i = 0; i < l; i++)
      for (int j = 0; j < m; j++) begin
        z = 0;
        for (int t = 0; t < k; t++)
          z += longint'($signed(u_mem.mem[a0 + i * k + t])) * longint'($signed(u_mem.mem[b0 + j * k + t]));
        lo = z >>> R;
        e0 = (lo > 32767) ? 32767 : (lo < -32768) ? -32768 : lo;
        e1 = (lo + 1 > 32767) ? 32767 : (lo + 1 < -32768) ? -32768 : lo + 1;
        v  = longint'($signed(u_mem.mem[c0 + i * m + j]));
        if ((z & ((64'sd1 << R) - 1)) == 0) chk(v == e0, $sformatf("C[%0d][%0d] exact: %0d vs %0d", i, j, v, e0));
        else chk(v == e0 || v == e1, $sformatf("C[%0d][%0d]=%0d not in {%0d,%0d}", i, j, v, e0, e1));
      end
    chk(u_mem.mem[c0 - 1] == 16'h5A5A && u_mem.mem[c0 + l * m] == 16'h5A5A, "memory around C untouched");
    nrb = (l + P * N - 1) / (P * N); ncb = m / N;
    chk(int'(stat.a_loads) == nrb, $sformatf("A fetched once per row block: %0d", stat.a_loads));
    chk(int'(stat.steps) == nrb * ncb, "steps");
    chk(!axi_err, "no AXI error");
    s_spacing += stat.spacing_stall; s_credit += stat.credit_stall; s_bubble += stat.bubble;
    s_sat += stat.saturations; s_overlap += stat.overlap;
  endtask

  initial begin
    s_spacing = 0; s_credit = 0; s_bubble = 0; s_sat = 0; s_overlap = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    gemm(12, 20, 8, 3000, 'h0F08, 'h8008, 'h1_0FF4);   // two row blocks, the last with one sub-block
    gemm(8, 4, 12, 2000, 'h0FF0, 'h3000, 'h5FFA);       // k < 2n-1
    gemm(8, 64, 8, 0, 'h0100, 'h4100, 'h9002);          // full-range values: saturation
    gemm(16, 12, 16, 16000, 'h0000, 'h2000, 'h6006);
    gemm(20, 32, 4, 8000, 'h1008, 'h5000, 'h7000);
    // refused descriptor
    @(negedge clk); cfg.l = 6; start = 1;
    @(negedge clk); start = 0;
    chk(cfg_err && !busy, "descriptor with l not a multiple of n refused");
    chk(s_overlap > 0, $sformatf("double buffering: READ overlapped the array %0d cycles", s_overlap));
    chk(u_mem.splits_4k > 0, "bursts split at 4 KB pages");
    chk(u_mem.cross_4k == 0 && u_mem.proto_err == 0, "AXI rules kept");
    chk(s_spacing > 0, "spacing stall happened");
    chk(s_credit > 0, "output-credit stall happened");
    chk(s_bubble > 0, "array waited for input data");
    chk(s_sat > 0, "saturation happened");
    $display("events: overlap=%0d spacing=%0d credit=%0d bubble=%0d sat=%0d splits=%0d",
             s_overlap, s_spacing, s_credit, s_bubble, s_sat, u_mem.splits_4k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
