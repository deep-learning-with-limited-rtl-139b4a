// tb_gemm_workloads: the accelerator with every parameter at its default
// (28 x 28 array, p = 4, K_MAX = 2048, 16-word bus) running the matrix
// products of two training workloads, each cut down in l and m to keep the
// simulation short but with its full inner dimension k:
//   - layer 1 of a 784-1000-1000-10 fully connected network on 28 x 28 images,
//     forward pass with a minibatch of 100 padded to 112 rows: A = pixels in
//     [0,1) (<2,14>), B = weights of about +-0.03, k = 784, 56 of the output
//     units;
//   - the second convolution of a 3-layer CNN with 64 maps of 5 x 5 filters
//     on 32 x 32 colour images, lowered to a GEMM: k = 5*5*64 = 1600, 112
//     output positions, the 64 filters padded with zeros to 84 columns.
// Every element of C is checked against the exact product computed here
// (floor or floor + 1 of z / 2^14, clipped to 16 bits), the padding columns
// must come out zero, and the mean rounding error over all unsaturated results
// must be within 0.05 LSB of zero (stochastic rounding is unbiased, while
// truncation would give -0.5 LSB). Also checks reuse of A and overlap.
module tb_gemm_workloads;
  import gemm_pkg::*;
  localparam int N = 28, P = 4, KM = 2048, DW = 16, R = 14, W = 524288, BW = 16;
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

  gemm_accel dut (
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

  task automatic gemm(input int l, input int k, input int m, input int mreal, input int amax, input int brange,
                      input int abase, input int bbase, input int cbase);
    int a0, b0, c0, nrb, ncb;
    longint z, lo, e0, e1, v;
    real err_sum; int err_n;
    a0 = abase / 2; b0 = bbase / 2; c0 = cbase / 2;
    for (int w = 0; w < W; w++) u_mem.mem[w] = 16'h5A5A;
    for (int i = 0; i < l * k; i++) u_mem.mem[a0 + i] = DW'($urandom_range(amax));
    for (int i = 0; i < m * k; i++) u_mem.mem[b0 + i] = (i < mreal * k) ? DW'($urandom_range(2 * brange) - brange) : '0;
    err_sum = 0.0; err_n = 0;
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
        if (j >= mreal) chk(v == 0, "padding column is zero");
        if (lo >= -32768 && lo < 32767) begin
          err_sum += real'(v) - real'(z) / real'(64'sd1 << R);
          err_n++;
        end
      end
    $display("k=%0d: %0d unsaturated results, mean rounding error %f LSB", k, err_n, err_sum / err_n);
    chk(err_n > l * m / 2, "most results unsaturated");
    chk(err_sum / err_n < 0.05 && err_sum / err_n > -0.05, "rounding unbiased");
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
    // MNIST fully connected layer 1 (slice): 112 x 784 times 784 x 56
    gemm(112, 784, 56, 56, 16383, 500, 0, 400000, 680006);
    // CIFAR10 convolution 2 (slice): 112 x 1600 times 1600 x 84, 64 real filters
    gemm(112, 1600, 84, 64, 16383, 120, 0, 400000, 680006);
    chk(s_overlap > 0, "fetch overlapped computation");
    $display("events: overlap=%0d spacing=%0d credit=%0d bubble=%0d sat=%0d", s_overlap, s_spacing, s_credit, s_bubble, s_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
