// tb_top_controller: the controller with three model engines that take a
// random time per step. For several GEMM shapes it checks the step sequence
// handed to each engine against the loop nest written out here (row blocks of
// p*n rows outer, column blocks of n inner; sub-block count, A fetch flag and
// L2 halves), the issue rules (READ step s only after L2-to-SA finished s-2,
// L2-to-SA step s only after READ finished s, WRITE step s only after L2-to-SA
// took s), that READ overlapped with L2-to-SA, done, and cfg_err for each
// kind of refused descriptor (bus width BW = 2 words here).
module tb_top_controller;
  import gemm_pkg::*;
  localparam int N = 4, P = 2, KM = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, done, cfg_err;
  cfg_t cfg_in = '0, cfg;
  logic ld_valid, ld_ready = 0, ld_done = 0;
  logic cp_valid, cp_ready = 0, cp_done = 0;
  logic wr_valid, wr_ready = 0, wr_done = 0;
  step_t ld_job, cp_job, wr_job;
  int checks = 0, failures = 0, overlap = 0;
  top_controller #(.N(N), .P(P), .K_MAX(KM), .BW(2)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  step_t expq [$];
  int ld_iss, cp_iss, wr_iss, ld_fin, cp_fin, wr_fin;
  int ld_t, cp_t, wr_t;   // remaining busy cycles

  function automatic bit same(input step_t a, input step_t b);
    return a == b;
  endfunction

  always @(posedge clk) if (rst_n) begin
    ld_done <= 0; cp_done <= 0; wr_done <= 0;
    if (ld_valid && ld_ready) begin
      chk(same(ld_job, expq[ld_iss]), $sformatf("READ step %0d descriptor", ld_iss));
      chk(ld_iss <= cp_fin + 1, "READ issued before its L2 halves were free");
      ld_iss++; ld_ready <= 0; ld_t = $urandom_range(1, 30);
    end else if (!ld_ready && ld_t > 0) begin
      ld_t--; if (ld_t == 0) begin ld_done <= 1; ld_fin++; ld_ready <= 1; end
    end
    if (cp_valid && cp_ready) begin
      chk(same(cp_job, expq[cp_iss]), $sformatf("L2-to-SA step %0d descriptor", cp_iss));
      chk(ld_fin >= cp_iss + 1, "L2-to-SA issued before READ finished");
      cp_iss++; cp_ready <= 0; cp_t = $urandom_range(1, 30);
    end else if (!cp_ready && cp_t > 0) begin
      cp_t--; if (cp_t == 0) begin cp_done <= 1; cp_fin++; cp_ready <= 1; end
    end
    if (wr_valid && wr_ready) begin
      chk(same(wr_job, expq[wr_iss]), $sformatf("WRITE step %0d descriptor", wr_iss));
      chk(cp_iss > wr_iss, "WRITE issued before L2-to-SA took the step");
      wr_iss++; wr_ready <= 0; wr_t = $urandom_range(1, 30);
    end else if (!wr_ready && wr_t > 0) begin
      wr_t--; if (wr_t == 0) begin wr_done <= 1; wr_fin++; wr_ready <= 1; end
    end
    if (!ld_ready && !cp_ready && ld_t > 0 && cp_t > 0) overlap++;
  end

  task automatic run(input int l, input int k, input int m);
    int s, rb;
    expq.delete();
    s = 0; rb = 0;
    for (int r0 = 0; r0 < l; r0 += P * N) begin
      for (int c0 = 0; c0 < m; c0 += N) begin
        step_t st;
        st = '0;
        st.row0 = DIM_W'(r0); st.col0 = DIM_W'(c0);
        st.nsub = SUB_W'(((l - r0) / N < P) ? (l - r0) / N : P);
        st.load_a = (c0 == 0); st.abuf = rb[0]; st.bbuf = s[0];
        expq.push_back(st);
        s++;
      end
      rb++;
    end
    ld_iss = 0; cp_iss = 0; wr_iss = 0; ld_fin = 0; cp_fin = 0; wr_fin = 0;
    ld_ready = 1; cp_ready = 1; wr_ready = 1; ld_t = 0; cp_t = 0; wr_t = 0;
    @(negedge clk);
    cfg_in = '0; cfg_in.l = DIM_W'(l); cfg_in.k = DIM_W'(k); cfg_in.m = DIM_W'(m);
    start = 1;
    @(negedge clk); start = 0;
    chk(busy && !cfg_err, "started");
    @(posedge done); #1;
    chk(wr_fin == expq.size() && ld_iss == expq.size() && cp_iss == expq.size(), "all steps done");
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16, 10, 12);
    run(12, 64, 4);
    run(4, 2, 4);
    run(20, 8, 20);
    chk(overlap > 0, "READ overlapped with L2-to-SA (double buffering)");
    // refused descriptors
    @(negedge clk); cfg_in.l = 6; cfg_in.k = 4; cfg_in.m = 4; start = 1;
    @(negedge clk); start = 0;
    chk(cfg_err && !busy, "l not a multiple of n refused");
    @(negedge clk); cfg_in.l = 4; cfg_in.k = KM + 2; cfg_in.m = 4; start = 1;
    @(negedge clk); start = 0;
    chk(cfg_err && !busy, "k > K_MAX refused");
    @(negedge clk); cfg_in.l = 4; cfg_in.k = 3; cfg_in.m = 4; start = 1;
    @(negedge clk); start = 0;
    chk(cfg_err && !busy, "k not a multiple of the bus width refused");
    @(negedge clk); cfg_in.k = 4; cfg_in.a_base = 2; start = 1;
    @(negedge clk); start = 0;
    chk(cfg_err && !busy, "A base not aligned to a bus beat refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
