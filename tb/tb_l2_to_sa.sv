// tb_l2_to_sa: the mover with an L2 cache filled with a known pattern. Runs
// steps with different sub-block counts and L2 halves while the array's room
// signal toggles at random, and checks every push: for sub-block s and word t,
// A FIFO i must get A-half word (half*P + s)*K_MAX + t of bank i, and B FIFO j
// word half*K_MAX + t of bank j, in order; also the done pulse and that nothing
// is pushed between steps.
module tb_l2_to_sa;
  import gemm_pkg::*;
  localparam int N = 4, P = 3, KM = 16, DW = 16, BW = 2;
  localparam int A_AW = $clog2(2*P*KM), B_AW = $clog2(2*KM);
  logic clk = 0, rst_n = 0, job_valid = 0, job_ready, done, busy, in_space = 0;
  logic [DIM_W-1:0] k = '0;
  step_t job = '0;
  logic rd_en, a_push, b_push;
  logic [A_AW-1:0] rd_addr_a;
  logic [B_AW-1:0] rd_addr_b;
  logic [DW-1:0] rd_a [N], rd_b [N], a_wdata [N], b_wdata [N];
  logic wr_en = 0, wr_is_b = 0;
  logic [$clog2(N)-1:0] wr_bank = '0;
  logic [A_AW-1:0] wr_addr = '0;
  logic [BW*DW-1:0] wr_data = '0;
  int checks = 0, failures = 0;

  l2_cache #(.N(N), .P(P), .K_MAX(KM), .DATA_W(DW), .BW(BW)) u_l2 (
    .clk, .wr_en, .wr_is_b, .wr_bank, .wr_addr, .wr_data, .rd_en, .rd_addr_a, .rd_addr_b, .rd_a, .rd_b);
  l2_to_sa #(.N(N), .P(P), .K_MAX(KM), .DATA_W(DW)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [DW-1:0] pa(input int bank, input int addr); return DW'(bank * 1000 + addr); endfunction
  function automatic logic [DW-1:0] pb(input int bank, input int addr); return DW'(16'h8000 + bank * 100 + addr); endfunction

  // expected push stream
  int exp_s, exp_t, pushes, dones;
  step_t cur;
  always @(posedge clk) in_space <= ($urandom_range(3) != 0);
  always @(negedge clk) if (rst_n) begin
    if (a_push) begin
      for (int i = 0; i < N; i++) begin
        chk(a_wdata[i] == pa(i, (int'(cur.abuf) * P + exp_s) * KM + exp_t), $sformatf("A row %0d s %0d t %0d", i, exp_s, exp_t));
        chk(b_wdata[i] == pb(i, int'(cur.bbuf) * KM + exp_t), $sformatf("B col %0d t %0d", i, exp_t));
      end
      chk(b_push, "A and B pushed together");
      pushes++;
      if (exp_t == int'(k) - 1) begin exp_t = 0; exp_s++; end else exp_t++;
    end
    if (done) begin
      dones++;
      chk(exp_s == int'(cur.nsub) && exp_t == 0, "done after the last push");
    end
  end

  initial begin
    for (int b = 0; b < N; b++) begin
      for (int a = 0; a < 2*P*KM; a += BW) begin
        @(negedge clk); wr_en = 1; wr_is_b = 0; wr_bank = b[$clog2(N)-1:0]; wr_addr = A_AW'(a);
        for (int w = 0; w < BW; w++) wr_data[w*DW +: DW] = pa(b, a + w);
      end
      for (int a = 0; a < 2*KM; a += BW) begin
        @(negedge clk); wr_en = 1; wr_is_b = 1; wr_bank = b[$clog2(N)-1:0]; wr_addr = A_AW'(a);
        for (int w = 0; w < BW; w++) wr_data[w*DW +: DW] = pb(b, a + w);
      end
    end
    @(negedge clk); wr_en = 0;
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      int tot;
      @(negedge clk);
      k = DIM_W'($urandom_range(1, KM));
      job = '0;
      job.nsub = SUB_W'($urandom_range(1, P));
      job.abuf = $urandom_range(1);
      job.bbuf = $urandom_range(1);
      cur = job; exp_s = 0; exp_t = 0; pushes = 0;
      job_valid = 1;
      @(posedge clk); #1;
      chk(!job_ready, "job taken");
      job_valid = 0;
      tot = int'(job.nsub) * int'(k);
      wait (dones == n + 1);
      chk(pushes == tot, $sformatf("pushes %0d want %0d", pushes, tot));
      repeat ($urandom_range(1, 5)) @(posedge clk);
      #1;
      chk(job_ready && !busy, "idle after the step");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
