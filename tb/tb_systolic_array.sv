// tb_systolic_array: a 4 x 4 array with shallow FIFOs. Streams 120 operations
// of random inner length (1..40) through it with random input gaps and a slow,
// row-by-row reader of the output FIFOs, and checks every result against the
// exact dot product computed here: the result must be floor(z / 2^R) or that
// plus one (stochastic rounding), clipped to 16 bits, and exact when z is a
// multiple of 2^R. Checks the wavefront timing of the first operation (node
// (0,0) done k cycles after the first element is read, node (n-1,n-1) after
// k + 2n - 2) and that the spacing stall, the output-credit stall, input
// bubbles and saturation all occurred.
module tb_systolic_array;
  import gemm_pkg::*;
  localparam int N = 4, DW = 16, R = 14, OPS = 120;
  logic clk = 0, rst_n = 0;
  logic [DIM_W-1:0] k = '0;
  logic a_push = 0, b_push = 0, in_space;
  logic [DW-1:0] a_wdata [N], b_wdata [N], c_rdata [N];
  logic [N-1:0] c_pop, c_empty;
  logic st_op, st_sp, st_cr, st_bu;
  logic [$clog2(N+1)-1:0] st_sat;
  int checks = 0, failures = 0;
  int n_sp = 0, n_cr = 0, n_bu = 0, n_sat = 0, n_op = 0;

  systolic_array #(.N(N), .DATA_W(DW), .RND_BITS(R), .IN_DEPTH(8), .OUT_DEPTH(8)) dut (
    .clk, .rst_n, .k, .a_push, .a_wdata, .b_push, .b_wdata, .in_space,
    .c_pop, .c_rdata, .c_empty,
    .stat_op_start(st_op), .stat_spacing_stall(st_sp), .stat_credit_stall(st_cr),
    .stat_bubble(st_bu), .stat_sat(st_sat));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  longint zq [N][$];   // exact sums expected per column, in order
  int kk [OPS];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (st_sp) n_sp++;
      if (st_cr) n_cr++;
      if (st_bu) n_bu++;
      if (st_op) n_op++;
      n_sat += int'(st_sat);
    end
  end

  // wavefront timing of the first operation
  int t_first = -1, t_d00 = -1, t_dnn = -1;
  always @(posedge clk) if (rst_n) begin
    if (st_op && t_first < 0) t_first = cyc;
    if (dut.g_row[0].g_col[0].deliver && t_d00 < 0) t_d00 = cyc;
    if (dut.g_row[N-1].g_col[N-1].deliver && t_dnn < 0) t_dnn = cyc;
  end

  // k is constant per operation in the array; change it only between
  // operations when the array is empty, so use one k per batch of operations.
  logic [DW-1:0] A [N][], B [N][];
  bit producing = 1;

  task automatic feed_op(input int o, input int kl, input bit big, input bit gaps);
    longint z;
    for (int i = 0; i < N; i++) begin A[i] = new[kl]; B[i] = new[kl]; end
    for (int t = 0; t < kl; t++)
      for (int i = 0; i < N; i++) begin
        A[i][t] = big ? DW'($urandom) : DW'($urandom_range(2000) - 1000);
        B[i][t] = big ? DW'($urandom) : DW'($urandom_range(2000) - 1000);
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        z = 0;
        for (int t = 0; t < kl; t++) z += longint'($signed(A[i][t])) * longint'($signed(B[j][t]));
        zq[j].push_back(z);
      end
    for (int t = 0; t < kl; t++) begin
      @(negedge clk);
      while (!in_space || (gaps && $urandom_range(3) == 0)) begin @(negedge clk); end
      for (int i = 0; i < N; i++) begin a_wdata[i] = A[i][t]; b_wdata[i] = B[i][t]; end
      a_push = 1; b_push = 1;
      @(posedge clk); #1;
      a_push = 0; b_push = 0;
    end
  endtask

  // output reader: pops row by row (column 0..N-1), at a limited rate
  int col = 0, got = 0;
  bit slow = 1;
  always @(negedge clk) begin
    c_pop = '0;
    if (rst_n && !c_empty[col] && (!slow || $urandom_range(5) == 0)) begin
      longint z, lo, e0, e1, v;
      z  = zq[col].pop_front();
      lo = z >>> R;
      e0 = (lo > 32767) ? 32767 : (lo < -32768) ? -32768 : lo;
      e1 = (lo + 1 > 32767) ? 32767 : (lo + 1 < -32768) ? -32768 : lo + 1;
      v  = longint'($signed(c_rdata[col]));
      if ((z & ((64'sd1 << R) - 1)) == 0) chk(v == e0, $sformatf("exact col %0d: %0d vs %0d", col, v, e0));
      else chk(v == e0 || v == e1, $sformatf("col %0d z=%0d: %0d not in {%0d,%0d}", col, z, v, e0, e1));
      c_pop[col] = 1'b1;
      col = (col + 1) % N;
      got++;
    end
  end

  initial begin
    int o;
    for (int i = 0; i < N; i++) begin a_wdata[i] = '0; b_wdata[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // batch 1: k = 12 >= 2n-1, no gaps: timing check
    k = 12; slow = 0;
    for (o = 0; o < 30; o++) feed_op(o, 12, o % 10 == 9, o >= 1);
    wait (got == 30 * N * N);
    chk(t_d00 - t_first == 12, $sformatf("node 11 done after %0d cycles, want k", t_d00 - t_first));
    chk(t_dnn - t_first == 12 + 2*N - 2, $sformatf("node nn done after %0d cycles, want k+2n-2", t_dnn - t_first));
    // batch 2: k = 2 < 2n-1 back to back: spacing stalls; slow reader: credit stalls
    repeat (5) @(posedge clk);
    k = 2; slow = 1;
    for (; o < 70; o++) feed_op(o, 2, o % 7 == 0, 0);
    wait (got == 70 * N * N);
    // batch 3: k = 1 and k = 40
    repeat (5) @(posedge clk);
    k = 1; slow = 0;
    for (; o < 100; o++) feed_op(o, 1, 1, o % 2);
    wait (got == 100 * N * N);
    repeat (5) @(posedge clk);
    k = 40; slow = 1;
    for (; o < OPS; o++) feed_op(o, 40, o % 5 == 0, 1);
    wait (got == OPS * N * N);
    repeat (20) @(posedge clk);
    chk(c_empty == '1, "all results drained");
    chk(n_op == OPS, $sformatf("operations %0d", n_op));
    chk(n_sp > 0, "spacing stall happened");
    chk(n_cr > 0, "credit stall happened");
    chk(n_bu > 0, "input bubble happened");
    chk(n_sat > 0, "saturation happened");
    $display("events: spacing=%0d credit=%0d bubble=%0d sat=%0d", n_sp, n_cr, n_bu, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
