// tb_sync_fifo: random push/pop traffic against a queue model; checks data
// order, empty/full/count and simultaneous push and pop.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, cyc = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(int'(count) == q.size(), "count");
      if (q.size() > 0) chk(rdata == q[0], $sformatf("data %h vs %h", rdata, q[0]));
      push  = !full && ($urandom_range(99) < (i < 1500 ? 60 : 40));
      pop   = !empty && ($urandom_range(99) < (i < 1500 ? 40 : 60));
      wdata = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
