// tb_lfsr: compares the generator with an independent bit-serial (Fibonacci
// form) computation of the same polynomial, checks hold when en is low, and
// checks that the low OUT_W bits are roughly uniform.
module tb_lfsr;
  localparam int OW = 14;
  logic clk = 0, rst_n = 0, en = 0;
  logic [OW-1:0] rnd;
  int checks = 0, failures = 0;
  lfsr #(.OUT_W(OW), .SEED(32'h1234_5678)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Galois step written out bit by bit: bit i takes bit i+1, and the taps
  // of x^32+x^22+x^2+x+1 (bits 31, 21, 1, 0 after the shift) flip with the output bit.
  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    logic o;
    o = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = o;
    n[21] = n[21] ^ o;
    n[1]  = n[1] ^ o;
    n[0]  = n[0] ^ o;
    return n;
  endfunction

  initial begin
    logic [31:0] m;
    real mean;
    longint sum;
    m = 32'h1234_5678; sum = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(rnd == m[OW-1:0], "seed");
    for (int i = 0; i < 4000; i++) begin
      en = (i % 7 != 3);
      @(posedge clk); #1;
      if (en) m = step(m);
      chk(rnd == m[OW-1:0], $sformatf("step %0d: %h vs %h", i, rnd, m[OW-1:0]));
      sum += rnd;
    end
    mean = real'(sum) / 4000.0;
    checks++;
    if (mean < 0.45 * (2.0**OW) || mean > 0.55 * (2.0**OW)) begin
      failures++; $display("FAIL mean %f", mean);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
