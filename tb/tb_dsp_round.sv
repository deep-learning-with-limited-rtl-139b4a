// tb_dsp_round: drives random accumulator values and random numbers and
// compares with the rounding rule worked out directly: the result is
// floor((x + r) / 2^R), clipped to the 16-bit range, one clock later. Also
// checks unbiasedness: a fixed value rounded many times with random r averages
// to x / 2^R.
module tb_dsp_round;
  localparam int AW = 48, OW = 16, R = 14;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [AW-1:0] in_acc = '0;
  logic [R-1:0]  rnd = '0;
  logic out_valid, out_sat;
  logic [OW-1:0] out_data;
  int checks = 0, failures = 0, sats = 0;
  dsp_round #(.ACC_W(AW), .OUT_W(OW), .RND_BITS(R)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic longint expect_of(input longint x, input longint r, output bit sat);
    longint q;
    q = x + r;
    // floor division by 2^R for negative numbers too
    q = (q >= 0) ? q / (64'sd1 << R) : -((-q + (64'sd1 << R) - 1) / (64'sd1 << R));
    sat = 0;
    if (q > 32767)  begin q = 32767;  sat = 1; end
    if (q < -32768) begin q = -32768; sat = 1; end
    return q;
  endfunction

  initial begin
    longint x, r, e;
    bit s;
    real acc_sum;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      case (i % 4)
        0: x = longint'($signed({$urandom, $urandom})) >>> 34;          // in range
        1: x = longint'($signed({$urandom, $urandom})) >>> 16;          // mostly saturating
        2: x = (i % 8 == 2) ? (64'sd32767 << R) + longint'($urandom_range(20000)) - 10000
                            : -(64'sd32768 << R) + longint'($urandom_range(20000)) - 10000;
        default: x = longint'($urandom_range(2000)) - 1000;
      endcase
      r = longint'($urandom_range((1 << R) - 1));
      in_acc = AW'(x); rnd = R'(r); in_valid = 1;
      e = expect_of(x, r, s);
      @(posedge clk); #1;
      chk(out_valid, "valid after one clock");
      chk(longint'($signed(out_data)) == e, $sformatf("x=%0d r=%0d got %0d want %0d", x, r, $signed(out_data), e));
      chk(out_sat == s, "sat flag");
      if (s) sats++;
      in_valid = 0;
    end
    @(negedge clk);
    @(posedge clk); #1;
    chk(!out_valid, "valid drops");
    chk(sats > 100, "saturations exercised");
    // unbiased: x = 5 + 0.3 LSB of the output format
    acc_sum = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      x = (64'sd5 << R) + longint'(0.3 * (1 << R));
      in_acc = AW'(x); rnd = R'($urandom); in_valid = 1;
      @(posedge clk); #1;
      acc_sum += real'($signed(out_data));
    end
    acc_sum = acc_sum / 4000.0;
    checks++;
    if (acc_sum < 5.27 || acc_sum > 5.33) begin failures++; $display("FAIL mean %f", acc_sum); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
