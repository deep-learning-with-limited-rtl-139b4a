// tb_dsp_macc: one node. Streams operations of random length (first/last tags),
// checks the delivered sum against a sum computed here, the one-clock
// pass-through of A, B and the tag, and the shift of cascade values from below
// into the local register when the node does not deliver.
module tb_dsp_macc;
  import gemm_pkg::*;
  localparam int DW = 16, AW = 48;
  logic clk = 0, rst_n = 0;
  logic [DW-1:0] a_in = '0, b_in = '0, a_out, b_out;
  tag_t tag_in = '0, tag_out;
  logic casc_in_valid = 0, casc_out_valid, deliver;
  logic [AW-1:0] casc_in = '0, casc_out;
  int checks = 0, failures = 0, delivered = 0, shifted = 0;
  dsp_macc #(.DATA_W(DW), .ACC_W(AW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  longint sum, expq[$];
  longint cexp[$];

  // drive one cycle; the node sees it registered one clock later
  task automatic drive(input bit v, input bit f, input bit l, input bit cv);
    @(negedge clk);
    a_in = DW'($urandom); b_in = DW'($urandom);
    if ($urandom_range(9) == 0) begin a_in = 16'h8000; b_in = 16'h8000; end
    tag_in = '{valid: v, first: f, last: l};
    casc_in_valid = cv; casc_in = {$urandom, $urandom};
    if (v) begin
      sum = (f ? 0 : sum) + longint'($signed(a_in)) * longint'($signed(b_in));
      if (l) expq.push_back(sum);
    end
    @(posedge clk); #1;
    chk(a_out == a_in && b_out == b_in && tag_out == tag_in, "pass-through");
  endtask

  // check node outputs in the cycle after its inputs were registered
  always @(negedge clk) if (rst_n) begin
    if (deliver) begin
      delivered++;
    end
  end

  initial begin
    int k;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 300; op++) begin
      k = $urandom_range(1, 40);
      for (int t = 0; t < k; t++) begin
        if ($urandom_range(4) == 0) drive(0, 0, 0, 0);      // bubble
        drive(1, t == 0, t == k - 1, 0);
        if (t == k - 1) begin
          // the pair is in the node's input register now: it delivers
          chk(deliver, "deliver on last");
          @(negedge clk); tag_in = '0;
          @(posedge clk); #1;
          chk(casc_out_valid && $signed(casc_out) == AW'(expq.pop_front()), "sum in local register");
          // a value from below moves in next
          @(negedge clk);
          casc_in_valid = 1; casc_in = {$urandom, $urandom}; tag_in = '0;
          cexp.push_back(longint'(casc_in));
          @(posedge clk); #1;
          chk(casc_out_valid && casc_out == AW'(cexp.pop_front()), "cascade shift");
          shifted++;
          @(negedge clk); casc_in_valid = 0;
          @(posedge clk); #1;
          chk(!casc_out_valid, "cascade empties");
        end else begin
          chk(!deliver, "no deliver before last");
        end
      end
    end
    chk(delivered == 300 && shifted == 300, "all operations seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
