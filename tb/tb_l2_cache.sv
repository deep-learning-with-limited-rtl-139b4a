// tb_l2_cache: random 4-word (one bus beat) writes into both stores and all
// banks, then random parallel single-word reads; every bank's read data (one clock after rd_en) is compared
// with a model of the memory kept here.
module tb_l2_cache;
  localparam int N = 4, P = 2, KM = 16, DW = 16, BW = 4;
  localparam int A_AW = $clog2(2*P*KM), B_AW = $clog2(2*KM);
  logic clk = 0, wr_en = 0, wr_is_b = 0, rd_en = 0;
  logic [$clog2(N)-1:0] wr_bank = '0;
  logic [A_AW-1:0] wr_addr = '0, rd_addr_a = '0;
  logic [B_AW-1:0] rd_addr_b = '0;
  logic [BW*DW-1:0] wr_data = '0;
  logic [DW-1:0] rd_a [N], rd_b [N];
  int checks = 0, failures = 0;
  logic [DW-1:0] ma [N][2*P*KM], mb [N][2*KM];
  l2_cache #(.N(N), .P(P), .K_MAX(KM), .DATA_W(DW), .BW(BW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    // fill everything once so that every word read is defined
    for (int b = 0; b < N; b++) begin
      for (int a = 0; a < 2*P*KM; a += BW) begin
        @(negedge clk); wr_en = 1; wr_is_b = 0; wr_bank = b[$clog2(N)-1:0]; wr_addr = A_AW'(a);
        for (int w = 0; w < BW; w++) begin wr_data[w*DW +: DW] = DW'($urandom); ma[b][a+w] = wr_data[w*DW +: DW]; end
      end
      for (int a = 0; a < 2*KM; a += BW) begin
        @(negedge clk); wr_en = 1; wr_is_b = 1; wr_bank = b[$clog2(N)-1:0]; wr_addr = A_AW'(a);
        for (int w = 0; w < BW; w++) begin wr_data[w*DW +: DW] = DW'($urandom); mb[b][a+w] = wr_data[w*DW +: DW]; end
      end
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      int ra, rb;
      @(negedge clk);
      // a write to a random place, a read from another
      wr_en = ($urandom_range(1) == 0); wr_is_b = $urandom_range(1);
      wr_bank = $urandom_range(N-1);
      wr_addr = wr_is_b ? A_AW'($urandom_range(2*KM/BW-1) * BW) : A_AW'($urandom_range(2*P*KM/BW-1) * BW);
      for (int w = 0; w < BW; w++) wr_data[w*DW +: DW] = DW'($urandom);
      ra = $urandom_range(2*P*KM-1); rb = $urandom_range(2*KM-1);
      if (wr_en && !wr_is_b && int'(wr_addr) == ra / BW * BW) ra = (ra + BW) % (2*P*KM);
      if (wr_en && wr_is_b && int'(wr_addr) == rb / BW * BW) rb = (rb + BW) % (2*KM);
      rd_en = 1; rd_addr_a = A_AW'(ra); rd_addr_b = B_AW'(rb);
      @(posedge clk); #1;
      for (int b = 0; b < N; b++) begin
        chk(rd_a[b] == ma[b][ra], $sformatf("A bank %0d addr %0d", b, ra));
        chk(rd_b[b] == mb[b][rb], $sformatf("B bank %0d addr %0d", b, rb));
      end
      if (wr_en) begin
        for (int w = 0; w < BW; w++)
          if (wr_is_b) mb[wr_bank][int'(wr_addr) + w] = wr_data[w*DW +: DW]; else ma[wr_bank][int'(wr_addr) + w] = wr_data[w*DW +: DW];
      end
      rd_en = 0; wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
