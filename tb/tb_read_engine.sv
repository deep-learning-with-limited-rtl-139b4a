// tb_read_engine: the READ engine against the AXI memory model (random wait
// states). Memory word w holds a value derived from w. For steps with and
// without an A fetch, every L2 write is checked against the word that should
// land there (A row r -> bank r mod n, B column j -> bank j), the number of
// writes is checked, and the model reports no protocol error and no burst
// across a 4 KB boundary; bursts split at such a boundary must have occurred.
module tb_read_engine;
  import gemm_pkg::*;
  localparam int N = 4, P = 2, KM = 64, DW = 16, MB = 4, BW = 4, K = 36;
  localparam int A_AW = $clog2(2*P*KM);
  logic clk = 0, rst_n = 0, job_valid = 0, job_ready, done, busy, err;
  cfg_t cfg = '0;
  step_t job = '0;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [ADDR_W-1:0] araddr;
  logic [7:0] arlen;
  logic [2:0] arsize;
  logic [1:0] arburst, rresp;
  logic [BW*DW-1:0] rdata;
  logic l2_wr_en, l2_wr_is_b;
  logic [$clog2(N)-1:0] l2_wr_bank;
  logic [A_AW-1:0] l2_wr_addr;
  logic [BW*DW-1:0] l2_wr_data;
  // unused write side of the model
  logic awready, wready, bvalid;
  logic [1:0] bresp;
  int checks = 0, failures = 0;

  read_engine #(.N(N), .P(P), .K_MAX(KM), .DATA_W(DW), .BW(BW), .MAX_BURST(MB)) dut (.*);
  axi_mem_model #(.WORDS(32768), .STALL_PCT(30), .BW(BW)) u_mem (
    .clk, .rst_n, .arvalid, .arready, .araddr, .arlen, .arsize, .arburst,
    .rvalid, .rready, .rdata, .rlast, .rresp,
    .awvalid(1'b0), .awready, .awaddr('0), .awlen('0), .awsize('0), .awburst('0),
    .wvalid(1'b0), .wready, .wdata('0), .wstrb('0), .wlast(1'b0), .bvalid, .bready(1'b0), .bresp);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected contents per L2 location, keyed {is_b, bank, addr}
  logic [DW-1:0] expv [int];
  int writes = 0;
  always @(negedge clk) if (rst_n && l2_wr_en) begin
    int key;
    chk(int'(l2_wr_addr) % BW == 0, "L2 write aligned to a beat");
    for (int w = 0; w < BW; w++) begin
      key = (int'(l2_wr_is_b) << 24) | (int'(l2_wr_bank) << 16) | (int'(l2_wr_addr) + w);
      chk(expv.exists(key), $sformatf("unexpected L2 write b=%0d bank=%0d addr=%0d", l2_wr_is_b, l2_wr_bank, int'(l2_wr_addr) + w));
      if (expv.exists(key)) chk(expv[key] == l2_wr_data[w*DW +: DW], $sformatf("L2 data b=%0d bank=%0d addr=%0d", l2_wr_is_b, l2_wr_bank, int'(l2_wr_addr) + w));
      writes++;
    end
  end

  initial begin
    int nexp;
    for (int w = 0; w < 32768; w++) u_mem.mem[w] = DW'(w * 7 + 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // k = 36 words (72 bytes) so rows cross 4 KB pages at odd places
    cfg.a_base = ADDR_W'(32'h0000_0F10);
    cfg.b_base = ADDR_W'(32'h0000_8FF0);
    cfg.k = K; cfg.l = 16; cfg.m = 16;
    for (int n = 0; n < 8; n++) begin
      @(negedge clk);
      job = '0;
      job.row0 = DIM_W'((n / 2) * P * N % 16);
      job.col0 = DIM_W'((n % 4) * N);
      job.nsub = SUB_W'(1 + ((n / 2) % P));
      job.load_a = (n % 2 == 0);
      job.abuf = n[1];
      job.bbuf = n[0];
      expv.delete(); writes = 0; nexp = 0;
      if (job.load_a)
        for (int r = 0; r < int'(job.nsub) * N; r++)
          for (int t = 0; t < K; t++) begin
            expv[(0 << 24) | ((r % N) << 16) | ((int'(job.abuf) * P + r / N) * KM + t)] =
              u_mem.mem[(int'(cfg.a_base) / 2 + (int'(job.row0) + r) * K + t) % 32768];
            nexp++;
          end
      for (int j = 0; j < N; j++)
        for (int t = 0; t < K; t++) begin
          expv[(1 << 24) | (j << 16) | (int'(job.bbuf) * KM + t)] =
            u_mem.mem[(int'(cfg.b_base) / 2 + (int'(job.col0) + j) * K + t) % 32768];
          nexp++;
        end
      job_valid = 1;
      @(posedge clk); #1;
      job_valid = 0;
      @(posedge done); @(negedge clk);
      chk(writes == nexp, $sformatf("writes %0d want %0d", writes, nexp));
    end
    chk(u_mem.proto_err == 0, "AXI protocol");
    chk(u_mem.cross_4k == 0, "no burst across 4 KB");
    chk(u_mem.splits_4k > 0, "bursts split at 4 KB happened");
    chk(!err, "no error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
