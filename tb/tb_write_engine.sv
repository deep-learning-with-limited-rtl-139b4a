// tb_write_engine: the WRITE engine against the AXI memory model. The tb
// plays the output column FIFOs (queues that fill at random times); for steps
// of P sub-blocks it checks that every result word lands at
// C[row0+r][col0+j] (rows start inside a 4-word bus beat, so strobes matter),
// that the words next to the block are untouched, that no burst crosses a 4 KB
// page (some must end at one) and that done pulses.
module tb_write_engine;
  import gemm_pkg::*;
  localparam int N = 4, P = 2, DW = 16, MB = 4, W = 32768, BW = 4;
  logic clk = 0, rst_n = 0, job_valid = 0, job_ready, done, busy, err;
  cfg_t cfg = '0;
  step_t job = '0;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [ADDR_W-1:0] awaddr;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp;
  logic [BW*DW-1:0] wdata;
  logic [BW*DW/8-1:0] wstrb;
  logic [N-1:0] c_pop, c_empty;
  logic [DW-1:0] c_rdata [N];
  logic arready, rvalid, rlast;
  logic [BW*DW-1:0] rdata;
  logic [1:0] rresp;
  int checks = 0, failures = 0;

  write_engine #(.N(N), .DATA_W(DW), .BW(BW), .MAX_BURST(MB)) dut (.*);
  axi_mem_model #(.WORDS(W), .STALL_PCT(30), .BW(BW)) u_mem (
    .clk, .rst_n, .arvalid(1'b0), .arready, .araddr('0), .arlen('0), .arsize('0), .arburst('0),
    .rvalid, .rready(1'b0), .rdata, .rlast, .rresp,
    .awvalid, .awready, .awaddr, .awlen, .awsize, .awburst,
    .wvalid, .wready, .wdata, .wstrb, .wlast, .bvalid, .bready, .bresp);

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [DW-1:0] val(input int r, input int c); return DW'(r * 131 + c * 7 + 1); endfunction

  logic [DW-1:0] fq [N][$];
  logic [DW-1:0] pend [N][$];   // words that will enter the FIFOs
  always_comb for (int j = 0; j < N; j++) begin
    c_empty[j] = (fq[j].size() == 0);
    c_rdata[j] = (fq[j].size() > 0) ? fq[j][0] : '0;
  end
  always @(posedge clk) begin
    for (int j = 0; j < N; j++) begin
      if (c_pop[j]) begin
        chk(fq[j].size() > 0, "pop of empty FIFO");
        void'(fq[j].pop_front());
      end
      if (pend[j].size() > 0 && $urandom_range(2) == 0) fq[j].push_back(pend[j].pop_front());
    end
  end

  initial begin
    for (int w = 0; w < W; w++) u_mem.mem[w] = 16'hDEAD;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg.c_base = ADDR_W'(32'h0000_0FF4);
    cfg.m = 3 * N; cfg.l = 16; cfg.k = 1;
    for (int n = 0; n < 6; n++) begin
      @(negedge clk);
      job = '0;
      job.row0 = DIM_W'((n % 2) * P * N);
      job.col0 = DIM_W'((n % 3) * N);
      job.nsub = SUB_W'(P);
      for (int r = 0; r < int'(job.nsub) * N; r++)
        for (int j = 0; j < N; j++) pend[j].push_back(val(int'(job.row0) + r, int'(job.col0) + j));
      job_valid = 1;
      @(posedge clk); #1;
      job_valid = 0;
      @(posedge done); @(negedge clk);
      for (int j = 0; j < N; j++) chk(fq[j].size() == 0 && pend[j].size() == 0, "FIFOs drained");
    end
    // every written element and the guard words around C
    for (int r = 0; r < 2 * P * N; r++)
      for (int c = 0; c < 3 * N; c++)
        chk(u_mem.mem[int'(cfg.c_base) / 2 + r * 3 * N + c] == val(r, c), $sformatf("C[%0d][%0d]", r, c));
    chk(u_mem.mem[int'(cfg.c_base) / 2 - 1] == 16'hDEAD, "guard below C");
    chk(u_mem.mem[int'(cfg.c_base) / 2 + 2 * P * N * 3 * N] == 16'hDEAD, "guard above C");
    chk(u_mem.proto_err == 0, "AXI protocol");
    chk(u_mem.cross_4k == 0, "no burst across 4 KB");
    chk(u_mem.splits_4k > 0, "some bursts end at a 4 KB page");
    chk(!err, "no error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
