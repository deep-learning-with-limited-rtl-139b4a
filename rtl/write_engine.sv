// write_engine: the WRITE logic. Drains the output column FIFOs of the array
// and writes the rounded results of one step to C in DDR over an AXI4 write
// port.
//
// The array delivers, per operation, one result per column FIFO for each of n
// rows, in row order. For result row r of the step (nsub*n rows) the engine
// writes the n words C[row0+r][col0 .. col0+n-1], word j taken from column
// FIFO j, starting at byte c_base + 2*((row0+r)*m + col0). The data bus carries
// BW words per beat; a row generally starts and ends inside a beat, so each
// beat covers the lanes from the current address to the end of the beat or of
// the row, with wstrb marking them, and pops the column FIFOs of all of those
// words at once (wvalid waits until all of them are non-empty). Bursts are at
// most MAX_BURST beats and never cross a 4 KB boundary. The engine sends the
// burst address, then the beats, then waits for the write response before the
// next burst. done pulses when the last response of the step arrived.
// Writing results back from the column FIFOs follows the paper; the AXI4
// details and the row-major layout of C are this design's choice.
module write_engine
  import gemm_pkg::*;
#(
  parameter int unsigned N         = 28,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned BW        = 16,
  parameter int unsigned MAX_BURST = 256,
  localparam int unsigned CW       = $clog2(N + 1),
  localparam int unsigned OB       = $clog2(2 * BW)      // byte offset bits inside a beat
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_t                   cfg,
  input  logic                   job_valid,
  output logic                   job_ready,
  input  step_t                  job,
  output logic                   done,
  output logic                   busy,
  // AXI4 write address channel
  output logic                   awvalid,
  input  logic                   awready,
  output logic [ADDR_W-1:0]      awaddr,
  output logic [7:0]             awlen,
  output logic [2:0]             awsize,
  output logic [1:0]             awburst,
  // AXI4 write data channel
  output logic                   wvalid,
  input  logic                   wready,
  output logic [BW*DATA_W-1:0]   wdata,
  output logic [BW*DATA_W/8-1:0] wstrb,
  output logic                   wlast,
  // AXI4 write response channel
  input  logic                   bvalid,
  output logic                   bready,
  input  logic [1:0]             bresp,
  // output column FIFOs of the array
  output logic [N-1:0]           c_pop,
  input  logic [DATA_W-1:0]      c_rdata [N],
  input  logic [N-1:0]           c_empty,
  output logic                   err
);
  typedef enum logic [1:0] {IDLE, ADDR, DATA, RESP} state_e;
  state_e state;

  logic [31:0]       row, nrows;       // result row inside the step
  logic [CW-1:0]     col;              // words of the row already written
  logic [ADDR_W-1:0] addr, line_addr, stride, beat_addr;
  logic [8:0]        blen, blen_q, beat;
  logic              w_fire, ready_all;
  int unsigned       off, cnt;         // first lane and number of lanes of this beat

  always_comb begin
    int unsigned rem, to_4k, nb;
    beat_addr = {addr[ADDR_W-1:OB], OB'(0)};
    off   = (BW > 1) ? int'(addr[OB-1:1]) : 0;
    rem   = N - int'(col);
    cnt   = (BW - off < rem) ? BW - off : rem;
    nb    = (off + rem + BW - 1) / BW;                      // beats to finish the row
    to_4k = (4096 - int'(beat_addr[11:0])) / (2 * BW);      // beats left in 4 KB page
    blen  = 9'(MAX_BURST);
    if (nb < int'(blen))    blen = 9'(nb);
    if (to_4k < int'(blen)) blen = 9'(to_4k);
  end

  assign job_ready = (state == IDLE);
  assign busy      = (state != IDLE);
  assign awsize    = 3'(OB);
  assign awburst   = AXI_BURST_INCR;
  assign bready    = (state == RESP);
  assign awvalid   = (state == ADDR);
  assign awaddr    = beat_addr;
  assign awlen     = 8'(blen - 1'b1);
  assign wlast     = (beat == blen_q - 1'b1);
  assign wvalid    = (state == DATA) && ready_all;
  assign w_fire    = wvalid && wready;

  logic [N-1:0] sel;                  // columns taken by this beat

  always_comb begin
    ready_all = 1'b1;
    wdata     = '0;
    wstrb     = '0;
    sel       = '0;
    for (int i = 0; i < BW; i++) begin
      int unsigned c;
      c = int'(col) + i - off;
      if (i >= off && i < off + cnt && c < N) begin
        if (c_empty[c]) ready_all = 1'b0;
        wdata[i*DATA_W +: DATA_W]     = c_rdata[c];
        wstrb[i*DATA_W/8 +: DATA_W/8] = '1;
        sel[c] = 1'b1;
      end
    end
  end

  assign c_pop = w_fire ? sel : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= IDLE;
      row       <= '0;
      nrows     <= '0;
      col       <= '0;
      addr      <= '0;
      line_addr <= '0;
      stride    <= '0;
      beat      <= '0;
      blen_q    <= '0;
      done      <= 1'b0;
      err       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (job_valid) begin
          row       <= '0;
          nrows     <= 32'(job.nsub) * N;
          col       <= '0;
          beat      <= '0;
          stride    <= ADDR_W'(cfg.m) << 1;
          addr      <= cfg.c_base + ((ADDR_W'(job.row0) * ADDR_W'(cfg.m) + ADDR_W'(job.col0)) << 1);
          line_addr <= cfg.c_base + ((ADDR_W'(job.row0) * ADDR_W'(cfg.m) + ADDR_W'(job.col0)) << 1);
          state     <= ADDR;
        end
        ADDR: if (awready) begin
          beat   <= '0;
          blen_q <= blen;
          state  <= DATA;
        end
        DATA: if (w_fire) begin
          beat <= beat + 1'b1;
          addr <= addr + ADDR_W'(2 * cnt);
          col  <= col + CW'(cnt);
          if (wlast) state <= RESP;
        end
        RESP: if (bvalid) begin
          if (bresp[1]) err <= 1'b1;
          if (col != CW'(N)) begin
            state <= ADDR;                       // rest of the row
          end else if (row == nrows - 1) begin
            done  <= 1'b1;
            state <= IDLE;
          end else begin
            row       <= row + 1;
            col       <= '0;
            addr      <= line_addr + stride;
            line_addr <= line_addr + stride;
            state     <= ADDR;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_wlast_in_burst: assert property (@(posedge clk) disable iff (!rst_n)
    (state == DATA) |-> (beat < blen_q));
  a_row_in_burst: assert property (@(posedge clk) disable iff (!rst_n)
    (state == DATA && w_fire && !wlast) |-> (32'(col) + cnt < N));
endmodule
