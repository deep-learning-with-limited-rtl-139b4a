// read_engine: the READ logic. Fetches the matrix blocks of one step from DDR
// over an AXI4 read port and writes them into the free half of the L2 cache.
//
// For a step that starts a new row block (load_a) it first reads the nsub*n
// rows of A (row r of A is k words at a_base + 2*r*k), then always the n
// columns of B (column c is k words at b_base + 2*c*k, B being stored column
// by column). The data bus carries BW words per beat, so k must be a multiple
// of BW and a_base, b_base multiples of 2*BW bytes (the controller checks
// this). Each row or column is read in INCR bursts of at most MAX_BURST beats
// that never cross a 4 KB boundary, one burst at a time. Every beat is written
// to the L2 cache (BW words into one bank) in the same cycle it is accepted
// (rready is held high during a burst). done pulses after the last beat.
// Fetching A and B blocks into the L2 cache follows the paper; the AXI4
// protocol details and the memory layout are this design's choice.
module read_engine
  import gemm_pkg::*;
#(
  parameter int unsigned N         = 28,
  parameter int unsigned P         = 4,
  parameter int unsigned K_MAX     = 2048,
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned BW        = 16,
  parameter int unsigned MAX_BURST = 256,
  localparam int unsigned A_AW     = $clog2(2*P*K_MAX),
  localparam int unsigned BK_W     = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              job_valid,
  output logic              job_ready,
  input  step_t             job,
  output logic              done,
  output logic              busy,
  // AXI4 read address channel
  output logic              arvalid,
  input  logic              arready,
  output logic [ADDR_W-1:0] araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  // AXI4 read data channel
  input  logic              rvalid,
  output logic              rready,
  input  logic [BW*DATA_W-1:0] rdata,
  input  logic              rlast,
  input  logic [1:0]        rresp,
  // L2 write port
  output logic              l2_wr_en,
  output logic              l2_wr_is_b,
  output logic [BK_W-1:0]   l2_wr_bank,
  output logic [A_AW-1:0]   l2_wr_addr,
  output logic [BW*DATA_W-1:0] l2_wr_data,
  output logic              err
);
  typedef enum logic [1:0] {IDLE, ADDR, DATA} state_e;
  state_e state;

  step_t             cur;
  logic              phase_b;          // reading B columns (else A rows)
  logic [BK_W-1:0]   bank;             // A: row mod n, B: column index
  logic [SUB_W-1:0]  sub;              // A: row / n
  logic [DIM_W-1:0]  t;                // word index inside the line
  logic [ADDR_W-1:0] addr;             // next byte address
  logic [ADDR_W-1:0] line_addr;        // start of the current line
  logic [ADDR_W-1:0] stride;           // 2*k bytes
  logic [8:0]        blen;             // beats of the burst being issued
  logic              line_end, last_line_a, last_line_b;

  always_comb begin
    logic [DIM_W-1:0] rem;
    logic [11:0]      to_4k;
    rem   = (cfg.k - t) / DIM_W'(BW);                       // beats left in the line
    to_4k = 12'((32'h1000 - 32'(addr[11:0])) / (2 * BW));     // beats left in 4 KB page
    blen  = 9'(MAX_BURST);
    if (32'(rem) < 32'(blen)) blen = 9'(rem);
    if (addr[11:0] != '0 && 32'(to_4k) < 32'(blen)) blen = 9'(to_4k);
  end

  assign job_ready   = (state == IDLE);
  assign busy        = (state != IDLE);
  assign arsize      = 3'($clog2(2 * BW));
  assign arburst     = AXI_BURST_INCR;
  assign arvalid     = (state == ADDR);
  assign araddr      = addr;
  assign arlen       = 8'(blen - 1'b1);
  assign rready      = (state == DATA);
  assign line_end    = (t == cfg.k - DIM_W'(BW));
  assign last_line_a = (bank == BK_W'(N - 1)) && (sub == cur.nsub - 1'b1);
  assign last_line_b = (bank == BK_W'(N - 1));

  assign l2_wr_en   = rvalid && rready;
  assign l2_wr_is_b = phase_b;
  assign l2_wr_bank = bank;
  assign l2_wr_addr = phase_b ? A_AW'(32'(cur.bbuf) * K_MAX + 32'(t))
                              : A_AW'((32'(cur.abuf) * P + 32'(sub)) * K_MAX + 32'(t));
  assign l2_wr_data = rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= IDLE;
      cur       <= '0;
      phase_b   <= 1'b0;
      bank      <= '0;
      sub       <= '0;
      t         <= '0;
      addr      <= '0;
      line_addr <= '0;
      stride    <= '0;
      done      <= 1'b0;
      err       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (job_valid) begin
          cur     <= job;
          phase_b <= !job.load_a;
          bank    <= '0;
          sub     <= '0;
          t       <= '0;
          stride  <= ADDR_W'(cfg.k) << 1;
          if (job.load_a) begin
            addr      <= cfg.a_base + ((ADDR_W'(job.row0) * ADDR_W'(cfg.k)) << 1);
            line_addr <= cfg.a_base + ((ADDR_W'(job.row0) * ADDR_W'(cfg.k)) << 1);
          end else begin
            addr      <= cfg.b_base + ((ADDR_W'(job.col0) * ADDR_W'(cfg.k)) << 1);
            line_addr <= cfg.b_base + ((ADDR_W'(job.col0) * ADDR_W'(cfg.k)) << 1);
          end
          state <= ADDR;
        end
        ADDR: if (arready) state <= DATA;
        DATA: if (rvalid) begin
          if (rresp[1]) err <= 1'b1;
          addr <= addr + ADDR_W'(2 * BW);
          if (!line_end) begin
            t <= t + DIM_W'(BW);
            if (rlast) state <= ADDR;
          end else begin
            t <= '0;
            if (!phase_b && last_line_a) begin
              phase_b   <= 1'b1;
              bank      <= '0;
              addr      <= cfg.b_base + ((ADDR_W'(cur.col0) * ADDR_W'(cfg.k)) << 1);
              line_addr <= cfg.b_base + ((ADDR_W'(cur.col0) * ADDR_W'(cfg.k)) << 1);
              state     <= ADDR;
            end else if (phase_b && last_line_b) begin
              done  <= 1'b1;
              state <= IDLE;
            end else begin
              if (!phase_b && bank == BK_W'(N - 1)) begin
                bank <= '0;
                sub  <= sub + 1'b1;
              end else begin
                bank <= bank + 1'b1;
              end
              addr      <= line_addr + stride;
              line_addr <= line_addr + stride;
              state     <= ADDR;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_burst_end: assert property (@(posedge clk) disable iff (!rst_n)
    (state == DATA && rvalid && line_end) |-> rlast);
endmodule
