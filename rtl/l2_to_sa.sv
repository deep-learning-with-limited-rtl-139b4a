// l2_to_sa: moves the rows and columns of one step from the L2 cache into the
// systolic array's input FIFOs.
//
// A step holds nsub sub-blocks of n rows of A, all multiplied with the same n
// columns of B. For each sub-block s and each t = 0..k-1 the mover reads word t
// of all n A rows of the sub-block and word t of all n B columns in one L2
// access and, one clock later when the data arrives, pushes one word into every
// A FIFO and every B FIFO together. A read is issued only while the array
// reports room for two more words per FIFO (one read may be in flight). done
// pulses when the last word of the step has been pushed; from then on the L2
// halves it used may be overwritten.
// The mover's role follows the paper; its sequencing is this design's choice.
module l2_to_sa
  import gemm_pkg::*;
#(
  parameter int unsigned N      = 28,
  parameter int unsigned P      = 4,
  parameter int unsigned K_MAX  = 2048,
  parameter int unsigned DATA_W = 16,
  localparam int unsigned A_AW  = $clog2(2*P*K_MAX),
  localparam int unsigned B_AW  = $clog2(2*K_MAX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DIM_W-1:0]  k,
  input  logic              job_valid,
  output logic              job_ready,
  input  step_t             job,
  output logic              done,
  output logic              busy,
  // L2 read port
  output logic              rd_en,
  output logic [A_AW-1:0]   rd_addr_a,
  output logic [B_AW-1:0]   rd_addr_b,
  input  logic [DATA_W-1:0] rd_a [N],
  input  logic [DATA_W-1:0] rd_b [N],
  // array input FIFOs
  input  logic              in_space,
  output logic              a_push,
  output logic [DATA_W-1:0] a_wdata [N],
  output logic              b_push,
  output logic [DATA_W-1:0] b_wdata [N]
);
  step_t            cur;
  logic             run;
  logic [SUB_W-1:0] s;
  logic [DIM_W-1:0] t;
  logic             last_word, rd_last;
  logic             push_d, last_d;

  assign job_ready = !run;
  assign busy      = run || push_d;
  assign last_word = (t == k - 1'b1) && (s == cur.nsub - 1'b1);

  always_comb begin
    rd_en     = run && in_space;
    rd_addr_a = A_AW'((32'(cur.abuf) * P + 32'(s)) * K_MAX + 32'(t));
    rd_addr_b = B_AW'(32'(cur.bbuf) * K_MAX + 32'(t));
    rd_last   = rd_en && last_word;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run    <= 1'b0;
      cur    <= '0;
      s      <= '0;
      t      <= '0;
      push_d <= 1'b0;
      last_d <= 1'b0;
    end else begin
      push_d <= rd_en;
      last_d <= rd_last;
      if (!run) begin
        if (job_valid) begin
          run <= 1'b1;
          cur <= job;
          s   <= '0;
          t   <= '0;
        end
      end else if (rd_en) begin
        if (last_word) begin
          run <= 1'b0;
        end else if (t == k - 1'b1) begin
          t <= '0;
          s <= s + 1'b1;
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

  assign a_push  = push_d;
  assign b_push  = push_d;
  assign a_wdata = rd_a;
  assign b_wdata = rd_b;
  assign done    = last_d;
endmodule
