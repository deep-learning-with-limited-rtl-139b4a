// dsp_macc: one node ("DSP MACC") of the wavefront systolic array.
//
// Each clock the node registers the A word and its tag from the left neighbour
// and the B word from the neighbour above, and passes them on to the right and
// downward one clock later. From the registered pair it forms a*b and adds it to
// a 48-bit accumulator; a "first" tag restarts the sum. When the pair carries
// the "last" tag the finished sum (deliver) goes straight into the node's local
// storage register, and the next operation can start in the following cycle.
// The local storage registers of a column form a shift register toward the
// column's rounding unit: each clock a register takes either its own node's
// new result or the content of the register below (casc_in). The array
// sequencer spaces operations so that the two never coincide (assertion).
// Accumulate, local register and cascaded output path follow the paper; the
// tag that marks operation boundaries is this design's choice.
module dsp_macc
  import gemm_pkg::*;
#(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] a_in,
  input  tag_t              tag_in,
  input  logic [DATA_W-1:0] b_in,
  output logic [DATA_W-1:0] a_out,
  output tag_t              tag_out,
  output logic [DATA_W-1:0] b_out,
  input  logic              casc_in_valid,
  input  logic [ACC_W-1:0]  casc_in,
  output logic              casc_out_valid,
  output logic [ACC_W-1:0]  casc_out,
  output logic              deliver
);
  logic [DATA_W-1:0]      a_r, b_r;
  tag_t                   tag_r;
  logic signed [ACC_W-1:0] acc, acc_next, prod;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_r   <= '0;
      b_r   <= '0;
      tag_r <= '0;
    end else begin
      a_r   <= a_in;
      b_r   <= b_in;
      tag_r <= tag_in;
    end
  end

  always_comb begin
    prod     = ACC_W'($signed(a_r) * $signed(b_r));
    acc_next = (tag_r.first ? '0 : acc) + prod;
    deliver  = tag_r.valid && tag_r.last;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)           acc <= '0;
    else if (tag_r.valid) acc <= acc_next;
  end

  // local storage register, part of the column's output shift register
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      casc_out_valid <= 1'b0;
      casc_out       <= '0;
    end else if (deliver) begin
      casc_out_valid <= 1'b1;
      casc_out       <= acc_next;
    end else begin
      casc_out_valid <= casc_in_valid;
      casc_out       <= casc_in;
    end
  end

  assign a_out   = a_r;
  assign b_out   = b_r;
  assign tag_out = tag_r;

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(deliver && casc_in_valid))
    else $error("dsp_macc: result cascade collision");
endmodule
