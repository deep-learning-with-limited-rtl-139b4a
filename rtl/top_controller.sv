// top_controller: the TOP controller. Walks the loop nest of one GEMM and
// hands each step to the READ, L2-to-SA and WRITE engines.
//
// C = A x B with A l x k and B k x m. A step pairs a row block of A (p*n rows,
// fewer in the last block) with n columns of B; the inner loop runs over the
// column blocks of B, the outer loop over the row blocks of A, so a row block of
// A is fetched once and reused against all of B. The controller keeps three
// copies of the loop position, one per engine, and issues step s
//   to READ   once L2-to-SA has finished step s-2 (the L2 halves of step s are
//             then free: step s uses B half s mod 2 and A half (row block) mod 2),
//   to L2-to-SA once READ has finished step s,
//   to WRITE  once L2-to-SA has accepted step s,
// so fetching step s+1 overlaps computing step s (double buffering). done
// pulses when WRITE has finished the last step. A descriptor with l or m not a
// multiple of n, k = 0, k > K_MAX, k not a multiple of the bus width BW (in
// words) or A/B base addresses not aligned to a bus beat is refused with cfg_err.
// The loop order and the double buffering follow the paper; the handshakes and
// the restrictions on l, m and k are this design's choice.
module top_controller
  import gemm_pkg::*;
#(
  parameter int unsigned N     = 28,
  parameter int unsigned P     = 4,
  parameter int unsigned K_MAX = 2048,
  parameter int unsigned BW    = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cfg_t  cfg_in,
  output cfg_t  cfg,
  output logic  busy,
  output logic  done,
  output logic  cfg_err,
  output logic  ld_valid,
  input  logic  ld_ready,
  output step_t ld_job,
  input  logic  ld_done,
  output logic  cp_valid,
  input  logic  cp_ready,
  output step_t cp_job,
  input  logic  cp_done,
  output logic  wr_valid,
  input  logic  wr_ready,
  output step_t wr_job,
  input  logic  wr_done
);
  typedef struct packed {
    logic [DIM_W-1:0] row0;
    logic [DIM_W-1:0] col0;
    logic [31:0]      idx;     // step number
    logic             apar;    // row block parity
  } pos_t;

  pos_t        ld_pos, cp_pos, wr_pos;
  logic [31:0] ld_fin, cp_fin, wr_fin;   // steps finished per engine
  logic        run;

  function automatic logic more(input pos_t p, input cfg_t c);
    return 32'(p.row0) < 32'(c.l);
  endfunction

  function automatic pos_t advance(input pos_t p, input cfg_t c);
    pos_t q = p;
    q.idx = p.idx + 1;
    if (32'(p.col0) + N >= 32'(c.m)) begin
      q.col0 = '0;
      q.row0 = DIM_W'(32'(p.row0) + P * N);
      q.apar = !p.apar;
    end else begin
      q.col0 = DIM_W'(32'(p.col0) + N);
    end
    return q;
  endfunction

  function automatic step_t to_step(input pos_t p, input cfg_t c);
    step_t st;
    logic [31:0] left_sub;
    left_sub  = (32'(c.l) - 32'(p.row0)) / N;
    st.row0   = p.row0;
    st.col0   = p.col0;
    st.nsub   = SUB_W'((left_sub < P) ? left_sub : P);
    st.load_a = (p.col0 == '0);
    st.abuf   = p.apar;
    st.bbuf   = p.idx[0];
    return st;
  endfunction

  logic bad;
  assign bad = (32'(cfg_in.l) % N != 0) || (32'(cfg_in.m) % N != 0) || cfg_in.l == '0 ||
               cfg_in.m == '0 || cfg_in.k == '0 || 32'(cfg_in.k) > K_MAX ||
               (32'(cfg_in.k) % BW != 0) || (64'(cfg_in.a_base) % (2 * BW) != 0) ||
               (64'(cfg_in.b_base) % (2 * BW) != 0) || cfg_in.c_base[0];

  assign ld_job   = to_step(ld_pos, cfg);
  assign cp_job   = to_step(cp_pos, cfg);
  assign wr_job   = to_step(wr_pos, cfg);
  assign ld_valid = run && more(ld_pos, cfg) && (ld_pos.idx <= cp_fin + 1);
  assign cp_valid = run && more(cp_pos, cfg) && (ld_fin >= cp_pos.idx + 1);
  assign wr_valid = run && more(wr_pos, cfg) && (cp_pos.idx > wr_pos.idx);
  assign busy     = run;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run     <= 1'b0;
      cfg     <= '0;
      ld_pos  <= '0;
      cp_pos  <= '0;
      wr_pos  <= '0;
      ld_fin  <= '0;
      cp_fin  <= '0;
      wr_fin  <= '0;
      done    <= 1'b0;
      cfg_err <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          cfg_err <= bad;
          if (!bad) begin
            run    <= 1'b1;
            cfg    <= cfg_in;
            ld_pos <= '0;
            cp_pos <= '0;
            wr_pos <= '0;
            ld_fin <= '0;
            cp_fin <= '0;
            wr_fin <= '0;
          end
        end
      end else begin
        if (ld_valid && ld_ready) ld_pos <= advance(ld_pos, cfg);
        if (cp_valid && cp_ready) cp_pos <= advance(cp_pos, cfg);
        if (wr_valid && wr_ready) wr_pos <= advance(wr_pos, cfg);
        if (ld_done) ld_fin <= ld_fin + 1;
        if (cp_done) cp_fin <= cp_fin + 1;
        if (wr_done) wr_fin <= wr_fin + 1;
        if (!more(wr_pos, cfg) && wr_fin == wr_pos.idx) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
