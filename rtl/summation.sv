// summation: address generator and FP adder pipeline of the force summation.
// It accepts one fully evaluated cell at a time from the scoreboard's request
// holder (req_valid/req_cell/req_ready).  Once the cell's RL force cache is idle
// (nothing left in its input buffer or adder) it walks the cell's slots, one per
// cycle: it reads the particle and its velocity from the position/velocity cache,
// the RL force (read and cleared), and, by the particle's gid, the LR force and
// the bonded force (read and cleared).  Two FP adds give the total force, which
// goes with the particle, its velocity and its cell to motion update.
// cell_done pulses when the last particle of the cell has been sent.
// Memory reads are combinational; the adder pipeline has 2 stages.
// The summation of the three caches follows the paper; reading the LR cache by
// gid and the per-cell idle wait are this design's choices.
module summation
  import md_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // request from the scoreboard
  input  logic              req_valid,
  input  logic [CELL_W-1:0] req_cell,
  output logic              req_ready,
  // cell memories of the selected cell (muxed outside by rd_cell)
  output logic [CELL_W-1:0] rd_cell,
  output logic [SLOT_W-1:0] rd_slot,
  output logic              rd_en,          // read and clear RL force, bonded force
  input  logic [SLOT_W:0]   cell_count,
  input  logic              cache_idle,
  input  particle_t         p_in,
  input  vec3f_t            v_in,
  input  vec3f_t            rl_f,
  output logic [GID_W-1:0]  gid,
  input  vec3f_t            lr_f,
  input  vec3f_t            bf_f,
  // to motion update
  output logic              out_valid,
  output particle_t         out_p,
  output vec3f_t            out_v,
  output vec3f_t            out_f,
  output logic [CELL_W-1:0] out_cell,
  output logic              cell_done
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN} state_t;
  state_t st;
  logic [SLOT_W:0] s;

  assign req_ready = (st == S_IDLE);
  assign rd_slot   = SLOT_W'(s);
  assign rd_en     = (st == S_RUN) && (s < cell_count);
  assign gid       = p_in.gid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE;
      rd_cell <= '0;
      s <= '0;
    end else begin
      case (st)
        S_IDLE: if (req_valid) begin
          rd_cell <= req_cell;
          s <= '0;
          st <= S_WAIT;
        end
        S_WAIT: if (cache_idle) st <= S_RUN;
        S_RUN: begin
          if (s >= cell_count) st <= S_IDLE;
          else s <= s + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign cell_done = (st == S_RUN) && (s >= cell_count);

  // two-stage adder pipeline
  logic      v1;
  particle_t p1;
  vec3f_t    vv1, s1, b1;
  logic [CELL_W-1:0] c1;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1 <= rd_en;
      out_valid <= v1;
    end
    p1  <= p_in;
    vv1 <= v_in;
    c1  <= rd_cell;
    s1  <= '{fp_add(rl_f.x, lr_f.x), fp_add(rl_f.y, lr_f.y), fp_add(rl_f.z, lr_f.z)};
    b1  <= bf_f;
    out_p <= p1;
    out_v <= vv1;
    out_cell <= c1;
    out_f <= '{fp_add(s1.x, b1.x), fp_add(s1.y, b1.y), fp_add(s1.z, b1.z)};
  end
endmodule
