// pair_generator: particle-pair generator of one force pipeline under workload
// Distribution 3 (each pipeline works on its own homecells).
// Pipeline PIPE of NPIPE takes homecells PIPE, PIPE+NPIPE, PIPE+2*NPIPE, ...
// For each homecell every particle in turn becomes the reference particle; for it
// the generator streams the particles of the homecell and of the 13 neighbour
// cells of the N3L half shell (md_pkg::n3l_offset, periodic wrap of the cell
// index), one memory row of LANES particles per cycle, one particle to each
// filter.  Within the homecell only slots above the reference slot are marked
// valid, so each pair is produced once.
// Memory port: rd_req/rd_cell/rd_row, granted by rd_gnt; the row arrives on
// rd_data in the next cycle (cell memories are banked LANES wide, slot = row*LANES
// + lane).  Issuing stops while `stall` is high (filter buffers or output queues
// nearly full).  After the last reference of a homecell the generator asserts
// `flush`, waits for `drain_idle` (everything for this cell has reached the force
// caches) and pulses cell_done with the cell index for the scoreboard.
// The assignment of homecells to pipelines, the row-wide banked read and the
// half-shell choice are this design's; the paper gives the traversal order.
module pair_generator
  import md_pkg::*;
#(
  parameter int NCX   = NCELL_X,
  parameter int NCY   = NCELL_X,
  parameter int NCZ   = NCELL_X,
  parameter int NPIPE = 41,
  parameter int PIPE  = 0,
  parameter int CAP   = CELL_CAP,
  parameter int N     = LANES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NCX*NCY*NCZ-1:0][SLOT_W:0] cell_count,
  // cell memory read port
  output logic                  rd_req,
  output logic [CELL_W-1:0]     rd_cell,
  output logic [SLOT_W-1:0]     rd_row,
  input  logic                  rd_gnt,
  input  particle_t [N-1:0]     rd_data,
  // to the filter bank
  input  logic                  stall,
  output logic                  out_valid,
  output logic [N-1:0]          out_mask,
  output particle_t             ref_p,
  output pid_t                  ref_id,
  output particle_t [N-1:0]     nbr_p,
  output pid_t      [N-1:0]     nbr_id,
  // completion
  output logic                  flush,
  input  logic                  drain_idle,
  output logic                  cell_done,
  output logic [CELL_W-1:0]     done_cell,
  output logic                  all_done
);
  localparam int NCELL = NCX * NCY * NCZ;

  typedef enum logic [2:0] {S_IDLE, S_HOME, S_REFREQ, S_REFDAT, S_NB, S_WAIT, S_DONE} state_t;
  state_t st;

  logic [CELL_W-1:0] h;
  logic [SLOT_W:0]   i;
  logic [3:0]        k;
  logic [SLOT_W-1:0] row;
  logic [SLOT_W:0]   hcount, ncount;
  logic [CELL_W-1:0] ncell;
  logic [SLOT_W:0]   nrows;

  // pending read (data arrives next cycle)
  logic              p_v, p_ref;
  logic [CELL_W-1:0] p_cell;
  logic [SLOT_W-1:0] p_row;
  logic              p_home;

  function automatic logic [CELL_W-1:0] nbr_of(input logic [CELL_W-1:0] c, input logic [3:0] kk);
    int cx, cy, cz;
    logic [5:0] o;
    o  = n3l_offset(kk);
    cx = int'(c) / (NCY * NCZ);
    cy = (int'(c) / NCZ) % NCY;
    cz = int'(c) % NCZ;
    cx = (cx + int'(o[5:4]) - 1 + NCX) % NCX;
    cy = (cy + int'(o[3:2]) - 1 + NCY) % NCY;
    cz = (cz + int'(o[1:0]) - 1 + NCZ) % NCZ;
    return CELL_W'(cx * NCY * NCZ + cy * NCZ + cz);
  endfunction

  always_comb begin
    hcount = cell_count[h];
    ncell  = nbr_of(h, k);
    ncount = cell_count[ncell];
    nrows  = (ncount + (SLOT_W+1)'(N - 1)) / (SLOT_W+1)'(N);
  end

  always_comb begin
    rd_req  = 1'b0;
    rd_cell = h;
    rd_row  = SLOT_W'(i / (SLOT_W+1)'(N));
    case (st)
      S_REFREQ: rd_req = 1'b1;
      S_NB: begin
        rd_cell = ncell;
        rd_row  = row;
        rd_req  = !stall && ((SLOT_W+1)'(row) < nrows);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE;
      p_v <= 1'b0;
      p_ref <= 1'b0;
      h <= '0; i <= '0; k <= '0; row <= '0;
      ref_p <= '0;
      ref_id <= '0;
      p_cell <= '0; p_row <= '0; p_home <= 1'b0;
    end else begin
      p_v <= 1'b0;
      p_ref <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          h <= CELL_W'(PIPE);
          st <= (PIPE < NCELL) ? S_HOME : S_DONE;
        end
        S_HOME: begin
          i <= '0;
          st <= (hcount == 0) ? S_WAIT : S_REFREQ;
        end
        S_REFREQ: if (rd_gnt) begin
          p_ref <= 1'b1;
          st <= S_REFDAT;
        end
        S_REFDAT: if (p_ref) begin
          ref_p  <= rd_data[i % (SLOT_W+1)'(N)];
          ref_id <= '{cidx: h, slot: SLOT_W'(i)};
          k <= '0;
          row <= '0;
          st <= S_NB;
        end
        S_NB: begin
          if ((SLOT_W+1)'(row) >= nrows) begin
            row <= '0;
            if (k == 4'd13) begin
              i <= i + 1'b1;
              st <= (i + 1'b1 == hcount) ? S_WAIT : S_REFREQ;
            end
            k <= k + 1'b1;
          end else if (rd_req && rd_gnt) begin
            p_v <= 1'b1;
            p_cell <= ncell;
            p_row <= row;
            p_home <= (k == 4'd0);
            row <= row + 1'b1;
          end
        end
        S_WAIT: if (drain_idle && !p_v) begin
          if (int'(h) + NPIPE < NCELL) begin
            h <= CELL_W'(int'(h) + NPIPE);
            st <= S_HOME;
          end else begin
            st <= S_DONE;
          end
        end
        S_DONE: if (start) begin
          h <= CELL_W'(PIPE);
          st <= (PIPE < NCELL) ? S_HOME : S_DONE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign flush     = (st == S_WAIT);
  assign cell_done = (st == S_WAIT) && drain_idle && !p_v;
  assign done_cell = h;
  assign all_done  = (st == S_DONE);

  // data of the row granted last cycle
  always_comb begin
    logic [SLOT_W:0] s, pc;
    pc = cell_count[p_cell];
    out_valid = p_v;
    for (int j = 0; j < N; j++) begin
      s = (SLOT_W+1)'(p_row) * (SLOT_W+1)'(N) + (SLOT_W+1)'(j);
      out_mask[j] = p_v && (s < pc) && (!p_home || s > (SLOT_W+1)'(ref_id.slot));
      nbr_p[j]  = rd_data[j];
      nbr_id[j] = '{cidx: p_cell, slot: SLOT_W'(s)};
    end
  end
endmodule
