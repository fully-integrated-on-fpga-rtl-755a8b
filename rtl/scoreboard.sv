// scoreboard: decides when a cell's forces are complete so that its motion update
// can start while other cells are still being evaluated.
// Status tracker: one 28-bit entry per cell, initialised (on `start`) to a one
// followed by 27 zeros.  Whenever a cell finishes as homecell, the entries of that
// cell and of its 26 neighbour cells shift right one step.  After 27 shifts (the
// cell itself and its 26 neighbours are done) the rightmost bit is 1 and the cell
// is entered in the request holder.  Several pipelines may finish in one cycle; an
// entry then shifts by the number of finished cells around it.
// Request holder: one bit per cell; requests go out one at a time in round-robin
// order on req_valid/req_cell, and a bit is cleared when req_ready accepts it.
// The entry width, initial value and shift rule follow the paper; the periodic
// neighbourhood (cells on opposite faces are neighbours) is this design's reading
// of the boundary conditions; it needs at least 3 cells per edge.
module scoreboard
  import md_pkg::*;
#(
  parameter int NCX   = NCELL_X,
  parameter int NCY   = NCELL_X,
  parameter int NCZ   = NCELL_X,
  parameter int NDONE = 41
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [NDONE-1:0]              done_v,
  input  logic [NDONE-1:0][CELL_W-1:0]  done_cell,
  output logic                          req_valid,
  output logic [CELL_W-1:0]             req_cell,
  input  logic                          req_ready
);
  localparam int NCELL = NCX * NCY * NCZ;
  localparam logic [27:0] INIT = 28'h800_0000;

  logic [27:0]      entry [NCELL];
  logic [NCELL-1:0] holder, issued, gnt;
  logic [$clog2(NCELL > 1 ? NCELL : 2)-1:0] gidx;
  logic             any;

  function automatic logic near(input int a, input int b, input int n);
    int d;
    d = (a - b + n) % n;
    return (d == 0) || (d == 1) || (d == n - 1);
  endfunction

  function automatic logic is_nbr(input int c, input int d);
    return near(c / (NCY*NCZ), d / (NCY*NCZ), NCX)
        && near((c / NCZ) % NCY, (d / NCZ) % NCY, NCY)
        && near(c % NCZ, d % NCZ, NCZ);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      for (int c = 0; c < NCELL; c++) entry[c] <= INIT;
      holder <= '0;
      issued <= '0;
    end else begin
      for (int c = 0; c < NCELL; c++) begin
        int n;
        n = 0;
        for (int p = 0; p < NDONE; p++)
          if (done_v[p] && is_nbr(c, int'(done_cell[p]))) n++;
        entry[c] <= entry[c] >> n;
        if (!issued[c] && entry[c][0]) holder[c] <= 1'b1;
      end
      if (req_valid && req_ready) begin
        holder[gidx] <= 1'b0;
        issued[gidx] <= 1'b1;
      end
    end
  end

  rr_arb #(.N(NCELL)) u_rr (
    .clk, .rst_n, .req(holder & ~issued), .adv(req_ready), .gnt, .gnt_idx(gidx), .any
  );
  assign req_valid = any;
  assign req_cell  = CELL_W'(gidx);

  a_no_overshift: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> entry[gidx][0]);
endmodule
