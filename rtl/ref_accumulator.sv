// ref_accumulator: sums the stream of partial forces of the reference particle at
// the output of one force pipeline, one input per cycle, with an FP adder of
// latency 3 (the classic accumulator problem).  The adder output is fed back to
// its input, so three partial sums (Sum1..Sum3) circulate; each carries the PID
// of the reference particle it belongs to.  When a force with a new PID arrives,
// the PID register takes the new id; the three circulating sums of the old id
// are no longer fed back (the feedback is 0, so the new particle starts from
// zero) and instead go to the sum cache, where they are added together and sent
// out with their PID to be added into the force cache.  `flush` ends the current
// particle without a new one (used when a homecell is finished).
// This follows the reference accumulator described for the engine; tagging each
// circulating sum with its PID, so that particles shorter than 3 inputs also work,
// is this design's way of making the 3-cycle reset window exact.
// Interface: in_valid/in_pid/in_f one per cycle; out_valid/out_pid/out_f is the
// total of one reference particle, a few cycles after its last input.  busy is
// high while any sum is still in flight.  Replicated for x, y and z.
module ref_accumulator
  import md_pkg::*;
#(
  parameter int LAT = 3
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pid_t   in_pid,
  input  vec3f_t in_f,
  input  logic   flush,
  output logic   out_valid,
  output pid_t   out_pid,
  output vec3f_t out_f,
  output logic   busy
);
  localparam int TW = $bits(pid_t) + 1;

  logic   cur_v, nxt_v;
  pid_t   cur_pid, nxt_pid;
  logic   e_v;
  logic [TW-1:0] e_tag;
  logic [LAT-1:0] st_v [3];
  logic [LAT-1:0][TW-1:0] st_tag [3];
  vec3f_t e_sum, fb, a_in;
  logic   keep, fl_v;

  always_comb begin
    nxt_v   = cur_v;
    nxt_pid = cur_pid;
    if (flush) nxt_v = 1'b0;
    if (in_valid) begin
      nxt_v   = 1'b1;
      nxt_pid = in_pid;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_v <= 1'b0;
      cur_pid <= '0;
    end else begin
      cur_v <= nxt_v;
      cur_pid <= nxt_pid;
    end
  end

  // emerging sum is kept circulating only if it belongs to the current particle
  assign keep = e_v && e_tag[TW-1] && nxt_v && (e_tag[TW-2:0] == nxt_pid);
  assign fl_v = e_v && e_tag[TW-1] && !keep;
  assign fb   = keep ? e_sum : '{FP_ZERO, FP_ZERO, FP_ZERO};
  assign a_in = in_valid ? in_f : '{FP_ZERO, FP_ZERO, FP_ZERO};

  logic [2:0] ov;
  logic [2:0][TW-1:0] otag;
  fp32_t ain [3];
  fp32_t bin [3];
  fp32_t yout [3];
  assign ain[0] = a_in.x;  assign ain[1] = a_in.y;  assign ain[2] = a_in.z;
  assign bin[0] = fb.x;    assign bin[1] = fb.y;    assign bin[2] = fb.z;

  for (genvar k = 0; k < 3; k++) begin : g_add
    fp_add_pipe #(.LAT(LAT), .TAG_W(TW)) u_add (
      .clk, .rst_n,
      .in_valid (1'b1),
      .in_tag   ({nxt_v, nxt_pid}),
      .a (ain[k]), .b (bin[k]),
      .out_valid (ov[k]), .out_tag (otag[k]), .y (yout[k]),
      .stage_valid (st_v[k]), .stage_tag (st_tag[k])
    );
  end
  assign e_v   = ov[0];
  assign e_tag = otag[0];
  assign e_sum = '{yout[0], yout[1], yout[2]};

  // ---- sum cache
  logic   sc_v;
  pid_t   sc_pid;
  vec3f_t sc_sum;
  logic   sc_live;

  always_comb begin
    sc_live = 1'b0;
    for (int i = 0; i < LAT - 1; i++)
      if (st_v[0][i] && st_tag[0][i][TW-1] && st_tag[0][i][TW-2:0] == sc_pid) sc_live = 1'b1;
    if (nxt_v && nxt_pid == sc_pid) sc_live = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sc_v <= 1'b0;
      out_valid <= 1'b0;
      sc_pid <= '0;
      sc_sum <= '0;
      out_pid <= '0;
      out_f <= '0;
    end else begin
      out_valid <= 1'b0;
      if (fl_v) begin
        if (sc_v && sc_pid == pid_t'(e_tag[TW-2:0])) begin
          sc_sum <= '{fp_add(sc_sum.x, e_sum.x), fp_add(sc_sum.y, e_sum.y), fp_add(sc_sum.z, e_sum.z)};
        end else begin
          if (sc_v) begin
            out_valid <= 1'b1;
            out_pid <= sc_pid;
            out_f <= sc_sum;
          end
          sc_v <= 1'b1;
          sc_pid <= pid_t'(e_tag[TW-2:0]);
          sc_sum <= e_sum;
        end
      end else if (sc_v && !sc_live) begin
        out_valid <= 1'b1;
        out_pid <= sc_pid;
        out_f <= sc_sum;
        sc_v <= 1'b0;
      end
    end
  end

  always_comb begin
    busy = sc_v || cur_v;
    for (int i = 0; i < LAT; i++) if (st_v[0][i] && st_tag[0][i][TW-1]) busy = 1'b1;
  end
endmodule
