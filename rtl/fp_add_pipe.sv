// fp_add_pipe: pipelined fp32 adder with a fixed latency of LAT cycles (default 3,
// the adder latency the accumulators of this engine are built around).  The sum
// of a and b presented in cycle t appears on y in cycle t+LAT.  A tag travels
// with the operands so that the caller can tell which partial sum comes out.
// The add itself is md_pkg::fp_add, evaluated in the first stage; the remaining
// stages only delay it, standing in for the internal stages of a hard FP adder.
module fp_add_pipe
  import md_pkg::*;
#(
  parameter int LAT   = 3,
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  fp32_t            a,
  input  fp32_t            b,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fp32_t            y,
  // tags and valids of every stage, for hazard checks by the caller
  output logic [LAT-1:0]            stage_valid,
  output logic [LAT-1:0][TAG_W-1:0] stage_tag
);
  fp32_t            s_y   [LAT];
  logic [TAG_W-1:0] s_tag [LAT];
  logic             s_v   [LAT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        s_v[i] <= 1'b0;
        s_y[i] <= FP_ZERO;
        s_tag[i] <= '0;
      end
    end else begin
      s_v[0]   <= in_valid;
      s_tag[0] <= in_tag;
      s_y[0]   <= fp_add(a, b);
      for (int i = 1; i < LAT; i++) begin
        s_v[i]   <= s_v[i-1];
        s_tag[i] <= s_tag[i-1];
        s_y[i]   <= s_y[i-1];
      end
    end
  end

  assign out_valid = s_v[LAT-1];
  assign out_tag   = s_tag[LAT-1];
  assign y         = s_y[LAT-1];

  always_comb begin
    for (int i = 0; i < LAT; i++) begin
      stage_valid[i] = s_v[i];
      stage_tag[i]   = s_tag[i];
    end
  end
endmodule
