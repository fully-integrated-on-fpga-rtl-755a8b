// filter_arbiter: round-robin selection among the filter buffers that hold a
// surviving pair, computed with the bit algorithm given for this engine:
//   1 shift the current grant left by one and subtract 1; 2 invert;
//   3 take the mask of non-empty buffers; 4 AND steps 2 and 3;
//   5 two's complement of step 4; 6 AND steps 4 and 5 = new grant (lowest set
//   bit above the current grant);  7 if the current grant is the MSB, step 1 is
//   omitted;  8 if the current grant is zero, steps 1-4 are skipped (step 4 = mask).
// Followed literally, the search never wraps in one step: after the highest
// requester has been served the grant is zero for one cycle, and the next cycle
// restarts from the lowest requester.  The grant is combinational in the valid
// mask and registered as the "current" result when `enable` is high; with enable
// low no grant is given and the state holds.
module filter_arbiter #(
  parameter int N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic [N-1:0] valid_mask,
  output logic [N-1:0] grant
);
  logic [N-1:0] cur, s1, s2, s4, s5, nxt;

  always_comb begin
    s1 = (cur == {1'b1, {(N-1){1'b0}}}) ? cur : ((cur << 1) - N'(1));   // steps 1, 7
    s2 = ~s1;                                                          // step 2
    s4 = (cur == '0) ? valid_mask : (s2 & valid_mask);                 // steps 3, 4, 8
    s5 = ~s4 + N'(1);                                                  // step 5
    nxt = s4 & s5;                                                     // step 6
    grant = enable ? nxt : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)      cur <= '0;
    else if (enable) cur <= nxt;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_subset: assert property (@(posedge clk) disable iff (!rst_n) (grant & ~valid_mask) == '0);
endmodule
