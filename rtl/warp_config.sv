// warp_config: the warp configuration register of the scheduler.
//
// Holds the current group layout as a leader vector in slice order
// (lead[s] = 1 when base warp s starts a group) and derives, for every slice,
// the first slice of the group it belongs to (gbase) and, for every leader,
// the group's length in slices (glen). The scheduler, the operand crossbar and
// the execute unit all read these. A new layout from vx_tile is loaded by a
// one-cycle apply pulse and is visible from the next cycle.
// Reset loads RESET_LEAD, which by default is the paper's "No groups
// (default)" row of Table II (mask 10000000: all threads in one group).
// The block itself is named in the paper's Fig. 2; how it stores and
// decodes the layout is this design's choice.
module warp_config #(
  parameter int unsigned           NUM_SLICES = 8,
  parameter logic [NUM_SLICES-1:0] RESET_LEAD = NUM_SLICES'(1)
) (
  input  logic                                        clk,
  input  logic                                        rst,
  input  logic                                        apply,
  input  logic [NUM_SLICES-1:0]                       new_lead,
  output logic [NUM_SLICES-1:0]                       lead,
  output logic [NUM_SLICES-1:0][$clog2(NUM_SLICES)-1:0] gbase,
  output logic [NUM_SLICES-1:0][$clog2(NUM_SLICES+1)-1:0] glen
);

  logic [NUM_SLICES-1:0] lead_q;

  always_ff @(posedge clk) begin
    if (rst)        lead_q <= RESET_LEAD | NUM_SLICES'(1);
    else if (apply) lead_q <= new_lead | NUM_SLICES'(1);
  end

  assign lead = lead_q;

  always_comb begin
    logic [$clog2(NUM_SLICES)-1:0] b;
    b = '0;
    for (int s = 0; s < NUM_SLICES; s++) begin
      if (lead_q[s]) b = ($clog2(NUM_SLICES))'(s);
      gbase[s] = b;
    end
  end

  // A leader's group holds every slice whose base is that leader.
  always_comb begin
    glen = '0;
    for (int s = 0; s < NUM_SLICES; s++)
      for (int t = 0; t < NUM_SLICES; t++)
        if (lead_q[s] && int'(gbase[t]) == s) glen[s] = glen[s] + 1'b1;
  end

endmodule
