// tile_unit: executes vx_tile, the cooperative-group reshaping instruction.
//
// Combinational. vx_tile carries a group mask (rs1) and a thread count (rs2).
// The mask has one bit per base warp ("slice") of SLICE_THREADS threads; a 1
// marks the slice that starts a new group, and the group runs up to the next
// 1. As printed in the paper's Table II the leftmost (most significant) bit is
// slice 0, so for 32 threads in 8 slices:
//   10000000 -> one group of 32     10001000 -> two groups of 16
//   10101010 -> four groups of 8    11111111 -> eight groups of 4
// The unit turns the mask into a leader vector in slice order (lead[s] = 1
// when slice s starts a group) and checks it: slice 0 must start a group, no
// mask bit above the slice count may be set, and every group must hold
// exactly the given thread count. The paper gives the operands and Table II;
// the checks and what happens on a failed check (the warp configuration is
// left as it was, see warp_scheduler) are this design's choices.
module tile_unit #(
  parameter int unsigned NUM_SLICES    = 8,
  parameter int unsigned SLICE_THREADS = 4,
  parameter int unsigned XLEN          = 32
) (
  input  logic [XLEN-1:0]       mask,
  input  logic [XLEN-1:0]       size,
  output logic [NUM_SLICES-1:0] lead,
  output logic                  ok
);

  always_comb begin
    int run;
    logic len_ok;
    for (int s = 0; s < NUM_SLICES; s++) lead[s] = mask[NUM_SLICES-1-s];
    // Walk the slices and measure each group's length in threads.
    len_ok = 1'b1;
    run    = 0;
    for (int s = 0; s < NUM_SLICES; s++) begin
      if (lead[s] && s != 0) begin
        if (XLEN'(run) != size) len_ok = 1'b0;
        run = 0;
      end
      run += SLICE_THREADS;
    end
    if (XLEN'(run) != size) len_ok = 1'b0;
    ok = len_ok && lead[0] && ((mask >> NUM_SLICES) == '0);
  end

endmodule
