// warp_scheduler: picks the next warp (group) to issue and keeps its state.
//
// State is kept per base warp ("slice") of SLICE_THREADS threads, and a group
// is named by its leader slice from warp_config. Per slice:
//   pc      next instruction of the group led by this slice
//   alive   the Warp Mask: threads of this slice have not finished (ecall)
//   stall   Stalled Warps: the group has an instruction in flight
//   wait_t  the group has executed vx_tile and waits for the other groups
// A group is ready when its leader is not stalled or waiting and one of its
// slices is alive (Active Warps). Each cycle the lowest ready leader after the
// last one issued is picked (round robin), and its leader is marked stalled
// until the execute stage reports completion (done_*), one cycle later; a
// lone group therefore issues every second cycle, two or more groups fill
// every cycle.
// vx_tile changes the warp shape, so it is a synchronisation point of all
// groups: a group that executes it waits. When every live group waits, the
// scheduler pulses cfg_apply with the leader vector of the last vx_tile (if
// tile_unit accepted it, else cfg_reject), and every group of the new shape
// resumes at the instruction after vx_tile. A new group is alive when any of
// its slices is. This follows the paper ("synchronization across thread
// blocks is translated into warp-level synchronization", "all changes
// localized to the scheduling unit"); the round-robin policy, the per-slice
// bookkeeping and the barrier-style reshaping are this design's choices.
module warp_scheduler #(
  parameter int unsigned NUM_SLICES = 8,
  parameter int unsigned PC_W       = 32,
  localparam int unsigned SW        = $clog2(NUM_SLICES)
) (
  input  logic                                          clk,
  input  logic                                          rst,
  input  logic                                          start,
  input  logic [PC_W-1:0]                               start_pc,
  // warp configuration
  input  logic [NUM_SLICES-1:0]                         lead,
  input  logic [NUM_SLICES-1:0][SW-1:0]                 gbase,
  output logic                                          cfg_apply,
  output logic                                          cfg_reject,
  output logic [NUM_SLICES-1:0]                         cfg_lead,
  // issue
  output logic                                          issue_valid,
  output logic [SW-1:0]                                 issue_slice,
  output logic [PC_W-1:0]                               issue_pc,
  // completion from the execute stage
  input  logic                                          done_valid,
  input  logic [SW-1:0]                                 done_slice,
  input  logic                                          done_halt,
  input  logic                                          done_tile,
  input  logic                                          done_tile_ok,
  input  logic [NUM_SLICES-1:0]                         done_tile_lead,
  // status
  output logic [NUM_SLICES-1:0]                         slice_alive,
  output logic                                          running,
  output logic                                          tile_waiting
);

  logic [NUM_SLICES-1:0][PC_W-1:0] pc_q;
  logic [NUM_SLICES-1:0]           alive_q, stall_q, wait_q;
  logic [SW-1:0]                   last_q;
  logic                            pend_ok_q;
  logic [NUM_SLICES-1:0]           pend_lead_q;
  logic [PC_W-1:0]                 pend_pc_q;

  logic [NUM_SLICES-1:0] grp_alive, ready;
  logic                  release_b;

  // A group is alive when any of its slices is.
  always_comb begin
    grp_alive = '0;
    for (int s = 0; s < NUM_SLICES; s++)
      if (alive_q[s]) grp_alive[gbase[s]] = 1'b1;
    ready = lead & grp_alive & ~stall_q & ~wait_q;
  end

  // Reshape when every live group waits at vx_tile.
  always_comb begin
    logic all_wait;
    all_wait = 1'b1;
    for (int s = 0; s < NUM_SLICES; s++)
      if (lead[s] && grp_alive[s] && !wait_q[s]) all_wait = 1'b0;
    release_b = all_wait && |(wait_q & lead & grp_alive);
  end

  assign cfg_apply  = release_b && pend_ok_q;
  assign cfg_reject = release_b && !pend_ok_q;
  assign cfg_lead   = pend_lead_q;

  // Round-robin pick, starting after the last issued leader.
  always_comb begin
    issue_valid = 1'b0;
    issue_slice = '0;
    for (int k = 1; k <= NUM_SLICES; k++) begin
      if (!issue_valid && ready[(int'(last_q) + k) % NUM_SLICES]) begin
        issue_valid = 1'b1;
        issue_slice = SW'((int'(last_q) + k) % NUM_SLICES);
      end
    end
    issue_pc = pc_q[issue_slice];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc_q        <= '0;
      alive_q     <= '0;
      stall_q     <= '0;
      wait_q      <= '0;
      last_q      <= SW'(NUM_SLICES - 1);
      pend_ok_q   <= 1'b0;
      pend_lead_q <= '0;
      pend_pc_q   <= '0;
    end else if (start) begin
      for (int s = 0; s < NUM_SLICES; s++) pc_q[s] <= start_pc;
      alive_q <= '1;
      stall_q <= '0;
      wait_q  <= '0;
    end else begin
      if (issue_valid) begin
        stall_q[issue_slice] <= 1'b1;
        last_q               <= issue_slice;
      end
      if (done_valid) begin
        stall_q[done_slice] <= 1'b0;
        if (done_halt) begin
          for (int s = 0; s < NUM_SLICES; s++)
            if (gbase[s] == done_slice) alive_q[s] <= 1'b0;
        end else if (done_tile) begin
          wait_q[done_slice] <= 1'b1;
          pend_ok_q          <= done_tile_ok;
          pend_lead_q        <= done_tile_lead;
          pend_pc_q          <= pc_q[done_slice] + PC_W'(4);
        end else begin
          pc_q[done_slice] <= pc_q[done_slice] + PC_W'(4);
        end
      end
      if (release_b) begin
        wait_q <= '0;
        for (int s = 0; s < NUM_SLICES; s++) pc_q[s] <= pend_pc_q;
      end
    end
  end

  assign slice_alive  = alive_q;
  assign running      = |alive_q;
  assign tile_waiting = |wait_q;

  // An in-flight group never waits at vx_tile, and completion only comes for
  // a group that was issued.
  a_done_of_issued: assert property (@(posedge clk) disable iff (rst)
    done_valid |-> stall_q[done_slice]);
  a_wait_not_stalled: assert property (@(posedge clk) disable iff (rst)
    (wait_q & stall_q) == '0);

endmodule
