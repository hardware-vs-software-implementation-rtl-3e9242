// vote_unit: the warp vote of vx_vote (modes All, Any, Uni, Ballot).
//
// Combinational, one result per lane. The lanes arrive already in group
// order: lane i of the datapath is rank i of the executing (merged or split)
// warp, and only lanes below gsize belong to it. For lane i the participants
// are the ranks j < gsize that are active and whose bit j is set in lane i's
// member mask (the register named in the instruction's immediate, read per
// lane). With p_j = (value_j != 0):
//   All    = AND of p_j over the participants (1 if there are none)
//   Any    = OR  of p_j
//   Uni    = 1 when all participants have the same p_j
//   Ballot = bit j set for every participant with p_j = 1
// The four modes and their function field are the paper's (Table I); the
// formulas match its software rules (Table IV). Reading the member mask per
// lane, and the rank-relative ballot bits, are this design's choices.
// Lanes outside the group get 0.
module vote_unit #(
  parameter int unsigned LANES = 32,
  parameter int unsigned XLEN  = 32
) (
  input  logic [1:0]                  mode,
  input  logic [$clog2(LANES+1)-1:0]  gsize,      // threads in the group
  input  logic [LANES-1:0]            lane_act,   // active threads, by rank
  input  logic [LANES-1:0][XLEN-1:0]  value,
  input  logic [LANES-1:0][XLEN-1:0]  member,     // member mask, per lane
  output logic [LANES-1:0][XLEN-1:0]  result
);
  import wlf_pkg::*;

  logic [LANES-1:0] pred;
  logic [LANES-1:0] in_grp;

  always_comb begin
    for (int j = 0; j < LANES; j++) begin
      pred[j]   = (value[j] != '0);
      in_grp[j] = (j < int'(gsize));
    end
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [LANES-1:0] part;
      logic             all_v, any_v;
      part  = lane_act & in_grp & member[i][LANES-1:0];
      all_v = &(pred | ~part);
      any_v = |(pred & part);
      result[i] = '0;
      if (in_grp[i]) begin
        unique case (vote_mode_e'(mode))
          VOTE_ALL:    result[i] = XLEN'(all_v);
          VOTE_ANY:    result[i] = XLEN'(any_v);
          VOTE_UNI:    result[i] = XLEN'(all_v | !any_v);
          VOTE_BALLOT: result[i] = XLEN'(pred & part);
        endcase
      end
    end
  end

endmodule
