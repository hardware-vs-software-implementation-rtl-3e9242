// shfl_unit: the register exchange of vx_shfl (modes Up, Down, Bfly, Idx).
//
// Combinational. Lanes arrive in group order (lane i = rank i of the
// executing warp, ranks below gsize belong to it). Every lane reads the value
// of one source lane:
//   Up   src = i - d     Down src = i + d     Bfly src = i ^ d
//   Idx  src = base + (d mod w)
// where d is the lane offset from the instruction's immediate and the group
// is cut into segments of w lanes starting at base = i rounded down to w.
// w is the lane's clamp value (the register named in the immediate) when that
// is a power of two no larger than the group, and the whole group otherwise.
// A source outside the segment, or an inactive source, leaves the lane with
// its own value. The four modes and the offset/clamp operands are the paper's
// (Table I and Sec. III); the formulas match its software rules (Table IV).
// Reading the clamp as a CUDA-style segment width, and keeping the own value
// on an out-of-range source, are this design's choices.
// Lanes outside the group get 0.
module shfl_unit #(
  parameter int unsigned LANES = 32,
  parameter int unsigned XLEN  = 32
) (
  input  logic [1:0]                  mode,
  input  logic [6:0]                  delta,      // lane offset
  input  logic [$clog2(LANES+1)-1:0]  gsize,
  input  logic [LANES-1:0]            lane_act,
  input  logic [LANES-1:0][XLEN-1:0]  value,
  input  logic [LANES-1:0][XLEN-1:0]  clamp,      // segment width, per lane
  output logic [LANES-1:0][XLEN-1:0]  result
);
  import wlf_pkg::*;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      int  w, base, src, d, gs;
      logic ok, pow2;
      gs   = int'(gsize);
      d    = int'(delta);
      pow2 = (clamp[i] != '0) && ((clamp[i] & (clamp[i] - 1)) == '0);
      w    = (pow2 && clamp[i] <= XLEN'(gs)) ? int'(clamp[i]) : gs;
      base = (w == gs) ? 0 : (i & ~(w - 1));
      src  = i;
      ok   = 1'b0;
      unique case (shfl_mode_e'(mode))
        SHFL_UP: begin
          src = i - d;
          ok  = (src >= base);
        end
        SHFL_DOWN: begin
          src = i + d;
          ok  = (src < base + w);
        end
        SHFL_BFLY: begin
          src = i ^ d;
          ok  = (src >= base) && (src < base + w);
        end
        SHFL_IDX: begin
          if ((w & (w - 1)) == 0) begin
            src = base + (d & (w - 1));
            ok  = 1'b1;
          end else begin
            src = base + d;
            ok  = (d < w);
          end
        end
      endcase
      if (ok && (src < 0 || src >= LANES)) ok = 1'b0;
      if (ok) ok = lane_act[src[$clog2(LANES)-1:0]];
      result[i] = '0;
      if (i < gs) result[i] = ok ? value[src[$clog2(LANES)-1:0]] : value[i];
    end
  end

endmodule
