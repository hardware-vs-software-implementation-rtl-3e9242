// operand_xbar: crossbar between the per-slice register banks and the lanes.
//
// In the unmodified core a multiplexer picks the one register bank of the
// issuing warp. Once vx_tile merges base warps, one warp spans several banks,
// so the paper replaces that multiplexer by a crossbar controlled by the
// scheduler's warp configuration. Here the executing group starts at slice
// `base` and spans `len` slices. Read side: lane block k (lanes
// k*SLICE_THREADS ..) receives bank base+k for k < len, and zero otherwise, so
// that the execute unit always sees the group in rank order starting at lane
// 0. The same mapping carries the slices' thread-active bits to the lanes.
// Write side: bank j receives lane block j-base and a write enable when it
// belongs to the group. Purely combinational; NRP read ports share the
// routing. The block-to-lane mapping is this design's choice.
module operand_xbar #(
  parameter int unsigned NUM_SLICES    = 8,
  parameter int unsigned SLICE_THREADS = 4,
  parameter int unsigned XLEN          = 32,
  parameter int unsigned NRP           = 3,
  localparam int unsigned LANES        = NUM_SLICES * SLICE_THREADS,
  localparam int unsigned SW           = $clog2(NUM_SLICES)
) (
  input  logic [SW-1:0]                                            base,
  input  logic [$clog2(NUM_SLICES+1)-1:0]                          len,
  // read side
  input  logic [NUM_SLICES-1:0][NRP-1:0][SLICE_THREADS-1:0][XLEN-1:0] bank_rdata,
  input  logic [NUM_SLICES-1:0]                                     slice_act,
  output logic [NRP-1:0][LANES-1:0][XLEN-1:0]                       lane_rdata,
  output logic [LANES-1:0]                                          lane_act,
  // write side
  input  logic [LANES-1:0][XLEN-1:0]                                lane_wdata,
  output logic [NUM_SLICES-1:0]                                     bank_sel,
  output logic [NUM_SLICES-1:0][SLICE_THREADS-1:0][XLEN-1:0]        bank_wdata
);

  always_comb begin
    for (int k = 0; k < NUM_SLICES; k++) begin
      int src;
      src = int'(base) + k;
      for (int t = 0; t < SLICE_THREADS; t++) begin
        lane_act[k*SLICE_THREADS + t] = 1'b0;
        for (int p = 0; p < NRP; p++) lane_rdata[p][k*SLICE_THREADS + t] = '0;
      end
      if (k < int'(len) && src < NUM_SLICES) begin
        for (int t = 0; t < SLICE_THREADS; t++) begin
          lane_act[k*SLICE_THREADS + t] = slice_act[src[SW-1:0]];
          for (int p = 0; p < NRP; p++)
            lane_rdata[p][k*SLICE_THREADS + t] = bank_rdata[src[SW-1:0]][p][t];
        end
      end
    end
  end

  always_comb begin
    for (int j = 0; j < NUM_SLICES; j++) begin
      int k;
      k = j - int'(base);
      bank_sel[j] = (k >= 0) && (k < int'(len));
      for (int t = 0; t < SLICE_THREADS; t++) begin
        bank_wdata[j][t] = '0;
        if (bank_sel[j]) bank_wdata[j][t] = lane_wdata[k*SLICE_THREADS + t];
      end
    end
  end

endmodule
