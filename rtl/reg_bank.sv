// reg_bank: register bank of one base warp (one slice of SLICE_THREADS threads).
//
// NUM_REGS x SLICE_THREADS words of XLEN bits. NRP asynchronous read ports
// (rs1, rs2, the third operand of vote/shuffle, and a debug port) each return
// one register of all threads of the slice; register 0 reads as zero. One
// synchronous write port writes one register of the threads selected by
// wmask on the rising clock edge; a read in the same cycle still sees the old
// value. The core has one bank per slice so that, when vx_tile merges slices
// into a larger warp, every slice keeps its own registers and the operand
// crossbar gathers them ("assigning the correct register bank to each warp").
// Banks per base warp follow the paper's Fig. 2; port count and timing are
// this design's choice. The array is not reset: software writes a register
// before reading it.
module reg_bank #(
  parameter int unsigned SLICE_THREADS = 4,
  parameter int unsigned NUM_REGS      = 32,
  parameter int unsigned XLEN          = 32,
  parameter int unsigned NRP           = 4
) (
  input  logic                                          clk,
  input  logic [NRP-1:0][$clog2(NUM_REGS)-1:0]          raddr,
  output logic [NRP-1:0][SLICE_THREADS-1:0][XLEN-1:0]   rdata,
  input  logic                                          we,
  input  logic [SLICE_THREADS-1:0]                      wmask,
  input  logic [$clog2(NUM_REGS)-1:0]                   waddr,
  input  logic [SLICE_THREADS-1:0][XLEN-1:0]            wdata
);

  logic [XLEN-1:0] regs [SLICE_THREADS][NUM_REGS];

  always_ff @(posedge clk) begin
    if (we && waddr != '0) begin
      for (int t = 0; t < SLICE_THREADS; t++) begin
        if (wmask[t]) regs[t][waddr] <= wdata[t];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NRP; p++) begin
      for (int t = 0; t < SLICE_THREADS; t++) begin
        rdata[p][t] = (raddr[p] == '0) ? '0 : regs[t][raddr[p]];
      end
    end
  end

endmodule
