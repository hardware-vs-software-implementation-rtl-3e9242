// wlf_core: a GPU core slice with hardware warp-level features.
//
// The core runs NUM_WARPS x NUM_THREADS hardware threads (4 x 8 = 32 by
// default, the evaluated configuration). The threads are stored as
// NUM_SLICES base warps of four threads, each with its own register bank.
// vx_tile reshapes them into groups of 4, 8, 16 or 32 threads (any run of
// whole slices the group mask describes); each group is scheduled as one warp
// and executes in one cycle on a 32-lane datapath. vx_vote and vx_shfl
// exchange values between the lanes of the executing group.
//
// Pipeline, two stages:
//   1. schedule + fetch: warp_scheduler picks a ready group and its PC; the
//      instruction is read from the instruction memory and registered.
//   2. decode + operand read + execute + write back: decoder, per-slice
//      reg_banks, operand_xbar (banks of the group -> lanes 0..size-1),
//      alu (integer, CSR, vote, shuffle) and tile_unit, then the result goes
//      back through the crossbar to the group's banks, and completion goes to
//      the scheduler, which un-stalls the group (or parks it at vx_tile, or
//      retires it on ecall).
// With one group an instruction issues every second cycle; with two or more
// groups one issues every cycle.
//
// Interface: the instruction memory (IMEM_DEPTH words) is written through
// imem_we/imem_waddr/imem_wdata while the core is idle; a start pulse starts
// every thread at start_pc. running stays high until every thread executed
// ecall. dbg_thread/dbg_reg read any register of any hardware thread
// combinationally. evt_* are one-cycle event pulses for counting.
//
// The paper's parts are the new instructions, the per-warp register banks
// behind a crossbar, the warp configuration and the group-size-aware execute
// unit. The baseline core around them (six-stage pipeline, instruction
// cache, ibuffer, scoreboard, FPU, LSU, caches, divergence split/join) is not
// part of this RTL: fetch is a local instruction memory, there is no data
// memory, and the two-stage timing is this design's own.
module wlf_core
  import wlf_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 4,
  parameter int unsigned NUM_THREADS = 8,
  parameter int unsigned IMEM_DEPTH  = 1024,
  localparam int unsigned LANES      = NUM_WARPS * NUM_THREADS,
  localparam int unsigned NUM_SLICES = LANES / SLICE_THREADS,
  localparam int unsigned SW         = $clog2(NUM_SLICES),
  localparam int unsigned IAW        = $clog2(IMEM_DEPTH),
  // Reset layout as a Table II style mask, leftmost bit = slice 0.
  parameter logic [NUM_SLICES-1:0] RESET_MASK = {1'b1, {(NUM_SLICES-1){1'b0}}}
) (
  input  logic                        clk,
  input  logic                        rst,
  // instruction memory load
  input  logic                        imem_we,
  input  logic [IAW-1:0]              imem_waddr,
  input  logic [31:0]                 imem_wdata,
  // control
  input  logic                        start,
  input  logic [31:0]                 start_pc,
  output logic                        running,
  output logic [NUM_SLICES-1:0]       group_lead,   // current layout, slice order
  // debug register read
  input  logic [$clog2(LANES)-1:0]    dbg_thread,
  input  logic [REG_AW-1:0]           dbg_reg,
  output logic [XLEN-1:0]             dbg_rdata,
  // events
  output logic                        evt_issue,
  output logic [$clog2(LANES+1)-1:0]  evt_issue_size,  // threads of the issuing group
  output logic                        evt_vote,
  output logic                        evt_shfl,
  output logic                        evt_tile_apply,
  output logic                        evt_tile_reject,
  output logic                        evt_tile_wait    // some group waits at vx_tile
);

  localparam int unsigned NRP = 4;   // rs1, rs2, rs3, debug

  // ---------------------------------------------------------------- config
  logic [NUM_SLICES-1:0]                      lead;
  logic [NUM_SLICES-1:0][SW-1:0]              gbase;
  logic [NUM_SLICES-1:0][$clog2(NUM_SLICES+1)-1:0] glen;
  logic                                       cfg_apply, cfg_reject;
  logic [NUM_SLICES-1:0]                      cfg_lead;

  // Table II masks name slice 0 by their leftmost bit; warp_config wants
  // slice order.
  function automatic logic [NUM_SLICES-1:0] to_slice_order(logic [NUM_SLICES-1:0] m);
    for (int s = 0; s < NUM_SLICES; s++) to_slice_order[s] = m[NUM_SLICES-1-s];
  endfunction

  warp_config #(
    .NUM_SLICES(NUM_SLICES), .RESET_LEAD(to_slice_order(RESET_MASK))
  ) u_cfg (
    .clk, .rst,
    .apply   (cfg_apply),
    .new_lead(cfg_lead),
    .lead, .gbase, .glen
  );

  // ------------------------------------------------------------- scheduler
  logic            ex_valid;
  logic [SW-1:0]   ex_slice;
  logic [31:0]     ex_instr;
  logic            issue_valid;
  logic [SW-1:0]   issue_slice;
  logic [31:0]     issue_pc;
  logic            done_valid, done_halt, done_tile, done_tile_ok;
  logic [NUM_SLICES-1:0] done_tile_lead, slice_alive;
  logic            tile_waiting;

  warp_scheduler #(.NUM_SLICES(NUM_SLICES), .PC_W(32)) u_sched (
    .clk, .rst, .start, .start_pc,
    .lead, .gbase,
    .cfg_apply, .cfg_reject, .cfg_lead,
    .issue_valid, .issue_slice, .issue_pc,
    .done_valid, .done_slice(ex_slice), .done_halt, .done_tile,
    .done_tile_ok, .done_tile_lead,
    .slice_alive, .running, .tile_waiting
  );

  // ------------------------------------------------------- fetch (stage 1)
  logic [31:0] imem [IMEM_DEPTH];

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_waddr] <= imem_wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ex_valid <= 1'b0;
      ex_slice <= '0;
      ex_instr <= '0;
    end else begin
      ex_valid <= issue_valid;
      ex_slice <= issue_slice;
      ex_instr <= imem[issue_pc[IAW+1:2]];
    end
  end

  // ------------------------------------------------------ execute (stage 2)
  dec_t dec;
  decoder u_dec (.instr(ex_instr), .dec);

  logic [NUM_SLICES-1:0][NRP-1:0][SLICE_THREADS-1:0][XLEN-1:0] bank_rdata;
  logic [NUM_SLICES-1:0][2:0][SLICE_THREADS-1:0][XLEN-1:0]     bank_rop;
  logic [2:0][LANES-1:0][XLEN-1:0]                             lane_op;
  logic [LANES-1:0]                                            lane_act;
  logic [LANES-1:0][XLEN-1:0]                                  lane_res;
  logic [NUM_SLICES-1:0]                                       bank_sel;
  logic [NUM_SLICES-1:0][SLICE_THREADS-1:0][XLEN-1:0]          bank_wdata;
  logic [$clog2(NUM_SLICES+1)-1:0]                             ex_len;
  logic [$clog2(LANES+1)-1:0]                                  ex_gsize;
  logic [NRP-1:0][REG_AW-1:0]                                  raddr;

  assign ex_len   = glen[ex_slice];
  assign ex_gsize = ($clog2(LANES+1))'(ex_len) * ($clog2(LANES+1))'(SLICE_THREADS);
  assign raddr    = {dbg_reg, dec.rs3, dec.rs2, dec.rs1};

  for (genvar j = 0; j < NUM_SLICES; j++) begin : g_bank
    reg_bank #(
      .SLICE_THREADS(SLICE_THREADS), .NUM_REGS(NUM_REGS), .XLEN(XLEN), .NRP(NRP)
    ) u_bank (
      .clk,
      .raddr,
      .rdata(bank_rdata[j]),
      .we   (ex_valid && dec.wb && bank_sel[j]),
      .wmask({SLICE_THREADS{slice_alive[j]}}),
      .waddr(dec.rd),
      .wdata(bank_wdata[j])
    );
    for (genvar p = 0; p < 3; p++) begin : g_port
      assign bank_rop[j][p] = bank_rdata[j][p];
    end
  end

  operand_xbar #(
    .NUM_SLICES(NUM_SLICES), .SLICE_THREADS(SLICE_THREADS), .XLEN(XLEN), .NRP(3)
  ) u_xbar (
    .base      (ex_slice),
    .len       (ex_len),
    .bank_rdata(bank_rop),
    .slice_act (slice_alive),
    .lane_rdata(lane_op),
    .lane_act,
    .lane_wdata(lane_res),
    .bank_sel,
    .bank_wdata
  );

  alu #(.LANES(LANES)) u_alu (
    .dec,
    .gsize     (ex_gsize),
    .group_base(($clog2(LANES))'(ex_slice) * ($clog2(LANES))'(SLICE_THREADS)),
    .lane_act,
    .opa       (lane_op[0]),
    .opb       (lane_op[1]),
    .opc       (lane_op[2]),
    .result    (lane_res)
  );

  // vx_tile operands are uniform; they are taken from the group's first lane.
  tile_unit #(
    .NUM_SLICES(NUM_SLICES), .SLICE_THREADS(SLICE_THREADS), .XLEN(XLEN)
  ) u_tile (
    .mask(lane_op[0][0]),
    .size(lane_op[1][0]),
    .lead(done_tile_lead),
    .ok  (done_tile_ok)
  );

  assign done_valid = ex_valid;
  assign done_halt  = dec.unit == EX_HALT;
  assign done_tile  = dec.unit == EX_TILE;

  // ------------------------------------------------------------- outputs
  assign group_lead = lead;
  assign dbg_rdata  = bank_rdata[dbg_thread[$clog2(LANES)-1:2]][NRP-1][dbg_thread[1:0]];

  assign evt_issue       = ex_valid;
  assign evt_issue_size  = ex_gsize;
  assign evt_vote        = ex_valid && dec.unit == EX_VOTE;
  assign evt_shfl        = ex_valid && dec.unit == EX_SHFL;
  assign evt_tile_apply  = cfg_apply;
  assign evt_tile_reject = cfg_reject;
  assign evt_tile_wait   = tile_waiting;

endmodule
