// tb_warp_reduce: the register part of the reduce, reduce_tile, shfl and
// vote kernels on the core at its default size.
//
// Every thread t starts from v(t) = ((t << 3) ^ t) + 5. The kernel then
//   - reduces all 32 values as one warp with the shfl_down tree
//     (offsets 16, 8, 4, 2, 1) and broadcasts lane 0's sum with shfl idx 0;
//   - tiles into four groups of 8 and reduces each tile (offsets 4, 2, 1),
//     broadcasting the tile sum;
//   - tiles into eight groups of 4 and all-reduces with butterfly shuffles
//     (xor 2, xor 1);
//   - votes inside the tiles of 4 (ballot and all of t mod 4);
//   - returns to one 32-thread warp and ends.
// The sums are checked for every thread against sums computed here, and the
// issue rate (instructions per cycle) is printed.
module tb_warp_reduce;
  import wlf_asm_pkg::*;

  logic        clk = 0, rst = 1;
  logic        imem_we;
  logic [9:0]  imem_waddr;
  logic [31:0] imem_wdata;
  logic        start;
  logic [31:0] start_pc;
  logic        running;
  logic [7:0]  group_lead;
  logic [4:0]  dbg_thread, dbg_reg;
  logic [31:0] dbg_rdata;
  logic        evt_issue, evt_vote, evt_shfl, evt_tile_apply, evt_tile_reject, evt_tile_wait;
  logic [5:0]  evt_issue_size;
  int checks = 0, failures = 0;
  int cycles = 0, issues = 0;

  wlf_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (running && !rst) begin
    cycles++;
    if (evt_issue) issues++;
  end

  logic [31:0] prog [$];

  function automatic int v(int t);
    return ((t << 3) ^ t) + 5;
  endfunction

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d;
    prog.push_back(csrr(1, 12'hCC2));
    prog.push_back(slli(2, 1, 3));
    prog.push_back(enc_r(7'h33, 3'b100, 7'h00, 2, 2, 1));   // xor
    prog.push_back(addi(2, 2, 5));                          // x2 = v(t)
    // whole-warp reduction
    prog.push_back(add(4, 2, 0));
    for (d = 16; d >= 1; d /= 2) begin
      prog.push_back(vx_shfl(5, 4, 1, d, 0));
      prog.push_back(add(4, 4, 5));
    end
    prog.push_back(add(20, 4, 0));
    prog.push_back(vx_shfl(21, 4, 3, 0, 0));                // broadcast lane 0
    // reduce_tile with tiles of 8
    prog.push_back(addi(10, 0, 8'hAA));
    prog.push_back(addi(11, 0, 8));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(add(4, 2, 0));
    for (d = 4; d >= 1; d /= 2) begin
      prog.push_back(vx_shfl(5, 4, 1, d, 0));
      prog.push_back(add(4, 4, 5));
    end
    prog.push_back(vx_shfl(22, 4, 3, 0, 0));
    // butterfly all-reduce in tiles of 4
    prog.push_back(addi(10, 0, 8'hFF));
    prog.push_back(addi(11, 0, 4));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(add(6, 2, 0));
    for (d = 2; d >= 1; d /= 2) begin
      prog.push_back(vx_shfl(7, 6, 2, d, 0));
      prog.push_back(add(6, 6, 7));
    end
    prog.push_back(add(23, 6, 0));
    // votes in tiles of 4
    prog.push_back(addi(12, 0, -1));
    prog.push_back(andi(8, 1, 3));
    prog.push_back(vx_vote(24, 8, 3, 12));
    prog.push_back(vx_vote(25, 8, 0, 12));
    prog.push_back(vx_vote(26, 8, 1, 12));
    // back to one warp
    prog.push_back(addi(10, 0, 8'h80));
    prog.push_back(addi(11, 0, 32));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(ecall());

    rst = 1; imem_we = 0; imem_waddr = 0; imem_wdata = 0; start = 0; start_pc = 0;
    dbg_thread = 0; dbg_reg = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    foreach (prog[i]) begin
      imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
      @(negedge clk);
    end
    imem_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (!running);
    @(negedge clk);

    begin
      int total, tile8 [4], tile4 [8];
      total = 0;
      for (int t = 0; t < 4; t++) tile8[t] = 0;
      for (int t = 0; t < 8; t++) tile4[t] = 0;
      for (int t = 0; t < 32; t++) begin
        total += v(t); tile8[t / 8] += v(t); tile4[t / 4] += v(t);
      end
      for (int t = 0; t < 32; t++) begin
        dbg_thread = 5'(t);
        dbg_reg = 2;  #1; chk($sformatf("v(%0d)", t), dbg_rdata == v(t));
        dbg_reg = 21; #1; chk($sformatf("warp sum at thread %0d: %0d exp %0d", t, dbg_rdata, total), dbg_rdata == total);
        dbg_reg = 22; #1; chk($sformatf("tile-8 sum at thread %0d: %0d exp %0d", t, dbg_rdata, tile8[t / 8]), dbg_rdata == tile8[t / 8]);
        dbg_reg = 23; #1; chk($sformatf("tile-4 sum at thread %0d: %0d exp %0d", t, dbg_rdata, tile4[t / 4]), dbg_rdata == tile4[t / 4]);
        dbg_reg = 24; #1; chk($sformatf("ballot at thread %0d", t), dbg_rdata == 32'b1110);
        dbg_reg = 25; #1; chk($sformatf("all at thread %0d", t), dbg_rdata == 0);
        dbg_reg = 26; #1; chk($sformatf("any at thread %0d", t), dbg_rdata == 1);
      end
      dbg_thread = 0; dbg_reg = 20; #1;
      chk("lane 0 holds the tree sum", dbg_rdata == total);
    end
    chk("ran to the end", issues > 0);
    $display("issued %0d instructions in %0d cycles", issues, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
