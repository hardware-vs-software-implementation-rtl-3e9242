// tb_warp_scheduler: issue order, stalls, vx_tile synchronisation, retirement.
//
// The testbench plays the execute stage: every issued instruction completes
// one cycle later, and its effect is chosen by its PC:
//   pc 8  vx_tile to four groups of 8 (accepted)
//   pc 20 vx_tile with a malformed mask (refused)
//   pc 28 ecall, everything else a plain instruction.
// The layout (leader vector, group bases) is modelled in the testbench and
// changed on cfg_apply. Checked: every group's PCs come in program order, a
// group never issues in two consecutive cycles, issue is round robin, a lone
// group issues every second cycle while four groups issue every cycle,
// cfg_apply / cfg_reject each pulse once and only after every group reached
// vx_tile, and running falls after all groups retired, after exactly 23
// instructions.
module tb_warp_scheduler;
  localparam int NS = 8;
  logic clk = 0, rst, start;
  logic [31:0] start_pc;
  logic [NS-1:0] lead;
  logic [NS-1:0][2:0] gbase;
  logic cfg_apply, cfg_reject;
  logic [NS-1:0] cfg_lead;
  logic issue_valid;
  logic [2:0] issue_slice;
  logic [31:0] issue_pc;
  logic done_valid, done_halt, done_tile, done_tile_ok;
  logic [2:0] done_slice;
  logic [NS-1:0] done_tile_lead, slice_alive;
  logic running, tile_waiting;
  int checks = 0, failures = 0;

  warp_scheduler #(.NUM_SLICES(NS), .PC_W(32)) dut (.*);

  always #5 clk = ~clk;

  // layout model
  always_comb begin
    int b;
    b = 0;
    for (int s = 0; s < NS; s++) begin
      if (lead[s]) b = s;
      gbase[s] = 3'(b);
    end
  end
  always_ff @(posedge clk) begin
    if (rst) lead <= 8'b00000001;
    else if (cfg_apply) lead <= cfg_lead;
  end

  // execute-stage model: completion one cycle after issue
  logic [31:0] ex_pc;
  always_ff @(posedge clk) begin
    if (rst) done_valid <= 0;
    else begin
      done_valid <= issue_valid;
      done_slice <= issue_slice;
      ex_pc      <= issue_pc;
    end
  end
  assign done_tile      = done_valid && (ex_pc == 8 || ex_pc == 20);
  assign done_tile_ok   = (ex_pc == 8);
  assign done_tile_lead = (ex_pc == 8) ? 8'b01010101 : 8'b00000011;
  assign done_halt      = done_valid && ex_pc == 28;

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // checkers
  int cyc = 0, n_issue = 0, n_apply = 0, n_reject = 0;
  int last_issue [NS];
  int exp_pc [NS];
  int prev_slice = NS - 1;
  logic [NS-1:0] waited = 0;
  int busy_cycles_4 = 0, idle_cycles_4 = 0, gap1 = 0;
  always @(posedge clk) if (!rst && !start) begin
    cyc++;
    if (done_tile) waited[done_slice] = 1'b1;
    if (issue_valid) begin
      int s;
      s = issue_slice;
      n_issue++;
      chk("issue of a leader", lead[s]);
      chk($sformatf("pc of group %0d = %0d exp %0d", s, issue_pc, exp_pc[s]), issue_pc == exp_pc[s]);
      chk("no back-to-back issue of a group", cyc - last_issue[s] >= 2);
      if (lead == 8'b00000001 && last_issue[s] > 0) begin
        chk("lone group issues every second cycle", cyc - last_issue[s] == 2);
        gap1++;
      end
      // round robin: no ready leader is skipped between prev_slice and s
      for (int k = (prev_slice + 1) % NS; k != s; k = (k + 1) % NS)
        chk("round robin", !(lead[k] && exp_pc[k] < 28 && cyc - last_issue[k] >= 2 && !tile_waiting));
      last_issue[s] = cyc;
      exp_pc[s] += 4;
      prev_slice = s;
    end
    if (lead == 8'b01010101 && !tile_waiting && running && !cfg_apply && !cfg_reject) begin
      if (issue_valid) busy_cycles_4++; else idle_cycles_4++;
    end
    if (cfg_apply || cfg_reject) begin
      chk("release only when every live group waits", waited == lead);
      waited = 0;
      for (int s = 0; s < NS; s++) exp_pc[s] = exp_pc[0 + gbase[s]];
    end
    if (cfg_apply) begin n_apply++; chk("apply layout", cfg_lead == 8'b01010101); end
    if (cfg_reject) n_reject++;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NS; s++) begin last_issue[s] = -10; exp_pc[s] = 0; end
    rst = 1; start = 0; start_pc = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    chk("idle after reset", !running && !issue_valid);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (!running);
    repeat (3) @(negedge clk);
    chk($sformatf("23 instructions issued (%0d)", n_issue), n_issue == 23);
    chk("one accepted tile", n_apply == 1);
    chk("one refused tile", n_reject == 1);
    chk("layout kept after refused tile", lead == 8'b01010101);
    chk("lone group observed", gap1 >= 1);
    chk($sformatf("four groups issue every cycle (%0d busy, %0d idle)", busy_cycles_4, idle_cycles_4),
        busy_cycles_4 >= 10 && idle_cycles_4 <= 2);
    chk("all slices retired", slice_alive == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
