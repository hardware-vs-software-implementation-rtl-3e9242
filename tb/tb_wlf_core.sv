// tb_wlf_core: end-to-end run of the core at its default size (4 x 8 = 32
// threads, eight 4-thread base warps).
//
// A kernel in the spirit of a cooperative-groups example is loaded into the
// instruction memory: it starts as one 32-thread warp, votes and shuffles,
// tiles the threads into eight groups of 4 (mask 11111111), votes and
// shuffles inside the tiles, merges into two groups of 16 (10001000), issues
// a refused vx_tile (mask 10000000 with 8 threads), splits into four groups of
// 8 (10101010) and merges back into one group of 32 before ecall. After the
// run every result register of every hardware thread is compared with a value
// computed from the thread's number. The monitor counts the mechanisms the
// design has: issue from groups of 4, 8, 16 and 32 threads, votes, shuffles,
// accepted and refused reshapes, groups waiting at vx_tile, a lone group
// issuing every second cycle and several groups issuing back to back; each
// must occur. The total cycle count is checked against the issue rule.
module tb_wlf_core;
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

  wlf_core dut (.*);

  always #5 clk = ~clk;

  logic [31:0] prog [$];

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int n_issue = 0, n_sz4 = 0, n_sz8 = 0, n_sz16 = 0, n_sz32 = 0;
  int n_vote = 0, n_shfl = 0, n_apply = 0, n_reject = 0, n_wait = 0;
  int n_back2back = 0, n_lone_gap2 = 0, cycles = 0;
  logic prev_issue = 0;
  always @(posedge clk) if (running && !rst) begin
    cycles++;
    if (evt_issue) begin
      n_issue++;
      case (evt_issue_size)
        4: n_sz4++; 8: n_sz8++; 16: n_sz16++; 32: n_sz32++; default: ;
      endcase
      if (prev_issue) n_back2back++;
    end
    if (evt_issue && evt_issue_size == 32 && !prev_issue) n_lone_gap2++;
    if (evt_issue_size == 32 && evt_issue) chk("lone group never issues back to back", !prev_issue);
    prev_issue = evt_issue;
    if (evt_vote) n_vote++;
    if (evt_shfl) n_shfl++;
    if (evt_tile_apply) n_apply++;
    if (evt_tile_reject) n_reject++;
    if (evt_tile_wait) n_wait++;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // one group of 32 threads (reset layout)
    prog.push_back(csrr(1, 12'hCC2));          // x1 = hardware thread number
    prog.push_back(andi(2, 1, 1));             // x2 = x1 & 1
    prog.push_back(csrr(3, 12'hCC3));          // x3 = group size (32)
    prog.push_back(addi(4, 0, -1));            // x4 = all-ones member mask
    prog.push_back(vx_vote(5, 2, 3, 4));       // x5 = ballot(x2)
    prog.push_back(vx_shfl(6, 1, 1, 1, 0));    // x6 = shfl_down(x1, 1)
    // tile into eight groups of 4
    prog.push_back(addi(10, 0, 8'hFF));
    prog.push_back(addi(11, 0, 4));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(csrr(12, 12'hCC0));         // x12 = rank in tile
    prog.push_back(csrr(13, 12'hCC3));         // x13 = tile size (4)
    prog.push_back(csrr(14, 12'hCC1));         // x14 = tile number
    prog.push_back(addi(15, 0, 15));           // x15 = member mask 0xf
    prog.push_back(add(16, 12, 0));
    prog.push_back(enc_r(7'h33, 3'b111, 7'h00, 16, 12, 14)); // x16 = x12 & x14
    prog.push_back(andi(16, 16, 1));
    prog.push_back(vx_vote(17, 16, 1, 15));    // x17 = any(x16)
    prog.push_back(vx_vote(18, 12, 0, 15));    // x18 = all(x12)
    prog.push_back(vx_vote(19, 14, 2, 15));    // x19 = uni(x14)
    prog.push_back(vx_shfl(20, 1, 2, 2, 0));   // x20 = shfl_xor(x1, 2)
    prog.push_back(vx_shfl(21, 1, 0, 1, 11));  // x21 = shfl_up(x1, 1), clamp 4
    // merge into two groups of 16
    prog.push_back(addi(10, 0, 8'h88));
    prog.push_back(addi(11, 0, 16));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(csrr(22, 12'hCC3));         // x22 = 16
    prog.push_back(vx_shfl(23, 1, 3, 3, 0));   // x23 = shfl(x1, 3)
    prog.push_back(vx_vote(24, 2, 3, 4));      // x24 = ballot(x2)
    prog.push_back(csrr(25, 12'hCC0));         // x25 = rank in group of 16
    prog.push_back(csrr(7, 12'hCC1));          // x7 = group index (t / 16)
    // refused: mask 10000000 does not describe groups of 8
    prog.push_back(addi(10, 0, 8'h80));
    prog.push_back(addi(11, 0, 8));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(csrr(26, 12'hCC3));         // x26 = still 16
    // four groups of 8
    prog.push_back(addi(10, 0, 8'hAA));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(csrr(27, 12'hCC3));         // x27 = 8
    prog.push_back(vx_shfl(28, 1, 1, 4, 0));   // x28 = shfl_down(x1, 4)
    prog.push_back(csrr(8, 12'hCC1));          // x8 = group index (t / 8)
    // back to one group of 32
    prog.push_back(addi(10, 0, 8'h80));
    prog.push_back(addi(11, 0, 32));
    prog.push_back(vx_tile(10, 11));
    prog.push_back(csrr(29, 12'hCC3));         // x29 = 32
    prog.push_back(vx_vote(30, 4, 0, 4));      // x30 = all(x4) = 1
    prog.push_back(add(31, 1, 3));             // x31 = x1 + 32
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
    chk("idle before start", !running);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (!running);
    @(negedge clk);

    for (int t = 0; t < 32; t++) begin
      int exp [32];
      for (int r = 0; r < 32; r++) exp[r] = -1;
      exp[1]  = t;
      exp[2]  = t & 1;
      exp[3]  = 32;
      exp[4]  = 32'hFFFF_FFFF;
      exp[5]  = 32'hAAAA_AAAA;
      exp[6]  = (t < 31) ? t + 1 : 31;
      exp[12] = t % 4;
      exp[13] = 4;
      exp[14] = t / 4;
      exp[15] = 15;
      exp[16] = (t % 4) & (t / 4) & 1;
      exp[17] = (t / 4) & 1;
      exp[18] = 0;
      exp[19] = 1;
      exp[20] = t ^ 2;
      exp[21] = (t % 4 == 0) ? t : t - 1;
      exp[22] = 16;
      exp[23] = (t / 16) * 16 + 3;
      exp[24] = 32'h0000_AAAA;
      exp[25] = t % 16;
      exp[26] = 16;
      exp[27] = 8;
      exp[28] = (t % 8 < 4) ? t + 4 : t;
      exp[29] = 32;
      exp[30] = 1;
      exp[31] = t + 32;
      exp[7]  = t / 16;
      exp[8]  = t / 8;
      for (int r = 1; r < 32; r++) begin
        if (r >= 9 && r <= 11) continue;
        dbg_thread = 5'(t); dbg_reg = 5'(r);
        #1;
        chk($sformatf("thread %0d x%0d = %h, expected %h", t, r, dbg_rdata, exp[r]), dbg_rdata == exp[r]);
      end
    end

    // Mechanisms: every one must have happened.
    chk($sformatf("issued from groups of 32 (%0d)", n_sz32), n_sz32 > 0);
    chk($sformatf("issued from groups of 16 (%0d)", n_sz16), n_sz16 > 0);
    chk($sformatf("issued from groups of 8 (%0d)", n_sz8), n_sz8 > 0);
    chk($sformatf("issued from groups of 4 (%0d)", n_sz4), n_sz4 > 0);
    chk($sformatf("votes (%0d)", n_vote), n_vote > 0);
    chk($sformatf("shuffles (%0d)", n_shfl), n_shfl > 0);
    chk($sformatf("accepted reshapes (%0d)", n_apply), n_apply == 4);
    chk($sformatf("refused reshapes (%0d)", n_reject), n_reject == 1);
    chk($sformatf("cycles with a group waiting at vx_tile (%0d)", n_wait), n_wait > 0);
    chk($sformatf("lone group issue gaps (%0d)", n_lone_gap2), n_lone_gap2 > 0);
    chk($sformatf("back-to-back issues of several groups (%0d)", n_back2back), n_back2back > 0);
    // Instruction count, layout by layout: every group executes every
    // instruction between two vx_tile (the vx_tile that ends a layout included).
    begin
      int exp_issue;
      exp_issue = 9                 // one group of 32, up to the first vx_tile
                + 8 * 15            // eight tiles of 4, through the second vx_tile
                + 2 * 11            // two groups of 16, through the refused and the 4th vx_tile
                + 4 * 6             // four groups of 8, through the last vx_tile
                + 4;                // one group of 32 to ecall
      chk($sformatf("instructions issued %0d, expected %0d", n_issue, exp_issue), n_issue == exp_issue);
    end
    $display("issues=%0d cycles=%0d size4=%0d size8=%0d size16=%0d size32=%0d votes=%0d shfls=%0d reshapes=%0d refused=%0d wait_cycles=%0d",
             n_issue, cycles, n_sz4, n_sz8, n_sz16, n_sz32, n_vote, n_shfl, n_apply, n_reject, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
