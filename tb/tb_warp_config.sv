// tb_warp_config: reset layout, applying layouts, derived group base/length.
//
// After reset the layout is the default single 32-thread group. Each Table II
// layout and random leader vectors are then applied; the testbench recomputes
// every slice's group base and every leader's group length by scanning the
// leader vector and compares. A cycle without apply must keep the layout.
module tb_warp_config;
  localparam int NS = 8;
  logic clk = 0, rst, apply;
  logic [NS-1:0] new_lead, lead;
  logic [NS-1:0][2:0] gbase;
  logic [NS-1:0][3:0] glen;
  int checks = 0, failures = 0;

  warp_config #(.NUM_SLICES(NS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check_layout(logic [NS-1:0] exp);
    int b = 0;
    checks++;
    if (lead !== exp) begin failures++; $display("FAIL lead %b exp %b", lead, exp); end
    for (int s = 0; s < NS; s++) begin
      int n = 0;
      if (exp[s]) b = s;
      checks++;
      if (gbase[s] !== 3'(b)) begin failures++; $display("FAIL gbase[%0d]=%0d exp %0d", s, gbase[s], b); end
      if (exp[s]) begin
        n = 1;
        for (int t = s + 1; t < NS && !exp[t]; t++) n++;
        checks++;
        if (glen[s] !== 4'(n)) begin failures++; $display("FAIL glen[%0d]=%0d exp %0d", s, glen[s], n); end
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NS-1:0] tables[4] = '{8'b00000001, 8'b00010001, 8'b01010101, 8'b11111111};
    rst = 1; apply = 0; new_lead = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    check_layout(8'b00000001);
    for (int k = 0; k < 4; k++) begin
      new_lead = tables[k]; apply = 1;
      @(negedge clk);
      apply = 0;
      check_layout(tables[k]);
    end
    for (int it = 0; it < 200; it++) begin
      logic [NS-1:0] r;
      r = NS'($urandom) | 1;
      new_lead = r; apply = 1;
      @(negedge clk);
      apply = 0; new_lead = ~r;
      @(negedge clk);
      check_layout(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
