// tb_reg_bank: writes with per-thread masks and reads on every port.
//
// A shadow copy in the testbench follows every write; each cycle all four
// read ports are compared with it, register 0 must read zero, and a read in
// the cycle of a write must still return the old value.
module tb_reg_bank;
  localparam int T = 4, R = 32, P = 4;
  logic clk = 0;
  logic [P-1:0][4:0]        raddr;
  logic [P-1:0][T-1:0][31:0] rdata;
  logic                     we;
  logic [T-1:0]             wmask;
  logic [4:0]               waddr;
  logic [T-1:0][31:0]       wdata;
  logic [31:0] shadow [T][R];
  int checks = 0, failures = 0;

  reg_bank #(.SLICE_THREADS(T), .NUM_REGS(R), .XLEN(32), .NRP(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Fill every register of every thread first.
    we = 1; wmask = '1;
    for (int r = 0; r < R; r++) begin
      waddr = 5'(r);
      for (int t = 0; t < T; t++) begin wdata[t] = $urandom; shadow[t][r] = (r == 0) ? 0 : wdata[t]; end
      raddr = '0;
      @(negedge clk);
    end
    for (int it = 0; it < 1000; it++) begin
      we = $urandom % 2; wmask = T'($urandom); waddr = 5'($urandom);
      for (int t = 0; t < T; t++) wdata[t] = $urandom;
      for (int p = 0; p < P; p++) raddr[p] = (p == 0) ? waddr : 5'($urandom);
      #1;
      for (int p = 0; p < P; p++)
        for (int t = 0; t < T; t++) begin
          checks++;
          if (rdata[p][t] !== shadow[t][raddr[p]]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d thread %0d reg %0d: %h exp %h", p, t, raddr[p], rdata[p][t], shadow[t][raddr[p]]);
          end
        end
      @(negedge clk);
      if (we && waddr != 0)
        for (int t = 0; t < T; t++) if (wmask[t]) shadow[t][waddr] = wdata[t];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
