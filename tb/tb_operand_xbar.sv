// tb_operand_xbar: routing of banks to lanes and lanes to banks.
//
// For every group base and length that fits eight slices, each bank word is
// tagged with its bank, port and thread; lane block k must carry bank base+k
// (zero beyond the group), active bits must follow the slices, and on the
// write side exactly the group's banks are selected and receive lane block
// j-base.
module tb_operand_xbar;
  localparam int NS = 8, T = 4, P = 3, L = NS * T;
  logic [2:0] base;
  logic [3:0] len;
  logic [NS-1:0][P-1:0][T-1:0][31:0] bank_rdata;
  logic [NS-1:0]                     slice_act;
  logic [P-1:0][L-1:0][31:0]         lane_rdata;
  logic [L-1:0]                      lane_act;
  logic [L-1:0][31:0]                lane_wdata;
  logic [NS-1:0]                     bank_sel;
  logic [NS-1:0][T-1:0][31:0]        bank_wdata;
  int checks = 0, failures = 0;

  operand_xbar #(.NUM_SLICES(NS), .SLICE_THREADS(T), .XLEN(32), .NRP(P)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NS; j++)
      for (int p = 0; p < P; p++)
        for (int t = 0; t < T; t++) bank_rdata[j][p][t] = 32'h1000_0000 | (j << 8) | (p << 4) | t;
    for (int i = 0; i < L; i++) lane_wdata[i] = 32'hA000_0000 + i;
    for (int b = 0; b < NS; b++) begin
      for (int n = 1; b + n <= NS; n++) begin
        base = 3'(b); len = 4'(n); slice_act = NS'($urandom);
        #1;
        for (int i = 0; i < L; i++) begin
          int k, t;
          k = i / T; t = i % T;
          for (int p = 0; p < P; p++) begin
            logic [31:0] exp;
            exp = (k < n) ? (32'h1000_0000 | ((b + k) << 8) | (p << 4) | t) : 0;
            checks++;
            if (lane_rdata[p][i] !== exp) begin failures++; $display("FAIL rd b%0d n%0d lane %0d port %0d: %h exp %h", b, n, i, p, lane_rdata[p][i], exp); end
          end
          checks++;
          if (lane_act[i] !== ((k < n) ? slice_act[b + k] : 1'b0)) begin failures++; $display("FAIL act b%0d n%0d lane %0d", b, n, i); end
        end
        for (int j = 0; j < NS; j++) begin
          logic sel;
          sel = (j >= b) && (j < b + n);
          checks++;
          if (bank_sel[j] !== sel) begin failures++; $display("FAIL sel b%0d n%0d bank %0d", b, n, j); end
          if (sel)
            for (int t = 0; t < T; t++) begin
              checks++;
              if (bank_wdata[j][t] !== 32'hA000_0000 + (j - b) * T + t) begin failures++; $display("FAIL wr b%0d n%0d bank %0d t %0d", b, n, j, t); end
            end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
