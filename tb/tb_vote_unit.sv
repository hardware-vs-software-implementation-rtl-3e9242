// tb_vote_unit: random and directed checks of the four vote modes.
//
// The reference is computed lane by lane from the definitions: the
// participants of lane i are the active ranks j below the group size whose bit
// is set in lane i's member mask. Group sizes of 4, 8, 16 and 32 (the paper's
// Table II shapes) are used, with full and random member masks.
module tb_vote_unit;
  localparam int L = 32;
  logic [1:0]               mode;
  logic [5:0]               gsize;
  logic [L-1:0]             lane_act;
  logic [L-1:0][31:0]       value, member, result;
  int checks = 0, failures = 0;

  vote_unit #(.LANES(L), .XLEN(32)) dut (.*);

  function automatic logic [31:0] ref_vote(int i);
    int n = 0, t = 0;
    logic [31:0] bal = 0;
    if (i >= gsize) return 0;
    for (int j = 0; j < gsize; j++) begin
      if (lane_act[j] && member[i][j]) begin
        n++;
        if (value[j] != 0) begin t++; bal[j] = 1; end
      end
    end
    case (mode)
      0: return (t == n) ? 1 : 0;
      1: return (t > 0) ? 1 : 0;
      2: return (t == 0 || t == n) ? 1 : 0;
      default: return bal;
    endcase
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes[4] = '{4, 8, 16, 32};
    // Directed: size-4 tile, member mask 0xf, any of (0,0,5,0) = 1 (paper Fig. 4).
    gsize = 4; lane_act = '1; mode = 1; value = '0; member = '0;
    value[2] = 5;
    for (int i = 0; i < 4; i++) member[i] = 32'hf;
    #1;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (result[i] !== 1) begin failures++; $display("FAIL any lane %0d", i); end
    end
    mode = 3; #1;
    checks++;
    if (result[0] !== 32'h4) begin failures++; $display("FAIL ballot %h", result[0]); end
    for (int it = 0; it < 2000; it++) begin
      mode  = 2'($urandom);
      gsize = 6'(sizes[$urandom % 4]);
      lane_act = ($urandom % 4 == 0) ? L'($urandom) : '1;
      for (int j = 0; j < L; j++) begin
        value[j]  = ($urandom % 2) ? $urandom : 0;
        if (it % 3 == 0) value[j] = (it % 2) ? 7 : 0;   // uniform predicates
        member[j] = ($urandom % 2) ? 32'hFFFF_FFFF : $urandom;
      end
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (result[i] !== ref_vote(i)) begin
          failures++;
          if (failures < 10)
            $display("FAIL mode %0d size %0d lane %0d: got %h exp %h", mode, gsize, i, result[i], ref_vote(i));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
