// tb_tile_unit: the four Table II configurations and malformed masks.
//
// For 32 threads in eight 4-thread slices each Table II row (mask, size) must
// be accepted and give the expected slice-order leader vector; masks whose
// groups do not match the thread count, that leave slice 0 out of every group
// or set bits beyond the slices must be refused.
module tb_tile_unit;
  logic [31:0] mask, size;
  logic [7:0]  lead;
  logic        ok;
  int checks = 0, failures = 0;

  tile_unit #(.NUM_SLICES(8), .SLICE_THREADS(4), .XLEN(32)) dut (.*);

  task automatic chk(logic [31:0] m, logic [31:0] s, logic exp_ok, logic [7:0] exp_lead);
    mask = m; size = s; #1;
    checks++;
    if (ok !== exp_ok || (exp_ok && lead !== exp_lead)) begin
      failures++;
      $display("FAIL mask %b size %0d: ok %b lead %b, expected ok %b lead %b", m[7:0], s, ok, lead, exp_ok, exp_lead);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Table II (leftmost mask bit = slice 0; lead is in slice order, bit 0 = slice 0)
    chk(32'b10000000, 32, 1, 8'b00000001);
    chk(32'b10001000, 16, 1, 8'b00010001);
    chk(32'b10101010,  8, 1, 8'b01010101);
    chk(32'b11111111,  4, 1, 8'b11111111);
    // wrong thread count for the mask
    chk(32'b10000000,  8, 0, 8'h00);
    chk(32'b10001000, 32, 0, 8'h00);
    chk(32'b11111111,  8, 0, 8'h00);
    chk(32'b10101010,  4, 0, 8'h00);
    // uneven groups
    chk(32'b11000000,  4, 0, 8'h00);
    chk(32'b10100000,  8, 0, 8'h00);
    chk(32'b10000001,  4, 0, 8'h00);
    chk(32'b10000010,  8, 0, 8'h00);
    // slice 0 not a leader
    chk(32'b00001000, 16, 0, 8'h00);
    // bits above the slices
    chk(32'h180,      32, 0, 8'h00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
