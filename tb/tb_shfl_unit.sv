// tb_shfl_unit: random and directed checks of the four shuffle modes.
//
// The reference follows the definitions: segment width w is the lane's clamp
// when it is a power of two no larger than the group, else the group size;
// an out-of-segment or inactive source leaves the lane's own value.
module tb_shfl_unit;
  localparam int L = 32;
  logic [1:0]               mode;
  logic [6:0]               delta;
  logic [5:0]               gsize;
  logic [L-1:0]             lane_act;
  logic [L-1:0][31:0]       value, clamp, result;
  int checks = 0, failures = 0;

  shfl_unit #(.LANES(L), .XLEN(32)) dut (.*);

  function automatic logic [31:0] ref_shfl(int i);
    int w, base, src, d;
    bit ok;
    bit p2;
    if (i >= gsize) return 0;
    d  = delta;
    p2 = clamp[i] inside {1, 2, 4, 8, 16, 32};
    w  = (p2 && clamp[i] <= gsize) ? clamp[i] : gsize;
    base = (w == gsize) ? 0 : (i / w) * w;
    case (mode)
      0: begin src = i - d; ok = src >= base; end
      1: begin src = i + d; ok = src < base + w; end
      2: begin src = i ^ d; ok = src >= base && src < base + w; end
      default: begin src = base + (d % w); ok = 1; end
    endcase
    if (ok && !lane_act[src]) ok = 0;
    return ok ? value[src] : value[i];
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
    // Directed: shfl_down by 1 in a group of 8 with no clamp.
    gsize = 8; lane_act = '1; mode = 1; delta = 1;
    for (int j = 0; j < L; j++) begin value[j] = 100 + j; clamp[j] = 0; end
    #1;
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (result[i] !== ((i < 7) ? 101 + i : 107)) begin failures++; $display("FAIL down lane %0d = %0d", i, result[i]); end
    end
    checks++;
    if (result[8] !== 0) begin failures++; $display("FAIL lane outside group"); end
    for (int it = 0; it < 2000; it++) begin
      mode  = 2'($urandom);
      gsize = 6'(sizes[$urandom % 4]);
      delta = 7'($urandom % 40);
      lane_act = ($urandom % 4 == 0) ? L'($urandom) : '1;
      for (int j = 0; j < L; j++) begin
        value[j] = $urandom;
        case ($urandom % 4)
          0: clamp[j] = 0;
          1: clamp[j] = 1 << ($urandom % 6);
          2: clamp[j] = $urandom % 40;
          default: clamp[j] = gsize;
        endcase
      end
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (result[i] !== ref_shfl(i)) begin
          failures++;
          if (failures < 10)
            $display("FAIL mode %0d size %0d d %0d clamp %0d lane %0d: got %h exp %h", mode, gsize, delta, clamp[i], i, result[i], ref_shfl(i));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
