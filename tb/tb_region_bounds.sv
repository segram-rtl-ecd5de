// tb_region_bounds: self-checking testbench for the candidate-region
// arithmetic x = c - a(1+E), y = d + (m-b-1)(1+E).
//
// Random minimizer positions, seed positions, read lengths and error rates
// (E = err/256) are applied one per cycle; the expected x and y are worked
// out with integer arithmetic in the testbench (extension rounded down,
// x clamped at 0, y at ref_len-1) and compared one cycle later, which also
// checks the one-cycle latency. A few hand-worked cases come first.
module tb_region_bounds;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        in_valid = 0;
  logic [15:0] a = '0, b = '0, m = '0;
  logic [31:0] c = '0, d = '0, ref_len = '0;
  logic [7:0]  err = '0;
  logic        out_valid;
  logic [31:0] x, y;

  region_bounds #(.EFRAC(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic apply(input int ai, bi, longint ci, di, input int mi, ei, input longint rl,
                       input longint ex, ey);
    @(negedge clk);
    in_valid = 1; a = 16'(ai); b = 16'(bi); c = 32'(ci); d = 32'(di); m = 16'(mi);
    err = 8'(ei); ref_len = 32'(rl);
    @(negedge clk);
    in_valid = 0;
    check(out_valid, "valid one cycle after input");
    check(x == 32'(ex) && y == 32'(ey),
          $sformatf("a=%0d b=%0d c=%0d d=%0d m=%0d e=%0d: got %0d %0d want %0d %0d",
                    ai, bi, ci, di, mi, ei, x, y, ex, ey));
    @(negedge clk);
    check(!out_valid, "valid is a pulse");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // hand-worked: E = 0.1 (26/256 = 0.1015625)
    // a=100: 100*1.1015625 = 110.15 -> 110 ; x = 5000 - 110 = 4890
    // tail = 1000-114-1 = 885: 885*1.1015625 = 974.8 -> 974 ; y = 5014 + 974 = 5988
    apply(100, 114, 5000, 5014, 1000, 26, 100000, 4890, 5988);
    // E = 0: region is the read's own span
    apply(10, 24, 50, 64, 150, 0, 1000, 40, 189);
    // clamping at both ends
    apply(200, 214, 100, 114, 10000, 128, 5000, 0, 4999);
    for (int t = 0; t < 2000; t++) begin
      int ai, bi, mi, ei;
      longint ci, di, rl, lext, rext, ex, ey;
      mi = $urandom_range(16, 10000);
      ai = $urandom_range(0, mi - 15);
      bi = ai + 14;
      ei = $urandom_range(0, 255);
      rl = $urandom_range(100000, 32'h7FFF_FFFF);
      ci = $urandom_range(0, 200000);
      di = ci + 14;
      lext = (longint'(ai) * (256 + ei)) / 256;
      rext = (longint'(mi - bi - 1) * (256 + ei)) / 256;
      ex = (ci > lext) ? ci - lext : 0;
      ey = (di + rext >= rl) ? rl - 1 : di + rext;
      apply(ai, bi, ci, di, mi, ei, rl, ex, ey);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
