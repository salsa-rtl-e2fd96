// tb_baseline_follow: a slowly drifting baseline with noise and pulses on
// top. Checks against a fixed-point reference model (estimate with 8
// fractional bits, step (x - b)/2^k for samples within the band), that the
// corrected output settles near zero between pulses, that pulses keep
// their height, and that with the correction off samples pass unchanged.
module tb_baseline_follow;
  logic clk = 0, rst_n = 0, en = 0, vi = 0, vo;
  logic [3:0] sh;
  logic [11:0] thr;
  logic signed [13:0] x, y, base;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  baseline_follow dut (.clk, .rst_n, .en_i(en), .shift_i(sh), .thr_i(thr), .vld_i(vi), .x_i(x),
                       .vld_o(vo), .y_o(y), .base_o(base));
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  longint bref = 0;   // reference estimate, 8 fractional bits
  int pulses_ok = 0;

  task automatic step(int xv, bit check_small, bit is_pulse, int height);
    int bi, d, e;
    bi = int'(bref >>> 8);
    d  = xv - bi;
    e  = en ? d : xv;
    x = 14'(xv); vi = 1; @(negedge clk); vi = 0;
    checks++;
    if (!vo || int'(y) != e) begin failures++; $display("FAIL x=%0d y=%0d exp=%0d", xv, y, e); end
    if (en && d < int'(thr) && d > -int'(thr)) bref = bref + (((longint'(xv) <<< 8) - bref) >>> sh);
    if (check_small && !is_pulse) begin
      checks++;
      if (y > 12 || y < -12) begin failures++; $display("FAIL not settled y=%0d", y); end
    end
    if (is_pulse) begin
      checks++;
      if (y < height - 15) begin failures++; $display("FAIL pulse eaten y=%0d h=%0d", y, height); end
    end
  endtask

  initial begin
    int level;
    x = 0; sh = 3; thr = 40;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // off: pass through
    for (int i = 0; i < 20; i++) step(int'($urandom_range(0, 300)) - 150, 0, 0, 0);
    en = 1;
    for (int i = 0; i < 3000; i++) begin
      level = 30 + i / 100;                               // slow drift
      if (i % 250 == 200) step(level + 600, i > 500, 1, 600);   // pulse
      else step(level + int'($urandom_range(0, 6)) - 3, i > 500, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
