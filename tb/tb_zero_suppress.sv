// tb_zero_suppress: random samples around the threshold; only samples above
// it produce a word, with channel, timestamp and clipped amplitude.
module tb_zero_suppress;
  import salsa_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [11:0] thr;
  logic signed [13:0] x;
  logic [15:0] ts;
  hit_t h;
  int checks = 0, failures = 0, kept = 0;
  always #5 clk = ~clk;
  zero_suppress #(.CHAN(37)) dut (.clk, .rst_n, .thr_i(thr), .vld_i(vi), .x_i(x), .ts_i(ts), .vld_o(vo), .hit_o(h));
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int xv, amp;
    bit keep;
    x = 0; ts = 0; thr = 100;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      xv = (i % 50 == 7) ? 5000 + i : int'($urandom_range(0, 400)) - 150;
      if (i % 50 == 8) xv = -8000;
      ts = 16'(i * 3);
      keep = xv > 100;
      amp = xv > 4095 ? 4095 : xv;
      x = 14'(xv); vi = 1; @(negedge clk); vi = 0;
      checks++;
      if (vo != keep) begin failures++; $display("FAIL keep x=%0d vo=%0d", xv, vo); end
      if (keep) begin
        kept++;
        checks++;
        if (h.ch != 37 || h.feat || h.ts != 16'(i * 3) || int'(h.amp) != amp || h.width != 0) begin
          failures++; $display("FAIL word x=%0d amp=%0d ts=%0d", xv, h.amp, h.ts);
        end
      end
    end
    checks++;
    if (kept < 50) begin failures++; $display("FAIL too few kept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
