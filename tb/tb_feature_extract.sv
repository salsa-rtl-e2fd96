// tb_feature_extract: random pulses of known shape (triangle of random
// height and length) on a quiet baseline; each must give one word with the
// peak amplitude, the timestamp of the first sample above threshold and the
// number of samples above threshold, one clock after the pulse ends.
module tb_feature_extract;
  import salsa_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [11:0] thr;
  logic signed [13:0] x;
  logic [15:0] ts;
  hit_t h;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  feature_extract #(.CHAN(5)) dut (.clk, .rst_n, .thr_i(thr), .vld_i(vi), .x_i(x), .ts_i(ts), .vld_o(vo), .hit_o(h));
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int t = 0;
  int exp_amp, exp_t0, exp_w, nwords = 0;
  bit pend = 0;

  task automatic sample(int xv);
    x = 14'(xv); ts = 16'(t); vi = 1; @(negedge clk); vi = 0;
    t++;
    if (vo) begin
      nwords++;
      checks++;
      if (!pend || h.ch != 5 || !h.feat || int'(h.amp) != exp_amp || int'(h.ts) != exp_t0 || int'(h.width) != exp_w) begin
        failures++;
        $display("FAIL word amp=%0d/%0d t0=%0d/%0d w=%0d/%0d", h.amp, exp_amp, h.ts, exp_t0, h.width, exp_w);
      end
      pend = 0;
    end
    // one idle clock between samples, as in the chip
    @(negedge clk);
    checks++;
    if (vo) begin failures++; $display("FAIL extra word"); end
  endtask

  initial begin
    int hgt, len, v;
    x = 0; ts = 0; thr = 50;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      repeat (3) sample(int'($urandom_range(0, 40)) - 20);
      hgt = int'($urandom_range(80, 5000));
      len = int'($urandom_range(1, 12));
      exp_t0 = t; exp_amp = (hgt > 4095) ? 4095 : hgt; exp_w = 0;
      for (int k = 0; k < len; k++) begin
        v = (k == len / 2) ? hgt : 51 + (hgt - 51) * (k + 1) / (len + 2);
        if (v > 50) exp_w++;
        sample(v);
      end
      pend = 1;
      sample(10);   // end of pulse: word follows
      checks++;
      if (pend) begin failures++; $display("FAIL missing word for pulse %0d", p); pend = 0; end
    end
    checks++;
    if (nwords != 60) begin failures++; $display("FAIL words=%0d", nwords); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
