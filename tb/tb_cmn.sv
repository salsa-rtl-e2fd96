// tb_cmn: adds a common offset to random per-channel signals and checks that
// the mean is removed (floor of the sum / NCH), that disabling passes the
// samples through, and the seed flags.
module tb_cmn;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, en = 0, vi = 0, vo;
  logic [11:0] thr;
  logic signed [13:0] x [N];
  logic signed [13:0] y [N];
  logic [N-1:0] seed;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cmn #(.NCH(N)) dut (.clk, .rst_n, .en_i(en), .seed_thr_i(thr), .vld_i(vi), .x_i(x),
                      .vld_o(vo), .y_o(y), .seed_o(seed));
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int sum, m, e, off;
    thr = 50;
    foreach (x[i]) x[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      en = (t % 4) != 3;
      off = int'($urandom_range(0, 400)) - 200;
      sum = 0;
      foreach (x[i]) begin
        x[i] = 14'(off + int'($urandom_range(0, 40)) - 20 + ((i == t % N) ? 300 : 0));
        sum += int'(x[i]);
      end
      m = (sum >= 0) ? sum / N : -((-sum + N - 1) / N);   // floor division
      vi = 1; @(negedge clk); vi = 0;
      foreach (x[i]) begin
        e = en ? int'(x[i]) - m : int'(x[i]);
        checks++;
        if (!vo || int'(y[i]) != e || seed[i] != (e > 50)) begin
          failures++;
          $display("FAIL t=%0d ch=%0d y=%0d exp=%0d seed=%0d", t, i, y[i], e, seed[i]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
