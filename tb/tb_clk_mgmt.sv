// tb_clk_mgmt: measures the period of the sample strobe for several divider
// settings, including one below the minimum, which must be clamped.
module tb_clk_mgmt;
  logic clk = 0, rst_n = 0, smp;
  logic [7:0] div;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  clk_mgmt dut (.clk, .rst_n, .div_i(div), .smp_en_o(smp));
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic measure(int d, int expect_p);
    int t0, n;
    div = 8'(d);
    repeat (3) begin @(posedge clk); while (!smp) @(posedge clk); end
    for (int k = 0; k < 4; k++) begin
      n = 0;
      @(posedge clk); n++;
      while (!smp) begin @(posedge clk); n++; end
      checks++;
      if (n != expect_p) begin failures++; $display("FAIL div=%0d period=%0d", d, n); end
    end
  endtask

  initial begin
    div = 20;
    repeat (2) @(negedge clk);
    rst_n = 1;
    measure(20, 20);    // 50 MS/s at 1 GHz
    measure(200, 200);  // 5 MS/s
    measure(5, 14);     // clamped to MIN_DIV
    measure(33, 33);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
