// tb_iir_filter: bypass with shift 0, then step and random responses against
// a fixed-point reference of acc += (x - acc)/2^k (8 fractional bits), and a
// real-valued check that the step response follows 1 - (1-2^-k)^n.
module tb_iir_filter;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [3:0] sh;
  logic signed [13:0] x, y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  iir_filter dut (.clk, .rst_n, .shift_i(sh), .vld_i(vi), .x_i(x), .vld_o(vo), .y_o(y));
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  longint acc = 0;
  task automatic step(int xv);
    acc = acc + (((longint'(xv) <<< 8) - acc) >>> sh);
    x = 14'(xv); vi = 1; @(negedge clk); vi = 0;
    checks++;
    if (!vo || int'(y) != int'(acc >>> 8)) begin failures++; $display("FAIL x=%0d y=%0d exp=%0d", xv, y, acc >>> 8); end
  endtask
  initial begin
    real a;
    x = 0; sh = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 50; i++) step(int'($urandom_range(0, 2000)) - 1000);
    sh = 2;
    repeat (60) step(0);
    for (int n = 1; n <= 20; n++) begin
      step(1000);
      a = 1000.0 * (1.0 - (0.75 ** n));
      checks++;
      if (real'(y) > a + 2.0 || real'(y) < a - 2.0) begin failures++; $display("FAIL step n=%0d y=%0d ideal=%f", n, y, a); end
    end
    sh = 4;
    for (int i = 0; i < 300; i++) step(int'($urandom_range(0, 4000)) - 2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
