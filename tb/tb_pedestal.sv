// tb_pedestal: random codes, pedestals and polarities against the signed
// difference worked out in the testbench.
module tb_pedestal;
  logic clk = 0, rst_n = 0, vi = 0, pol = 0, vo;
  logic [11:0] x, ped;
  logic signed [13:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pedestal dut (.clk, .rst_n, .vld_i(vi), .x_i(x), .ped_i(ped), .polarity_i(pol), .vld_o(vo), .y_o(y));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int e;
    x = 0; ped = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (300) begin
      x = 12'($urandom); ped = 12'($urandom); pol = 1'($urandom);
      e = pol ? int'(ped) - int'(x) : int'(x) - int'(ped);
      vi = 1;
      @(negedge clk);
      vi = 0;
      checks++;
      if (!vo || int'(y) != e) begin failures++; $display("FAIL x=%0d ped=%0d pol=%0d y=%0d", x, ped, pol, y); end
      @(negedge clk);
      checks++;
      if (vo) begin failures++; $display("FAIL vld held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
