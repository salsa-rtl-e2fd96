// tb_sar_logic: converts random and extreme input levels through sar_logic
// with an ideal comparator (cmp = vin >= dac) and checks the code and the
// W+1 clock conversion latency.
module tb_sar_logic;
  localparam int W = 12;
  logic clk = 0, rst_n = 0, start = 0, cmp, busy, done;
  logic [W-1:0] dac, data;
  int checks = 0, failures = 0;
  int vin;
  always #5 clk = ~clk;
  assign cmp = (vin >= int'(dac));

  sar_logic #(.W(W)) dut (.clk, .rst_n, .start_i(start), .cmp_i(cmp), .dac_o(dac),
                          .busy_o(busy), .done_o(done), .data_o(data));

  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic convert(int v);
    int n = 0;
    vin = v;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (data !== W'(v) || n != W + 1) begin
      failures++;
      $display("FAIL vin=%0d code=%0d latency=%0d", v, data, n);
    end
  endtask

  initial begin
    vin = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    convert(0); convert(4095); convert(2048); convert(2047); convert(1);
    repeat (200) convert(int'($urandom_range(0, 4095)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
