// tb_trig_prim: random seed patterns of chosen density; a primitive must
// come exactly when the number of seeds reaches the multiplicity threshold,
// carrying that count and the sample timestamp.
module tb_trig_prim;
  import salsa_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  logic [6:0] mthr;
  logic [N-1:0] seed;
  logic [15:0] ts;
  prim_t pr;
  int checks = 0, failures = 0, nprim = 0;
  always #5 clk = ~clk;
  trig_prim #(.N(N)) dut (.clk, .rst_n, .mult_thr_i(mthr), .vld_i(vi), .seed_i(seed), .ts_i(ts), .vld_o(vo), .prim_o(pr));
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int cnt, dens;
    bit e;
    seed = 0; ts = 0; mthr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      mthr = 7'((i < 50) ? 0 : $urandom_range(1, 8));
      dens = (i % 3 == 0) ? 15 : 3;
      cnt = 0;
      for (int c = 0; c < N; c++) begin
        seed[c] = ($urandom_range(0, 99) < dens);
        cnt += seed[c];
      end
      if (i == 900) begin seed = '1; cnt = N; mthr = 64; end
      ts = 16'(i);
      e = (mthr != 0) && (cnt >= int'(mthr));
      vi = 1; @(negedge clk); vi = 0;
      checks++;
      if (vo != e || (e && (int'(pr.mult) != cnt || pr.ts != 16'(i)))) begin
        failures++; $display("FAIL i=%0d cnt=%0d thr=%0d vo=%0d mult=%0d", i, cnt, mthr, vo, pr.mult);
      end
      if (vo) nprim++;
      @(negedge clk);
    end
    checks++;
    if (nprim == 0) begin failures++; $display("FAIL no primitive"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
