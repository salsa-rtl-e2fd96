// trig_prim: trigger primitive generation.
//
// Counts, in each sample, the channels whose trigger seed is set (corrected
// sample above the seed threshold) and emits a primitive (salsa_pkg::prim_t:
// timestamp and multiplicity) when that count reaches mult_thr_i. A
// threshold of zero switches primitives off. One primitive per qualifying
// sample; one clock of latency. The multiplicity condition is the published
// one; its form (count >= threshold) is this design's choice.
module trig_prim
  import salsa_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [MULT_W-1:0] mult_thr_i,
  input  logic              vld_i,
  input  logic [N-1:0]      seed_i,
  input  logic [TS_W-1:0]   ts_i,
  output logic              vld_o,
  output prim_t             prim_o
);
  logic [MULT_W-1:0] cnt;

  always_comb begin
    cnt = '0;
    for (int i = 0; i < N; i++) cnt += MULT_W'(seed_i[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o  <= 1'b0;
      prim_o <= '0;
    end else begin
      vld_o <= vld_i && (mult_thr_i != '0) && (cnt >= mult_thr_i);
      if (vld_i) begin
        prim_o.ts   <= ts_i;
        prim_o.mult <= cnt;
      end
    end
  end
endmodule
