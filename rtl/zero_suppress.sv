// zero_suppress: low-amplitude sample suppression of one channel.
//
// Keeps only samples strictly above thr_i and turns each into an output word
// (salsa_pkg::hit_t) with the channel number, the sample timestamp and the
// amplitude clipped to the 12-bit range; all other samples are dropped.
// Keeping neighbouring samples around a hit is not done. One clock of
// latency.
module zero_suppress
  import salsa_pkg::*;
#(
  parameter int unsigned CHAN = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [ADC_W-1:0]      thr_i,
  input  logic                  vld_i,
  input  logic signed [SW-1:0]  x_i,
  input  logic [TS_W-1:0]       ts_i,
  output logic                  vld_o,
  output hit_t                  hit_o
);
  localparam logic signed [SW-1:0] AMP_MAX = SW'(2**ADC_W - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      hit_o <= '0;
    end else begin
      vld_o <= vld_i && (x_i > $signed(SW'(thr_i)));
      if (vld_i) begin
        hit_o.ch    <= CH_W'(CHAN);
        hit_o.feat  <= 1'b0;
        hit_o.ts    <= ts_i;
        hit_o.amp   <= (x_i > AMP_MAX) ? ADC_W'(AMP_MAX) : ADC_W'(x_i);
        hit_o.width <= '0;
      end
    end
  end
endmodule
