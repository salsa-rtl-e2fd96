// feature_extract: peak feature extraction of one channel.
//
// Finds pulses in the corrected sample stream: a pulse starts with the first
// sample above thr_i and ends with the first sample at or below it. For each
// pulse one word (salsa_pkg::hit_t, feat=1) is emitted when it ends, giving
// the peak amplitude (clipped to 12 bits), the time of arrival (timestamp of
// the first sample above threshold) and the width (samples above threshold,
// saturating at 255). The published description lists exactly these three
// features; the threshold-crossing definitions are this design's choice.
// The word appears one clock after the sample that ends the pulse.
module feature_extract
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

  logic                 in_pulse;
  logic [TS_W-1:0]      t0;
  logic signed [SW-1:0] amax;
  logic [WID_W-1:0]     width;
  logic                 above;

  assign above = x_i > $signed(SW'(thr_i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pulse <= 1'b0;
      t0       <= '0;
      amax     <= '0;
      width    <= '0;
      vld_o    <= 1'b0;
      hit_o    <= '0;
    end else begin
      vld_o <= 1'b0;
      if (vld_i) begin
        if (above) begin
          if (!in_pulse) begin
            in_pulse <= 1'b1;
            t0       <= ts_i;
            amax     <= x_i;
            width    <= WID_W'(1);
          end else begin
            if (x_i > amax) amax <= x_i;
            if (width != '1) width <= width + 1'b1;
          end
        end else if (in_pulse) begin
          in_pulse    <= 1'b0;
          vld_o       <= 1'b1;
          hit_o.ch    <= CH_W'(CHAN);
          hit_o.feat  <= 1'b1;
          hit_o.ts    <= t0;
          hit_o.amp   <= (amax > AMP_MAX) ? ADC_W'(AMP_MAX) : ADC_W'(amax);
          hit_o.width <= width;
        end
      end
    end
  end
endmodule
