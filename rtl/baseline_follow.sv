// baseline_follow: baseline following correction of one channel.
//
// Tracks slow drifts of the baseline that remain after pedestal and common
// mode correction, and subtracts them. The baseline estimate b has FB
// fractional bits and moves toward each quiet sample by 1/2^shift_i of the
// difference (a first-order low pass). Samples further than thr_i from the
// estimate are taken as signal and leave it unchanged, so pulses are not
// eaten by the correction. With en_i low the sample passes unchanged and the
// estimate is held. Algorithm and parameters are this design's choice; the
// published description names only a "baseline following correction".
// One clock of latency.
module baseline_follow #(
  parameter int unsigned SW    = 14,
  parameter int unsigned THR_W = 12,
  parameter int unsigned FB    = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en_i,
  input  logic [3:0]           shift_i,
  input  logic [THR_W-1:0]     thr_i,
  input  logic                 vld_i,
  input  logic signed [SW-1:0] x_i,
  output logic                 vld_o,
  output logic signed [SW-1:0] y_o,
  output logic signed [SW-1:0] base_o   // integer part of the estimate
);
  localparam int unsigned BW = SW + FB + 1;
  logic signed [BW-1:0] b;
  logic signed [BW-1:0] xs, delta;
  logic signed [SW:0]   d;
  logic                 quiet;

  assign base_o = SW'(b >>> FB);
  always_comb begin
    xs    = BW'(x_i) <<< FB;
    delta = xs - b;
    d     = (SW+1)'(x_i) - (SW+1)'(base_o);
    quiet = (d < $signed((SW+1)'(thr_i))) && (d > -$signed((SW+1)'(thr_i)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b     <= '0;
      vld_o <= 1'b0;
      y_o   <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) begin
        if (en_i && quiet) b <= b + (delta >>> shift_i);
        if (!en_i)           y_o <= x_i;
        else if (d > (SW+1)'(2**(SW-1)-1))  y_o <= SW'(2**(SW-1)-1);
        else if (d < -(SW+1)'(2**(SW-1)))   y_o <= SW'(-(2**(SW-1)));
        else                                y_o <= SW'(d);
      end
    end
  end
endmodule
