// iir_filter: infinite impulse response filter of one channel (the digital
// shaper).
//
// First-order recursive low pass, acc += (x - acc) / 2^shift_i, kept with FB
// fractional bits; the output is the integer part of acc. Its pole is at
// 1 - 2^-shift_i, so shift_i sets the time constant in samples; shift_i = 0
// bypasses the filter (output = input, one clock later). The published
// description names "an infinite impulse filtering" without its order or
// coefficients; the first-order form with power-of-two coefficient is this
// design's choice. One clock of latency.
module iir_filter #(
  parameter int unsigned SW = 14,
  parameter int unsigned FB = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [3:0]           shift_i,
  input  logic                 vld_i,
  input  logic signed [SW-1:0] x_i,
  output logic                 vld_o,
  output logic signed [SW-1:0] y_o
);
  localparam int unsigned AW = SW + FB + 1;
  logic signed [AW-1:0] acc, acc_nx;

  always_comb begin
    acc_nx = acc + ((((AW'(x_i)) <<< FB) - acc) >>> shift_i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      vld_o <= 1'b0;
      y_o   <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) begin
        acc <= acc_nx;
        y_o <= SW'(acc_nx >>> FB);
      end
    end
  end
endmodule
