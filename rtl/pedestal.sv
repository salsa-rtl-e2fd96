// pedestal: pedestal equalisation of one channel.
//
// Subtracts the channel's programmed pedestal from the raw 12-bit ADC code,
// giving a signed sample that is zero at rest. The front end reads signals
// of both polarities; for negative signals (polarity_i=1) the difference is
// inverted so that every later stage sees positive pulses. Doing the
// polarity inversion here is this design's choice. One clock of latency,
// vld_o follows vld_i.
module pedestal #(
  parameter int unsigned ADC_W = 12,
  parameter int unsigned SW    = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 vld_i,
  input  logic [ADC_W-1:0]     x_i,
  input  logic [ADC_W-1:0]     ped_i,
  input  logic                 polarity_i,
  output logic                 vld_o,
  output logic signed [SW-1:0] y_o
);
  logic signed [SW-1:0] diff;
  assign diff = $signed(SW'(x_i)) - $signed(SW'(ped_i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      y_o   <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) y_o <= polarity_i ? -diff : diff;
    end
  end
endmodule
