// clk_mgmt: sample strobe generator of the clock management block.
//
// The core logic runs on one clock, the 1 GHz bit clock of the serial links
// that the on-chip PLL derives from the reference clock (the PLL itself is
// analog and not part of this RTL). The ADC sampling rate is programmable
// between 5 and 50 MS/s; here it is set as an integer number of core clocks
// per sample, div_i, so 20 gives 50 MS/s and 200 gives 5 MS/s at 1 GHz.
// smp_en_o is a one-clock pulse every div_i clocks. div_i is clamped to
// MIN_DIV so that a SAR conversion (ADC_W+1 clocks) always fits in a sample.
module clk_mgmt #(
  parameter int unsigned DIV_W   = 8,
  parameter int unsigned MIN_DIV = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DIV_W-1:0] div_i,
  output logic             smp_en_o
);
  logic [DIV_W-1:0] cnt;
  logic [DIV_W-1:0] div_eff;

  assign div_eff = (div_i < DIV_W'(MIN_DIV)) ? DIV_W'(MIN_DIV) : div_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      smp_en_o <= 1'b0;
    end else begin
      smp_en_o <= 1'b0;
      if (cnt >= div_eff - 1'b1) begin
        cnt      <= '0;
        smp_en_o <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
