// sar_logic: successive-approximation register of one 12-bit SAR ADC.
//
// The analog side (capacitive DAC and comparator) is outside this module. A
// conversion starts on start_i. Bit W-1 is tried first by setting it in the
// DAC code; on each following clock the comparator answer keeps it (cmp_i=1:
// input at or above the DAC level) or clears it, and the next lower bit is
// tried. After W decisions done_o pulses for one clock with data_o valid.
// Latency: done_o comes W+1 clocks after start_i (W decisions plus the load).
// The chip specification gives only "SAR ADC, 12 bits, 50 MS/s"; the one bit
// per clock schedule and the comparator polarity are this design's choice.
module sar_logic #(
  parameter int unsigned W = 12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start_i,   // sample instant
  input  logic         cmp_i,     // 1: analog input >= DAC level
  output logic [W-1:0] dac_o,     // code applied to the capacitive DAC
  output logic         busy_o,
  output logic         done_o,    // one-clock pulse, data_o valid
  output logic [W-1:0] data_o
);
  logic [W-1:0] trial;   // one-hot bit under test
  logic [W-1:0] code;

  assign dac_o  = code;
  assign busy_o = |trial;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trial  <= '0;
      code   <= '0;
      done_o <= 1'b0;
      data_o <= '0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        trial <= W'(1) << (W-1);
        code  <= W'(1) << (W-1);
      end else if (busy_o) begin
        logic [W-1:0] kept;
        kept  = cmp_i ? code : (code & ~trial);
        trial <= trial >> 1;
        code  <= kept | (trial >> 1);
        if (trial[0]) begin
          done_o <= 1'b1;
          data_o <= kept;
        end
      end
    end
  end
endmodule
