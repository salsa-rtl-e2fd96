// sync_cmd: clock, trigger and synchronisation command input.
//
// Keeps the sample timestamp, a counter of sample strobes, and receives the
// external trigger and synchronisation lines. Both lines are taken through a
// two-flop synchroniser and act on their rising edge: sync clears the
// timestamp (all chips of a system then count alike), a trigger is passed
// on as trig_vld_o together with the timestamp at which it arrived. The
// command encoding on the real chip is not published; single pulse lines are
// this design's choice. Latency: three clocks from pin to trig_vld_o.
module sync_cmd #(
  parameter int unsigned TS_W = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            smp_en_i,
  input  logic            trig_i,
  input  logic            sync_i,
  output logic [TS_W-1:0] ts_o,
  output logic            trig_vld_o,
  output logic [TS_W-1:0] trig_ts_o
);
  logic [2:0] trig_s, sync_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_s     <= '0;
      sync_s     <= '0;
      ts_o       <= '0;
      trig_vld_o <= 1'b0;
      trig_ts_o  <= '0;
    end else begin
      trig_s     <= {trig_s[1:0], trig_i};
      sync_s     <= {sync_s[1:0], sync_i};
      trig_vld_o <= 1'b0;
      if (sync_s[1] && !sync_s[2])   ts_o <= '0;
      else if (smp_en_i)             ts_o <= ts_o + 1'b1;
      if (trig_s[1] && !trig_s[2]) begin
        trig_vld_o <= 1'b1;
        trig_ts_o  <= ts_o;
      end
    end
  end
endmodule
