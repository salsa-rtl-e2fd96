// trig_window: trigger time window selection of one channel.
//
// Sits at the output of a channel's hit FIFO. In continuous readout
// (trig_mode_i=0) every word passes. In triggered readout a word passes only
// if its timestamp h lies in the window of the latest external trigger T:
// T - lat_i <= h < T - lat_i + win_i (timestamps compared modulo 2^TS_W).
// A word that no trigger can select any more, because it is older than
// now_i - lat_i, is dropped (drop_o pulses); otherwise it waits at the head
// of the FIFO for the next trigger. Only the latest trigger is held, so
// triggers must be spaced by more than the window length. The published
// description says only that triggers "select specifically samples present
// in the trigger time window"; the latency/window form and the drop rule are
// this design's choice. Combinational between FIFO and output.
module trig_window
  import salsa_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            trig_mode_i,
  input  logic [7:0]      lat_i,
  input  logic [7:0]      win_i,
  input  logic [TS_W-1:0] now_i,
  input  logic            trig_vld_i,
  input  logic [TS_W-1:0] trig_ts_i,
  input  logic            in_vld_i,
  input  hit_t            in_hit_i,
  output logic            in_rdy_o,
  output logic            out_vld_o,
  output hit_t            out_hit_o,
  input  logic            out_rdy_i,
  output logic            drop_o
);
  logic            have_trig;
  logic [TS_W-1:0] t_trig;
  logic [TS_W-1:0] win_start, off, age;
  logic            inwin, stale;

  always_comb begin
    win_start = t_trig - TS_W'(lat_i);
    off       = in_hit_i.ts - win_start;
    age       = now_i - in_hit_i.ts;
    inwin     = have_trig && (off < TS_W'(win_i));
    stale     = age > TS_W'(lat_i);
    out_hit_o = in_hit_i;
    if (!trig_mode_i) begin
      out_vld_o = in_vld_i;
      in_rdy_o  = out_rdy_i;
      drop_o    = 1'b0;
    end else if (inwin) begin
      out_vld_o = in_vld_i;
      in_rdy_o  = out_rdy_i;
      drop_o    = 1'b0;
    end else begin
      out_vld_o = 1'b0;
      in_rdy_o  = stale;
      drop_o    = stale && in_vld_i;
    end
  end

  // a word is either passed or dropped, never both
  assert property (@(posedge clk) disable iff (!rst_n) !(drop_o && out_vld_o));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_trig <= 1'b0;
      t_trig    <= '0;
    end else if (trig_vld_i) begin
      have_trig <= 1'b1;
      t_trig    <= trig_ts_i;
    end
  end
endmodule
