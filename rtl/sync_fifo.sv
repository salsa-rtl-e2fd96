// sync_fifo: single-clock first-word-fall-through FIFO with overflow flag.
//
// Used as the per-channel hit FIFO and inside the output buffer. Writes are
// not back-pressured: the DSP produces samples at a fixed rate, so a word
// written while the FIFO is full is dropped and ovf_o pulses for that clock
// (the overflow is counted by the slow control). The read side is a
// valid/ready pair; rd_data_o is valid whenever rd_vld_o is high and a word
// leaves on a clock where rd_vld_o and rd_rdy_i are both high. A word
// written into an empty FIFO is visible one clock later. DEPTH must be a
// power of two.
module sync_fifo #(
  parameter int unsigned W     = 43,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_vld_i,
  input  logic [W-1:0] wr_data_i,
  output logic         full_o,
  output logic         ovf_o,
  output logic         rd_vld_o,
  output logic [W-1:0] rd_data_o,
  input  logic         rd_rdy_i
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, rp;
  logic          do_wr, do_rd;

  assign full_o    = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rd_vld_o  = (wp != rp);
  assign rd_data_o = mem[rp[AW-1:0]];
  assign do_rd     = rd_vld_o && rd_rdy_i;
  assign do_wr     = wr_vld_i && (!full_o || do_rd);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= wr_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      ovf_o <= 1'b0;
    end else begin
      ovf_o <= wr_vld_i && !do_wr;
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

  // A pointer difference above DEPTH would mean a lost word went unflagged.
  assert property (@(posedge clk) disable iff (!rst_n) (wp - rp) <= (AW+1)'(DEPTH));
endmodule
