// out_buffer: merge of the channel streams and distribution over the links.
//
// A round-robin arbiter takes at most one word per clock from the NCH channel
// streams (valid/ready), starting its search after the last channel served,
// and writes it into a shared FIFO of DEPTH words. The word at the head of
// that FIFO goes to an active link (link_en_i) that is ready, again chosen
// round-robin, so that 1 to NLINK links can be switched on. The chip
// specification gives "4 x 1 Gb/s links, 1 to 4 can be activated"; the
// arbitration and buffer depth are this design's choice. A word taken from a
// channel can leave on a link two clocks later at the earliest.
module out_buffer #(
  parameter int unsigned NCH   = 64,
  parameter int unsigned NLINK = 4,
  parameter int unsigned W     = 43,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NLINK-1:0] link_en_i,
  input  logic [NCH-1:0]   in_vld_i,
  input  logic [W-1:0]     in_data_i [NCH],
  output logic [NCH-1:0]   in_rdy_o,
  output logic [NLINK-1:0] tx_vld_o,
  output logic [W-1:0]     tx_data_o,
  input  logic [NLINK-1:0] tx_rdy_i
);
  localparam int unsigned CW = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned LW = (NLINK > 1) ? $clog2(NLINK) : 1;

  logic [CW-1:0] last_ch;
  logic [LW-1:0] last_ln;
  logic          ch_found, ln_found;
  logic [CW-1:0] ch_sel;
  logic [LW-1:0] ln_sel;
  logic          full, f_vld, f_rdy;
  logic [W-1:0]  f_data;

  // Channel arbiter: first requesting channel after last_ch.
  always_comb begin
    ch_found = 1'b0;
    ch_sel   = '0;
    for (int k = 1; k <= NCH; k++) begin
      int unsigned c;
      c = (int'(last_ch) + k) % NCH;
      if (!ch_found && in_vld_i[c]) begin
        ch_found = 1'b1;
        ch_sel   = CW'(c);
      end
    end
    in_rdy_o = '0;
    if (ch_found && !full) in_rdy_o[ch_sel] = 1'b1;
  end

  // Link dispatcher: first active, ready link after last_ln.
  always_comb begin
    ln_found = 1'b0;
    ln_sel   = '0;
    for (int k = 1; k <= NLINK; k++) begin
      int unsigned l;
      l = (int'(last_ln) + k) % NLINK;
      if (!ln_found && link_en_i[l] && tx_rdy_i[l]) begin
        ln_found = 1'b1;
        ln_sel   = LW'(l);
      end
    end
    tx_vld_o = '0;
    if (ln_found && f_vld) tx_vld_o[ln_sel] = 1'b1;
    f_rdy     = ln_found;
    tx_data_o = f_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_ch <= CW'(NCH - 1);
      last_ln <= LW'(NLINK - 1);
    end else begin
      if (ch_found && !full) last_ch <= ch_sel;
      if (ln_found && f_vld) last_ln <= ln_sel;
    end
  end

  // at most one link served per clock, and only an active, ready one
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0(tx_vld_o) && ((tx_vld_o & ~(link_en_i & tx_rdy_i)) == '0));
  // at most one channel taken per clock
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_rdy_o));

  sync_fifo #(.W(W), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .wr_vld_i (ch_found && !full),
    .wr_data_i(in_data_i[ch_sel]),
    .full_o   (full),
    .ovf_o    (),
    .rd_vld_o (f_vld),
    .rd_data_o(f_data),
    .rd_rdy_i (f_rdy)
  );
endmodule
