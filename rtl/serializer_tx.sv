// serializer_tx: serial transmitter of one 1 Gb/s link (one bit per clock).
//
// Sends back-to-back frames of W+2 bits, most significant bit first: a
// two-bit header, 2'b11 for a data frame followed by the W-bit word, or
// 2'b10 for an idle frame followed by zeros. Every frame starts with a 1,
// so a receiver finds the first frame as the first 1 after the link is
// enabled and then counts W+2 bits per frame.
//
// A one-word holding register sits in front of the shift register.
// in_rdy_o is high whenever it is empty, so a word can be accepted on any
// clock of a frame, not only at its end. Several links fed from one source
// that serves a single link per clock therefore all keep sending back to
// back even when their frames are aligned. At each frame boundary the held
// word is loaded. If none is held, a word offered on that very clock goes
// straight into the frame; otherwise an idle frame is sent. A steady stream
// thus leaves at one word per W+2 clocks. With en_i low the line stays at 0
// and the held word is discarded.
//
// The line coding of the real chip's links is not published; this framing
// and the holding register are this design's choices. The line driver
// itself is analog and not modelled.
module serializer_tx #(
  parameter int unsigned W = 43
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en_i,
  input  logic         in_vld_i,
  input  logic [W-1:0] in_data_i,
  output logic         in_rdy_o,
  output logic         sd_o
);
  localparam int unsigned FW = W + 2;
  localparam int unsigned CW = $clog2(FW);
  logic [FW-1:0] sr;
  logic [CW-1:0] cnt;
  logic [W-1:0]  hold;
  logic          hold_vld;

  assign in_rdy_o = en_i && !hold_vld;
  assign sd_o     = sr[FW-1];

  // the word offered must stay put until it is taken
  assert property (@(posedge clk) disable iff (!rst_n || !en_i)
                   (in_vld_i && !in_rdy_o) |=> (in_vld_i && $stable(in_data_i)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr       <= '0;
      cnt      <= '0;
      hold     <= '0;
      hold_vld <= 1'b0;
    end else if (!en_i) begin
      sr       <= '0;
      cnt      <= '0;
      hold_vld <= 1'b0;
    end else if (cnt == '0) begin
      // frame boundary: held word first, else a word offered now, else idle
      if (hold_vld) begin
        sr       <= {2'b11, hold};
        hold_vld <= 1'b0;
      end else if (in_vld_i) begin
        sr <= {2'b11, in_data_i};
      end else begin
        sr <= {2'b10, W'(0)};
      end
      cnt <= CW'(FW - 1);
    end else begin
      sr  <= sr << 1;
      cnt <= cnt - 1'b1;
      if (in_vld_i && in_rdy_o) begin
        hold     <= in_data_i;
        hold_vld <= 1'b1;
      end
    end
  end
endmodule
