// tb_serializer_tx: sends random words with gaps, then a burst of words
// offered back to back, and receives the line with an independent
// deserialiser (first 1 after enable marks a frame start, then 45-bit
// frames, header 11 data / 10 idle). It compares the word sequence and
// checks the rate: during the burst the data frames must follow each other
// with no idle frame, one word per 45 clocks. Words are offered at random
// moments within a frame, so the holding register is exercised.
module tb_serializer_tx;
  localparam int W = 43, FW = W + 2;
  logic clk = 0, rst_n = 0, en = 0, vld = 0, rdy, sd;
  logic [W-1:0] data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  always #5 clk = ~clk;
  serializer_tx #(.W(W)) dut (.clk, .rst_n, .en_i(en), .in_vld_i(vld), .in_data_i(data), .in_rdy_o(rdy), .sd_o(sd));
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // receiver
  int nbit = -1, ndata = 0, nidle = 0, last_rdy = -1;
  logic [FW-1:0] fr;
  always @(negedge clk) if (en) begin
    if (nbit < 0) begin
      if (sd) begin nbit = 1; fr = FW'(1); end
    end else begin
      fr = {fr[FW-2:0], sd};
      nbit++;
      if (nbit == FW) begin
        nbit = 0;
        checks++;
        if (fr[FW-1:FW-2] == 2'b11) begin
          ndata++;
          if (q.size() == 0 || fr[W-1:0] != q[0]) begin failures++; $display("FAIL data %h", fr[W-1:0]); end
          if (q.size() != 0) void'(q.pop_front());
        end else if (fr[FW-1:FW-2] == 2'b10 && fr[W-1:0] == 0) nidle++;
        else begin failures++; $display("FAIL header %b", fr[FW-1:FW-2]); end
      end
    end
  end

  // rate: no idle frame between the data frames of the burst
  int cyc = 0, sentw = 0, burst_data = 0;
  bit burst = 0, burst_seen = 0;
  always @(negedge clk) cyc++;
  always @(negedge clk) if (en && nbit == 0 && burst_seen) begin
    checks++;
    if (fr[FW-1:FW-2] == 2'b11) burst_data++;
    else begin failures++; $display("FAIL idle frame during burst at cycle %0d", cyc); end
  end

  initial begin
    data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); en = 1;
    while (sentw < 100) begin
      @(negedge clk);
      if (!vld && $urandom_range(0, 99) < 4) begin vld = 1; data = {$urandom, $urandom}; end
      if (vld && rdy) begin q.push_back(data); sentw++; @(negedge clk); vld = 0; end
    end
    vld = 0;
    repeat (3 * FW) @(negedge clk);
    // burst: a new word is offered as soon as the previous one is taken
    burst = 1;
    for (int i = 0; i < 40; i++) begin
      vld = 1; data = {$urandom, $urandom};
      while (!rdy) @(negedge clk);      // taken at the next rising edge
      q.push_back(data); sentw++;
      if (i == 2) burst_seen = 1;       // the frame of word 0 is under way
      @(negedge clk);
    end
    vld = 0;
    // the last held word and the frame in flight still go out
    repeat (2 * FW - 4) @(negedge clk);
    burst_seen = 0; burst = 0;
    checks++;
    if (burst_data < 37) begin failures++; $display("FAIL only %0d back-to-back data frames", burst_data); end
    repeat (3 * FW) @(negedge clk);
    checks++;
    if (q.size() != 0 || ndata < 50 || nidle == 0) begin failures++; $display("FAIL left=%0d data=%0d idle=%0d", q.size(), ndata, nidle); end
    en = 0; repeat (3) @(negedge clk);
    checks++;
    if (sd) begin failures++; $display("FAIL line not quiet when disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
