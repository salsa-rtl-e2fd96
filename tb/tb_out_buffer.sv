// tb_out_buffer: 8 channels with random traffic into 4 links of random
// readiness, with different sets of active links. Every word must leave
// exactly once, on an active link only, in order within its channel.
module tb_out_buffer;
  localparam int N = 8, L = 4, W = 16;
  logic clk = 0, rst_n = 0;
  logic [L-1:0] len, tvld, trdy;
  logic [N-1:0] ivld, irdy;
  logic [W-1:0] idata [N];
  logic [W-1:0] tdata;
  int checks = 0, failures = 0;
  int sent [N], rcvd [N];
  int used [L];
  always #5 clk = ~clk;
  out_buffer #(.NCH(N), .NLINK(L), .W(W), .DEPTH(8)) dut (.clk, .rst_n, .link_en_i(len), .in_vld_i(ivld),
      .in_data_i(idata), .in_rdy_o(irdy), .tx_vld_o(tvld), .tx_data_o(tdata), .tx_rdy_i(trdy));
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // word = {channel, sequence}
  always_comb for (int c = 0; c < N; c++) idata[c] = W'((c << 12) | (sent[c] & 12'hFFF));

  task automatic run(int cycles, logic [L-1:0] en, int load);
    len = en;
    for (int i = 0; i < cycles; i++) begin
      for (int c = 0; c < N; c++) if (!ivld[c] || irdy[c]) ivld[c] = ($urandom_range(0, 99) < load);
      trdy = L'($urandom);
      #1;
      acc = ivld & irdy;
      checks++;
      if ($countones(tvld) > 1 || (tvld & ~(trdy & len)) != 0) begin failures++; $display("FAIL link select %b", tvld); end
      for (int l = 0; l < L; l++) if (tvld[l]) begin
        int c, s;
        used[l]++;
        c = int'(tdata >> 12); s = int'(tdata & 12'hFFF);
        checks++;
        if (c >= N || s != (rcvd[c] & 12'hFFF)) begin failures++; $display("FAIL order ch=%0d seq=%0d exp=%0d", c, s, rcvd[c]); end
        if (c < N) rcvd[c]++;
      end
      @(negedge clk);
      for (int c = 0; c < N; c++) if (acc[c]) sent[c]++;
    end
  endtask

  logic [N-1:0] acc;

  initial begin
    ivld = 0; trdy = 0; len = 0;
    foreach (sent[c]) begin sent[c] = 0; rcvd[c] = 0; end
    foreach (used[l]) used[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(2000, 4'b1111, 30);
    run(2000, 4'b0001, 10);
    run(2000, 4'b0110, 20);
    run(300, 4'b1111, 0);   // drain
    for (int c = 0; c < N; c++) begin
      checks++;
      if (sent[c] != rcvd[c] || sent[c] < 50) begin failures++; $display("FAIL ch%0d sent=%0d rcvd=%0d", c, sent[c], rcvd[c]); end
    end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (used[l] == 0) begin failures++; $display("FAIL link %0d never used", l); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
