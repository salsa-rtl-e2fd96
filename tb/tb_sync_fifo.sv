// tb_sync_fifo: random writes and reads against a queue model; writes into a
// full FIFO must be dropped and flagged by ovf_o.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0, wv = 0, full, ovf, rv, rr = 0;
  logic [W-1:0] wd, rd;
  int checks = 0, failures = 0, novf = 0;
  logic [W-1:0] q[$];
  always #5 clk = ~clk;
  sync_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_vld_i(wv), .wr_data_i(wd), .full_o(full), .ovf_o(ovf),
                                     .rd_vld_o(rv), .rd_data_o(rd), .rd_rdy_i(rr));
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    bit exp_ovf;
    wd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      wv = ($urandom_range(0, 99) < ((i / 500) % 2 ? 80 : 40));
      rr = ($urandom_range(0, 99) < 50);
      wd = W'($urandom);
      // check the head before the edge
      checks++;
      if (rv != (q.size() != 0) || (rv && rd != q[0])) begin failures++; $display("FAIL head rv=%0d", rv); end
      exp_ovf = 0;
      if (rr && q.size() != 0) void'(q.pop_front());
      if (wv) begin
        if (q.size() < D) q.push_back(wd);
        else exp_ovf = 1;
      end
      @(negedge clk);
      checks++;
      if (ovf != exp_ovf) begin failures++; $display("FAIL ovf=%0d exp=%0d", ovf, exp_ovf); end
      if (ovf) novf++;
    end
    checks++;
    if (novf == 0) begin failures++; $display("FAIL no overflow exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
