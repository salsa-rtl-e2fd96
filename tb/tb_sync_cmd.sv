// tb_sync_cmd: counts sample strobes into the timestamp, checks that a
// trigger is reported three clocks after its rising edge with the current
// timestamp, and that sync clears the timestamp.
module tb_sync_cmd;
  logic clk = 0, rst_n = 0, smp = 0, trig = 0, sync = 0, tv;
  logic [15:0] ts, tts;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sync_cmd dut (.clk, .rst_n, .smp_en_i(smp), .trig_i(trig), .sync_i(sync),
                .ts_o(ts), .trig_vld_o(tv), .trig_ts_o(tts));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 37; i++) begin @(negedge clk) smp = 1; @(negedge clk) smp = 0; end
    @(negedge clk);
    check(ts == 37, "timestamp count");
    // trigger: rising edge seen, reported 3 clocks later
    trig = 1;
    @(negedge clk); check(!tv, "no early trigger 1");
    @(negedge clk); check(!tv, "no early trigger 2");
    @(negedge clk); check(tv && tts == 37, "trigger latency and timestamp");
    @(negedge clk); check(!tv, "one pulse per edge");
    repeat (5) @(negedge clk);
    check(!tv, "held level gives no new trigger");
    trig = 0;
    sync = 1; repeat (4) @(negedge clk); sync = 0;
    check(ts == 0, "sync clears timestamp");
    smp = 1; @(negedge clk); smp = 0; @(negedge clk);
    check(ts == 1, "count after sync");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
