// tb_trig_window: hits with known timestamps wait at the head of the FIFO.
// Continuous mode passes all; triggered mode passes those inside
// [T - lat, T - lat + win) and drops those that got too old.
module tb_trig_window;
  import salsa_pkg::*;
  logic clk = 0, rst_n = 0, mode = 0, tv = 0, iv = 0, ir, ov, orr = 1, drop;
  logic [7:0] lat = 20, win = 6;
  logic [15:0] now = 0, tts = 0;
  hit_t ih, oh;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  trig_window dut (.clk, .rst_n, .trig_mode_i(mode), .lat_i(lat), .win_i(win), .now_i(now),
                   .trig_vld_i(tv), .trig_ts_i(tts), .in_vld_i(iv), .in_hit_i(ih), .in_rdy_o(ir),
                   .out_vld_o(ov), .out_hit_o(oh), .out_rdy_i(orr), .drop_o(drop));
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (now=%0d ts=%0d)", what, now, ih.ts); end
  endtask

  initial begin
    ih = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // continuous: passes, back-pressure respected
    iv = 1; ih.ts = 5; ih.amp = 77; #1;
    check(ov && ir && oh.amp == 77, "continuous pass");
    orr = 0; #1;
    check(ov && !ir, "continuous backpressure");
    orr = 1;
    // triggered, no trigger yet: a recent hit waits
    mode = 1; now = 100; ih.ts = 90; #1;
    check(!ov && !ir && !drop, "waits for trigger");
    // trigger at T=105 -> window [85, 91)
    @(negedge clk); tv = 1; tts = 105; @(negedge clk); tv = 0; now = 106;
    ih.ts = 90; #1; check(ov && ir && !drop, "in window (last)");
    ih.ts = 85; #1; check(ov && ir, "in window (first)");
    ih.ts = 91; #1; check(!ov && !ir && !drop, "after window waits");
    ih.ts = 84; #1; check(!ov && ir && drop, "before window and stale: dropped");
    ih.ts = 101; now = 120; #1; check(!ov && !ir && !drop, "age 19 waits");
    now = 121; #1; check(!ov && !ir && !drop, "age equal to latency still waits");
    now = 122; #1; check(!ov && ir && drop, "age 21 dropped");
    orr = 0; ih.ts = 88; #1; check(ov && !ir, "in window, output stalled");
    orr = 1;
    // timestamp wrap: T = 3 -> window [65519, 65525)
    @(negedge clk); tv = 1; tts = 3; @(negedge clk); tv = 0; now = 4;
    ih.ts = 16'd65520; #1; check(ov && ir, "window across wrap");
    ih.ts = 16'd65525; #1; check(!ov && !drop, "after wrapped window waits");
    ih.ts = 16'd65500; #1; check(!ov && drop, "stale across wrap dropped");
    iv = 0; #1; check(!drop && !ov, "no drop without word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
