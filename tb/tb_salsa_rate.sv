// tb_salsa_rate: salsa_top at its default size under the specified hit rate
// of 100 kHz per channel, on all 64 channels, sampled at 50 MS/s.
//
// Each channel receives random triangular pulses 10 samples long, one per
// 500 samples on average (100 kHz at 50 MS/s), on top of a pedestal and a
// few ADC counts of noise. Three runs of 4000 samples each are made:
//   1 zero-suppressed samples on four links: about 64 M words/s against
//     88.9 M words/s of link capacity, so at most one word in a thousand
//     may be lost (to a rare burst of coincident pulses);
//   2 pulse features on one link: 6.4 M words/s against 22.2 M words/s,
//     with the same loss limit;
//   3 zero-suppressed samples on one link: more than the link carries, so
//     words must be dropped, and each drop must appear in the overflow
//     counter.
// In every run each received word is checked against the testbench's own
// model, and received words plus counted drops must equal the words the
// model expects. Configuration, including all 64 pedestals in a single
// auto-incrementing write, goes through I2C.
module tb_salsa_rate;
  import salsa_pkg::*;
  localparam int N = 64;
  localparam int HP = 10;        // I2C half period, clocks
  localparam logic [6:0] DEV = 7'h42;
  localparam int NS = 4000;      // samples per run
  localparam int PLEN = 10;      // pulse length, samples
  localparam int PERIOD = 500;   // mean samples between pulses of a channel

  logic clk = 0, rst_n = 0;
  logic [ADC_W-1:0] dac [N];
  logic [N-1:0] cmp;
  logic smp, trig = 0, sync = 0, scl = 1, m_low = 0, sda, sda_oe, prim_vld, trig_link;
  logic [1:0] fe_gain; logic [2:0] fe_tpeak; logic fe_big, fe_pol;
  logic [NLINK-1:0] link;
  prim_t prim;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  assign sda = !(m_low || sda_oe);

  salsa_top dut (
    .clk, .rst_n, .adc_dac_o(dac), .adc_cmp_i(cmp), .adc_sample_o(smp),
    .fe_gain_o(fe_gain), .fe_tpeak_o(fe_tpeak), .fe_big_in_o(fe_big), .fe_polarity_o(fe_pol),
    .trig_i(trig), .sync_i(sync), .scl_i(scl), .sda_i(sda), .sda_oe_o(sda_oe),
    .link_o(link), .trig_link_o(trig_link), .prim_vld_o(prim_vld), .prim_o(prim)
  );

  initial begin
    #8000000;   // 800k clocks, about 2.5x a full run
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- I2C controller ----------------
  task automatic hp(); repeat (HP) @(negedge clk); endtask
  task automatic i2c_start(); m_low = 0; hp(); scl = 1; hp(); m_low = 1; hp(); scl = 0; hp(); endtask
  task automatic i2c_stop();  m_low = 1; hp(); scl = 1; hp(); m_low = 0; hp(); endtask
  task automatic wbyte(input logic [7:0] b);
    bit ack;
    for (int i = 7; i >= 0; i--) begin m_low = !b[i]; hp(); scl = 1; hp(); hp(); scl = 0; end
    m_low = 0; hp(); scl = 1; hp(); ack = !sda; hp(); scl = 0;
    check(ack, "I2C ack");
  endtask
  task automatic rbyte(input bit ack, output logic [7:0] b);
    m_low = 0;
    for (int i = 7; i >= 0; i--) begin hp(); scl = 1; hp(); b[i] = sda; hp(); scl = 0; end
    m_low = ack; hp(); scl = 1; hp(); hp(); scl = 0; hp(); m_low = 0;
  endtask
  task automatic wreg(int a, int d);
    i2c_start(); wbyte({DEV, 1'b0}); wbyte(8'(a)); wbyte(8'(d)); i2c_stop();
  endtask
  task automatic rreg16(int a, output int v);
    logic [7:0] lo, hi;
    i2c_start(); wbyte({DEV, 1'b0}); wbyte(8'(a));
    i2c_start(); wbyte({DEV, 1'b1}); rbyte(1, lo); rbyte(0, hi); i2c_stop();
    v = int'({hi, lo});
  endtask

  // ---------------- analog model and reference ----------------
  int  ped [N];
  bit  feat = 0;
  bit  gen = 0;                  // pulse generation on
  int  zs_thr = 32;
  int  p_start [N], p_h [N];     // current pulse of each channel
  int  nsmp = 0;
  int  vin [N];
  logic [N-1:0] vin_ge;
  assign cmp = vin_ge;
  always_comb for (int c = 0; c < N; c++) vin_ge[c] = (vin[c] >= int'(dac[c]));

  bit  f_in [N];
  int  f_t0 [N], f_amax [N], f_w [N];
  int  exp_amp [longint], exp_w [longint];
  int  n_expect = 0, n_rx = 0, n_pulses = 0;

  function automatic longint key(int c, bit f, int ts);
    return (longint'(c) << 20) | (longint'(f) << 16) | longint'(ts & 16'hFFFF);
  endfunction

  task automatic expect_word(int c, bit f, int ts, int amp, int w);
    longint k = key(c, f, ts);
    exp_amp[k] = amp;
    exp_w[k] = w;
    n_expect++;
  endtask

  // triangle rising to h at the middle sample
  function automatic int shape(int k, int h);
    int m = PLEN / 2;
    return (k <= m) ? h * (k + 1) / (m + 1) : h * (PLEN - k) / (PLEN - m);
  endfunction

  always @(posedge clk) if (smp && rst_n) begin
    for (int c = 0; c < N; c++) begin
      int s, x, y, amp;
      if (gen && p_start[c] < 0 && $urandom_range(0, PERIOD - 1) == 0) begin
        p_start[c] = nsmp; p_h[c] = int'($urandom_range(100, 2500)); n_pulses++;
      end
      s = 0;
      if (p_start[c] >= 0) begin
        s = shape(nsmp - p_start[c], p_h[c]);
        if (nsmp - p_start[c] == PLEN - 1) p_start[c] = -1;
      end
      x = ped[c] + s + int'($urandom_range(0, 8)) - 4;
      if (x < 0) x = 0;                    // the ADC saturates
      if (x > 4095) x = 4095;
      vin[c] = x;
      y = x - ped[c];
      amp = (y > 4095) ? 4095 : y;
      if (!feat) begin
        if (y > zs_thr) expect_word(c, 0, nsmp, amp, 0);
      end else if (y > zs_thr) begin
        if (!f_in[c]) begin f_in[c] = 1; f_t0[c] = nsmp; f_amax[c] = amp; f_w[c] = 1; end
        else begin if (amp > f_amax[c]) f_amax[c] = amp; if (f_w[c] < 255) f_w[c]++; end
      end else if (f_in[c]) begin
        f_in[c] = 0;
        expect_word(c, 1, f_t0[c], f_amax[c], f_w[c]);
      end
    end
    nsmp++;
  end

  // ---------------- data link receivers ----------------
  logic [3:0] len = 4'b0001;
  int nbit [NLINK];
  logic [HIT_W+1:0] fr [NLINK];
  longint last_rx = 0;
  initial foreach (nbit[l]) nbit[l] = -1;

  always @(negedge clk) if (rst_n) begin
    for (int l = 0; l < NLINK; l++) begin
      if (!len[l]) nbit[l] = -1;
      else if (nbit[l] < 0) begin
        if (link[l]) begin nbit[l] = 1; fr[l] = '0; fr[l][0] = 1'b1; end
      end else begin
        fr[l] = {fr[l][HIT_W:0], link[l]};
        nbit[l]++;
        if (nbit[l] == HIT_W + 2) begin
          nbit[l] = 0;
          if (fr[l][HIT_W+1:HIT_W] == 2'b11) begin
            hit_t h;
            longint k;
            h = fr[l][HIT_W-1:0];
            k = key(int'(h.ch), h.feat, int'(h.ts));
            n_rx++;
            last_rx = cyc;
            checks++;
            if (!exp_amp.exists(k)) begin
              failures++; $display("FAIL unexpected word ch=%0d feat=%0d ts=%0d amp=%0d link=%0d now=%0d", h.ch, h.feat, h.ts, h.amp, l, nsmp);
            end else begin
              if (int'(h.amp) != exp_amp[k] || int'(h.width) != exp_w[k]) begin
                failures++;
                $display("FAIL word ch=%0d ts=%0d amp=%0d/%0d width=%0d/%0d", h.ch, h.ts, h.amp, exp_amp[k], h.width, exp_w[k]);
              end
              exp_amp.delete(k); exp_w.delete(k);
            end
          end else if (fr[l] != {2'b10, HIT_W'(0)}) begin
            failures++; $display("FAIL bad frame on link %0d", l);
          end
        end
      end
    end
  end

  // ---------------- helpers ----------------
  task automatic wait_samples(int n);
    int t = nsmp + n;
    longint c0 = cyc;
    while (nsmp < t) begin
      @(negedge clk);
      if (cyc - c0 > longint'(300 * n + 1000)) begin
        failures++;
        $display("FAIL no sample strobes");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  endtask

  task automatic wait_strobe();
    int n = 0;
    @(posedge clk);
    while (!smp) begin
      @(posedge clk);
      if (++n > 1000) begin
        failures++;
        $display("FAIL no sample strobe");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  endtask

  // one run: pulses for NS samples, then wait until the links go quiet
  int ovf_before = 0;
  task automatic run(string name, bit lossless, output int lost);
    int v, missing;
    longint c0;
    n_expect = 0; n_rx = 0; n_pulses = 0;
    c0 = cyc;
    gen = 1;
    wait_samples(NS);
    gen = 0;
    wait_samples(PLEN + 2);
    do @(negedge clk); while (cyc - last_rx < 3000);
    rreg16(8'h90, v);
    lost = v - ovf_before;
    ovf_before = v;
    missing = exp_amp.size();
    $display("run %s: %0d pulses, %0d words expected, %0d received, %0d dropped, %0.1f M words/s expected at 1 GHz",
             name, n_pulses, n_expect, n_rx, lost, 1.0e3 * n_expect / real'(NS * 20));
    check(n_pulses > NS * N / PERIOD / 2, {name, ": hit rate reached"});
    check(n_rx + lost == n_expect, $sformatf("%s: received %0d + dropped %0d vs expected %0d", name, n_rx, lost, n_expect));
    // the average load fits; a rare burst of coincident pulses may still
    // overflow a channel FIFO, which must stay below one word in a thousand
    if (lossless) check(1000 * lost <= n_expect && missing == lost,
                        $sformatf("%s: %0d lost, %0d missing", name, lost, missing));
    exp_amp.delete(); exp_w.delete();
    foreach (f_in[c]) f_in[c] = 0;
  endtask

  // ---------------- sequence ----------------
  initial begin
    int lost;
    int pv [N];
    foreach (vin[c]) begin vin[c] = 0; p_start[c] = -1; f_in[c] = 0; ped[c] = 0; end
    repeat (5) @(negedge clk);
    rst_n = 1;
    // all pedestals in one write, the register address advancing by itself
    i2c_start(); wbyte({DEV, 1'b0}); wbyte(8'h00);
    for (int c = 0; c < N; c++) begin
      pv[c] = 1000 + int'($urandom_range(0, 1000));
      wbyte(8'(pv[c] & 255)); wbyte(8'(pv[c] >> 8));
    end
    i2c_stop();
    ped = pv;                     // the levels rise only once all are written
    wait_strobe();
    @(negedge clk); sync = 1; repeat (4) @(negedge clk); sync = 0;
    nsmp = 0;
    wait_samples(20);
    check(n_rx == 0, "pedestals remove the baseline");

    // 1: zero-suppressed samples on four links
    len = 4'hF; wreg(8'h8B, 8'h0F);
    wait_samples(5);
    run("samples, 4 links", 1, lost);

    // 2: features on one link
    len = 4'h1; wreg(8'h8B, 8'h01);     // links are idle: stop the receivers first
    feat = 1; wreg(8'h80, 8'b0000_1000);
    wait_samples(5);
    run("features, 1 link", 1, lost);

    // 3: zero-suppressed samples on one link: over capacity
    feat = 0; wreg(8'h80, 8'h00);
    wait_samples(5);
    run("samples, 1 link", 0, lost);
    check(lost > 0, "one link overflows at this rate");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
