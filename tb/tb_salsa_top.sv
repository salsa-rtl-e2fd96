// tb_salsa_top: end-to-end test of salsa_top at its default size (64
// channels, 4 links), configured only through I2C.
//
// The analog front end is modelled per channel as an ideal sampled level
// vin (pedestal + common mode + pulses) and an ideal SAR comparator
// (adc_cmp = vin >= adc_dac). At each sample strobe the testbench computes,
// with its own integer model of the correction chain, the words the chip
// must send and the trigger primitives it must raise, and a deserialiser on
// every link checks the words that arrive. Phases:
//   A continuous, zero suppression, one link
//   B four links, negative polarity, common mode noise removed
//   C feature extraction with baseline following and IIR filter, offset
//   D triggered readout (hits inside / outside trigger windows)
//   E trigger primitives (multiplicity), monitor counter read back
//   F FIFO overflow, overflow counter read back
// Each mechanism is counted and one that never happens is a failure.
module tb_salsa_top;
  import salsa_pkg::*;
  localparam int N = 64;
  localparam int HP = 10;        // I2C half period, clocks
  localparam logic [6:0] DEV = 7'h42;

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
    #6000000;   // 600k clocks, about 4x a full run
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- configuration copy kept by the testbench ----------------
  int ped [N];
  bit pol = 0, cmn_en = 0, bl_en = 0, feat = 0, trg = 0;
  int bl_shift = 4, iir_shift = 0, zs_thr = 32, bl_thr = 64, seed_thr = 64, mult = 0;
  int lat = 16, win = 8;
  logic [3:0] len = 4'b0001;

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
  task automatic wctrl();
    wreg(8'h80, {3'b0, trg, feat, bl_en, cmn_en, pol});
    wreg(8'h81, {4'(iir_shift), 4'(bl_shift)});
  endtask

  // ---------------- analog model ----------------
  int offs = 0, cm_amp = 0;      // common offset (baseline shift), common mode noise
  int np = 0;
  int p_ch [512], p_n0 [512], p_len [512], p_h [512];
  int nsmp = 0;                  // sample index = timestamp (after sync)
  int vin [N];
  logic [N-1:0] vin_ge;
  assign cmp = vin_ge;
  always_comb for (int c = 0; c < N; c++) vin_ge[c] = (vin[c] >= int'(dac[c]));

  function automatic int sig(int c, int n);
    int s = 0;
    for (int i = 0; i < np; i++)
      if (p_ch[i] == c && n >= p_n0[i] && n < p_n0[i] + p_len[i]) begin
        int k = n - p_n0[i], m = p_len[i] / 2;
        s += (k <= m) ? p_h[i] * (k + 1) / (m + 1) : p_h[i] * (p_len[i] - k) / (p_len[i] - m);
      end
    return s;
  endfunction

  task automatic add_pulse(int c, int n0, int l, int h);
    p_ch[np] = c; p_n0[np] = n0; p_len[np] = l; p_h[np] = h; np++;
  endtask

  // ---------------- reference model of the corrections ----------------
  longint bref [N], aref [N];
  bit     f_in [N];
  int     f_t0 [N], f_amax [N], f_w [N];
  int     trig_at [$];           // sample indices after which a trigger is sent
  int     exp_amp [longint], exp_w [longint];
  bit     tolerant = 0;          // overflow phase: losses allowed
  prim_t  prim_q [$];
  int     n_expect = 0;

  // mechanism counters
  int m_zs = 0, m_cmn = 0, m_neg = 0, m_bl = 0, m_iir = 0, m_feat = 0, m_trig_pass = 0;
  int m_trig_drop = 0, m_prim = 0, m_prim_link = 0, m_multi_link = 0, m_ovf = 0, m_i2c_read = 0;

  function automatic longint key(int c, bit f, int ts);
    return (longint'(c) << 20) | (longint'(f) << 16) | longint'(ts & 16'hFFFF);
  endfunction

  function automatic bit in_trig_window(int ts);
    foreach (trig_at[i]) begin
      int t = trig_at[i] + 1;
      if (ts >= t - lat && ts < t - lat + win) return 1;
    end
    return 0;
  endfunction

  task automatic expect_word(int c, bit f, int ts, int amp, int w);
    if (trg && !in_trig_window(ts)) begin m_trig_drop++; return; end
    if (trg) m_trig_pass++;
    exp_amp[key(c, f, ts)] = amp;
    exp_w[key(c, f, ts)] = w;
    n_expect++;
  endtask

  // one sample: drive the levels and model what the chip will do with them
  always @(posedge clk) if (smp && rst_n) begin
    int x [N];
    int p [N];
    int sum, mean, cnt, cmv;
    cmv = (cm_amp > 0) ? int'($urandom_range(0, 2 * cm_amp)) - cm_amp : 0;
    sum = 0;
    for (int c = 0; c < N; c++) begin
      int s;
      s = sig(c, nsmp);
      x[c] = pol ? ped[c] - s - offs + cmv : ped[c] + s + offs + cmv;
      if (x[c] < 0) x[c] = 0;              // the ADC saturates
      if (x[c] > 4095) x[c] = 4095;
      vin[c] = x[c];
      p[c] = pol ? ped[c] - x[c] : x[c] - ped[c];
      sum += p[c];
    end
    mean = (sum >= 0) ? sum / N : -((-sum + N - 1) / N);
    cnt = 0;
    for (int c = 0; c < N; c++) begin
      int cv, d, y1, y2, amp;
      cv = cmn_en ? p[c] - mean : p[c];
      if (cv > seed_thr) cnt++;
      d = cv - int'(bref[c] >>> 8);
      y1 = bl_en ? d : cv;
      if (bl_en && d < bl_thr && d > -bl_thr) bref[c] = bref[c] + (((longint'(cv) <<< 8) - bref[c]) >>> bl_shift);
      aref[c] = aref[c] + (((longint'(y1) <<< 8) - aref[c]) >>> iir_shift);
      y2 = int'(aref[c] >>> 8);
      if (bl_en && int'(bref[c] >>> 8) >= 10) m_bl++;       // offset being removed
      if (iir_shift != 0 && y2 != y1) m_iir++;              // filter changed the sample
      amp = (y2 > 4095) ? 4095 : y2;
      if (!feat) begin
        if (y2 > zs_thr) expect_word(c, 0, nsmp, amp, 0);
      end else begin
        if (y2 > zs_thr) begin
          if (!f_in[c]) begin f_in[c] = 1; f_t0[c] = nsmp; f_amax[c] = amp; f_w[c] = 1; end
          else begin if (amp > f_amax[c]) f_amax[c] = amp; if (f_w[c] < 255) f_w[c]++; end
        end else if (f_in[c]) begin
          f_in[c] = 0;
          expect_word(c, 1, f_t0[c], f_amax[c], f_w[c]);
        end
      end
    end
    if (mult != 0 && cnt >= mult) begin
      prim_t pr;
      pr.ts = 16'(nsmp); pr.mult = 7'(cnt);
      prim_q.push_back(pr);
    end
    nsmp++;
  end

  // ---------------- trigger primitive port and trigger link ----------------
  prim_t prim_seen [$];
  always @(negedge clk) if (prim_vld) begin
    m_prim++;
    prim_seen.push_back(prim);
    check(prim_q.size() != 0 && prim == prim_q[0], $sformatf("primitive ts=%0d mult=%0d", prim.ts, prim.mult));
    if (prim_q.size() != 0) void'(prim_q.pop_front());
  end

  int tl_nbit = -1;
  logic [PRIM_W+1:0] tl_fr;
  always @(negedge clk) if (rst_n) begin
    if (tl_nbit < 0) begin
      if (trig_link) begin tl_nbit = 1; tl_fr = '0; tl_fr[0] = 1'b1; end
    end else begin
      tl_fr = {tl_fr[PRIM_W:0], trig_link};
      tl_nbit++;
      if (tl_nbit == PRIM_W + 2) begin
        tl_nbit = 0;
        if (tl_fr[PRIM_W+1:PRIM_W] == 2'b11) begin
          bit found = 0;
          m_prim_link++;
          while (prim_seen.size() != 0 && !found) begin
            if (prim_seen[0] == tl_fr[PRIM_W-1:0]) found = 1;
            void'(prim_seen.pop_front());
          end
          check(found, "primitive on trigger link");
        end else check(tl_fr == {2'b10, PRIM_W'(0)}, "trigger link idle frame");
      end
    end
  end

  // ---------------- data link receivers ----------------
  int nbit [NLINK];
  logic [HIT_W+1:0] fr [NLINK];
  int words_on [NLINK];
  longint last_rx = 0;
  initial foreach (nbit[l]) begin nbit[l] = -1; words_on[l] = 0; end

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
            words_on[l]++;
            last_rx = cyc;
            checks++;
            if (!exp_amp.exists(k)) begin
              failures++; $display("FAIL unexpected word ch=%0d feat=%0d ts=%0d amp=%0d", h.ch, h.feat, h.ts, h.amp);
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
      if (cyc - c0 > longint'(300 * n + 1000)) begin   // sample strobe missing
        failures++;
        $display("FAIL no sample strobes");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  endtask

  task automatic drain(string phase);
    // quiet until the links have been idle for a while
    do @(negedge clk); while (cyc - last_rx < 3000);
    if (tolerant) begin
      exp_amp.delete(); exp_w.delete();
    end
    checks++;
    if (exp_amp.size() != 0) begin
      failures++;
      $display("FAIL %s: %0d expected words not received", phase, exp_amp.size());
      foreach (exp_amp[k]) begin $display("  missing ch=%0d feat=%0d ts=%0d", k >> 20, (k >> 16) & 1, k & 16'hFFFF); break; end
      exp_amp.delete(); exp_w.delete();
    end
    $display("phase %s done at cycle %0d, sample %0d", phase, cyc, nsmp);
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

  task automatic fire_trigger();   // right after a strobe; T = index of next sample
    wait_strobe();
    @(negedge clk); @(negedge clk);
    trig = 1; repeat (4) @(negedge clk); trig = 0;
  endtask

  // ---------------- test sequence ----------------
  initial begin
    int v, base, nw;
    foreach (vin[c]) begin vin[c] = 0; bref[c] = 0; aref[c] = 0; f_in[c] = 0; ped[c] = 0; end
    repeat (5) @(negedge clk);
    rst_n = 1;
    // front-end settings and pedestals over I2C
    wreg(8'h8D, 8'b100110);
    check(fe_gain == 2'b10 && fe_tpeak == 3'b001 && fe_big, "front-end settings");
    for (int c = 0; c < N; c++) begin
      int pv = 1200 + int'($urandom_range(0, 800));
      i2c_start(); wbyte({DEV, 1'b0}); wbyte(8'(2 * c)); wbyte(8'(pv & 255)); wbyte(8'(pv >> 8)); i2c_stop();
      ped[c] = pv;
    end
    // synchronise timestamps
    wait_strobe();
    @(negedge clk); sync = 1; repeat (4) @(negedge clk); sync = 0;
    nsmp = 0;
    wait_samples(10);

    // ---- A: continuous, zero suppression, one link ----
    base = nsmp + 5;
    for (int i = 0; i < 24; i++) add_pulse(int'($urandom_range(0, N - 1)), base + 4 * i, int'($urandom_range(1, 6)), int'($urandom_range(40, 900)));
    wait_samples(140);
    drain("A");
    m_zs = n_expect;

    // ---- B: four links, negative polarity, common mode ----
    len = 4'hF; wreg(8'h8B, 8'h0F);   // receivers armed before the links start
    pol = 1; cmn_en = 1; wctrl();
    wait_samples(5);
    cm_amp = 60;
    base = nsmp + 5; n_expect = 0;
    for (int i = 0; i < 60; i++) add_pulse(int'($urandom_range(0, N - 1)), base + 4 * i, int'($urandom_range(2, 6)), int'($urandom_range(200, 1100)));
    wait_samples(260);
    cm_amp = 0;
    wait_samples(10);
    drain("B");
    m_cmn = n_expect; m_neg = n_expect;
    nw = 0; for (int l = 1; l < NLINK; l++) nw += words_on[l];
    m_multi_link = nw;

    // ---- C: features, baseline following, IIR ----
    pol = 0; cmn_en = 0; wctrl();
    wait_samples(5);
    feat = 1; bl_en = 1; bl_shift = 2; iir_shift = 1; wctrl();
    wreg(8'h84, 40);  bl_thr = 40;
    wreg(8'h82, 20);  zs_thr = 20;
    wait_samples(5);
    offs = 30;                          // baseline moves above the threshold
    wait_samples(60);                   // followed away
    base = nsmp + 5; n_expect = 0;
    for (int i = 0; i < 40; i++) add_pulse(int'($urandom_range(0, N - 1)), base + 3 * i, int'($urandom_range(3, 10)), int'($urandom_range(100, 3000)));
    wait_samples(150);
    offs = 0;
    wait_samples(80);
    drain("C");
    m_feat = n_expect;

    // ---- D: triggered readout ----
    feat = 0; bl_en = 0; iir_shift = 0; wctrl();
    wreg(8'h82, 32);  zs_thr = 32;
    wait_samples(10);
    foreach (aref[c]) aref[c] = 0;      // filter state is x itself with shift 0
    wreg(8'h89, 10); lat = 10;
    wreg(8'h8A, 6);  win = 6;
    trg = 1; wctrl();
    wait_samples(5);
    base = nsmp + 5; n_expect = 0;
    for (int i = 0; i < 30; i++) add_pulse(int'($urandom_range(0, N - 1)), base + 6 * i, int'($urandom_range(1, 4)), int'($urandom_range(100, 800)));
    for (int j = 0; j < 3; j++) trig_at.push_back(base + 35 + 60 * j);   // T = index + 1
    for (int j = 0; j < 3; j++) begin
      wait_samples(trig_at[j] - nsmp);
      fire_trigger();
    end
    wait_samples(80);
    drain("D");
    trg = 0; wctrl();
    trig_at.delete();

    // ---- E: trigger primitives ----
    wreg(8'h86, 100); seed_thr = 100;
    wreg(8'h88, 3);   mult = 3;
    wait_samples(5);
    base = nsmp + 5; n_expect = 0;
    for (int i = 0; i < 8; i++)
      for (int c = 0; c < 2 + i % 4; c++) add_pulse(8 * c + i, base + 8 * i, 3, 400);
    wait_samples(90);
    drain("E");
    wreg(8'h88, 0); mult = 0;
    wait_samples(3);
    check(prim_q.size() == 0, "all primitives seen");
    rreg16(8'h92, v); m_i2c_read++;
    check(v == m_prim, $sformatf("primitive counter %0d vs %0d", v, m_prim));

    rreg16(8'h90, v); m_i2c_read++;
    check(v == 0, "no overflow before phase F");
    // ---- F: overflow with one link ----
    wreg(8'h8B, 8'h01); len = 4'h1;
    tolerant = 1;
    base = nsmp + 5; n_expect = 0;
    for (int c = 0; c < N; c++) add_pulse(c, base, 20, 500);
    wait_samples(40);
    drain("F");
    tolerant = 0;
    rreg16(8'h90, v); m_i2c_read++;
    m_ovf = v;
    check(v > 0, "overflow counter");

    // ---- mechanisms seen ----
    $display("mechanisms: zs=%0d cmn=%0d neg=%0d bl=%0d iir=%0d feat=%0d trig_pass=%0d trig_drop=%0d prim=%0d prim_link=%0d multi_link=%0d ovf=%0d i2c_read=%0d",
             m_zs, m_cmn, m_neg, m_bl, m_iir, m_feat, m_trig_pass, m_trig_drop, m_prim, m_prim_link, m_multi_link, m_ovf, m_i2c_read);
    check(m_zs > 0, "zero suppression seen");
    check(m_cmn > 0 && m_neg > 0, "common mode / polarity seen");
    check(m_feat > 0 && m_bl > 0 && m_iir > 0, "features / baseline / IIR seen");
    check(m_trig_pass > 0 && m_trig_drop > 0, "trigger window pass and drop seen");
    check(m_prim > 0 && m_prim_link > 0, "trigger primitives seen");
    check(m_multi_link > 0, "several links used");
    check(m_ovf > 0, "overflow seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
