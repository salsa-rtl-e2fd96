// tb_slow_control: writes every pedestal and configuration register, reads
// them back, checks the decoded configuration fields, the reset values and
// the read-only monitoring counters.
module tb_slow_control;
  import salsa_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, wr = 0;
  logic [7:0] addr, wdata, rdata;
  logic [15:0] ovf, prim;
  cfg_t cfg;
  logic [11:0] ped [N];
  int checks = 0, failures = 0;
  logic [11:0] pexp [N];
  always #5 clk = ~clk;
  slow_control #(.N_CH(N)) dut (.clk, .rst_n, .wr_i(wr), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata),
                                .ovf_cnt_i(ovf), .prim_cnt_i(prim), .cfg_o(cfg), .ped_o(ped));
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic w(int a, int d);   // call at a falling edge
    addr = 8'(a); wdata = 8'(d); wr = 1; @(negedge clk); wr = 0;
  endtask
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic rchk(int a, logic [7:0] e, string what);
    addr = 8'(a); #1;
    check(rdata == e, what);
  endtask
  initial begin
    addr = 0; wdata = 0; ovf = 16'h1234; prim = 16'hBEEF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(cfg.clk_div == 20 && cfg.link_en == 4'b0001 && cfg.zs_thr == 32 && !cfg.cmn_en && !cfg.trig_mode, "reset values");
    for (int c = 0; c < N; c++) begin
      pexp[c] = 12'($urandom);
      w(2 * c, pexp[c][7:0]); w(2 * c + 1, pexp[c][11:8]);
    end
    for (int c = 0; c < N; c++) begin
      check(ped[c] == pexp[c], "pedestal value");
      rchk(2 * c, pexp[c][7:0], "pedestal readback low");
      rchk(2 * c + 1, {4'h0, pexp[c][11:8]}, "pedestal readback high");
    end
    @(negedge clk);
    w(8'h80, 8'b10110); w(8'h81, 8'h5A); w(8'h82, 8'h34); w(8'h83, 8'h02);
    w(8'h84, 8'h10); w(8'h85, 8'h01); w(8'h86, 8'h99); w(8'h87, 8'h00);
    w(8'h88, 5); w(8'h89, 40); w(8'h8A, 12); w(8'h8B, 8'h0F); w(8'h8C, 100); w(8'h8D, 8'b101011);
    check(!cfg.polarity && cfg.cmn_en && cfg.bl_en && !cfg.feat_mode && cfg.trig_mode, "CTRL fields");
    check(cfg.bl_shift == 4'hA && cfg.iir_shift == 4'h5, "shift fields");
    check(cfg.zs_thr == 12'h234 && cfg.bl_thr == 12'h110 && cfg.seed_thr == 12'h099, "thresholds");
    check(cfg.mult_thr == 5 && cfg.trig_lat == 40 && cfg.trig_win == 12, "trigger fields");
    check(cfg.link_en == 4'hF && cfg.clk_div == 100, "links and divider");
    check(cfg.fe_gain == 2'b11 && cfg.fe_tpeak == 3'b010 && cfg.fe_big_in, "front-end fields");
    rchk(8'h80, 8'b10110, "readback CTRL");
    rchk(8'h83, 8'h02, "readback ZS high");
    rchk(8'h8D, 8'b101011, "readback FE");
    rchk(8'h90, 8'h34, "overflow count low");
    rchk(8'h91, 8'h12, "overflow count high");
    rchk(8'h92, 8'hEF, "primitive count low");
    rchk(8'h93, 8'hBE, "primitive count high");
    @(negedge clk);
    w(8'h90, 0);
    rchk(8'h90, 8'h34, "monitor read only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
