// slow_control: configuration registers and monitoring counters
// ("slow control, monitoring & registry").
//
// An 8-bit register space with 8-bit data, written and read through the I2C
// target. Writes take effect on the clock after wr_i; reads are
// combinational from addr_i. Register map (this design's choice):
//   0x00 + 2*ch   pedestal of channel ch, bits 7:0      (ch < N_CH <= 64)
//   0x01 + 2*ch   pedestal of channel ch, bits 11:8
//   0x80 CTRL     0 polarity, 1 cmn_en, 2 bl_en, 3 feat_mode, 4 trig_mode
//   0x81 SHIFTS   3:0 baseline shift, 7:4 IIR shift
//   0x82/0x83     zero suppression threshold (low / high byte)
//   0x84/0x85     baseline following band
//   0x86/0x87     trigger seed threshold
//   0x88          trigger primitive multiplicity
//   0x89 / 0x8A   trigger latency / window (samples)
//   0x8B          3:0 active data links
//   0x8C          core clocks per sample
//   0x8D FE       1:0 charge range, 4:2 peaking time, 5 6 mm input transistor
//   0x90..0x93    read only: FIFO overflow count, trigger primitive count
//                 (16 bits each, low byte first)
// Reset values give a usable setup: one link, 50 MS/s at 1 GHz, all
// corrections off.
module slow_control
  import salsa_pkg::*;
#(
  parameter int unsigned N_CH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_i,
  input  logic [7:0]       addr_i,
  input  logic [7:0]       wdata_i,
  output logic [7:0]       rdata_o,
  input  logic [15:0]      ovf_cnt_i,
  input  logic [15:0]      prim_cnt_i,
  output cfg_t             cfg_o,
  output logic [ADC_W-1:0] ped_o [N_CH]
);
  localparam int unsigned PW = (N_CH > 1) ? $clog2(N_CH) : 1;
  cfg_t c;
  assign cfg_o = c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c          <= '0;
      c.zs_thr   <= ADC_W'(32);
      c.bl_thr   <= ADC_W'(64);
      c.seed_thr <= ADC_W'(64);
      c.bl_shift <= 4'd4;
      c.mult_thr <= '0;
      c.trig_lat <= 8'd16;
      c.trig_win <= 8'd8;
      c.link_en  <= NLINK'(1);
      c.clk_div  <= 8'd20;
      for (int i = 0; i < N_CH; i++) ped_o[i] <= '0;
    end else if (wr_i) begin
      if (addr_i < 8'(2*N_CH)) begin
        if (addr_i[0]) ped_o[addr_i[PW:1]][11:8] <= wdata_i[3:0];
        else           ped_o[addr_i[PW:1]][7:0]  <= wdata_i;
      end
      case (addr_i)
        8'h80: {c.trig_mode, c.feat_mode, c.bl_en, c.cmn_en, c.polarity} <= wdata_i[4:0];
        8'h81: {c.iir_shift, c.bl_shift} <= wdata_i;
        8'h82: c.zs_thr[7:0]    <= wdata_i;
        8'h83: c.zs_thr[11:8]   <= wdata_i[3:0];
        8'h84: c.bl_thr[7:0]    <= wdata_i;
        8'h85: c.bl_thr[11:8]   <= wdata_i[3:0];
        8'h86: c.seed_thr[7:0]  <= wdata_i;
        8'h87: c.seed_thr[11:8] <= wdata_i[3:0];
        8'h88: c.mult_thr       <= wdata_i[MULT_W-1:0];
        8'h89: c.trig_lat       <= wdata_i;
        8'h8A: c.trig_win       <= wdata_i;
        8'h8B: c.link_en        <= wdata_i[NLINK-1:0];
        8'h8C: c.clk_div        <= wdata_i;
        8'h8D: {c.fe_big_in, c.fe_tpeak, c.fe_gain} <= wdata_i[5:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    rdata_o = '0;
    if (addr_i < 8'(2*N_CH)) begin
      rdata_o = addr_i[0] ? {4'h0, ped_o[addr_i[PW:1]][11:8]} : ped_o[addr_i[PW:1]][7:0];
    end
    case (addr_i)
      8'h80: rdata_o = {3'b000, c.trig_mode, c.feat_mode, c.bl_en, c.cmn_en, c.polarity};
      8'h81: rdata_o = {c.iir_shift, c.bl_shift};
      8'h82: rdata_o = c.zs_thr[7:0];
      8'h83: rdata_o = {4'h0, c.zs_thr[11:8]};
      8'h84: rdata_o = c.bl_thr[7:0];
      8'h85: rdata_o = {4'h0, c.bl_thr[11:8]};
      8'h86: rdata_o = c.seed_thr[7:0];
      8'h87: rdata_o = {4'h0, c.seed_thr[11:8]};
      8'h88: rdata_o = 8'(c.mult_thr);
      8'h89: rdata_o = c.trig_lat;
      8'h8A: rdata_o = c.trig_win;
      8'h8B: rdata_o = 8'(c.link_en);
      8'h8C: rdata_o = c.clk_div;
      8'h8D: rdata_o = {2'b00, c.fe_big_in, c.fe_tpeak, c.fe_gain};
      8'h90: rdata_o = ovf_cnt_i[7:0];
      8'h91: rdata_o = ovf_cnt_i[15:8];
      8'h92: rdata_o = prim_cnt_i[7:0];
      8'h93: rdata_o = prim_cnt_i[15:8];
      default: ;
    endcase
  end
endmodule
