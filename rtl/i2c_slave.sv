// i2c_slave: I2C target for slow-control access.
//
// SCL and SDA are sampled by the core clock through two-flop synchronisers,
// so SCL must stay high and low for several core clocks (standard and fast
// mode are far slower than the 1 GHz core clock). The target answers to the
// 7-bit address DEV_ADDR. A write transfer sends the register address byte,
// then data bytes written to successive registers (reg_wr_o pulses once per
// byte). A read transfer returns the register at the current address and
// advances it after each byte, until the controller answers NACK. SDA is
// open drain: sda_oe_o=1 pulls the line low. The target changes SDA only
// after a falling SCL edge. The address and transfer format are this
// design's choice; the published description only names the I2C block.
module i2c_slave #(
  parameter logic [6:0] DEV_ADDR = 7'h42
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       scl_i,
  input  logic       sda_i,
  output logic       sda_oe_o,
  output logic       reg_wr_o,
  output logic [7:0] reg_addr_o,
  output logic [7:0] reg_wdata_o,
  input  logic [7:0] reg_rdata_i
);
  typedef enum logic [2:0] {IDLE, ADDR, ACK_ADDR, WRITE, ACK_W, READ, ACK_R} state_t;
  state_t     st;
  logic [2:0] scl_s, sda_s;
  logic       scl_rise, scl_fall, start_c, stop_c;
  logic [3:0] bitcnt;
  logic [7:0] shreg, txb;
  logic       rw, ptr_phase, mack, inc_pend;

  assign scl_rise = scl_s[1] && !scl_s[2];
  assign scl_fall = !scl_s[1] && scl_s[2];
  assign start_c  = scl_s[1] && scl_s[2] && !sda_s[1] && sda_s[2];
  assign stop_c   = scl_s[1] && scl_s[2] && sda_s[1] && !sda_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_s       <= '1;
      sda_s       <= '1;
      st          <= IDLE;
      bitcnt      <= '0;
      shreg       <= '0;
      txb         <= '0;
      rw          <= 1'b0;
      ptr_phase   <= 1'b0;
      mack        <= 1'b0;
      inc_pend    <= 1'b0;
      sda_oe_o    <= 1'b0;
      reg_wr_o    <= 1'b0;
      reg_addr_o  <= '0;
      reg_wdata_o <= '0;
    end else begin
      scl_s    <= {scl_s[1:0], scl_i};
      sda_s    <= {sda_s[1:0], sda_i};
      reg_wr_o <= 1'b0;
      if (start_c) begin
        st       <= ADDR;
        bitcnt   <= '0;
        sda_oe_o <= 1'b0;
      end else if (stop_c) begin
        st       <= IDLE;
        sda_oe_o <= 1'b0;
      end else begin
        unique case (st)
          IDLE: ;
          ADDR: begin
            if (scl_rise) begin
              shreg  <= {shreg[6:0], sda_s[1]};
              bitcnt <= bitcnt + 1'b1;
            end else if (scl_fall && bitcnt == 4'd8) begin
              if (shreg[7:1] == DEV_ADDR) begin
                st       <= ACK_ADDR;
                rw       <= shreg[0];
                sda_oe_o <= 1'b1;
              end else begin
                st <= IDLE;
              end
            end
          end
          ACK_ADDR: if (scl_fall) begin
            bitcnt <= '0;
            if (rw) begin
              st       <= READ;
              txb      <= reg_rdata_i;
              sda_oe_o <= !reg_rdata_i[7];
            end else begin
              st        <= WRITE;
              sda_oe_o  <= 1'b0;
              ptr_phase <= 1'b1;
            end
          end
          WRITE: begin
            if (scl_rise) begin
              shreg  <= {shreg[6:0], sda_s[1]};
              bitcnt <= bitcnt + 1'b1;
            end else if (scl_fall && bitcnt == 4'd8) begin
              if (ptr_phase) begin
                reg_addr_o <= shreg;
                ptr_phase  <= 1'b0;
              end else begin
                reg_wr_o    <= 1'b1;
                reg_wdata_o <= shreg;
                inc_pend    <= 1'b1;
              end
              st       <= ACK_W;
              sda_oe_o <= 1'b1;
            end
          end
          ACK_W: if (scl_fall) begin
            st       <= WRITE;
            bitcnt   <= '0;
            sda_oe_o <= 1'b0;
            if (inc_pend) reg_addr_o <= reg_addr_o + 1'b1;  // next register
            inc_pend <= 1'b0;
          end
          READ: if (scl_fall) begin
            if (bitcnt == 4'd7) begin
              st         <= ACK_R;
              sda_oe_o   <= 1'b0;
              reg_addr_o <= reg_addr_o + 1'b1;
            end else begin
              bitcnt   <= bitcnt + 1'b1;
              sda_oe_o <= !txb[3'd6 - bitcnt[2:0]];
            end
          end
          ACK_R: begin
            if (scl_rise) mack <= !sda_s[1];
            else if (scl_fall) begin
              if (mack) begin
                st       <= READ;
                bitcnt   <= '0;
                txb      <= reg_rdata_i;
                sda_oe_o <= !reg_rdata_i[7];
              end else begin
                st <= IDLE;
              end
            end
          end
          default: st <= IDLE;
        endcase
      end
    end
  end
endmodule
