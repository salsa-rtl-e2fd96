// tb_i2c_slave: a bit-banged I2C controller (SCL half period of 10 core
// clocks) writes a register address and a burst of bytes, reads them back
// with repeated start, checks the ACKs, auto-increment, that another device
// address gets no ACK and that no register is written then.
module tb_i2c_slave;
  logic clk = 0, rst_n = 0;
  logic scl = 1, m_low = 0, sda, sda_oe, reg_wr;
  logic [7:0] reg_addr, reg_wdata, reg_rdata;
  logic [7:0] regs [256];
  int checks = 0, failures = 0, nwr = 0;
  always #5 clk = ~clk;
  assign sda = !(m_low || sda_oe);
  i2c_slave #(.DEV_ADDR(7'h42)) dut (.clk, .rst_n, .scl_i(scl), .sda_i(sda), .sda_oe_o(sda_oe),
      .reg_wr_o(reg_wr), .reg_addr_o(reg_addr), .reg_wdata_o(reg_wdata), .reg_rdata_i(reg_rdata));
  assign reg_rdata = regs[reg_addr];
  always @(posedge clk) if (reg_wr) begin regs[reg_addr] <= reg_wdata; nwr++; end
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic hp(); repeat (10) @(negedge clk); endtask
  task automatic i2c_start(); m_low = 0; hp(); scl = 1; hp(); m_low = 1; hp(); scl = 0; hp(); endtask
  task automatic i2c_stop();  m_low = 1; hp(); scl = 1; hp(); m_low = 0; hp(); endtask
  task automatic wbyte(input logic [7:0] b, output bit ack);
    for (int i = 7; i >= 0; i--) begin m_low = !b[i]; hp(); scl = 1; hp(); hp(); scl = 0; end
    m_low = 0; hp(); scl = 1; hp(); ack = !sda; hp(); scl = 0;
  endtask
  task automatic rbyte(input bit ack, output logic [7:0] b);
    m_low = 0;
    for (int i = 7; i >= 0; i--) begin hp(); scl = 1; hp(); b[i] = sda; hp(); scl = 0; end
    m_low = ack; hp(); scl = 1; hp(); hp(); scl = 0; hp(); m_low = 0;
  endtask
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    bit ack;
    logic [7:0] b, data [8];
    foreach (regs[i]) regs[i] = 8'(i * 7);
    repeat (3) @(negedge clk);
    rst_n = 1;
    hp();
    // write 8 bytes from register 0x40
    i2c_start();
    wbyte({7'h42, 1'b0}, ack); check(ack, "address ack (write)");
    wbyte(8'h40, ack);         check(ack, "pointer ack");
    for (int i = 0; i < 8; i++) begin
      data[i] = 8'($urandom);
      wbyte(data[i], ack); check(ack, "data ack");
    end
    i2c_stop();
    check(nwr == 8, "eight register writes");
    for (int i = 0; i < 8; i++) check(regs[8'h40 + i] == data[i], "register content");
    // set pointer, repeated start, read 8 bytes
    i2c_start();
    wbyte({7'h42, 1'b0}, ack); check(ack, "address ack");
    wbyte(8'h40, ack);
    i2c_start();
    wbyte({7'h42, 1'b1}, ack); check(ack, "address ack (read)");
    for (int i = 0; i < 8; i++) begin
      rbyte(i != 7, b);
      check(b == data[i], $sformatf("read byte %0d got %h exp %h", i, b, data[i]));
    end
    i2c_stop();
    // other device: no ack, nothing written
    i2c_start();
    wbyte({7'h43, 1'b0}, ack); check(!ack, "no ack for another address");
    wbyte(8'h10, ack); wbyte(8'hAA, ack);
    i2c_stop();
    check(nwr == 8, "no write for another address");
    // read of a preset register
    i2c_start();
    wbyte({7'h42, 1'b0}, ack); wbyte(8'h05, ack);
    i2c_start(); wbyte({7'h42, 1'b1}, ack); rbyte(0, b); i2c_stop();
    check(b == 8'(5 * 7), "single read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
