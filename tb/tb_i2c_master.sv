// tb_i2c_master: self-checking test of the I2C master against the MPU6050
// slave model.
//
// Writes two bytes to registers 0x10/0x11, reads them back with a repeated
// start (ACK then NACK), checks the slave's register file, the read data, the
// ACK bits, a NACK from a wrong address, and the shortest SCL period (within a byte) of 4*CLK_DIV
// clock cycles.
module tb_i2c_master;
  localparam int unsigned DIV = 4;
  localparam logic [1:0] C_START = 2'd0, C_WRITE = 2'd1, C_READ = 2'd2, C_STOP = 2'd3;

  logic clk = 1'b0, rst;
  logic cmd_valid, cmd_ready, read_ack, nack, done;
  logic [1:0] cmd;
  logic [7:0] wdata, rdata;
  logic scl_low, sda_low, s_sda_low;
  logic scl, sda;
  int checks = 0, failures = 0;
  int last_rise = -1, period = 1 << 30, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  i2c_master #(.CLK_DIV(DIV)) dut (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .wdata, .read_ack, .rdata, .nack,
    .done, .scl_low, .sda_low, .sda_in(sda)
  );

  assign scl = !scl_low;
  assign sda = !(sda_low || s_sda_low);

  mpu6050_model u_slave (.scl, .sda, .sda_low(s_sda_low));

  always @(posedge scl) begin
    if (last_rise >= 0 && cyc - last_rise < period) period = cyc - last_rise;
    last_rise = cyc;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic do_cmd(input logic [1:0] c, input logic [7:0] d, input logic ack);
    @(posedge clk); #1;
    while (!cmd_ready) begin @(posedge clk); #1; end
    cmd = c; wdata = d; read_ack = ack; cmd_valid = 1'b1;
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    while (!done) begin @(posedge clk); #1; end
  endtask

  initial begin
    rst = 1'b1; cmd_valid = 0; cmd = 0; wdata = 0; read_ack = 0;
    repeat (3) @(posedge clk); #1;
    rst = 1'b0;

    do_cmd(C_START, 8'h00, 0);
    do_cmd(C_WRITE, 8'hD0, 0); check(!nack, "address write ACKed");
    do_cmd(C_WRITE, 8'h10, 0); check(!nack, "pointer ACKed");
    do_cmd(C_WRITE, 8'hA5, 0); check(!nack, "data 1 ACKed");
    do_cmd(C_WRITE, 8'h3C, 0); check(!nack, "data 2 ACKed");
    do_cmd(C_STOP, 8'h00, 0);
    check(u_slave.regs[7'h10] == 8'hA5, "slave reg 0x10 written");
    check(u_slave.regs[7'h11] == 8'h3C, "slave reg 0x11 written");
    check(period == 4 * DIV, $sformatf("SCL period %0d cycles", period));

    do_cmd(C_START, 8'h00, 0);
    do_cmd(C_WRITE, 8'hD0, 0);
    do_cmd(C_WRITE, 8'h10, 0);
    do_cmd(C_START, 8'h00, 0);
    do_cmd(C_WRITE, 8'hD1, 0); check(!nack, "read address ACKed");
    do_cmd(C_READ, 8'h00, 1);  check(rdata == 8'hA5, $sformatf("read 1 = %h", rdata));
    do_cmd(C_READ, 8'h00, 0);  check(rdata == 8'h3C, $sformatf("read 2 = %h", rdata));
    do_cmd(C_STOP, 8'h00, 0);
    check(u_slave.reads == 2, "slave sent two bytes");

    do_cmd(C_START, 8'h00, 0);
    do_cmd(C_WRITE, 8'hA0, 0); check(nack, "wrong address gets NACK");
    do_cmd(C_STOP, 8'h00, 0);
    check(scl && sda, "bus released after STOP");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
