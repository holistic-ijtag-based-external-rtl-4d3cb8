// tb_mpu6050_ctrl: self-checking test of the MPU6050 instrument with the
// sensor model on its I2C bus.
//
// The sensor's data registers 0x3B..0x48 are loaded with generated raw data;
// the test checks the wake-up write, the seven 16-bit status words, the
// checker word (computed here from the same bytes), the fault-injection
// input, a second frame with new data, and the I2C error flag when the sensor
// stops answering.
module tb_mpu6050_ctrl;
  logic clk = 1'b0, rst;
  logic scl_low, sda_low, s_sda_low, scl, sda, present;
  logic [15:0] fault_inject, ax, ay, az, temp, gx, gy, gz, chk;
  logic sample_valid, i2c_error, fault;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mpu6050_ctrl #(.CLK_DIV(4), .POLL_GAP(8)) dut (
    .clk, .rst, .scl_low, .sda_low, .sda_in(sda), .fault_inject,
    .ax, .ay, .az, .temp, .gx, .gy, .gz, .chk, .sample_valid, .i2c_error, .fault
  );

  assign scl = !scl_low;
  assign sda = !(sda_low || (s_sda_low && present));

  mpu6050_model u_sensor (.scl, .sda, .sda_low(s_sda_low));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [7:0] raw [14];

  task automatic load(input int seed);
    for (int i = 0; i < 14; i++) begin
      raw[i] = 8'((i * 29 + seed * 53 + 7) ^ (seed << 3));
      u_sensor.regs[59 + i] = raw[i];
    end
  endtask

  function automatic logic [15:0] exp_chk();
    logic [7:0] p, s;
    p = '0;
    s = '0;
    for (int i = 0; i < 14; i++) begin
      p = p ^ raw[i];
      s = s + raw[i];
    end
    return {8'(-s), p};
  endfunction

  task automatic wait_sample();
    @(posedge clk);
    while (!sample_valid) @(posedge clk);
    #1;
  endtask

  task automatic check_words(input string tag);
    check(ax == {raw[0], raw[1]} && ay == {raw[2], raw[3]} && az == {raw[4], raw[5]},
          {tag, ": accelerometer words"});
    check(temp == {raw[6], raw[7]}, {tag, ": temperature word"});
    check(gx == {raw[8], raw[9]} && gy == {raw[10], raw[11]} && gz == {raw[12], raw[13]},
          {tag, ": gyroscope words"});
    check(chk == exp_chk(), $sformatf("%s: checker %h expected %h", tag, chk, exp_chk()));
  endtask

  initial begin
    rst = 1'b1; fault_inject = '0; present = 1'b1;
    load(1);
    repeat (3) @(posedge clk); #1;
    rst = 1'b0;

    wait_sample();
    check(u_sensor.regs[7'h6B] == 8'h00, "sensor woken (PWR_MGMT_1 = 0)");
    check_words("frame 1");
    check(!fault && !i2c_error, "no fault on a good frame");

    fault_inject = 16'h0001; #1;
    check(fault, "push-button input raises the fault flag");
    fault_inject = '0; #1;
    check(!fault, "fault follows the button");

    load(2);
    wait_sample();   // may be a frame that started before the load
    wait_sample();
    check_words("frame 2");

    present = 1'b0;
    repeat (8000) @(posedge clk);   // more than two frames
    #1;
    check(i2c_error && fault, "missing sensor: I2C error raises the fault flag");
    check_words("kept after error");
    present = 1'b1;
    wait_sample();
    check(!i2c_error && !fault, "error clears on the next good frame");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
