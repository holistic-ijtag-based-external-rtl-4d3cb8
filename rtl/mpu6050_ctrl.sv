// mpu6050_ctrl: embedded instrument for the MPU6050 IMU (external sensor).
//
// Through its own i2c_master the controller first wakes the sensor (writes
// 0x00 to PWR_MGMT_1, 0x6B), then loops forever: set the register pointer to
// ACCEL_XOUT_H (0x3B), repeated start, burst-read the 14 bytes of
// accelerometer X/Y/Z, temperature and gyroscope X/Y/Z (big-endian 16-bit
// words), stop, publish, wait POLL_GAP cycles. Publishing copies the words to
// the status registers and pulses sample_valid.
//
// Checker word. Each published sample also yields chk, the word that is
// captured by the network's TDR-2: chk[7:0] is the column parity (bitwise XOR)
// of the 14 bytes and chk[15:8] the two's-complement 8-bit checksum (the
// value that makes the byte sum zero). A frame in which the sensor did not
// acknowledge a write leaves the status registers and chk unchanged and sets
// i2c_error until the next good frame.
//
// Fault flag. fault = i2c_error OR any bit of fault_inject. fault_inject is
// the push-button input used to emulate an external sensor fault; fault goes
// to the fault flag of SIB-2.
//
// Timing: one frame is 23 I2C commands, about 183 SCL periods (at
// CLK_DIV = 32 and a 50 MHz clock, about 0.47 ms). Synchronous rst.
//
// From the paper: an MPU6050 controller in the FPGA reading accelerometer,
// gyroscope and temperature over I2C into a status register, with a parity
// checker whose output is read through a TDR, and a push-button fault input.
// The register sequence follows the MPU6050 register map. The checker's exact
// formula, the error handling and the 16-bit data width are this design's own.
module mpu6050_ctrl
  import ijtag_pkg::*;
#(
  parameter int unsigned CLK_DIV  = 32,
  parameter int unsigned POLL_GAP = 16
) (
  input  logic        clk,
  input  logic        rst,
  // I2C bus
  output logic        scl_low,
  output logic        sda_low,
  input  logic        sda_in,
  // fault injection (push buttons)
  input  logic [15:0] fault_inject,
  // status registers
  output logic [15:0] ax,
  output logic [15:0] ay,
  output logic [15:0] az,
  output logic [15:0] temp,
  output logic [15:0] gx,
  output logic [15:0] gy,
  output logic [15:0] gz,
  output logic [15:0] chk,
  output logic        sample_valid,
  output logic        i2c_error,
  output logic        fault
);

  localparam logic [1:0] I2C_START = 2'd0;
  localparam logic [1:0] I2C_WRITE = 2'd1;
  localparam logic [1:0] I2C_READ  = 2'd2;
  localparam logic [1:0] I2C_STOP  = 2'd3;

  localparam int unsigned FIRST_READ = 10;
  localparam int unsigned LAST_STEP  = FIRST_READ + MPU_BURST;  // the STOP
  localparam int unsigned LOOP_STEP  = 5;

  typedef enum logic [1:0] {M_ISSUE, M_WAIT, M_GAP} mpu_state_e;

  mpu_state_e  state;
  logic [4:0]  step;
  logic [15:0] gap;
  logic [7:0]  buf_q [MPU_BURST];
  logic        frame_err;

  logic       cmd_valid, cmd_ready, read_ack, nack, done;
  logic [1:0] cmd;
  logic [7:0] wdata, rdata;

  // command of each program step
  always_comb begin
    cmd      = I2C_READ;
    wdata    = 8'h00;
    read_ack = (int'(step) < LAST_STEP - 1);
    unique case (int'(step))
      0, 5, 8: cmd = I2C_START;
      1, 6:    begin cmd = I2C_WRITE; wdata = {MPU_I2C_ADDR, 1'b0}; end
      2:       begin cmd = I2C_WRITE; wdata = MPU_PWR_MGMT_1; end
      3:       begin cmd = I2C_WRITE; wdata = 8'h00; end
      4, LAST_STEP: cmd = I2C_STOP;
      7:       begin cmd = I2C_WRITE; wdata = MPU_ACCEL_XOUT; end
      9:       begin cmd = I2C_WRITE; wdata = {MPU_I2C_ADDR, 1'b1}; end
      default: cmd = I2C_READ;
    endcase
  end

  assign cmd_valid = (state == M_ISSUE);

  i2c_master #(.CLK_DIV(CLK_DIV)) u_i2c (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .wdata, .read_ack,
    .rdata, .nack, .done, .scl_low, .sda_low, .sda_in
  );

  // checker over the bytes of the finished frame
  logic [7:0] par, sum;
  always_comb begin
    par = '0;
    sum = '0;
    for (int i = 0; i < MPU_BURST; i++) begin
      par = par ^ buf_q[i];
      sum = sum + buf_q[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= M_ISSUE;
      step         <= '0;
      gap          <= '0;
      frame_err    <= 1'b0;
      i2c_error    <= 1'b0;
      sample_valid <= 1'b0;
      {ax, ay, az, temp, gx, gy, gz, chk} <= '0;
      for (int i = 0; i < MPU_BURST; i++) buf_q[i] <= '0;
    end else begin
      sample_valid <= 1'b0;
      unique case (state)
        M_ISSUE: if (cmd_ready) state <= M_WAIT;
        M_WAIT: if (done) begin
          if (cmd == I2C_WRITE && nack) frame_err <= 1'b1;
          if (cmd == I2C_READ) buf_q[int'(step) - FIRST_READ] <= rdata;
          if (int'(step) == LAST_STEP) begin
            state <= M_GAP;
            gap   <= 16'(POLL_GAP);
            step  <= 5'(LOOP_STEP);
            frame_err <= 1'b0;
            i2c_error <= frame_err;
            if (!frame_err) begin
              ax   <= {buf_q[0],  buf_q[1]};
              ay   <= {buf_q[2],  buf_q[3]};
              az   <= {buf_q[4],  buf_q[5]};
              temp <= {buf_q[6],  buf_q[7]};
              gx   <= {buf_q[8],  buf_q[9]};
              gy   <= {buf_q[10], buf_q[11]};
              gz   <= {buf_q[12], buf_q[13]};
              chk  <= {8'(-sum), par};
              sample_valid <= 1'b1;
            end
          end else begin
            state <= M_ISSUE;
            step  <= step + 5'd1;
          end
        end
        M_GAP: begin
          if (gap == '0) state <= M_ISSUE;
          else           gap   <= gap - 16'd1;
        end
        default: state <= M_ISSUE;
      endcase
    end
  end

  assign fault = i2c_error | (|fault_inject);

endmodule
