// mpu6050_model: behavioural model of the MPU6050 IMU as an I2C slave, for
// simulation only.
//
// It answers at 7-bit address ADDR, keeps a 128-byte register file (regs,
// written directly by a testbench to load sample raw data), takes the first
// byte of a write as the register pointer and auto-increments the pointer on
// every data byte written or read. It detects START/STOP from SDA changes
// while SCL is high, samples on the rising SCL edge and drives SDA after the
// falling SCL edge. PWR_MGMT_1 (0x6B) resets to 0x40 (sleep), as in the real
// part. No clock stretching, no FIFO, no sensor physics.
module mpu6050_model #(
  parameter logic [6:0] ADDR = 7'h68
) (
  input  logic scl,      // bus level
  input  logic sda,      // bus level
  output logic sda_low   // 1 pulls SDA low
);

  typedef enum logic [2:0] {S_IDLE, S_RX, S_ACK, S_TX, S_TXACK} slv_state_e;

  logic [7:0] regs [128];
  slv_state_e state = S_IDLE;
  logic       is_addr = 1'b0, rw = 1'b0, first = 1'b0, mack = 1'b0;
  logic [7:0] sh = '0;
  logic [6:0] ptr = '0;
  int         cnt = 0;
  int         writes = 0, reads = 0;

  initial begin
    sda_low = 1'b0;
    for (int i = 0; i < 128; i++) regs[i] = 8'h00;
    regs[7'h6B] = 8'h40;
  end

  // START / STOP
  always @(negedge sda) if (scl) begin
    state   = S_RX;
    is_addr = 1'b1;
    cnt     = 0;
    sda_low = 1'b0;
  end

  always @(posedge sda) if (scl) begin
    state   = S_IDLE;
    sda_low = 1'b0;
  end

  always @(posedge scl) begin
    case (state)
      S_RX: begin
        sh  = {sh[6:0], sda};
        cnt = cnt + 1;
      end
      S_TXACK: mack = !sda;
      default: ;
    endcase
  end

  always @(negedge scl) begin
    case (state)
      S_RX: if (cnt == 8) begin
        if (is_addr) begin
          rw = sh[0];
          if (sh[7:1] == ADDR) begin
            sda_low = 1'b1;
            state   = S_ACK;
          end else begin
            state = S_IDLE;
          end
        end else begin
          if (first) begin
            ptr   = sh[6:0];
            first = 1'b0;
          end else begin
            regs[ptr] = sh;
            ptr       = ptr + 7'd1;
            writes++;
          end
          sda_low = 1'b1;
          state   = S_ACK;
        end
      end
      S_ACK: begin
        sda_low = 1'b0;
        if (is_addr && rw) begin
          is_addr = 1'b0;
          sh      = regs[ptr];
          ptr     = ptr + 7'd1;
          reads++;
          sda_low = ~sh[7];
          cnt     = 1;
          state   = S_TX;
        end else begin
          if (is_addr) first = 1'b1;
          is_addr = 1'b0;
          cnt     = 0;
          state   = S_RX;
        end
      end
      S_TX: begin
        if (cnt == 8) begin
          sda_low = 1'b0;
          state   = S_TXACK;
        end else begin
          sda_low = ~sh[7 - cnt];
          cnt     = cnt + 1;
        end
      end
      S_TXACK: begin
        if (mack) begin
          sh      = regs[ptr];
          ptr     = ptr + 7'd1;
          reads++;
          sda_low = ~sh[7];
          cnt     = 1;
          state   = S_TX;
        end else begin
          sda_low = 1'b0;
          state   = S_IDLE;
        end
      end
      default: ;
    endcase
  end

endmodule
