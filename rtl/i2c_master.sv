// i2c_master: byte-command I2C master, the COM port toward the MPU6050.
//
// The client issues one command at a time (cmd_valid while cmd_ready):
// I2C_START (start or repeated start), I2C_WRITE (send wdata, MSB first, then
// sample the slave's ACK into nack), I2C_READ (receive a byte into rdata,
// then send ACK if read_ack, else NACK) and I2C_STOP. done pulses for one
// cycle when the command has finished.
//
// Every SCL bit is four quarter-periods of CLK_DIV clk cycles each: data is
// set in quarter 0 with SCL low, SCL is released in quarter 1, SDA is sampled
// in quarter 2 and SCL is pulled low again in quarter 3. A start releases SDA,
// releases SCL, pulls SDA low, then pulls SCL low; a stop pulls SDA low,
// releases SCL, then releases SDA. Outputs are open-drain style: *_low = 1
// pulls the line low, 0 releases it. With clk = 50 MHz and CLK_DIV = 32 SCL
// runs at 390 kHz. Clock stretching is not supported.
//
// The paper names an I2C master port toward the MPU6050; everything here
// (command set, timing, rate) is this design's own, following the I2C
// specification.
module i2c_master #(
  parameter int unsigned CLK_DIV = 32
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  logic [1:0] cmd,        // i2c_cmd_e encoding below
  input  logic [7:0] wdata,
  input  logic       read_ack,
  output logic [7:0] rdata,
  output logic       nack,
  output logic       done,
  // bus
  output logic       scl_low,
  output logic       sda_low,
  input  logic       sda_in
);

  localparam logic [1:0] I2C_START = 2'd0;
  localparam logic [1:0] I2C_WRITE = 2'd1;
  localparam logic [1:0] I2C_READ  = 2'd2;
  localparam logic [1:0] I2C_STOP  = 2'd3;
  localparam int unsigned DW = $clog2(CLK_DIV + 1);

  logic          busy;
  logic [1:0]    op;
  logic [DW-1:0] div;
  logic [1:0]    q;
  logic [3:0]    bitn;      // 0..8 within a byte
  logic [7:0]    sh;
  logic          tick;

  assign tick      = (div == DW'(CLK_DIV - 1));
  assign cmd_ready = !busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      op      <= I2C_STOP;
      div     <= '0;
      q       <= '0;
      bitn    <= '0;
      sh      <= '0;
      rdata   <= '0;
      nack    <= 1'b0;
      done    <= 1'b0;
      scl_low <= 1'b0;
      sda_low <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        div <= '0;
        q   <= '0;
        if (cmd_valid) begin
          busy <= 1'b1;
          op   <= cmd;
          bitn <= '0;
          sh   <= wdata;
        end
      end else begin
        div <= tick ? '0 : div + 1'b1;
        if (tick) begin
          q <= q + 2'd1;
          unique case (op)
            I2C_START: begin
              unique case (q)
                2'd0: sda_low <= 1'b0;
                2'd1: scl_low <= 1'b0;
                2'd2: sda_low <= 1'b1;
                2'd3: begin scl_low <= 1'b1; busy <= 1'b0; done <= 1'b1; end
              endcase
            end
            I2C_STOP: begin
              unique case (q)
                2'd0: begin sda_low <= 1'b1; scl_low <= 1'b1; end
                2'd1: scl_low <= 1'b0;
                2'd2: sda_low <= 1'b0;
                2'd3: begin busy <= 1'b0; done <= 1'b1; end
              endcase
            end
            default: begin  // I2C_WRITE, I2C_READ: nine bits
              unique case (q)
                2'd0: begin
                  if (bitn == 4'd8)          sda_low <= (op == I2C_READ) ? read_ack : 1'b0;
                  else if (op == I2C_WRITE)  sda_low <= ~sh[7];
                  else                       sda_low <= 1'b0;
                end
                2'd1: scl_low <= 1'b0;
                2'd2: begin
                  if (bitn == 4'd8) begin
                    if (op == I2C_WRITE) nack <= sda_in;
                  end else begin
                    sh <= {sh[6:0], sda_in};
                  end
                end
                2'd3: begin
                  scl_low <= 1'b1;
                  if (bitn == 4'd8) begin
                    busy    <= 1'b0;
                    done    <= 1'b1;
                    sda_low <= 1'b0;
                    if (op == I2C_READ) rdata <= sh;
                  end
                  bitn <= bitn + 4'd1;
                end
              endcase
            end
          endcase
        end
      end
    end
  end

  // A command is accepted only when idle, and done marks its end.
  a_done_idle: assert property (@(posedge clk) disable iff (rst) done |-> !busy);
  // SDA may only change while SCL is low, except in START and STOP.
  a_sda_stable: assert property (@(posedge clk) disable iff (rst)
                                 (busy && (op == I2C_WRITE || op == I2C_READ) && !scl_low)
                                 |=> $stable(sda_low) || scl_low);

endmodule
