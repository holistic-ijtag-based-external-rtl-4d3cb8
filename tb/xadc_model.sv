// xadc_model: behavioural model of the Xilinx 7-series XADC hard macro, for
// simulation only.
//
// Only the parts the health monitor uses: the DRP (den/dwe/daddr/di/do/drdy,
// drdy DRP_LAT cycles after den), the status registers of die temperature
// (0x00), VCCINT (0x01), VCCAUX (0x02) and VCCBRAM (0x06), and the alarm
// threshold registers (upper 0x50/0x51/0x52/0x58, lower 0x54/0x55/0x56/0x5C).
// The "analog" inputs are given directly as 16-bit conversion codes; every
// CONV_CYCLES cycles they are copied into the status registers (one
// conversion of all channels). alm[0] is set while temperature >= its upper
// threshold, alm[1..3] while a supply is above its upper or below its lower
// threshold. Thresholds reset to the widest range (no alarm).
module xadc_model #(
  parameter int unsigned DRP_LAT     = 3,
  parameter int unsigned CONV_CYCLES = 16
) (
  input  logic        dclk,
  input  logic        reset,
  input  logic        den,
  input  logic        dwe,
  input  logic [6:0]  daddr,
  input  logic [15:0] di,
  output logic [15:0] do_o,
  output logic        drdy,
  output logic [3:0]  alm,
  input  logic [15:0] an_temp,
  input  logic [15:0] an_vccint,
  input  logic [15:0] an_vccaux,
  input  logic [15:0] an_vbram
);

  logic [15:0] regs [128];
  int          conv = 0, lat = 0;
  logic        busy = 1'b0;
  logic [6:0]  a_q;

  initial begin
    for (int i = 0; i < 128; i++) regs[i] = 16'h0000;
    regs[7'h50] = 16'hFFFF; regs[7'h51] = 16'hFFFF; regs[7'h52] = 16'hFFFF;
    regs[7'h58] = 16'hFFFF;
    drdy = 1'b0;
    do_o = '0;
  end

  always @(posedge dclk) begin
    drdy <= 1'b0;
    if (reset) begin
      busy <= 1'b0;
      conv <= 0;
    end else begin
      if (conv == int'(CONV_CYCLES) - 1) begin
        conv <= 0;
        regs[7'h00] <= an_temp;
        regs[7'h01] <= an_vccint;
        regs[7'h02] <= an_vccaux;
        regs[7'h06] <= an_vbram;
      end else begin
        conv <= conv + 1;
      end
      if (den && !busy) begin
        busy <= 1'b1;
        lat  <= 1;
        a_q  <= daddr;
        if (dwe) regs[daddr] <= di;
      end else if (busy) begin
        if (lat == int'(DRP_LAT)) begin
          busy <= 1'b0;
          drdy <= 1'b1;
          do_o <= regs[a_q];
        end else begin
          lat <= lat + 1;
        end
      end
    end
  end

  always_comb begin
    alm[0] = regs[7'h00] >= regs[7'h50];
    alm[1] = regs[7'h01] > regs[7'h51] || regs[7'h01] < regs[7'h55];
    alm[2] = regs[7'h02] > regs[7'h52] || regs[7'h02] < regs[7'h56];
    alm[3] = regs[7'h06] > regs[7'h58] || regs[7'h06] < regs[7'h5C];
  end

endmodule
