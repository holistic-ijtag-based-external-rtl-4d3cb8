// xadc_ei: embedded instrument for the on-chip temperature and supply
// sensors of the XADC (internal sensors).
//
// The XADC hard macro keeps its converted results in status registers that
// are read through the Dynamic Reconfiguration Port (DRP). After reset this
// instrument writes TEMP_UPPER into the temperature upper-alarm register
// (0x50), then polls the status registers round-robin: temperature (0x00),
// VCCINT (0x01), VCCAUX (0x02) and VCCBRAM (0x06). Each read is one DRP
// transaction: den for one cycle with daddr, then wait for drdy and take do.
// The values are held in temp/vccint/vccaux/vbram; temp is the word captured
// by the network's TDR-1. updated pulses after each temperature read.
//
// Fault flag. fault = OR of the XADC alarm outputs selected by ALM_MASK
// (alm[0] temperature, alm[1] VCCINT, alm[2] VCCAUX, alm[3] VCCBRAM). It is
// combinational from the macro's alarm pins and goes to the fault flag of
// SIB-3.
//
// Codes are the XADC's 16-bit left-justified results: temperature in kelvin
// = code * 503.975 / 65536, so 25 C reads 0x9772 and 120 C 0xC7B4.
// TEMP_UPPER defaults to 0xC7B4 (120 C).
//
// Everything on the rising edge of clk (the DRP clock), synchronous rst.
// From the paper: an instrument that reads the XADC's temperature and
// voltage status registers through the DRP, passes the temperature to a TDR
// and raises a fault from the XADC alarm. The polling order, the alarm
// threshold register write and the mask are this design's own.
module xadc_ei
  import ijtag_pkg::*;
#(
  parameter logic [15:0] TEMP_UPPER = 16'hC7B4,
  parameter logic [3:0]  ALM_MASK   = 4'b1111
) (
  input  logic        clk,
  input  logic        rst,
  // DRP master
  output logic        drp_den,
  output logic        drp_dwe,
  output logic [6:0]  drp_daddr,
  output logic [15:0] drp_di,
  input  logic [15:0] drp_do,
  input  logic        drp_drdy,
  // XADC alarms
  input  logic [3:0]  alm,
  // status
  output logic [15:0] temp,
  output logic [15:0] vccint,
  output logic [15:0] vccaux,
  output logic [15:0] vbram,
  output logic        updated,
  output logic        fault
);

  localparam logic [6:0] XADC_TEMP_UPPER = 7'h50;

  typedef enum logic [1:0] {X_CFG, X_REQ, X_WAIT} xadc_state_e;

  xadc_state_e state;
  logic        cfg_done;
  logic [1:0]  idx;
  logic [6:0]  addr_of_idx;

  always_comb begin
    unique case (idx)
      2'd0: addr_of_idx = XADC_TEMP;
      2'd1: addr_of_idx = XADC_VCCINT;
      2'd2: addr_of_idx = XADC_VCCAUX;
      default: addr_of_idx = XADC_VBRAM;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= X_CFG;
      cfg_done  <= 1'b0;
      idx       <= '0;
      drp_den   <= 1'b0;
      drp_dwe   <= 1'b0;
      drp_daddr <= '0;
      drp_di    <= '0;
      updated   <= 1'b0;
      {temp, vccint, vccaux, vbram} <= '0;
    end else begin
      drp_den <= 1'b0;
      drp_dwe <= 1'b0;
      updated <= 1'b0;
      unique case (state)
        X_CFG: begin
          drp_den   <= 1'b1;
          drp_dwe   <= 1'b1;
          drp_daddr <= XADC_TEMP_UPPER;
          drp_di    <= TEMP_UPPER;
          state     <= X_WAIT;
        end
        X_REQ: begin
          drp_den   <= 1'b1;
          drp_daddr <= addr_of_idx;
          state     <= X_WAIT;
        end
        X_WAIT: if (drp_drdy) begin
          state <= X_REQ;
          if (!cfg_done) begin
            cfg_done <= 1'b1;
          end else begin
            unique case (idx)
              2'd0: begin temp <= drp_do; updated <= 1'b1; end
              2'd1: vccint <= drp_do;
              2'd2: vccaux <= drp_do;
              default: vbram <= drp_do;
            endcase
            idx <= idx + 2'd1;
          end
        end
        default: state <= X_REQ;
      endcase
    end
  end

  assign fault = |(alm & ALM_MASK);

  // one DRP transaction at a time
  a_drp_single: assert property (@(posedge clk) disable iff (rst)
                                 drp_den |=> !drp_den until_with drp_drdy);

endmodule
