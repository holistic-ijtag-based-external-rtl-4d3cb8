// uav_health_top: IJTAG-based health monitor for internal and external UAV
// sensors (the case-study system).
//
// One reconfigurable scan network carries both kinds of embedded instrument:
// the XADC instrument (die temperature and supplies, internal) behind SIB-3 /
// TDR-1 and the MPU6050 instrument (IMU over I2C, external) behind SIB-2 /
// TDR-2, both under SIB-1. Two masters share the network:
//   * the TAP gateway (TDI/TMS/TDO), through which a host reads any TDR;
//   * the instrument manager, which watches the network's fault flag,
//     interrupts the CPU (irq) three cycles after a fault and then scans the
//     network to report which SIB holds the fault (localized_sib_addr and a
//     FIFO of addresses).
// The manager has priority: while im_busy is high the TAP's scan controls
// are ignored, so a host should start a TAP data scan only when im_busy is
// low (the manager itself waits for a TAP data scan on the network to end).
//
// The XADC hard macro and the MPU6050 sensor are outside this module: the
// DRP port and alarm pins, and the open-drain I2C lines (scl_low/sda_low
// pull a line low, sda_in is the wired-AND bus level) are top-level ports.
//
// Single clock: tck clocks the network, the manager, the TAP and the two
// instruments; rst is synchronous and active high (the RST pin).
// From the paper: the blocks and their connection (Fig. 10 of the case
// study). The single clock and the arbitration are this design's own.
module uav_health_top
  import ijtag_pkg::*;
#(
  parameter int unsigned CLK_DIV     = 32,
  parameter int unsigned POLL_GAP    = 16,
  parameter logic [15:0] TEMP_UPPER  = 16'hC7B4,
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned LOC_DEPTH   = 4
) (
  input  logic              tck,
  input  logic              rst,
  // TAP gateway
  input  logic              tms,
  input  logic              tdi,
  output logic              tdo,
  // XADC macro (DRP and alarms)
  output logic              drp_den,
  output logic              drp_dwe,
  output logic [6:0]        drp_daddr,
  output logic [15:0]       drp_di,
  input  logic [15:0]       drp_do,
  input  logic              drp_drdy,
  input  logic [3:0]        xadc_alm,
  // MPU6050 I2C bus
  output logic              scl_low,
  output logic              sda_low,
  input  logic              sda_in,
  input  logic [15:0]       instr_btn,
  // CPU side
  output logic              irq,
  input  logic              irq_ack,
  input  logic              flag_clear,
  output logic              healthy,
  output logic              im_busy,
  output logic [LOC_AW-1:0] localized_sib_addr,
  output logic              loc_valid,
  output logic              loc_fifo_empty,
  input  logic              loc_fifo_pop,
  output logic [LOC_AW-1:0] loc_fifo_data,
  output logic              loc_fifo_overflow,
  // observation
  output logic              to_f,
  output logic              to_c,
  output logic              afpn_rst,
  output logic [ROM_AW-1:0] im_rom_addr,
  output logic [ROM_DW-1:0] im_rom_data,
  output logic [3:0]        sib_open,
  output logic [3:0]        sib_mask,
  output sensor_status_t    sensors,
  output logic              xadc_updated,
  output logic              imu_sample_valid
);

  scan_ctrl_t tap_c, im_c, net_c;
  logic net_so, tap_busy;
  logic xadc_fault, mpu_fault;

  tap_ctrl u_tap (
    .tck, .trst(rst), .tms, .tdi, .tdo,
    .sel(tap_c.sel), .ce(tap_c.ce), .se(tap_c.se), .ue(tap_c.ue), .si(tap_c.si),
    .so(net_so), .dr_busy(tap_busy)
  );

  im_rom u_rom (.addr(im_rom_addr), .data(im_rom_data));

  instrument_manager #(.SYNC_STAGES(SYNC_STAGES), .LOC_DEPTH(LOC_DEPTH)) u_im (
    .clk(tck), .rst, .to_f, .to_c, .afpn_rst,
    .ext_busy(tap_busy), .own(im_busy),
    .net_sel(im_c.sel), .net_ce(im_c.ce), .net_se(im_c.se), .net_ue(im_c.ue),
    .net_si(im_c.si), .net_so,
    .rom_addr(im_rom_addr), .rom_data(im_rom_data),
    .irq, .irq_ack, .flag_clear, .healthy,
    .localized_sib_addr, .loc_valid, .loc_fifo_empty, .loc_fifo_pop,
    .loc_fifo_data, .loc_fifo_overflow
  );

  assign net_c = im_busy ? im_c : tap_c;

  ijtag_network u_net (
    .tck, .rst, .sel(net_c.sel), .ce(net_c.ce), .se(net_c.se), .ue(net_c.ue),
    .si(net_c.si), .so(net_so),
    .tdr1_din(sensors.temp), .tdr2_din(sensors.chk),
    .fault_in_xadc(xadc_fault), .fault_in_mpu(mpu_fault),
    .afpn_rst, .to_f, .to_c, .sib_open, .sib_mask
  );

  xadc_ei #(.TEMP_UPPER(TEMP_UPPER)) u_xadc_ei (
    .clk(tck), .rst, .drp_den, .drp_dwe, .drp_daddr, .drp_di, .drp_do, .drp_drdy,
    .alm(xadc_alm), .temp(sensors.temp), .vccint(sensors.vccint),
    .vccaux(sensors.vccaux), .vbram(sensors.vbram),
    .updated(xadc_updated), .fault(xadc_fault)
  );

  mpu6050_ctrl #(.CLK_DIV(CLK_DIV), .POLL_GAP(POLL_GAP)) u_mpu (
    .clk(tck), .rst, .scl_low, .sda_low, .sda_in, .fault_inject(instr_btn),
    .ax(sensors.ax), .ay(sensors.ay), .az(sensors.az), .temp(sensors.imu_temp),
    .gx(sensors.gx), .gy(sensors.gy), .gz(sensors.gz), .chk(sensors.chk),
    .sample_valid(imu_sample_valid), .i2c_error(sensors.imu_error), .fault(mpu_fault)
  );

endmodule
