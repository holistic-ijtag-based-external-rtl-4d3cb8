// ijtag_pkg: types and constants shared by the IJTAG health-monitoring design.
//
// It holds the layout of the extended SIB scan cells, the instrument-manager
// ROM descriptor format, the TAP instruction codes and the SIB addresses of the
// three-SIB case-study network. The SIB addresses (SIB-1 = 0x0000,
// SIB-3 = 0x0001, SIB-2 = 0x0003) and the 16-bit address / 12-bit ROM address /
// 32-bit ROM word widths are the case study's; the descriptor field layout and
// the TAP codes are this design's own choice.
package ijtag_pkg;

  // ---------------------------------------------------------------- SIB cells
  // An extended SIB has four scan cells. Listed here in the order they leave
  // SO, i.e. F is nearest SO and S nearest the host segment's return path.
  localparam int unsigned SIB_CELLS = 4;
  localparam int unsigned CELL_F = 0;  // unmasked fault flag (capture only)
  localparam int unsigned CELL_C = 1;  // correct-state flag (capture only)
  localparam int unsigned CELL_X = 2;  // mask (capture + update)
  localparam int unsigned CELL_S = 3;  // segment open (capture + update)

  // ------------------------------------------------------ IJTAG scan control
  typedef struct packed {
    logic sel;  // segment selected
    logic ce;   // capture enable
    logic se;   // shift enable
    logic ue;   // update enable
    logic si;   // scan in
  } scan_ctrl_t;

  // ------------------------------------------------------ IM ROM descriptors
  localparam int unsigned ROM_AW = 12;  // im_rom_addr[11:0]
  localparam int unsigned ROM_DW = 32;  // im_rom_data[31:0]
  localparam int unsigned LOC_AW = 16;  // localized_sib_addr[15:0]

  typedef enum logic [7:0] {
    DESC_SIB      = 8'h00,  // SIB whose segment holds further SIBs
    DESC_TDR      = 8'h01,  // instrument TDR
    DESC_SIB_LEAF = 8'h02,  // SIB whose segment is an instrument TDR
    DESC_END      = 8'h03   // end of the scan path
  } desc_kind_e;

  // [31:24] kind, [23:16] level in the hierarchy (0 = top),
  // [15:0]  SIB: address of the first descriptor after its subtree
  //         TDR: register length in bits
  // Descriptors are listed in the order their cells leave SO (pre-order).
  typedef struct packed {
    desc_kind_e  kind;
    logic [7:0]  level;
    logic [15:0] arg;
  } rom_desc_t;

  function automatic logic [ROM_DW-1:0] sib_desc(input logic        leaf,
                                                 input logic [7:0]  level,
                                                 input logic [15:0] skip);
    return {(leaf ? DESC_SIB_LEAF : DESC_SIB), level, skip};
  endfunction

  function automatic logic [ROM_DW-1:0] tdr_desc(input logic [7:0] level,
                                                 input logic [15:0] len);
    return {DESC_TDR, level, len};
  endfunction

  localparam logic [ROM_DW-1:0] END_DESC = {DESC_END, 24'h000000};

  // SIB addresses of the case-study network = ROM word addresses.
  localparam logic [LOC_AW-1:0] SIB1_ADDR = 16'h0000;
  localparam logic [LOC_AW-1:0] SIB3_ADDR = 16'h0001;
  localparam logic [LOC_AW-1:0] SIB2_ADDR = 16'h0003;

  // ------------------------------------------------------------------- TAP
  localparam int unsigned IR_LEN = 2;
  localparam logic [IR_LEN-1:0] IR_NET    = 2'b01;  // IJTAG network access
  localparam logic [IR_LEN-1:0] IR_BYPASS = 2'b11;

  typedef enum logic [3:0] {
    TLR        = 4'h0, RTI        = 4'h1,
    SEL_DR     = 4'h2, CAPTURE_DR = 4'h3, SHIFT_DR = 4'h4, EXIT1_DR = 4'h5,
    PAUSE_DR   = 4'h6, EXIT2_DR   = 4'h7, UPDATE_DR = 4'h8,
    SEL_IR     = 4'h9, CAPTURE_IR = 4'hA, SHIFT_IR = 4'hB, EXIT1_IR = 4'hC,
    PAUSE_IR   = 4'hD, EXIT2_IR   = 4'hE, UPDATE_IR = 4'hF
  } tap_state_e;

  // Sensor words held by the two instruments, for the CPU side.
  typedef struct packed {
    logic [15:0] temp;     // XADC die temperature
    logic [15:0] vccint;   // XADC VCCINT
    logic [15:0] vccaux;   // XADC VCCAUX
    logic [15:0] vbram;    // XADC VCCBRAM
    logic [15:0] ax, ay, az;
    logic [15:0] imu_temp;
    logic [15:0] gx, gy, gz;
    logic [15:0] chk;      // MPU6050 checker word
    logic        imu_error;
  } sensor_status_t;

  // --------------------------------------------------------------- sensors
  // XADC DRP status register addresses (UG480 register map).
  localparam logic [6:0] XADC_TEMP   = 7'h00;
  localparam logic [6:0] XADC_VCCINT = 7'h01;
  localparam logic [6:0] XADC_VCCAUX = 7'h02;
  localparam logic [6:0] XADC_VBRAM  = 7'h06;

  // MPU6050 I2C address and registers (MPU-6000/6050 register map).
  localparam logic [6:0] MPU_I2C_ADDR    = 7'h68;
  localparam logic [7:0] MPU_PWR_MGMT_1  = 8'h6B;
  localparam logic [7:0] MPU_ACCEL_XOUT  = 8'h3B;
  localparam int unsigned MPU_BURST      = 14;  // accel(6) temp(2) gyro(6)

endpackage
