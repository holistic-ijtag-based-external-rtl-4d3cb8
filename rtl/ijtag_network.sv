// ijtag_network: the reconfigurable scan network of the case study.
//
// Three extended SIBs and two TDRs. SIB-1 sits behind the gateway and hosts a
// segment of two SIBs in series: SIB-2 (hosting TDR-2, the MPU6050 checker
// word) followed by SIB-3 (hosting TDR-1, the XADC temperature word). With
// every SIB closed the path is SIB-1's four cells; opening SIB-1 adds SIB-2
// and SIB-3 (12 cells); opening SIB-2 or SIB-3 adds its 16-bit TDR.
//
// Order in which cells leave so (the order the instrument manager's ROM
// lists them): SIB-1, SIB-3, TDR-1, SIB-2, TDR-2.
//
// Fault flags: SIB-3 takes the XADC instrument's fault, SIB-2 the MPU6050
// instrument's fault; SIB-1 combines both. to_f/to_c are SIB-1's flags and
// go to the instrument manager without any scan. afpn_rst clears the sticky
// flags of SIB-2 and SIB-3.
//
// The topology (which SIB hosts which) follows the case-study setup of the
// paper; the cell order inside a SIB is this design's own.
module ijtag_network
  import ijtag_pkg::*;
#(
  parameter int unsigned TDR1_W = 16,
  parameter int unsigned TDR2_W = 16
) (
  input  logic              tck,
  input  logic              rst,
  input  logic              sel,
  input  logic              ce,
  input  logic              se,
  input  logic              ue,
  input  logic              si,
  output logic              so,
  // instruments
  input  logic [TDR1_W-1:0] tdr1_din,   // XADC temperature
  input  logic [TDR2_W-1:0] tdr2_din,   // MPU6050 checker word
  input  logic              fault_in_xadc,
  input  logic              fault_in_mpu,
  // fault propagation network
  input  logic              afpn_rst,
  output logic              to_f,
  output logic              to_c,
  // SIB state, index 1..3 = SIB-1..SIB-3 (bit 0 unused, tied low)
  output logic [3:0]        sib_open,
  output logic [3:0]        sib_mask
);

  logic s1_hsel, s1_hsi, s1_hso;
  logic s2_so, s2_hsel, s2_hsi, t2_so, s2_f, s2_c;
  logic s3_so, s3_hsel, s3_hsi, t1_so, s3_f, s3_c;

  sib_ext #(.LEAF(1'b0)) u_sib1 (
    .tck, .rst, .sel, .ce, .se, .ue, .si, .so,
    .host_sel(s1_hsel), .host_si(s1_hsi), .host_so(s1_hso),
    .fault_in(s2_f | s3_f), .corr_in(s2_c & s3_c), .afpn_rst,
    .to_f, .to_c, .seg_open(sib_open[1]), .masked(sib_mask[1])
  );

  // SIB-1 segment: SIB-2 then SIB-3
  sib_ext #(.LEAF(1'b1)) u_sib2 (
    .tck, .rst, .sel(s1_hsel), .ce, .se, .ue, .si(s1_hsi), .so(s2_so),
    .host_sel(s2_hsel), .host_si(s2_hsi), .host_so(t2_so),
    .fault_in(fault_in_mpu), .corr_in(1'b1), .afpn_rst,
    .to_f(s2_f), .to_c(s2_c), .seg_open(sib_open[2]), .masked(sib_mask[2])
  );

  tdr #(.WIDTH(TDR2_W)) u_tdr2 (
    .tck, .rst, .sel(s2_hsel), .ce, .se, .si(s2_hsi), .so(t2_so),
    .din(tdr2_din)
  );

  sib_ext #(.LEAF(1'b1)) u_sib3 (
    .tck, .rst, .sel(s1_hsel), .ce, .se, .ue, .si(s2_so), .so(s3_so),
    .host_sel(s3_hsel), .host_si(s3_hsi), .host_so(t1_so),
    .fault_in(fault_in_xadc), .corr_in(1'b1), .afpn_rst,
    .to_f(s3_f), .to_c(s3_c), .seg_open(sib_open[3]), .masked(sib_mask[3])
  );

  tdr #(.WIDTH(TDR1_W)) u_tdr1 (
    .tck, .rst, .sel(s3_hsel), .ce, .se, .si(s3_hsi), .so(t1_so),
    .din(tdr1_din)
  );

  assign s1_hso      = s3_so;
  assign sib_open[0] = 1'b0;
  assign sib_mask[0] = 1'b0;

endmodule
