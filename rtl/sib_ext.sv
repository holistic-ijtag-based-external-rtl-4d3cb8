// sib_ext: extended Segment Insertion Bit (SIB) of an IEEE 1687 network.
//
// A SIB is a scan register that decides whether its host segment is part of
// the active scan path. This extended SIB additionally takes part in the
// asynchronous fault propagation network: it holds a fault flag (F), a
// correct-state flag (C) and a mask bit (X), so that an instrument's fault is
// reported at once on to_f without any scan, and the instrument manager can
// later find the faulty segment by capturing and shifting the flags.
//
// Scan path: si -> (host segment when S=1) -> S -> X -> C -> F -> so. The
// host segment receives si directly and host_sel = sel & S. On a capture
// (sel & ce) the four cells load {S, X, C, to_f}; on a shift (sel & se) they
// move one step toward so; on an update (sel & ue) S and X load from their
// cells. F and C are read-only from the scan side. The F cell captures the
// masked flag to_f, so a reader sees a fault as soon as the F cell leaves so
// and a masked fault reads as 0; the raw flag is kept in the C cell (C = 0).
//
// Flags. A LEAF SIB hosts an instrument's TDR: its F flag is fault_in OR a
// sticky register set by fault_in and cleared by afpn_rst (reset of the fault
// propagation network) or rst, so it rises in the cycle the instrument
// reports and stays up after a short pulse; its C flag is the inverse of F. A non-leaf SIB hosts other SIBs: its
// F follows fault_in (the OR of its children's to_f) and its C follows corr_in
// (the AND of its children's to_c), so masking a child clears the parent's
// flag without a separate reset. to_f = F & ~X; to_c = C, whatever X is.
//
// Timing: every register changes on the rising edge of tck; rst is
// synchronous. to_f/to_c are combinational from fault_in and the flag
// registers, so a fault reaches the top of the network without a clock.
//
// From the paper: the SIB, its role of inserting segments and the F, C and X
// flag registers of the extended SIB. This design's own choices: the cell
// order, the sticky-at-leaf rule, the meaning of C as "no fault latched"
// (the case-study waveforms show C falling as F rises) and single-edge timing.
module sib_ext
  import ijtag_pkg::*;
#(
  parameter bit LEAF = 1'b1
) (
  input  logic tck,
  input  logic rst,
  // 1687 scan port
  input  logic sel,
  input  logic ce,
  input  logic se,
  input  logic ue,
  input  logic si,
  output logic so,
  // host segment
  output logic host_sel,
  output logic host_si,
  input  logic host_so,
  // fault propagation network
  input  logic fault_in,
  input  logic corr_in,
  input  logic afpn_rst,
  output logic to_f,
  output logic to_c,
  // state, for observation
  output logic seg_open,
  output logic masked
);

  logic [SIB_CELLS-1:0] sh;
  logic s_upd, x_upd, f_reg, f_val, c_val;

  always_ff @(posedge tck) begin
    if (rst) begin
      f_reg <= 1'b0;
    end else if (afpn_rst) begin
      f_reg <= fault_in;
    end else if (fault_in) begin
      f_reg <= 1'b1;
    end
  end

  assign f_val = LEAF ? (f_reg | fault_in) : fault_in;
  assign c_val = LEAF ? ~f_val : corr_in;

  always_ff @(posedge tck) begin
    if (rst) begin
      sh    <= '0;
      s_upd <= 1'b0;
      x_upd <= 1'b0;
    end else if (sel) begin
      if (ce) begin
        sh[CELL_S] <= s_upd;
        sh[CELL_X] <= x_upd;
        sh[CELL_C] <= c_val;
        sh[CELL_F] <= f_val & ~x_upd;
      end else if (se) begin
        sh <= {(s_upd ? host_so : si), sh[SIB_CELLS-1:1]};
      end else if (ue) begin
        s_upd <= sh[CELL_S];
        x_upd <= sh[CELL_X];
      end
    end
  end

  assign so       = sh[CELL_F];
  assign host_sel = sel & s_upd;
  assign host_si  = si;
  assign to_f     = f_val & ~x_upd;
  assign to_c     = c_val;
  assign seg_open = s_upd;
  assign masked   = x_upd;

endmodule
