// tap_ctrl: IEEE 1149.1 TAP controller used as the gateway into the IJTAG
// network.
//
// The 16-state TAP state machine advances on TMS at each rising TCK edge. A
// 2-bit instruction register selects what the data-register states drive:
// IR_NET (01) connects the IJTAG network, any other code the 1-bit bypass
// register. While IR_NET is loaded the TAP turns its states into the 1687
// scan controls: ce in Capture-DR, se in Shift-DR, ue in Update-DR, with
// sel high in all of them; the network acts on the rising edge that leaves
// the state. si is TDI. TDO is the network's so, the bypass bit or the IR's
// LSB, depending on the state (combinational, not retimed to the falling
// edge). dr_busy is high between Capture-DR and Update-DR of a network scan,
// so the instrument manager can wait before it takes the network.
//
// trst (the RST pin) is synchronous and, like Test-Logic-Reset, loads
// IR_BYPASS. Five TCK with TMS = 1 also reach Test-Logic-Reset.
//
// From the paper: a TAP gateway with TDI, TMS, TCK, RST and TDO in front of
// the network. The instruction codes, IR length and single-edge timing are
// this design's own.
module tap_ctrl
  import ijtag_pkg::*;
(
  input  logic tck,
  input  logic trst,
  input  logic tms,
  input  logic tdi,
  output logic tdo,
  // 1687 scan controls toward the network
  output logic sel,
  output logic ce,
  output logic se,
  output logic ue,
  output logic si,
  input  logic so,
  output logic dr_busy
);

  tap_state_e state, nxt;
  logic [IR_LEN-1:0] ir, ir_sh;
  logic bypass;
  logic net;

  always_comb begin
    unique case (state)
      TLR:        nxt = tms ? TLR       : RTI;
      RTI:        nxt = tms ? SEL_DR    : RTI;
      SEL_DR:     nxt = tms ? SEL_IR    : CAPTURE_DR;
      CAPTURE_DR: nxt = tms ? EXIT1_DR  : SHIFT_DR;
      SHIFT_DR:   nxt = tms ? EXIT1_DR  : SHIFT_DR;
      EXIT1_DR:   nxt = tms ? UPDATE_DR : PAUSE_DR;
      PAUSE_DR:   nxt = tms ? EXIT2_DR  : PAUSE_DR;
      EXIT2_DR:   nxt = tms ? UPDATE_DR : SHIFT_DR;
      UPDATE_DR:  nxt = tms ? SEL_DR    : RTI;
      SEL_IR:     nxt = tms ? TLR       : CAPTURE_IR;
      CAPTURE_IR: nxt = tms ? EXIT1_IR  : SHIFT_IR;
      SHIFT_IR:   nxt = tms ? EXIT1_IR  : SHIFT_IR;
      EXIT1_IR:   nxt = tms ? UPDATE_IR : PAUSE_IR;
      PAUSE_IR:   nxt = tms ? EXIT2_IR  : PAUSE_IR;
      EXIT2_IR:   nxt = tms ? UPDATE_IR : SHIFT_IR;
      UPDATE_IR:  nxt = tms ? SEL_DR    : RTI;
      default:    nxt = TLR;
    endcase
  end

  always_ff @(posedge tck) begin
    if (trst) begin
      state  <= TLR;
      ir     <= IR_BYPASS;
      ir_sh  <= '0;
      bypass <= 1'b0;
    end else begin
      state <= nxt;
      unique case (state)
        TLR:        ir     <= IR_BYPASS;
        CAPTURE_IR: ir_sh  <= IR_LEN'(1);          // 1149.1: LSBs capture 01
        SHIFT_IR:   ir_sh  <= {tdi, ir_sh[IR_LEN-1:1]};
        UPDATE_IR:  ir     <= ir_sh;
        CAPTURE_DR: bypass <= 1'b0;
        SHIFT_DR:   bypass <= tdi;
        default: ;
      endcase
    end
  end

  assign net     = (ir == IR_NET);
  assign sel     = net && (state inside {CAPTURE_DR, SHIFT_DR, EXIT1_DR, PAUSE_DR,
                                         EXIT2_DR, UPDATE_DR});
  assign ce      = sel && (state == CAPTURE_DR);
  assign se      = sel && (state == SHIFT_DR);
  assign ue      = sel && (state == UPDATE_DR);
  assign si      = tdi;
  assign dr_busy = sel;

  always_comb begin
    if (state == SHIFT_IR)      tdo = ir_sh[0];
    else if (state == SHIFT_DR) tdo = net ? so : bypass;
    else                        tdo = 1'b0;
  end

endmodule
