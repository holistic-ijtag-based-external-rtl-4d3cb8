// tb_tap_ctrl: self-checking test of the TAP gateway.
//
// An 8-bit scan register modelled here stands in for the network. The test
// loads the network instruction through Shift-IR (checking the captured 01),
// runs a data scan (checking sel/ce/se/ue in Capture-DR/Shift-DR/Update-DR,
// the word read at TDO and the word written at update), checks the 1-bit
// bypass register, and the return to Test-Logic-Reset with five TMS = 1.
module tb_tap_ctrl;
  import ijtag_pkg::*;

  logic tck = 1'b0, trst, tms, tdi, tdo, sel, ce, se, ue, si, so, dr_busy;
  logic [7:0] net_sh, net_upd;
  int checks = 0, failures = 0;
  int n_ce = 0, n_ue = 0;

  always #5 tck = ~tck;

  tap_ctrl dut (.tck, .trst, .tms, .tdi, .tdo, .sel, .ce, .se, .ue, .si, .so, .dr_busy);

  // network stand-in
  always_ff @(posedge tck) begin
    if (trst) begin net_sh <= '0; net_upd <= '0; end
    else if (sel && ce) begin net_sh <= 8'hA5; n_ce <= n_ce + 1; end
    else if (sel && se) net_sh <= {si, net_sh[7:1]};
    else if (sel && ue) begin net_upd <= net_sh; n_ue <= n_ue + 1; end
  end
  assign so = net_sh[0];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic clk_tms(input logic t, input logic d = 1'b0);
    tms = t; tdi = d;
    @(posedge tck); #1;
  endtask

  // from Run-Test/Idle: shift n bits of din through the IR or DR, return to RTI
  task automatic scan(input logic ir_scan, input int n, input logic [15:0] din,
                      output logic [15:0] dout);
    clk_tms(1);                 // SEL_DR
    if (ir_scan) clk_tms(1);    // SEL_IR
    clk_tms(0);                 // CAPTURE
    clk_tms(0);                 // SHIFT
    for (int i = 0; i < n; i++) begin
      dout[i] = tdo;
      clk_tms(i == n - 1, din[i]);  // last bit goes to EXIT1
    end
    clk_tms(1);                 // UPDATE
    clk_tms(0);                 // RTI
  endtask

  logic [15:0] d;

  initial begin
    trst = 1'b1; tms = 1'b1; tdi = 1'b0;
    repeat (2) @(posedge tck); #1;
    trst = 1'b0;
    check(dut.state == TLR && dut.ir == IR_BYPASS, "reset: Test-Logic-Reset, bypass");
    clk_tms(0);
    check(dut.state == RTI, "Run-Test/Idle");

    scan(1'b1, 2, 16'(IR_NET), d);
    check(d[1:0] == 2'b01, "IR capture value 01");
    check(dut.ir == IR_NET, "network instruction loaded");

    // data scan, step by step
    clk_tms(1); check(!sel && !dr_busy, "Select-DR: network not yet selected");
    clk_tms(0); check(sel && ce && !se && !ue && dr_busy, "Capture-DR: sel and ce");
    clk_tms(0); check(sel && se && !ce && !ue, "Shift-DR: sel and se");
    for (int i = 0; i < 8; i++) begin
      d[i] = tdo;
      clk_tms(i == 7, 1'((32'h3C >> i) & 1));
    end
    check(d[7:0] == 8'hA5, $sformatf("network word read at TDO: %h", d[7:0]));
    check(sel && !se, "Exit1-DR: no shift");
    clk_tms(1); check(sel && ue && !se && !ce, "Update-DR: sel and ue");
    clk_tms(0);
    check(net_upd == 8'h3C, "network updated with the shifted-in word");
    check(n_ce == 1 && n_ue == 1, "exactly one capture and one update");
    check(!sel && !dr_busy, "Run-Test/Idle: network deselected");

    // bypass
    scan(1'b1, 2, 16'(IR_BYPASS), d);
    check(dut.ir == IR_BYPASS, "bypass instruction loaded");
    scan(1'b0, 4, 16'b0110, d);
    check(d[3:0] == 4'b1100, $sformatf("bypass delays TDI by one bit: %b", d[3:0]));
    check(n_ce == 1, "network untouched in bypass");

    repeat (5) clk_tms(1);
    check(dut.state == TLR, "five TMS=1 reach Test-Logic-Reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge tck);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
