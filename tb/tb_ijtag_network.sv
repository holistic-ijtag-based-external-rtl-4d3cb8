// tb_ijtag_network: self-checking test of the three-SIB, two-TDR network,
// driven directly with 1687 scan controls like the case-study test vectors.
//
// Checked: the 4-bit path after reset, opening SIB-1 (12 bits), opening
// SIB-2 and reading TDR-2 (the MPU6050 checker word 0xFFE9), then SIB-3 and
// TDR-1 (the XADC word 0x9772, 25 C), the fault flags of an internal and an
// external fault at every level, masking and the fault-network reset.
module tb_ijtag_network;
  logic tck = 1'b0, rst, sel, ce, se, ue, si, so;
  logic [15:0] tdr1_din, tdr2_din;
  logic fx, fm, afpn_rst, to_f, to_c;
  logic [3:0] sib_open, sib_mask;
  logic [63:0] d;
  int checks = 0, failures = 0;

  always #5 tck = ~tck;

  ijtag_network dut (
    .tck, .rst, .sel, .ce, .se, .ue, .si, .so, .tdr1_din, .tdr2_din,
    .fault_in_xadc(fx), .fault_in_mpu(fm), .afpn_rst, .to_f, .to_c, .sib_open, .sib_mask
  );

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // capture, shift n bits (bit 0 first, bit 0 = cell nearest so), update
  task automatic scan(input int n, input logic [63:0] din, output logic [63:0] dout);
    dout = '0;
    sel = 1'b1; ce = 1'b1;
    @(posedge tck); #1;
    ce = 1'b0; se = 1'b1;
    for (int i = 0; i < n; i++) begin
      si = din[i];
      dout[i] = so;
      @(posedge tck); #1;
    end
    se = 1'b0; ue = 1'b1;
    @(posedge tck); #1;
    ue = 1'b0; sel = 1'b0;
    @(posedge tck); #1;
  endtask

  // the four cells of a SIB as shifted in: F, C, X, S
  // a TDR word leaves MSB first, so it sits bit-reversed in the scan-out vector
  function automatic logic [15:0] rev16(input logic [15:0] x);
    return {<<{x}};
  endfunction

  function automatic logic [3:0] sib(input logic s, input logic x);
    return {s, x, 2'b00};
  endfunction

  initial begin
    rst = 1'b1; {sel, ce, se, ue, si} = '0; fx = 0; fm = 0; afpn_rst = 0;
    tdr1_din = 16'h9772; tdr2_din = 16'hFFE9;
    repeat (2) @(posedge tck); #1;
    rst = 1'b0;

    scan(4, 64'(sib(1, 0)), d);
    check(d[3:0] == 4'b0010, "reset: SIB-1 reads F=0 C=1 X=0 S=0");
    check(sib_open == 4'b0010, "SIB-1 opened");

    // SIB-1 open: SIB-1, SIB-3, SIB-2
    scan(12, 64'({52'd0, sib(1, 0), sib(0, 0), sib(1, 0)}), d);
    check(d[11:0] == {4'b0010, 4'b0010, 4'b1010}, $sformatf("12-bit path %h", d[11:0]));
    check(sib_open == 4'b0110, "SIB-2 opened");

    // SIB-2 open: SIB-1, SIB-3, SIB-2, TDR-2 -> read the MPU6050 word
    scan(28, 64'({16'd0, sib(0, 0), sib(1, 0), sib(1, 0)}), d);
    check(rev16(d[27:12]) == 16'hFFE9, $sformatf("TDR-2 read %h", rev16(d[27:12])));
    check(d[11:8] == 4'b1010, "SIB-2 reads open");
    check(sib_open == 4'b1010, "SIB-3 opened, SIB-2 closed");

    // SIB-3 open: SIB-1, SIB-3, TDR-1, SIB-2 -> read the XADC word
    scan(28, 64'({sib(0, 0), 16'd0, sib(0, 0), sib(1, 0)}), d);
    check(rev16(d[23:8]) == 16'h9772, $sformatf("TDR-1 read %h", rev16(d[23:8])));
    check(sib_open == 4'b0010, "back to SIB-1 only");

    // internal fault: one-cycle alarm
    fx = 1'b1; @(posedge tck); #1; fx = 1'b0; #1;
    check(to_f && !to_c, "internal fault raises F and drops C at the top");
    scan(12, 64'({52'd0, sib(0, 0), sib(0, 0), sib(1, 0)}), d);
    check(d[0] && !d[1], "SIB-1 reads F=1 C=0");
    check(d[4] && !d[5], "SIB-3 reads F=1 C=0");
    check(!d[8] && d[9], "SIB-2 reads F=0 C=1");

    // mask SIB-3
    scan(12, 64'({52'd0, sib(0, 0), sib(0, 1), sib(1, 0)}), d);
    check(!to_f && !to_c, "masked: F falls, C stays low");
    check(sib_mask == 4'b1000, "SIB-3 mask set");

    // external fault while the internal one is masked
    fm = 1'b1; #1;
    check(to_f, "external fault raises F");
    scan(12, 64'({52'd0, sib(0, 0), sib(0, 1), sib(1, 0)}), d);
    check(d[0] && !d[4] && d[8], "F read at SIB-1 and SIB-2, masked SIB-3 reads 0");
    fm = 1'b0;

    afpn_rst = 1'b1; @(posedge tck); #1; afpn_rst = 1'b0; #1;
    check(!to_f && to_c, "fault-network reset clears the sticky flags");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge tck);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
