// tb_sib_ext: self-checking test of the extended SIB.
//
// A leaf SIB with a 3-bit host shift register (modelled here) and a non-leaf
// SIB are scanned with capture/shift/update sequences. Checked: the captured
// flags after reset, opening the SIB (host_sel and the longer path), sticky
// fault flag with to_f/to_c, masking with X, clearing with afpn_rst, and the
// live flags of the non-leaf SIB.
module tb_sib_ext;
  import ijtag_pkg::*;

  logic tck = 1'b0;
  logic rst, sel, ce, se, ue, si;
  logic so, host_sel, host_si, host_so;
  logic fault_in, corr_in, afpn_rst, to_f, to_c, seg_open, masked;
  logic so_n, hsel_n, hsi_n, tof_n, toc_n, open_n, mask_n;
  logic [2:0] host;
  int checks = 0, failures = 0;

  always #5 tck = ~tck;

  sib_ext #(.LEAF(1'b1)) dut (
    .tck, .rst, .sel, .ce, .se, .ue, .si, .so, .host_sel, .host_si, .host_so,
    .fault_in, .corr_in, .afpn_rst, .to_f, .to_c, .seg_open, .masked
  );

  // non-leaf instance with no host segment (host_so tied to its host_si)
  sib_ext #(.LEAF(1'b0)) dut_n (
    .tck, .rst, .sel, .ce, .se, .ue, .si, .so(so_n), .host_sel(hsel_n),
    .host_si(hsi_n), .host_so(hsi_n), .fault_in, .corr_in, .afpn_rst,
    .to_f(tof_n), .to_c(toc_n), .seg_open(open_n), .masked(mask_n)
  );

  // host segment: plain 3-bit shift register, LSB toward the SIB
  always_ff @(posedge tck)
    if (rst)                  host <= 3'b101;
    else if (host_sel && se) host <= {host_si, host[2:1]};
  assign host_so = host[0];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic idle();
    {sel, ce, se, ue, si} = '0;
    @(posedge tck); #1;
  endtask

  // capture, shift n bits (din[0] first), update; returns the bits seen at so
  task automatic scan(input int n, input logic [15:0] din, output logic [15:0] dout);
    dout = '0;
    sel = 1'b1; ce = 1'b1; se = 1'b0; ue = 1'b0;
    @(posedge tck); #1;
    ce = 1'b0; se = 1'b1;
    for (int i = 0; i < n; i++) begin
      si = din[i];
      dout[i] = so;
      @(posedge tck); #1;
    end
    se = 1'b0; ue = 1'b1;
    @(posedge tck); #1;
    idle();
  endtask

  logic [15:0] d;

  // shift-in word for the 7-bit open path: F, C, X, S, then host[0..2]
  function automatic logic [15:0] w(input logic [2:0] h, input logic s, input logic x);
    return {9'd0, h, s, x, 2'b00};
  endfunction

  initial begin
    rst = 1'b1; {sel, ce, se, ue, si} = '0; fault_in = 0; corr_in = 1; afpn_rst = 0;
    repeat (2) @(posedge tck); #1;
    rst = 1'b0;
    idle();

    // after reset: F=0 C=1 X=0 S=0, flags quiet, segment closed
    scan(4, 16'b0000, d);
    check(d[3:0] == 4'b0010, "reset capture F,C,X,S = 0,1,0,0");
    check(!to_f && to_c && !seg_open && !masked, "reset flags");
    check(!host_sel, "closed SIB does not select its host");

    // open: write S=1 (4th bit), keep X=0
    scan(4, 16'b1000, d);
    check(seg_open, "S=1 after update opens the segment");
    check(!masked, "X still 0");
    sel = 1'b1; #1;
    check(host_sel, "host_sel follows sel when open");
    sel = 1'b0; #1;
    check(!host_sel, "host_sel low when SIB not selected");

    // path is now 3 host bits then S,X,C,F: 7 bits; host bits 101 appear after the SIB cells
    scan(7, w(3'b011, 1'b1, 1'b0), d);
    check(d[3:0] == 4'b1010, "open capture F,C,X,S = 0,1,0,1");
    check(d[6:4] == 3'b101, "host segment bits follow the SIB cells");
    check(host == 3'b011, "host segment reloaded through the open SIB");
    check(seg_open, "still open after rewriting S=1");

    // fault: one-cycle pulse is latched
    fault_in = 1'b1; @(posedge tck); #1; fault_in = 1'b0;
    repeat (3) @(posedge tck); #1;
    check(to_f && !to_c, "sticky fault raises to_f and drops to_c");
    check(tof_n == 1'b0, "non-leaf F follows fault_in live");
    scan(7, w(3'b000, 1'b1, 1'b0), d);
    check(d[0] == 1'b1 && d[1] == 1'b0, "captured F=1 C=0 after a fault");

    // the previous scan wrote S=1, X=0
    check(seg_open && !masked, "S/X as written");
    // mask: X=1, S=1
    scan(7, w(3'b000, 1'b1, 1'b1), d);
    check(masked, "X=1 after update");
    check(!to_f, "masked fault does not reach to_f");
    check(!to_c, "C still reports the latched fault");
    scan(7, w(3'b000, 1'b1, 1'b1), d);
    check(d[0] == 1'b0 && d[2] == 1'b1, "masked: F cell reads 0, X cell reads 1");

    // afpn reset clears the sticky flag
    afpn_rst = 1'b1; @(posedge tck); #1; afpn_rst = 1'b0; #1;
    check(to_c, "afpn_rst clears the sticky flag");
    scan(7, w(3'b000, 1'b1, 1'b0), d);  // unmask
    check(!to_f && !masked, "unmasked and clear");

    // non-leaf: live OR/AND from children
    fault_in = 1'b1; corr_in = 1'b0; #1;
    check(tof_n && !toc_n, "non-leaf to_f/to_c follow children");
    fault_in = 1'b0; corr_in = 1'b1; #1;
    check(!tof_n && toc_n, "non-leaf flags fall with children");

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
