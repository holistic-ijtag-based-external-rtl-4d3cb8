// tb_tdr: self-checking test of the test data register: capture of the
// parallel word, MSB-first shift-out, shift-in of a new word, and no change
// while the register is not selected.
module tb_tdr;
  logic tck = 1'b0, rst, sel, ce, se, si, so;
  logic [15:0] din, got;
  int checks = 0, failures = 0;

  always #5 tck = ~tck;

  tdr #(.WIDTH(16)) dut (.tck, .rst, .sel, .ce, .se, .si, .so, .din);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic read_word(input logic [15:0] shin, input logic s, output logic [15:0] w);
    sel = s; ce = 1'b1; se = 1'b0;
    @(posedge tck); #1;
    ce = 1'b0; se = 1'b1;
    for (int i = 0; i < 16; i++) begin
      si = shin[15-i];
      w[15-i] = so;
      @(posedge tck); #1;
    end
    se = 1'b0; sel = 1'b0;
  endtask

  // Shift without capture: reads back what the register holds.
  task automatic shift_only(input logic s, output logic [15:0] w);
    sel = s; se = s; ce = 1'b0;
    for (int i = 0; i < 16; i++) begin
      si = 1'b0;
      w[15-i] = so;
      @(posedge tck); #1;
    end
    se = 1'b0; sel = 1'b0;
  endtask

  initial begin
    rst = 1'b1; sel = 0; ce = 0; se = 0; si = 0; din = 16'hFFE9;
    repeat (2) @(posedge tck); #1;
    rst = 1'b0;
    check(so == 1'b0, "reset clears the register");
    read_word(16'h1234, 1'b1, got);
    check(got == 16'hFFE9, $sformatf("captured word %h shifted out MSB first", got));
    din = 16'h9772;
    read_word(16'h0000, 1'b0, got);   // not selected: must change nothing
    shift_only(1'b1, got);
    check(got == 16'h1234, $sformatf("shifted-in word held, unselected access ignored (%h)", got));
    read_word(16'h0000, 1'b1, got);
    check(got == 16'h9772, $sformatf("second capture %h", got));
    din = 16'hA5C3;
    shift_only(1'b1, got);
    check(got == 16'h0000, $sformatf("shift without capture ignores din (%h)", got));

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
