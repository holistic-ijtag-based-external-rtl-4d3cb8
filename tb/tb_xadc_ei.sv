// tb_xadc_ei: self-checking test of the XADC instrument with the XADC model.
//
// The model's "analog" inputs are set to the codes of 25 C and of three supply
// voltages; the test checks the alarm-threshold write (120 C), the polled
// status words, the fault flag when the die reaches 120 C and its release at
// 25 C, and a supply alarm. Codes are computed here from the XADC transfer
// functions: T = code*503.975/65536 - 273.15, V = code*3/65536.
module tb_xadc_ei;
  logic clk = 1'b0, rst;
  logic den, dwe, drdy, updated, fault;
  logic [6:0] daddr;
  logic [15:0] di, do_o, temp, vccint, vccaux, vbram;
  logic [3:0] alm;
  logic [15:0] an_temp, an_vccint, an_vccaux, an_vbram;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xadc_ei dut (
    .clk, .rst, .drp_den(den), .drp_dwe(dwe), .drp_daddr(daddr), .drp_di(di),
    .drp_do(do_o), .drp_drdy(drdy), .alm, .temp, .vccint, .vccaux, .vbram,
    .updated, .fault
  );

  xadc_model u_xadc (
    .dclk(clk), .reset(rst), .den, .dwe, .daddr, .di, .do_o, .drdy, .alm,
    .an_temp, .an_vccint, .an_vccaux, .an_vbram
  );

  function automatic logic [15:0] t_code(input real celsius);
    return 16'($rtoi((celsius + 273.15) * 65536.0 / 503.975));  // truncated
  endfunction

  function automatic logic [15:0] v_code(input real volts);
    return 16'($rtoi(volts * 65536.0 / 3.0 + 0.5));
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wait_updates(input int n);
    repeat (n) begin
      @(posedge clk);
      while (!updated) @(posedge clk);
    end
    #1;
  endtask

  initial begin
    rst = 1'b1;
    an_temp = t_code(25.0); an_vccint = v_code(1.0); an_vccaux = v_code(1.8);
    an_vbram = v_code(1.0);
    repeat (3) @(posedge clk); #1;
    rst = 1'b0;

    check(t_code(25.0) == 16'h9772, "25 C code is 0x9772");
    check(t_code(120.0) == 16'hC7B4, "120 C code is 0xC7B4");
    wait_updates(3);
    check(u_xadc.regs[7'h50] == 16'hC7B4, "temperature upper alarm set to 120 C");
    check(temp == 16'h9772, $sformatf("temperature word %h", temp));
    check(vccint == v_code(1.0) && vccaux == v_code(1.8) && vbram == v_code(1.0),
          "supply words");
    check(!fault, "no fault at 25 C");

    an_temp = t_code(120.0);
    wait_updates(2);
    check(temp == 16'hC7B4, "temperature word at 120 C");
    check(fault && alm[0], "120 C raises the temperature alarm and the fault flag");

    an_temp = t_code(25.0);
    wait_updates(2);
    check(!fault, "fault flag falls at 25 C");

    u_xadc.regs[7'h55] = v_code(0.95);   // VCCINT lower threshold
    an_vccint = v_code(0.90);
    wait_updates(2);
    check(vccint == v_code(0.90), "VCCINT word follows the input");
    check(fault && alm[1], "VCCINT under-voltage raises the fault flag");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
