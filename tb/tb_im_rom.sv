// tb_im_rom: checks every word of the instrument manager's ROM against the
// descriptor table written out by hand, including the SIB addresses of the
// case study (SIB-1 0x0000, SIB-3 0x0001, SIB-2 0x0003) and END beyond the
// table.
module tb_im_rom;
  logic [11:0] addr;
  logic [31:0] data;
  int checks = 0, failures = 0;
  logic [31:0] expect_w [6] = '{32'h0000_0005, 32'h0201_0003, 32'h0102_0010,
                                32'h0201_0005, 32'h0102_0010, 32'h0300_0000};

  im_rom dut (.addr, .data);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int a = 0; a < 6; a++) begin
      addr = 12'(a); #1;
      check(data == expect_w[a], $sformatf("addr %0d: %h expected %h", a, data, expect_w[a]));
    end
    addr = 12'h0; #1; check(data[31:24] == 8'h00, "SIB-1 at 0x0000 is a SIB");
    addr = 12'h1; #1; check(data[31:24] == 8'h02, "SIB-3 at 0x0001 is a leaf SIB");
    addr = 12'h3; #1; check(data[31:24] == 8'h02, "SIB-2 at 0x0003 is a leaf SIB");
    addr = 12'hFFF; #1; check(data == 32'h0300_0000, "unused address reads END");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
