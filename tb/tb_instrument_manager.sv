// tb_instrument_manager: self-checking test of the instrument manager with
// its ROM and the case-study network.
//
// Fault sources are driven directly. Checked for a single internal fault:
// irq three cycles after the network's fault flag rises, SIB-3 (0x0001)
// localized 16 cycles after it, the mask written into SIB-3, the network
// left with SIB-1 open, the FIFO. Then, from reset, two simultaneous faults
// (SIB-3 then SIB-2 = 0x0003, 20 cycles), an external fault with the network
// already open (13 cycles), the wait for a gateway scan, irq_ack,
// flag_clear, and the location FIFO filling up and overflowing while the
// network alone is reset over and over with the alarm still high.
module tb_instrument_manager;
  import ijtag_pkg::*;

  logic clk = 1'b0, rst;
  logic to_f, to_c, afpn_rst, ext_busy, own;
  logic sel, ce, se, ue, si, so;
  logic [ROM_AW-1:0] rom_addr;
  logic [ROM_DW-1:0] rom_data;
  logic irq, irq_ack, flag_clear, healthy, loc_valid, q_empty, q_pop, q_ovf;
  logic [LOC_AW-1:0] loc_addr, q_data;
  logic fx, fm;
  logic net_rst = 1'b0;   // extra reset of the network alone (FIFO overflow test)
  logic [3:0] sib_open, sib_mask;
  int checks = 0, failures = 0;
  int cyc = 0, t_f = 0, t_irq = -1;
  int t_loc [$];
  logic [LOC_AW-1:0] a_loc [$];
  logic [ROM_AW-1:0] walk [$];   // ROM addresses visited while the IM owns the network

  always #5 clk = ~clk;

  instrument_manager dut (
    .clk, .rst, .to_f, .to_c, .afpn_rst, .ext_busy, .own,
    .net_sel(sel), .net_ce(ce), .net_se(se), .net_ue(ue), .net_si(si), .net_so(so),
    .rom_addr, .rom_data, .irq, .irq_ack, .flag_clear, .healthy,
    .localized_sib_addr(loc_addr), .loc_valid, .loc_fifo_empty(q_empty),
    .loc_fifo_pop(q_pop), .loc_fifo_data(q_data), .loc_fifo_overflow(q_ovf)
  );

  im_rom u_rom (.addr(rom_addr), .data(rom_data));

  ijtag_network u_net (
    .tck(clk), .rst(rst | net_rst), .sel, .ce, .se, .ue, .si, .so,
    .tdr1_din(16'h9772), .tdr2_din(16'hFFE9),
    .fault_in_xadc(fx), .fault_in_mpu(fm), .afpn_rst, .to_f, .to_c, .sib_open, .sib_mask
  );

  // Cycle bookkeeping. Latencies count rising edges after the fault flag
  // rises: the first edge that sees to_f high is edge 1, so t_f is the number
  // of the edge before it.
  logic f_q = 1'b0, irq_q = 1'b0;
  always @(posedge clk) begin
    cyc++;
    if (to_f && !f_q) t_f = cyc - 1;
    f_q = to_f;
    #1;
    if (irq && !irq_q) t_irq = cyc;
    irq_q = irq;
    if (own && (walk.size() == 0 || walk[$] != rom_addr)) walk.push_back(rom_addr);
    if (loc_valid) begin
      t_loc.push_back(cyc);
      a_loc.push_back(loc_addr);
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // wait for a localization run to start and to end
  task automatic wait_idle();
    @(posedge clk);
    while (!own) @(posedge clk);
    while (own || dut.state != 3'd0) @(posedge clk);
    #2;
  endtask

  task automatic reset_all();
    rst = 1'b1; fx = 0; fm = 0;
    repeat (2) @(posedge clk);
    #2;
    rst = 1'b0;
    t_loc.delete(); a_loc.delete(); t_irq = -1;
    repeat (2) @(posedge clk);
    #2;
  endtask

  task automatic pop_expect(input logic [LOC_AW-1:0] a, input string what);
    check(!q_empty && q_data == a, $sformatf("%s: FIFO head %h", what, q_data));
    q_pop = 1'b1; @(posedge clk); #2; q_pop = 1'b0;
  endtask

  initial begin
    ext_busy = 0; irq_ack = 0; flag_clear = 0; q_pop = 0;
    reset_all();
    check(healthy && !irq && !own, "idle after reset");

    // ---- single internal fault (temperature alarm held high)
    walk.delete();
    @(negedge clk); fx = 1'b1;
    wait_idle();
    $display("ROM walk: %p", walk);
    check(walk.size() >= 6 && walk[0] == 0 && walk[1] == 5 && walk[2] == 0 && walk[3] == 1 &&
          walk[4] == 3 && walk[5] == 5,
          "ROM walk 000 005 000 001 003 005 (closed SIB-1, then SIB-1 open, SIB-3 and SIB-2 closed)");
    check(t_irq - t_f == 3, $sformatf("detection latency %0d cycles (3 expected)", t_irq - t_f));
    check(a_loc.size() == 1, $sformatf("one fault localized (%0d)", a_loc.size()));
    if (a_loc.size() >= 1) begin
      check(a_loc[0] == SIB3_ADDR, $sformatf("localized address %h (0001 expected)", a_loc[0]));
      check(t_loc[0] - t_f == 16, $sformatf("localization latency %0d cycles (16 expected)",
                                              t_loc[0] - t_f));
    end
    check(loc_addr == 16'h0001, "localized_sib_addr holds 0001");
    check(sib_mask == 4'b1000 && sib_open == 4'b0010, "SIB-3 masked, SIB-1 left open");
    check(!to_f && !healthy, "fault masked but still reported as not healthy");
    check(irq, "irq held until acknowledged");
    irq_ack = 1'b1; @(posedge clk); #2; irq_ack = 1'b0;
    check(!irq, "irq_ack clears irq");
    pop_expect(SIB3_ADDR, "single fault");
    check(q_empty, "FIFO empty after pop");

    // ---- external fault with the network already open
    t_loc.delete(); a_loc.delete();
    @(negedge clk); fm = 1'b1;
    wait_idle();
    check(a_loc.size() == 1 && a_loc[0] == SIB2_ADDR, "external fault localized at 0003");
    if (a_loc.size() >= 1)
      check(t_loc[0] - t_f == 13, $sformatf("open-network latency %0d (13 expected)", t_loc[0] - t_f));
    pop_expect(SIB2_ADDR, "external fault");

    // ---- fault-network reset once the sources are gone
    fx = 0; fm = 0;
    flag_clear = 1'b1; @(posedge clk); #2; flag_clear = 1'b0;
    repeat (4) @(posedge clk); #2;
    check(healthy, "flag_clear restores the healthy state");

    // ---- two simultaneous faults from reset
    reset_all();
    irq_ack = 1'b1; @(posedge clk); #2; irq_ack = 1'b0;
    @(negedge clk); fx = 1'b1; fm = 1'b1;
    wait_idle();
    check(a_loc.size() == 2, $sformatf("two faults localized (%0d)", a_loc.size()));
    if (a_loc.size() == 2) begin
      check(a_loc[0] == SIB3_ADDR && a_loc[1] == SIB2_ADDR, "order SIB-3 then SIB-2");
      check(t_loc[0] - t_f == 16, $sformatf("first at %0d cycles (16 expected)", t_loc[0] - t_f));
      check(t_loc[1] - t_f == 20, $sformatf("second at %0d cycles (20 expected)", t_loc[1] - t_f));
    end
    check(sib_mask == 4'b1100, "both leaf SIBs masked");
    pop_expect(SIB3_ADDR, "two faults, first");
    pop_expect(SIB2_ADDR, "two faults, second");

    // ---- the manager waits while the gateway scans the network
    reset_all();
    ext_busy = 1'b1;
    @(negedge clk); fx = 1'b1;
    repeat (10) @(posedge clk); #2;
    check(!irq && !own, "no takeover during a gateway scan");
    ext_busy = 1'b0;
    wait_idle();
    check(irq && a_loc.size() == 1 && a_loc[0] == SIB3_ADDR, "localized after the gateway scan");

    // ---- location FIFO overflow: the network alone is reset while the
    // temperature alarm stays high, so the same fault is found again and
    // again and nobody pops the FIFO (LOC_DEPTH = 4 entries)
    for (int k = 0; k < 4; k++) begin
      check(!q_ovf, $sformatf("no overflow with %0d entries", k + 1));
      @(negedge clk); net_rst = 1'b1;
      @(negedge clk); net_rst = 1'b0;
      wait_idle();
    end
    check(a_loc.size() == 5, $sformatf("five localizations (%0d)", a_loc.size()));
    check(q_ovf, "fifth entry into a full FIFO sets loc_fifo_overflow");
    for (int k = 0; k < 4; k++) pop_expect(SIB3_ADDR, "full FIFO");
    check(q_empty && q_ovf, "FIFO drained, overflow flag sticky");

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
