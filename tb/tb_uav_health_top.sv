// tb_uav_health_top: end-to-end test of the health monitor at its default
// parameters, with the XADC and MPU6050 models on its ports and a host
// driving the TAP.
//
// 1. Reset; wait until both instruments hold measured data (25 C on the die,
//    raw IMU bytes in the sensor).
// 2. Through the TAP: open SIB-1, open SIB-2 and read TDR-2 (the MPU6050
//    checker word, computed here from the raw bytes), then open SIB-3 and read
//    TDR-1 (0x9772 = 25 C), then close the network again.
// 3. Internal fault: the die goes to 120 C. The XADC alarm must raise irq
//    3 cycles after the network's fault flag and the manager must report
//    SIB-3 (0x0001) 16 cycles after it.
// 4. A host scan attempted during the manager's run is held off (the
//    manager waits for an ongoing host scan; the host waits for im_busy).
// 5. Reset with an internal and an external (push-button) fault both present:
//    SIB-3 then SIB-2 (0x0003) reported, 16 and 20 cycles after reset ends.
// 6. flag_clear after the faults are removed restores the healthy state.
// 7. The host unmasks SIB-3 five times while the die is hot and no location
//    is popped: the fault is localized again each time (9 cycles) and the
//    fifth location overflows the 4-entry FIFO.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_uav_health_top;
  import ijtag_pkg::*;

  logic tck = 1'b0, rst;
  logic tms, tdi, tdo;
  logic den, dwe, drdy;
  logic [6:0] daddr;
  logic [15:0] di, do_o;
  logic [3:0] alm;
  logic scl_low, sda_low, s_sda_low, scl, sda;
  logic [15:0] instr_btn;
  logic irq, irq_ack, flag_clear, healthy, im_busy, loc_valid, q_empty, q_pop, q_ovf;
  logic [LOC_AW-1:0] loc_addr, q_data;
  logic to_f, to_c, afpn_rst;
  logic [ROM_AW-1:0] rom_addr;
  logic [ROM_DW-1:0] rom_data;
  logic [3:0] sib_open, sib_mask;
  sensor_status_t sensors;
  logic xadc_updated, imu_valid;
  logic [15:0] an_temp;

  int checks = 0, failures = 0;
  int n_tdr2_read = 0, n_tdr1_read = 0, n_detect = 0, n_loc_single = 0, n_loc_double = 0;
  int n_mask = 0, n_hold_off = 0, n_clear = 0, n_overflow = 0, n_imu_frames = 0, n_xadc_reads = 0;

  always #5 tck = ~tck;   // 100 MHz in simulation; the design has one clock

  uav_health_top dut (
    .tck, .rst, .tms, .tdi, .tdo,
    .drp_den(den), .drp_dwe(dwe), .drp_daddr(daddr), .drp_di(di), .drp_do(do_o),
    .drp_drdy(drdy), .xadc_alm(alm),
    .scl_low, .sda_low, .sda_in(sda), .instr_btn,
    .irq, .irq_ack, .flag_clear, .healthy, .im_busy,
    .localized_sib_addr(loc_addr), .loc_valid, .loc_fifo_empty(q_empty),
    .loc_fifo_pop(q_pop), .loc_fifo_data(q_data), .loc_fifo_overflow(q_ovf),
    .to_f, .to_c, .afpn_rst, .im_rom_addr(rom_addr), .im_rom_data(rom_data),
    .sib_open, .sib_mask, .sensors, .xadc_updated, .imu_sample_valid(imu_valid)
  );

  xadc_model u_xadc (
    .dclk(tck), .reset(rst), .den, .dwe, .daddr, .di, .do_o, .drdy, .alm,
    .an_temp, .an_vccint(16'h5555), .an_vccaux(16'h9999), .an_vbram(16'h5555)
  );

  assign scl = !scl_low;
  assign sda = !(sda_low || s_sda_low);
  mpu6050_model u_imu (.scl, .sda, .sda_low(s_sda_low));

  always @(posedge tck) begin
    if (imu_valid) n_imu_frames++;
    if (xadc_updated) n_xadc_reads++;
  end

  // latency bookkeeping (edges after the fault flag rises, see tb of the IM)
  int cyc = 0, t_f = 0, t_irq = -1;
  int t_loc [$];
  logic [LOC_AW-1:0] a_loc [$];
  logic f_q = 1'b0, irq_q = 1'b0;
  always @(posedge tck) begin
    cyc++;
    if (to_f && !f_q) t_f = cyc - 1;
    f_q = to_f;
    #1;
    if (irq && !irq_q) t_irq = cyc;
    irq_q = irq;
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

  // ------------------------------------------------------------- host side
  task automatic clk_tms(input logic t, input logic d = 1'b0);
    tms = t; tdi = d;
    @(posedge tck); #1;
  endtask

  // from Run-Test/Idle, one IR or DR scan of n bits, back to Run-Test/Idle
  task automatic tap_scan(input logic ir_scan, input int n, input logic [63:0] din,
                          output logic [63:0] dout);
    dout = '0;
    clk_tms(1);
    if (ir_scan) clk_tms(1);
    clk_tms(0);
    clk_tms(0);
    for (int i = 0; i < n; i++) begin
      dout[i] = tdo;
      clk_tms(i == n - 1, din[i]);
    end
    clk_tms(1);
    clk_tms(0);
  endtask

  // a TDR word leaves MSB first, so it sits bit-reversed in the scan-out vector
  function automatic logic [15:0] rev16(input logic [15:0] x);
    return {<<{x}};
  endfunction

  function automatic logic [3:0] sib(input logic s, input logic x);
    return {s, x, 2'b00};
  endfunction

  // ------------------------------------------------------------- sensor data
  logic [7:0] raw [14];
  function automatic logic [15:0] exp_chk();
    logic [7:0] p, s;
    p = '0;
    s = '0;
    for (int i = 0; i < 14; i++) begin
      p = p ^ raw[i];
      s = s + raw[i];
    end
    return {8'(-s), p};
  endfunction

  task automatic do_reset();
    rst = 1'b1;
    repeat (3) @(posedge tck);
    #1;
    rst = 1'b0;
    t_loc.delete(); a_loc.delete(); t_irq = -1;
  endtask

  task automatic wait_run();
    @(posedge tck);
    while (!im_busy) @(posedge tck);
    while (im_busy) @(posedge tck);
    repeat (5) @(posedge tck);
    #2;
  endtask

  logic [63:0] d;

  initial begin
    tms = 1'b1; tdi = 1'b0; instr_btn = '0; irq_ack = 0; flag_clear = 0; q_pop = 0;
    an_temp = 16'h9772;   // 25 C
    // raw sample data of the IMU (ACCEL_XOUT_H .. GYRO_ZOUT_L)
    for (int i = 0; i < 14; i++) begin
      raw[i] = 8'(8'hAA + 8'(i * 17));
      u_imu.regs[59 + i] = raw[i];
    end
    do_reset();

    // 1. measured data available
    while (n_imu_frames < 1 || n_xadc_reads < 2) @(posedge tck);
    #1;
    check(sensors.temp == 16'h9772, "XADC instrument holds 25 C");
    check(sensors.chk == exp_chk(), "MPU6050 instrument holds the checker word");
    check(healthy && !irq, "healthy before any fault");

    // 2. host access through the TAP
    clk_tms(0);                                   // Run-Test/Idle
    tap_scan(1'b1, IR_LEN, 64'(IR_NET), d);
    tap_scan(1'b0, 4, 64'(sib(1, 0)), d);         // open SIB-1
    check(d[3:0] == 4'b0010 && sib_open == 4'b0010, "host opened SIB-1");
    tap_scan(1'b0, 12, 64'({52'd0, sib(1, 0), sib(0, 0), sib(1, 0)}), d);   // open SIB-2
    check(sib_open == 4'b0110, "host opened SIB-2");
    tap_scan(1'b0, 28, 64'({16'd0, sib(0, 0), sib(1, 0), sib(1, 0)}), d);  // read TDR-2, open SIB-3
    check(rev16(d[27:12]) == exp_chk(), $sformatf("TDR-2 read through TAP: %h", rev16(d[27:12])));
    if (rev16(d[27:12]) == exp_chk()) n_tdr2_read++;
    tap_scan(1'b0, 28, 64'({sib(0, 0), 16'd0, sib(0, 0), sib(0, 0)}), d);  // read TDR-1, close all
    check(rev16(d[23:8]) == 16'h9772, $sformatf("TDR-1 read through TAP: %h", rev16(d[23:8])));
    if (rev16(d[23:8]) == 16'h9772) n_tdr1_read++;
    check(sib_open == 4'b0000, "host closed the network");

    // 3. internal fault: 120 C
    an_temp = 16'hC7B4;
    wait_run();
    check(t_irq - t_f == 3, $sformatf("detection latency %0d (3 expected)", t_irq - t_f));
    if (irq) n_detect++;
    check(a_loc.size() == 1 && a_loc[0] == SIB3_ADDR, "internal fault localized at SIB-3 (0001)");
    if (a_loc.size() == 1) begin
      check(t_loc[0] - t_f == 16, $sformatf("single-fault localization %0d (16 expected)",
                                              t_loc[0] - t_f));
      if (a_loc[0] == SIB3_ADDR) n_loc_single++;
    end
    check(sib_mask[3], "SIB-3 masked by the manager");
    if (sib_mask[3]) n_mask++;
    check(!q_empty && q_data == SIB3_ADDR, "location FIFO holds 0001");
    q_pop = 1'b1; @(posedge tck); #1; q_pop = 1'b0;
    irq_ack = 1'b1; @(posedge tck); #1; irq_ack = 1'b0;
    check(!irq, "irq acknowledged");

    // 4. the manager holds off during a host scan
    tap_scan(1'b0, 12, 64'({52'd0, sib(0, 0), sib(0, 1), sib(1, 0)}), d);  // keep mask, SIB-1 open
    clk_tms(1); clk_tms(0);                       // host now in Capture-DR
    instr_btn = 16'h0001;                         // external fault during the host scan
    repeat (8) clk_tms(0);                        // stay in Shift-DR
    check(!im_busy && !irq, "manager waits while the host scans the network");
    if (!im_busy) n_hold_off++;
    for (int i = 0; i < 12; i++) clk_tms(i == 11, 1'b0);
    clk_tms(1); clk_tms(0);                       // Update-DR, Run-Test/Idle
    wait_run();
    check(a_loc.size() >= 2 && a_loc[a_loc.size()-1] == SIB2_ADDR,
          "external fault localized after the host scan");
    instr_btn = '0;

    // 5. reset, then two faults together
    an_temp = 16'hC7B4;
    instr_btn = 16'h0001;
    do_reset();
    t_f = cyc;   // both flags are already up when reset ends: count from there
    wait_run();
    check(a_loc.size() == 2, $sformatf("two faults localized (%0d)", a_loc.size()));
    if (a_loc.size() == 2) begin
      check(a_loc[0] == SIB3_ADDR && a_loc[1] == SIB2_ADDR, "SIB-3 then SIB-2");
      check(t_loc[0] - t_f == 16 && t_loc[1] - t_f == 20,
            $sformatf("two-fault localization %0d/%0d (16/20 expected)",
                      t_loc[0] - t_f, t_loc[1] - t_f));
      if (a_loc[1] == SIB2_ADDR) n_loc_double++;
    end
    check(sib_mask == 4'b1100, "both leaf SIBs masked");

    // 6. faults removed, flag network cleared
    an_temp = 16'h9772;
    instr_btn = '0;
    repeat (100) @(posedge tck);
    #1;
    check(!healthy, "masked faults still latched");
    flag_clear = 1'b1; @(posedge tck); #1; flag_clear = 1'b0;
    repeat (5) @(posedge tck); #1;
    check(healthy, "flag_clear restores the healthy state");
    if (healthy) n_clear++;

    // 7. location FIFO overflow: with the die hot again, the host unmasks
    // SIB-3 through the TAP five times without popping any location; each
    // unmask lets the latched alarm reach the manager again, which localizes
    // it (9 cycles: SIB-1 is open and SIB-3's F cell is the fifth bit out)
    // and masks it once more
    while (!q_empty) begin
      q_pop = 1'b1; @(posedge tck); #1; q_pop = 1'b0;
    end
    irq_ack = 1'b1; @(posedge tck); #1; irq_ack = 1'b0;
    an_temp = 16'hC7B4;
    repeat (300) @(posedge tck);
    #1;
    check(!im_busy && !irq, "hot die but SIB-3 masked: no new run");
    clk_tms(0);                                   // Run-Test/Idle
    tap_scan(1'b1, IR_LEN, 64'(IR_NET), d);       // the reset in step 5 left BYPASS
    for (int k = 0; k < 5; k++) begin
      t_loc.delete(); a_loc.delete();
      check(!q_ovf, $sformatf("overflow flag before unmask %0d", k + 1));
      tap_scan(1'b0, 12, 64'({52'd0, sib(0, 0), sib(0, 0), sib(1, 0)}), d);  // clear X of SIB-3
      wait_run();
      check(a_loc.size() == 1 && a_loc[0] == SIB3_ADDR && t_loc[0] - t_f == 9,
            $sformatf("re-detected fault %0d localized in 9 cycles (%0d, %0d, %0d)", k + 1,
                      a_loc.size(), (a_loc.size() > 0) ? a_loc[0] : 16'(0), (t_loc.size() > 0) ? t_loc[0] - t_f : 0));
    end
    check(q_ovf, "fifth location into the full FIFO sets loc_fifo_overflow");
    if (q_ovf) n_overflow++;
    for (int k = 0; k < 4; k++) begin
      check(!q_empty && q_data == SIB3_ADDR, "full FIFO holds 0001");
      q_pop = 1'b1; @(posedge tck); #1; q_pop = 1'b0;
    end
    check(q_empty, "four entries kept, the fifth dropped");

    // mechanism coverage
    check(n_imu_frames > 0, "IMU frames read over I2C");
    check(n_xadc_reads > 0, "XADC status read over DRP");
    check(n_tdr2_read > 0, "TDR-2 read by the host");
    check(n_tdr1_read > 0, "TDR-1 read by the host");
    check(n_detect > 0, "fault detection interrupt");
    check(n_loc_single > 0, "single-fault localization");
    check(n_loc_double > 0, "two-fault localization");
    check(n_mask > 0, "masking of a localized fault");
    check(n_hold_off > 0, "manager hold-off during a host scan");
    check(n_clear > 0, "fault-network clear");
    check(n_overflow > 0, "location FIFO overflow");
    $display("mechanisms: imu_frames=%0d xadc_reads=%0d tdr2=%0d tdr1=%0d detect=%0d single=%0d double=%0d mask=%0d holdoff=%0d clear=%0d overflow=%0d",
             n_imu_frames, n_xadc_reads, n_tdr2_read, n_tdr1_read, n_detect, n_loc_single,
             n_loc_double, n_mask, n_hold_off, n_clear, n_overflow);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge tck);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
