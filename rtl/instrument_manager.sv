// instrument_manager: detects, reports and localizes faults in the IJTAG
// network (the "IM" of the fault management infrastructure).
//
// Detection. The network's top-level fault flag to_f (the OR of every
// unmasked SIB fault flag, asynchronous to the scan) passes a SYNC_STAGES-flop
// synchronizer. When the synchronized flag is high and the external gateway is
// not in the middle of a data-register scan, the IM raises irq and starts a
// localization run. With two stages irq rises on the third rising edge after
// to_f rises.
//
// Localization. The IM takes over the network (own = 1) and repeats scan
// passes until no further SIB has to be opened. A pass is: one capture cycle,
// shift cycles while the IM walks the ROM descriptors in step with the bits
// leaving so, one idle cycle when the walk reaches END, and one update cycle.
// Every bit that leaves so is shifted back in at si, so after a full pass the
// path holds its old contents except for the bits the IM chose to change:
//   * F cell of a SIB whose segment holds SIBs = 1 and its S cell = 0:
//     S is written 1 (the SIB is opened for the next pass);
//   * F cell of a SIB whose segment is an instrument = 1: the SIB's ROM
//     address is reported (localized_sib_addr, loc_valid, the location FIFO)
//     and its X cell is written 1 so the fault no longer reaches to_f.
// A closed SIB's subtree is skipped using the descriptor's skip address; an
// open SIB's children follow it in the ROM. After the last pass the IM waits
// SYNC_STAGES+1 cycles for to_f to settle through the synchronizer and
// returns to idle. In the case-study network a single fault is localized 16
// cycles after to_f rises (6-cycle pass through the closed SIB-1, then the
// pass that reads SIB-1 and the faulty leaf SIB).
//
// CPU side: irq stays high until irq_ack. Localized addresses queue in a
// LOC_DEPTH-entry FIFO (loc_fifo_*); a push into a full FIFO is dropped and
// sets loc_fifo_overflow. flag_clear pulses afpn_rst for one cycle, clearing
// the sticky fault flags. healthy is the synchronized to_c.
//
// All registers on the rising edge of clk (the network's TCK), synchronous
// rst. rom_data is expected in the same cycle as rom_addr. The descriptor's
// level field (bits 23:16) only documents the hierarchy; the walk does not
// need it, which is why lint reports those bits as unused.
//
// From the paper: flag-based detection, the interrupt three cycles after the
// flag, localization by scanning using addresses stored in a ROM, the reported
// SIB address and the 16-cycle single-fault latency. The pass structure, the
// masking of a localized fault, the FIFO and the arbitration with the
// gateway are this design's own.
module instrument_manager
  import ijtag_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned LOC_DEPTH   = 4
) (
  input  logic              clk,
  input  logic              rst,
  // fault propagation network
  input  logic              to_f,
  input  logic              to_c,
  output logic              afpn_rst,
  // network access
  input  logic              ext_busy,
  output logic              own,
  output logic              net_sel,
  output logic              net_ce,
  output logic              net_se,
  output logic              net_ue,
  output logic              net_si,
  input  logic              net_so,
  // ROM
  output logic [ROM_AW-1:0] rom_addr,
  input  logic [ROM_DW-1:0] rom_data,
  // CPU side
  output logic              irq,
  input  logic              irq_ack,
  input  logic              flag_clear,
  output logic              healthy,
  output logic [LOC_AW-1:0] localized_sib_addr,
  output logic              loc_valid,
  output logic              loc_fifo_empty,
  input  logic              loc_fifo_pop,
  output logic [LOC_AW-1:0] loc_fifo_data,
  output logic              loc_fifo_overflow
);

  localparam int unsigned HOLDOFF = SYNC_STAGES + 1;
  localparam int unsigned QW      = $clog2(LOC_DEPTH);

  typedef enum logic [2:0] {IM_IDLE, IM_CAP, IM_SHIFT, IM_UPD, IM_HOLD} im_state_e;

  im_state_e         state;
  logic [SYNC_STAGES-1:0] f_sync, c_sync;
  logic [ROM_AW-1:0] addr;
  logic [1:0]        cix;
  logic [15:0]       bitcnt;
  logic              f_bit, opened;
  logic [3:0]        hold;
  rom_desc_t         desc;
  logic              is_sib, leaf, do_loc;

  // location FIFO
  logic [LOC_AW-1:0] q_mem [LOC_DEPTH];
  logic [QW-1:0]     q_wr, q_rd;
  logic [QW:0]       q_cnt;

  assign desc   = rom_desc_t'(rom_data);
  assign is_sib = (desc.kind == DESC_SIB) || (desc.kind == DESC_SIB_LEAF);
  assign leaf   = (desc.kind == DESC_SIB_LEAF);
  assign do_loc = (state == IM_SHIFT) && is_sib && leaf && (cix == 2'(CELL_F)) && net_so;

  // ------------------------------------------------------------ scan drive
  always_comb begin
    net_sel = 1'b0;
    net_ce  = 1'b0;
    net_se  = 1'b0;
    net_ue  = 1'b0;
    net_si  = net_so;
    unique case (state)
      IM_CAP: begin
        net_sel = 1'b1;
        net_ce  = 1'b1;
      end
      IM_SHIFT: begin
        net_sel = 1'b1;
        net_se  = (desc.kind != DESC_END);
        if (is_sib && leaf && cix == 2'(CELL_X) && f_bit) net_si = 1'b1;
        if (is_sib && !leaf && cix == 2'(CELL_S) && f_bit) net_si = 1'b1;
      end
      IM_UPD: begin
        net_sel = 1'b1;
        net_ue  = 1'b1;
      end
      default: ;
    endcase
  end

  assign own      = (state == IM_CAP) || (state == IM_SHIFT) || (state == IM_UPD);
  assign rom_addr = addr;
  assign healthy  = c_sync[SYNC_STAGES-1];

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk) begin
    if (rst) begin
      f_sync   <= '0;
      c_sync   <= '1;
      afpn_rst <= 1'b0;
    end else begin
      f_sync   <= {f_sync[SYNC_STAGES-2:0], to_f};
      c_sync   <= {c_sync[SYNC_STAGES-2:0], to_c};
      afpn_rst <= flag_clear;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IM_IDLE;
      addr      <= '0;
      cix      <= '0;
      bitcnt    <= '0;
      f_bit     <= 1'b0;
      opened    <= 1'b0;
      hold      <= '0;
      irq       <= 1'b0;
      loc_valid <= 1'b0;
      localized_sib_addr <= '0;
    end else begin
      loc_valid <= 1'b0;
      if (irq_ack) irq <= 1'b0;
      unique case (state)
        IM_IDLE: begin
          if (f_sync[SYNC_STAGES-1] && !ext_busy) begin
            irq    <= 1'b1;
            state  <= IM_CAP;
            addr   <= '0;
            opened <= 1'b0;
          end
        end
        IM_CAP: begin
          state  <= IM_SHIFT;
          addr   <= '0;
          cix   <= '0;
          bitcnt <= '0;
        end
        IM_SHIFT: begin
          if (is_sib) begin
            if (cix == 2'(CELL_F)) f_bit <= net_so;
            if (do_loc) begin
              localized_sib_addr <= LOC_AW'(addr);
              loc_valid          <= 1'b1;
            end
            if (cix == 2'(CELL_S)) begin
              cix <= '0;
              addr <= net_so ? addr + 1'b1 : desc.arg[ROM_AW-1:0];
              if (!leaf && f_bit && !net_so) opened <= 1'b1;
            end else begin
              cix <= cix + 1'b1;
            end
          end else if (desc.kind == DESC_TDR) begin
            if (bitcnt == desc.arg - 16'd1) begin
              bitcnt <= '0;
              addr   <= addr + 1'b1;
            end else begin
              bitcnt <= bitcnt + 16'd1;
            end
          end else begin
            state <= IM_UPD;  // END: this cycle did not shift
          end
        end
        IM_UPD: begin
          if (opened) begin
            state  <= IM_CAP;
            opened <= 1'b0;
          end else begin
            state <= IM_HOLD;
            hold  <= 4'(HOLDOFF - 1);
          end
          addr <= '0;
        end
        IM_HOLD: begin
          if (hold == '0) state <= IM_IDLE;
          else            hold  <= hold - 4'd1;
        end
        default: state <= IM_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ location FIFO
  always_ff @(posedge clk) begin
    if (rst) begin
      q_wr <= '0;
      q_rd <= '0;
      q_cnt <= '0;
      loc_fifo_overflow <= 1'b0;
    end else begin
      logic push, pop;
      push = do_loc && (q_cnt != (QW+1)'(LOC_DEPTH));
      pop  = loc_fifo_pop && (q_cnt != '0);
      if (do_loc && !push) loc_fifo_overflow <= 1'b1;
      if (push) begin
        q_mem[q_wr] <= LOC_AW'(addr);
        q_wr        <= (q_wr == QW'(LOC_DEPTH - 1)) ? '0 : q_wr + 1'b1;
      end
      if (pop) q_rd <= (q_rd == QW'(LOC_DEPTH - 1)) ? '0 : q_rd + 1'b1;
      q_cnt <= q_cnt + (QW+1)'(push) - (QW+1)'(pop);
    end
  end

  assign loc_fifo_empty = (q_cnt == '0);
  assign loc_fifo_data  = q_mem[q_rd];

  // ------------------------------------------------------------ assertions
  a_one_op: assert property (@(posedge clk) disable iff (rst)
                             $onehot0({net_ce, net_se, net_ue}));
  a_own_sel: assert property (@(posedge clk) disable iff (rst) own |-> net_sel);

endmodule
