// im_rom: network description read by the instrument manager.
//
// One 32-bit descriptor per scan element, in the order the elements' cells
// leave the network's SO (a pre-order walk of the SIB tree). A descriptor's
// ROM address is the element's address: the addresses of SIB-1, SIB-3 and
// SIB-2 are 0x0000, 0x0001 and 0x0003. Field layout (ijtag_pkg::rom_desc_t):
// [31:24] kind, [23:16] hierarchy level, [15:0] for a SIB the address just
// past its subtree (where the walk continues when the SIB is closed), for a
// TDR its length in bits. Unused addresses read as END.
//
//   addr  element  word
//   000   SIB-1    00_00_0005   level 0, subtree ends at 5
//   001   SIB-3    02_01_0003   leaf SIB, level 1
//   002   TDR-1    01_02_0010   16 bits (XADC temperature)
//   003   SIB-2    02_01_0005   leaf SIB, level 1
//   004   TDR-2    01_02_0010   16 bits (MPU6050 checker word)
//   005   END      03_00_0000
//
// Read is combinational (address to data in the same cycle).
// From the paper: a ROM holding the addresses of the SIBs and TDRs, 16-bit
// locations, the SIB addresses above, a 12-bit ROM address and 32-bit words.
// The descriptor encoding is this design's own; it reproduces two of the
// words seen in the case-study waveform (00000005 and 03000000).
module im_rom
  import ijtag_pkg::*;
#(
  parameter int unsigned TDR1_W = 16,
  parameter int unsigned TDR2_W = 16
) (
  input  logic [ROM_AW-1:0] addr,
  output logic [ROM_DW-1:0] data
);

  function automatic logic [ROM_DW-1:0] content(input int unsigned a);
    case (a)
      0:       return sib_desc(1'b0, 8'd0, 16'(SIB2_ADDR + 16'd2));  // SIB-1
      1:       return sib_desc(1'b1, 8'd1, 16'(SIB2_ADDR));         // SIB-3
      2:       return tdr_desc(8'd2, 16'(TDR1_W));                   // TDR-1
      3:       return sib_desc(1'b1, 8'd1, 16'(SIB2_ADDR + 16'd2));  // SIB-2
      4:       return tdr_desc(8'd2, 16'(TDR2_W));                   // TDR-2
      default: return END_DESC;
    endcase
  endfunction

  always_comb data = content(int'(addr));

endmodule
