// tdr: test data register of an embedded instrument.
//
// A WIDTH-bit shift register between si and so. On a capture (sel & ce) it
// loads the instrument's parallel word din; on a shift (sel & se) it moves one
// bit toward so, taking si into the LSB, so the captured word leaves so MSB
// first (WIDTH >= 2). The instruments of this design are read-only, so the register has
// no update stage. All on the rising edge of tck, with a synchronous rst.
//
// From the paper: the TDR that is connected in parallel with the instrument's
// status register and read by shifting (16 bits in the case study), and the
// MSB-first order, which the case-study waveform of the read-out register
// shows (ffe9 moving up one bit per clock). No update stage and the reset
// value are this design's own choice.
module tdr #(
  parameter int unsigned WIDTH = 16
) (
  input  logic             tck,
  input  logic             rst,
  input  logic             sel,
  input  logic             ce,
  input  logic             se,
  input  logic             si,
  output logic             so,
  input  logic [WIDTH-1:0] din
);

  logic [WIDTH-1:0] shreg;

  always_ff @(posedge tck) begin
    if (rst) begin
      shreg <= '0;
    end else if (sel) begin
      if (ce)      shreg <= din;
      else if (se) shreg <= {shreg[WIDTH-2:0], si};
    end
  end

  assign so = shreg[WIDTH-1];

endmodule
