// ctrl_shift_reg: serial-in, parallel-out register that holds the control
// word of the delay line, one bit per stage.
//
// The board microcontroller loads it over three wires: while shift_en is
// high, every rising edge of clk shifts sdi in at bit 0 and moves the word
// one place towards the MSB, so a word sent MSB first is complete after
// WIDTH clocks. sdo is the MSB, for read-back or for chaining a second
// channel. The parallel outputs drive the stage multiplexers directly, as
// in the published design, so the selection changes bit by bit while a
// word is loaded; pulses passing during a load see intermediate delays.
// rst_n clears the word asynchronously, which selects the zero-delay path
// in every stage. Width 24 is the published size; the serial protocol,
// bit order and reset are this design's choices.
module ctrl_shift_reg #(
  parameter int unsigned WIDTH = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift_en,
  input  logic             sdi,
  output logic             sdo,
  output logic [WIDTH-1:0] word
);
  timeunit 1ps;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        word <= '0;
    else if (shift_en) word <= {word[WIDTH-2:0], sdi};
  end

  assign sdo = word[WIDTH-1];

endmodule
