// ap_load_reg: activation package load register (AP_LOAD_REG).
//
// A serial-in, parallel-out shift register in the manner of a scan chain.
// While load_en (LOAD_en) is high, each rising clock edge shifts the bit on
// ap_in (AP_in) into bit 0 and moves every other bit one place up, so after
// WIDTH enabled cycles the first bit sent sits in ap_out[WIDTH-1]: the
// package is sent most significant bit first.  When load_en is low the
// register holds, and ap_out drives the select lines of the obfuscation
// MUXes in parallel.  rst (RST) clears the register synchronously, which
// leaves the interconnect in the all-zero, non-intended configuration until
// a package is loaded.
//
// The serial loading through one pin, the enable and the reset follow the
// loader described for ObNoCs.  The loader there gates the clock with
// LOAD_en; here the same behaviour is written as a clock enable on ordinary
// flip-flops, which avoids a gated clock.  The shift direction, bit order and
// synchronous reset are this design's choices.  The same module also serves
// as the key register ("routing key box") of the POTENT switches.
//
// Timing: one bit per enabled cycle; a WIDTH-bit package takes WIDTH cycles.
module ap_load_reg #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             load_en,
  input  logic             ap_in,
  output logic [WIDTH-1:0] ap_out
);

  logic [WIDTH-1:0] shreg;

  always_ff @(posedge clk) begin
    if (rst)          shreg <= '0;
    else if (load_en) shreg <= {shreg[WIDTH-2:0], ap_in};
  end

  assign ap_out = shreg;

endmodule
