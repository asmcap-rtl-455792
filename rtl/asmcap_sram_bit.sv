// asmcap_sram_bit -- W 6T SRAM bits of ASMCap cells, as logic.
//
// A transistor bit is two cross-coupled inverters with two access
// transistors gated by the wordline WL; the searchline pair SL/SLbar doubles
// as its bitline pair. Here each stored node D is a flip-flop: when WL is high
// on a clock edge and the bit's pair is driven differentially (SL != SLbar),
// D takes SL. With both rails low (the idle level of the SL driver) the bit
// keeps its value. D and Dbar feed the comparison logic. W bits sharing one
// wordline are written as one vector so that a row of cells stays compact.
//
// Timing: a write lands at the clock edge that samples WL high; D is valid in
// the next cycle. Storage is not reset, as an SRAM is not.
// Following the paper: the WL/SL/SLbar/D/Dbar ports. Own choice: the
// clocked, differential-only write.
module asmcap_sram_bit #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         wl,
  input  logic [W-1:0] sl,
  input  logic [W-1:0] sl_b,
  output logic [W-1:0] d,
  output logic [W-1:0] d_b
);
  always_ff @(posedge clk) begin
    if (wl) d <= (d & ~(sl ^ sl_b)) | (sl & (sl ^ sl_b));
  end
  assign d_b = ~d;
endmodule
