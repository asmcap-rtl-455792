// asmcap_cell -- ASMCap cells: stored reference base, three-way comparison
// logic and the HD/ED* mode multiplexers. K cells that share a wordline are
// described as one bit-parallel vector (K = 1 is a single cell).
//
// Cell i holds one reference base in two SRAM bits. The comparison logic
// matches it against three read bases carried on SL pairs: the co-located
// base (O_C), its left neighbour (O_L) and its right neighbour (O_R). A
// partial result is 1 when the bases are equal; each bit is compared as
// (D & SL) | (Dbar & SLbar), as a CAM pull-down would, so a neighbour whose
// rails are both 0 (absent at the row ends) never matches. The multiplexers,
// steered by the array-wide select S, give the cell output
//   S = 1 (ED*): O = ~(O_C | O_L | O_R)
//   S = 0 (HD) : O = ~O_C
// O = 1 means a mismatched cell; it drives the bottom plate of the cell's
// matchline capacitor.
//
// Timing: O is combinational from the SL rails and the stored base. A write
// uses the co-located pair sl_c/slb_c as bitlines and lands on the clock edge
// with wl high. All of this follows the paper; only the flip-flop storage and
// the all-zero idle rails are this design's choices.
module asmcap_cell #(
  parameter int unsigned K = 1
) (
  input  logic              clk,
  input  logic              wl,
  input  logic              s,
  input  logic [K-1:0][1:0] sl_l,
  input  logic [K-1:0][1:0] slb_l,
  input  logic [K-1:0][1:0] sl_c,
  input  logic [K-1:0][1:0] slb_c,
  input  logic [K-1:0][1:0] sl_r,
  input  logic [K-1:0][1:0] slb_r,
  output logic [K-1:0]      o
);
  logic [K-1:0][1:0] d, d_b;
  logic [K-1:0][1:0] e_l, e_c, e_r;   // per-bit equality
  logic [K-1:0]      o_l, o_c, o_r;

  asmcap_sram_bit #(.W(2 * K)) u_sram (
    .clk (clk),
    .wl  (wl),
    .sl  (sl_c),
    .sl_b(slb_c),
    .d   (d),
    .d_b (d_b)
  );

  // Comparison logic.
  assign e_l = (d & sl_l) | (d_b & slb_l);
  assign e_c = (d & sl_c) | (d_b & slb_c);
  assign e_r = (d & sl_r) | (d_b & slb_r);
  always_comb begin
    for (int unsigned i = 0; i < K; i++) begin
      o_l[i] = &e_l[i];
      o_c[i] = &e_c[i];
      o_r[i] = &e_r[i];
    end
  end

  // Mode multiplexers.
  assign o = s ? ~(o_c | o_l | o_r) : ~o_c;
endmodule
