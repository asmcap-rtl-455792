// asmcap_row -- one row of an ASMCap array: N cells sharing a wordline and a
// matchline.
//
// Cell i sees the SL pairs of read bases i-1, i and i+1. The row ends have no
// outer neighbour: that input is tied to both-rails-low, so it never matches
// (the paper does not describe the row ends; this is this design's choice).
// The mismatch outputs of the cells are summed by the matchline. Combinational
// from the SL rails to n_mis; writes land on the clock edge with wl high.
// N must be at least 2.
module asmcap_row #(
  parameter int unsigned N  = 256,
  parameter int unsigned CW = $clog2(N + 1)
) (
  input  logic                clk,
  input  logic                wl,
  input  logic                s,
  input  logic [N-1:0][1:0]   sl,
  input  logic [N-1:0][1:0]   sl_b,
  output logic [CW-1:0]       n_mis
);
  logic [N-1:0] o;

  asmcap_cell #(.K(N)) u_cells (
    .clk  (clk),
    .wl   (wl),
    .s    (s),
    .sl_l ({sl[N-2:0], 2'b00}),     // cell i sees base i-1
    .slb_l({sl_b[N-2:0], 2'b00}),
    .sl_c (sl),
    .slb_c(sl_b),
    .sl_r ({2'b00, sl[N-1:1]}),     // cell i sees base i+1
    .slb_r({2'b00, sl_b[N-1:1]}),
    .o    (o)
  );

  asmcap_matchline #(.N(N), .CW(CW)) u_ml (
    .o    (o),
    .n_mis(n_mis)
  );
endmodule
