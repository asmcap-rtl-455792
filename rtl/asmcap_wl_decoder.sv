// asmcap_wl_decoder -- row decoder and wordline driver of an ASMCap array.
//
// When wr_en is high on a clock edge the decoder registers the one-hot
// decode of addr, so exactly one wordline is high during the following cycle
// (the cycle in which the SL driver holds the write data); otherwise all
// wordlines are low. Searches need no wordline: every row is searched at
// once through the SLs. An address at or beyond M selects no row.
// Following the paper: decoder plus WL driver selecting the written row. Own
// choice: one registered stage, one write per cycle.
module asmcap_wl_decoder #(
  parameter int unsigned M  = 256,
  parameter int unsigned AW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] addr,
  output logic [M-1:0]  wl
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wl <= '0;
    else begin
      wl <= '0;
      if (wr_en) begin
        for (int unsigned r = 0; r < M; r++) wl[r] <= (addr == AW'(r));
      end
    end
  end
endmodule
