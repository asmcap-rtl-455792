// asmcap_sl_driver -- searchline buffer and driver of an ASMCap array.
//
// A register stage that turns the bases to be written or searched into
// differential SL/SLbar rails for all N columns. On a clock edge with wr_en
// it latches wr_data, with srch_en it latches srch_data (the shift-register
// output); the rails then carry SL = base, SLbar = ~base for one cycle. With
// neither, both rails of every column are driven low, which neither writes
// nor matches anything. wr_en and srch_en must not be high together.
// Following the paper: buffer plus driver of SL and SLbar shared by writes and
// searches. Own choice: the single register stage and the low idle level.
module asmcap_sl_driver
  import asmcap_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  base_t [N-1:0]        wr_data,
  input  logic                 srch_en,
  input  base_t [N-1:0]        srch_data,
  output logic  [N-1:0][1:0]   sl,
  output logic  [N-1:0][1:0]   sl_b
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sl   <= '0;
      sl_b <= '0;
    end else if (wr_en) begin
      sl   <= wr_data;
      sl_b <= ~wr_data;
    end else if (srch_en) begin
      sl   <= srch_data;
      sl_b <= ~srch_data;
    end else begin
      sl   <= '0;
      sl_b <= '0;
    end
  end

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && srch_en))
    else $error("asmcap_sl_driver: write and search in the same cycle");
endmodule
