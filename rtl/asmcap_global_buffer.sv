// asmcap_global_buffer -- global buffer between the read memory and the
// ASMCap arrays.
//
// A first-in first-out store of DEPTH entries, each one read (or k-mer) of N
// bases, written by the memory side and read by the controller, both with
// valid/ready handshakes. A transfer happens on a clock edge where valid and
// ready are both high. out_data shows the oldest entry while out_valid is
// high. Simultaneous push and pop are allowed when not empty. `level` is the
// number of stored entries. Following the paper: a buffer that hands reads to
// the arrays. Own choice: the FIFO organisation, DEPTH and the handshakes;
// cutting long reads into N-base k-mers is left to the memory side.
module asmcap_global_buffer
  import asmcap_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned PW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  base_t [N-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output base_t [N-1:0] out_data,
  output logic [PW:0]   level
);
  base_t [N-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (level < (PW + 1)'(DEPTH));
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + (PW + 1)'(push) - (PW + 1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) level <= (PW + 1)'(DEPTH));
endmodule
