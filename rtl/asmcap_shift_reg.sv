// asmcap_shift_reg -- the read shift registers with enable of an ASMCap array.
//
// Holds the N-base read (or k-mer) that is searched. On a clock edge with
// ld_en the read is loaded; with rot_en it is rotated by one base, right
// (base j moves to j+1, the last base wraps to position 0) or left (base j
// moves to j-1, base 0 wraps to the end). Base 0 is the leftmost base. Load
// wins over rotation. Output q is the register content.
// Following the paper: base-by-base left or right rotation with an enable,
// used by sequence rotation. Own choice: the load port and its priority.
module asmcap_shift_reg
  import asmcap_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld_en,
  input  base_t [N-1:0] ld_data,
  input  logic          rot_en,
  input  rot_dir_e      rot_dir,
  output base_t [N-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else if (ld_en) q <= ld_data;
    else if (rot_en) begin
      if (rot_dir == ROT_RIGHT) begin
        q[0] <= q[N-1];
        for (int unsigned j = 1; j < N; j++) q[j] <= q[j-1];
      end else begin
        q[N-1] <= q[0];
        for (int unsigned j = 0; j < N - 1; j++) q[j] <= q[j+1];
      end
    end
  end
endmodule
