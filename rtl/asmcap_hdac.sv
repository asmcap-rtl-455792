// asmcap_hdac -- Hamming-Distance Aid Correction for the M rows of one array.
//
// Each read is searched twice on the unrotated read: once with ED* and once
// with Hamming distance. Where the two match results of a row disagree, the
// row takes the HD result with probability p and keeps the ED* result
// otherwise; where they agree nothing changes. p = f(e_s, e_id, T) is worked
// out off-line and arrives as a 16-bit fraction of 2^16.
//
// The uniform random number X of each row is the state of a 16-bit Galois
// LFSR (polynomial x^16 + x^14 + x^13 + x^11 + 1, never zero) taken as
// X = x / 2^16, and HD is chosen when x < p. Every row has its own LFSR,
// seeded from `seed` (sampled during reset) and the row index; all of them advance by one step on each
// clock edge with `step` high, i.e. once per decision.
//
// Timing: o and hd_sel are combinational from o_eds, o_hd, p and the LFSR
// states. Following the paper: the decision rule of its HDAC algorithm. Own
// choice: the LFSR random source and the fixed-point p.
module asmcap_hdac
  import asmcap_pkg::*;
#(
  parameter int unsigned M = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [15:0]       seed,
  input  logic              step,
  input  logic [M-1:0]      o_eds,
  input  logic [M-1:0]      o_hd,
  input  logic [P_BITS-1:0] p,
  output logic [M-1:0]      o,
  output logic [M-1:0]      hd_sel   // row took the HD result
);
  localparam logic [15:0] TAPS = 16'hB400;

  function automatic logic [15:0] row_seed(logic [15:0] sd, logic [15:0] r);
    logic [15:0] v;
    v = sd ^ (r * 16'h9E37);
    return (v == 16'h0) ? 16'h1 : v;
  endfunction

  logic [15:0] lfsr [M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < M; r++) lfsr[r] <= row_seed(seed, 16'(r));
    end else if (step) begin
      for (int unsigned r = 0; r < M; r++)
        lfsr[r] <= (lfsr[r] >> 1) ^ (lfsr[r][0] ? TAPS : 16'h0);
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < M; r++) begin
      hd_sel[r] = (o_hd[r] != o_eds[r]) && (lfsr[r] < p);
      o[r]      = hd_sel[r] ? o_hd[r] : o_eds[r];
    end
  end
endmodule
