// asmcap_tasr_acc -- result accumulator of Threshold-Aware Sequence Rotation.
//
// The match vector of a read is the OR, row by row, of the results of the
// original read and of its N_R rotations: a row matches if any of them is
// within the threshold. Each input result is marked `first` (the result of
// the unrotated read, possibly HDAC-corrected) or not (a rotated read), and
// `last` (the final result of this read). A read that is not rotated (T < T_l)
// arrives as a single result with both flags set.
//
// Timing: on a clock edge with in_valid the accumulator is updated; with
// `last` also set, o_out takes the final vector and out_valid is high for the
// following cycle. Following the paper: the OR over rotations. Own choice: the
// first/last framing.
module asmcap_tasr_acc #(
  parameter int unsigned M = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         first,
  input  logic         last,
  input  logic [M-1:0] o_in,
  output logic         out_valid,
  output logic [M-1:0] o_out
);
  logic [M-1:0] acc, acc_n;

  assign acc_n = first ? o_in : (acc | o_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      o_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc <= acc_n;
        if (last) o_out <= acc_n;
      end
    end
  end
endmodule
