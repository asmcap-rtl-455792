// asmcap_sense_amp -- the sense amplifier at the end of one matchline.
//
// It compares V_ML with V_ref and outputs 1 ('match') when V_ML <= V_ref.
// With V_ML = n_mis/N VDD and V_ref = T/N VDD, this is n_mis <= T, i.e.
// ED* <= T (or HD <= T in HD mode). Both voltages are represented by their
// step counts. The amplifier is a clocked latch: when en is high on a clock
// edge it resolves and holds its decision until the next enabled edge.
// Following the paper: the comparison and its polarity. Own choice: the
// clocked latch and the digital encoding of V_ref as the threshold T.
module asmcap_sense_amp #(
  parameter int unsigned CW = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [CW-1:0] v_ml,   // n_mis
  input  logic [CW-1:0] v_ref,  // T
  output logic          match
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  match <= 1'b0;
    else if (en) match <= (v_ml <= v_ref);
  end
endmodule
