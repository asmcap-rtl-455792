// asmcap_matchline -- the capacitive matchline of one row, as its digital
// equivalent.
//
// In silicon every cell output O drives the bottom plate of an equal MIM
// capacitor whose top plate is the matchline, so charge sharing settles the
// line at V_ML = (n_mis / N) * VDD, where n_mis is the number of mismatched
// cells. This module returns n_mis itself, i.e. V_ML in steps of VDD/N: the
// count of ones in the N cell outputs. It is combinational, like the
// charge-domain line, which needs no precharge and no sampling time.
// Following the paper: the linear V_ML law. Own choice: representing the
// voltage by its exact step count (capacitor mismatch is not modelled).
module asmcap_matchline #(
  parameter int unsigned N  = 256,
  parameter int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  o,
  output logic [CW-1:0] n_mis
);
  assign n_mis = CW'($countones(o));
endmodule
