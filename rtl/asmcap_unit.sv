// asmcap_unit -- one ASMCap unit: an ASMCap array plus the per-row logic that
// folds its search cycles into one match vector per read.
//
// The unit decodes the command broadcast by the H-tree: writes addressed to
// unit_id go to the array, loads and search cycles go to every unit. Each
// search cycle carries a tag (kind, hd_follows, last, p) that travels beside
// the array's two-cycle pipeline. When the array result of a cycle appears:
//   ED0 with an HD cycle following : kept as the ED* result
//   HD0                            : HDAC picks, row by row, between the kept
//                                    ED* result and this HD result
//   ED0 alone, or HD0              : starts the TASR accumulation
//   ROT                            : ORed into the accumulation
// and the cycle marked `last` releases the read's match vector on res.
//
// Timing: res_valid comes 3 cycles after the last search cycle of a read
// entered the unit (2 in the array, 1 in the accumulator). The threshold is
// clamped to N before it sets V_ref. The composition of HDAC and TASR for one
// read is this design's choice; the paper describes them separately.
module asmcap_unit
  import asmcap_pkg::*;
#(
  parameter int unsigned M       = 256,
  parameter int unsigned N       = 256,
  parameter int unsigned AW      = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned CW      = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [FW-1:0] unit_id,   // position of this unit, for writes
  input  logic [15:0]   seed,      // HDAC random seed, taken during reset
  input  logic          cmd_valid,
  input  acmd_ctrl_t    cmd_ctrl,
  input  base_t [N-1:0] cmd_data,
  output logic          res_valid,
  output logic [M-1:0]  res
);
  typedef struct packed {
    step_e             kind;
    logic              hd_follows;
    logic              last;
    logic [P_BITS-1:0] p;
  } tag_t;

  logic          wr_en, ld_en, srch_en;
  logic [CW-1:0] thr;
  logic          match_valid;
  logic [M-1:0]  match;
  tag_t          tag_in, tag_q1, tag_q2;
  logic [M-1:0]  eds_q;
  logic [M-1:0]  hdac_o, hd_sel;
  logic          acc_valid, acc_first;
  logic [M-1:0]  acc_in;

  assign wr_en   = cmd_valid && (cmd_ctrl.op == ACMD_WRITE) && (cmd_ctrl.array_id == unit_id);
  assign ld_en   = cmd_valid && (cmd_ctrl.op == ACMD_LOAD);
  assign srch_en = cmd_valid && (cmd_ctrl.op == ACMD_SEARCH);
  assign thr     = (cmd_ctrl.threshold > FW'(N)) ? CW'(N) : CW'(cmd_ctrl.threshold);

  asmcap_array #(.M(M), .N(N), .AW(AW), .CW(CW)) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (wr_en),
    .wr_addr    (AW'(cmd_ctrl.row)),
    .wr_data    (cmd_data),
    .ld_en      (ld_en),
    .ld_data    (cmd_data),
    .srch_en    (srch_en),
    .mode       (cmd_ctrl.mode),
    .rot_en     (cmd_ctrl.rot_en),
    .rot_dir    (cmd_ctrl.rot_dir),
    .threshold  (thr),
    .match_valid(match_valid),
    .match      (match)
  );

  assign tag_in = '{kind: cmd_ctrl.kind, hd_follows: cmd_ctrl.hd_follows,
                    last: cmd_ctrl.last, p: cmd_ctrl.p};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_q1 <= '0;
      tag_q2 <= '0;
      eds_q  <= '0;
    end else begin
      if (srch_en) tag_q1 <= tag_in;
      tag_q2 <= tag_q1;
      if (match_valid && tag_q2.kind == STEP_ED0) eds_q <= match;
    end
  end

  asmcap_hdac #(.M(M)) u_hdac (
    .clk   (clk),
    .rst_n (rst_n),
    .seed  (seed),
    .step  (match_valid && tag_q2.kind == STEP_HD0),
    .o_eds (eds_q),
    .o_hd  (match),
    .p     (tag_q2.p),
    .o     (hdac_o),
    .hd_sel(hd_sel)
  );

  assign acc_valid = match_valid && !(tag_q2.kind == STEP_ED0 && tag_q2.hd_follows);
  assign acc_first = (tag_q2.kind != STEP_ROT);
  assign acc_in    = (tag_q2.kind == STEP_HD0) ? hdac_o : match;

  asmcap_tasr_acc #(.M(M)) u_tasr (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (acc_valid),
    .first    (acc_first),
    .last     (tag_q2.last),
    .o_in     (acc_in),
    .out_valid(res_valid),
    .o_out    (res)
  );
endmodule
