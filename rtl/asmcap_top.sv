// asmcap_top -- the ASMCap approximate string matching accelerator.
//
// Reference segments of N bases are stored one per row in NUM_ARRAYS arrays
// of M rows. Reads of N bases stream from the read memory into the global
// buffer; for every OP_SEARCH the controller takes one read and broadcasts it,
// with its search cycles, through the H-tree to all arrays at once. Every
// unit answers with an M-bit match vector (1 = the row's reference segment is
// within the threshold T of the read under ED*, corrected by HDAC and TASR
// when they are enabled); all units answer in the same cycle on res_valid.
// The host CPU and the read memory are outside this module: their ports are
// the instruction port and the read stream port.
//
// Timing: an instruction is taken on a clock edge with instr_valid and
// instr_ready. A read costs 2 + [1 HD cycle] + [N_R rotation cycles] cycles
// of the controller; its result appears log2(NUM_ARRAYS) + 4 cycles after its
// last search cycle left the controller (H-tree log2(NUM_ARRAYS)+1, array 2,
// accumulator 1). Reads can follow back to back.
// Following the paper: 512 arrays of 256 x 256 cells and the block structure
// (controller, global buffer, H-tree, arrays). Own choice: the port
// protocols, the global buffer depth and the result port.
module asmcap_top
  import asmcap_pkg::*;
#(
  parameter int unsigned NUM_ARRAYS = 16,
  parameter int unsigned M          = 256,
  parameter int unsigned N          = 256,
  parameter int unsigned GB_DEPTH   = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // host CPU instruction port
  input  logic          instr_valid,
  output logic          instr_ready,
  input  host_op_e      instr_op,
  input  logic [FW-1:0] instr_array,
  input  logic [FW-1:0] instr_row,
  input  base_t [N-1:0] instr_data,
  input  cfg_t          instr_cfg,
  // read stream from the read memory
  input  logic          mem_valid,
  output logic          mem_ready,
  input  base_t [N-1:0] mem_data,
  // results
  output logic          res_valid,
  output logic [M-1:0]  res [NUM_ARRAYS],
  output logic          busy
);
  localparam int unsigned CTRL_W = $bits(acmd_ctrl_t);
  localparam int unsigned PKT_W  = CTRL_W + 2 * N;
  localparam int unsigned GPW    = (GB_DEPTH > 1) ? $clog2(GB_DEPTH) : 1;

  logic          gb_valid, gb_ready, stall;
  base_t [N-1:0] gb_data;
  logic [GPW:0]  gb_level;
  logic          cmd_valid;
  acmd_ctrl_t    cmd_ctrl;
  base_t [N-1:0] cmd_data;
  logic          leaf_valid [NUM_ARRAYS];
  logic [PKT_W-1:0] leaf_data [NUM_ARRAYS];
  logic          unit_valid [NUM_ARRAYS];

  asmcap_global_buffer #(.N(N), .DEPTH(GB_DEPTH)) u_gb (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (mem_valid),
    .in_ready (mem_ready),
    .in_data  (mem_data),
    .out_valid(gb_valid),
    .out_ready(gb_ready),
    .out_data (gb_data),
    .level    (gb_level)
  );

  asmcap_controller #(.N(N)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .instr_valid(instr_valid),
    .instr_ready(instr_ready),
    .instr_op   (instr_op),
    .instr_array(instr_array),
    .instr_row  (instr_row),
    .instr_data (instr_data),
    .instr_cfg  (instr_cfg),
    .gb_valid   (gb_valid),
    .gb_ready   (gb_ready),
    .gb_data    (gb_data),
    .cmd_valid  (cmd_valid),
    .cmd_ctrl   (cmd_ctrl),
    .cmd_data   (cmd_data),
    .busy       (busy),
    .stall      (stall)
  );

  asmcap_htree #(.W(PKT_W), .LEAVES(NUM_ARRAYS)) u_htree (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (cmd_valid),
    .in_data  ({cmd_ctrl, cmd_data}),
    .out_valid(leaf_valid),
    .out_data (leaf_data)
  );

  for (genvar a = 0; a < NUM_ARRAYS; a++) begin : g_unit
    acmd_ctrl_t    u_ctrl_f;
    base_t [N-1:0] u_data_f;
    assign {u_ctrl_f, u_data_f} = leaf_data[a];
    asmcap_unit #(.M(M), .N(N)) u_unit (
      .clk      (clk),
      .rst_n    (rst_n),
      .unit_id  (FW'(a)),
      .seed     (16'hACE1 ^ 16'(a * 16'h3B5)),
      .cmd_valid(leaf_valid[a]),
      .cmd_ctrl (u_ctrl_f),
      .cmd_data (u_data_f),
      .res_valid(unit_valid[a]),
      .res      (res[a])
    );
  end

  assign res_valid = unit_valid[0];
endmodule
