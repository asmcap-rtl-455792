// asmcap_controller -- instruction controller of the ASMCap accelerator.
//
// It takes instructions from the host with a valid/ready handshake and turns
// them into commands that the H-tree broadcasts to all arrays:
//   OP_CONFIG    latch the matching configuration (T, T_l, N_R, rotation
//                direction, HDAC enable, p)
//   OP_WRITE_REF write instr_data into row instr_row of array instr_array
//   OP_SEARCH    take the next read from the global buffer and match it
//   OP_NOP       nothing
// A search is a LOAD command followed by its search cycles:
//   1. ED* with the unrotated read;
//   2. HD with the unrotated read, only when HDAC is enabled and p >= P_MIN
//      (the paper switches HDAC off when p is below a small bound, e.g. 1%);
//   3. N_R ED* cycles with the read rotated by 1..N_R bases, only when
//      T >= T_l (threshold-aware sequence rotation); the rotation of the
//      shift registers rides on the preceding search cycle.
// So a read costs 1 + 1 + [1] + [N_R] cycles, one command per cycle. If the
// global buffer is empty when a search starts, the controller stalls in
// S_LOAD until a read arrives. instr_ready is high only in S_IDLE; the cycle
// that accepts a search also issues its LOAD when a read is available.
// Following the paper: the HD cycle, the rotation cycles and their trigger
// conditions. Own choice: the instruction set, the state machine and the
// order ED*, HD, rotations.
module asmcap_controller
  import asmcap_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter logic [15:0] P_MIN = 16'd655   // about 1% of 2^16
) (
  input  logic          clk,
  input  logic          rst_n,
  // host instructions
  input  logic          instr_valid,
  output logic          instr_ready,
  input  host_op_e      instr_op,
  input  logic [FW-1:0] instr_array,
  input  logic [FW-1:0] instr_row,
  input  base_t [N-1:0] instr_data,
  input  cfg_t          instr_cfg,
  // global buffer
  input  logic          gb_valid,
  output logic          gb_ready,
  input  base_t [N-1:0] gb_data,
  // command to the H-tree
  output logic          cmd_valid,
  output acmd_ctrl_t    cmd_ctrl,
  output base_t [N-1:0] cmd_data,
  // status
  output logic          busy,
  output logic          stall
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ED0, S_HD0, S_ROT} state_e;

  state_e     state, state_n;
  cfg_t       cfg;
  logic [7:0] rot_cnt, rot_cnt_n;
  logic       do_hd, do_rot;

  assign do_hd  = cfg.hdac_en && (cfg.p >= P_MIN);
  assign do_rot = (cfg.t >= cfg.t_l) && (cfg.n_r != 8'd0);

  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);
  assign stall       = (state == S_LOAD) && !gb_valid;

  always_comb begin
    state_n   = state;
    rot_cnt_n = rot_cnt;
    gb_ready  = 1'b0;
    cmd_valid = 1'b0;
    cmd_ctrl  = '{op: ACMD_NOP, mode: MODE_EDS, rot_en: 1'b0, rot_dir: cfg.rot_dir,
                  kind: STEP_ED0, hd_follows: do_hd, last: 1'b0, threshold: cfg.t,
                  array_id: instr_array, row: instr_row, p: cfg.p};
    cmd_data  = instr_data;
    unique case (state)
      S_IDLE: begin
        if (instr_valid) begin
          unique case (instr_op)
            OP_WRITE_REF: begin
              cmd_valid   = 1'b1;
              cmd_ctrl.op = ACMD_WRITE;
            end
            OP_SEARCH: begin
              if (gb_valid) begin
                gb_ready    = 1'b1;
                cmd_valid   = 1'b1;
                cmd_ctrl.op = ACMD_LOAD;
                cmd_data    = gb_data;
                state_n     = S_ED0;
              end else begin
                state_n = S_LOAD;
              end
            end
            default: ;
          endcase
        end
      end
      S_LOAD: begin
        if (gb_valid) begin
          gb_ready    = 1'b1;
          cmd_valid   = 1'b1;
          cmd_ctrl.op = ACMD_LOAD;
          cmd_data    = gb_data;
          state_n     = S_ED0;
        end
      end
      S_ED0: begin
        cmd_valid       = 1'b1;
        cmd_ctrl.op     = ACMD_SEARCH;
        cmd_ctrl.kind   = STEP_ED0;
        cmd_ctrl.mode   = MODE_EDS;
        cmd_ctrl.rot_en = !do_hd && do_rot;
        cmd_ctrl.last   = !do_hd && !do_rot;
        rot_cnt_n       = 8'd1;
        state_n         = do_hd ? S_HD0 : (do_rot ? S_ROT : S_IDLE);
      end
      S_HD0: begin
        cmd_valid       = 1'b1;
        cmd_ctrl.op     = ACMD_SEARCH;
        cmd_ctrl.kind   = STEP_HD0;
        cmd_ctrl.mode   = MODE_HD;
        cmd_ctrl.rot_en = do_rot;
        cmd_ctrl.last   = !do_rot;
        state_n         = do_rot ? S_ROT : S_IDLE;
      end
      S_ROT: begin
        cmd_valid       = 1'b1;
        cmd_ctrl.op     = ACMD_SEARCH;
        cmd_ctrl.kind   = STEP_ROT;
        cmd_ctrl.mode   = MODE_EDS;
        cmd_ctrl.rot_en = (rot_cnt != cfg.n_r);
        cmd_ctrl.last   = (rot_cnt == cfg.n_r);
        rot_cnt_n       = rot_cnt + 8'd1;
        if (rot_cnt == cfg.n_r) state_n = S_IDLE;
      end
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rot_cnt <= 8'd0;
      cfg     <= '{t: '0, t_l: '0, n_r: 8'd2, rot_dir: ROT_RIGHT, hdac_en: 1'b0, p: '0};
    end else begin
      state   <= state_n;
      rot_cnt <= rot_cnt_n;
      if (state == S_IDLE && instr_valid && instr_op == OP_CONFIG) cfg <= instr_cfg;
    end
  end

  // The configuration must not change while a read is being searched.
  a_cfg_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 busy |=> $stable(cfg));
endmodule
