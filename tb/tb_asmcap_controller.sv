// tb_asmcap_controller -- command sequences issued for writes and searches
// under every HDAC/TASR combination: LOAD, ED0, [HD0], [N_R x ROT], with the
// rotate and last flags, HDAC skipped when p < P_MIN, rotations skipped when
// T < T_l, the cycle count per read, and the stall on an empty buffer.
module tb_asmcap_controller;
  import asmcap_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, gb_valid, gb_ready, cmd_valid, busy, stall;
  host_op_e instr_op;
  logic [FW-1:0] instr_array, instr_row;
  base_t [N-1:0] instr_data, gb_data, cmd_data;
  cfg_t instr_cfg;
  acmd_ctrl_t cmd_ctrl;
  int checks = 0, failures = 0, stalls = 0;

  asmcap_controller #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (stall) stalls++;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic issue(host_op_e op);
    @(negedge clk);
    instr_valid = 1; instr_op = op;
    while (!instr_ready) @(negedge clk);
  endtask

  task automatic do_search(int t, int t_l, int n_r, bit hen, int p, bit delay_gb);
    int hd, nrot, cyc;
    logic [2*N-1:0] rd;
    // configure
    issue(OP_CONFIG);
    instr_cfg = '{t: 16'(t), t_l: 16'(t_l), n_r: 8'(n_r), rot_dir: ROT_LEFT,
                  hdac_en: hen, p: 16'(p)};
    @(negedge clk); instr_valid = 0;
    hd = (hen && p >= 655) ? 1 : 0;
    nrot = (t >= t_l) ? n_r : 0;
    rd = 8'($urandom);
    gb_data = rd; gb_valid = !delay_gb;
    issue(OP_SEARCH);
    if (delay_gb) begin
      @(negedge clk); instr_valid = 0;
      repeat (3) @(negedge clk);
      gb_valid = 1;
    end
    // LOAD
    #1;
    chk(cmd_valid && cmd_ctrl.op == ACMD_LOAD && gb_ready && cmd_data == rd, "load");
    cyc = 1;
    @(negedge clk); instr_valid = 0; gb_valid = 0;
    for (int k = 0; k < 1 + hd + nrot; k++) begin
      step_e ek;
      automatic bit last = (k == hd + nrot);
      ek = (k == 0) ? STEP_ED0 : (k == 1 && hd == 1) ? STEP_HD0 : STEP_ROT;
      chk(cmd_valid && cmd_ctrl.op == ACMD_SEARCH, "search op");
      chk(cmd_ctrl.kind == ek, $sformatf("kind k=%0d got %0d", k, cmd_ctrl.kind));
      chk(cmd_ctrl.mode == ((ek == STEP_HD0) ? MODE_HD : MODE_EDS), "mode");
      chk(cmd_ctrl.last == last, "last");
      chk(cmd_ctrl.rot_en == (!last && nrot > 0 && k + 1 >= 1 + hd), "rot_en");
      chk(cmd_ctrl.threshold == 16'(t) && cmd_ctrl.p == 16'(p), "threshold/p");
      chk(cmd_ctrl.rot_dir == ROT_LEFT, "rot_dir");
      if (ek == STEP_ED0) chk(cmd_ctrl.hd_follows == (hd == 1), "hd_follows");
      cyc++;
      @(negedge clk);
    end
    chk(!cmd_valid && instr_ready && !busy, "idle after read");
    chk(cyc == 2 + hd + nrot, "cycles per read");
  endtask

  initial begin
    instr_valid = 0; instr_op = OP_NOP; instr_array = 0; instr_row = 0;
    instr_data = 0; instr_cfg = '0; gb_valid = 0; gb_data = 0;
    #12 rst_n = 1;
    // write
    issue(OP_WRITE_REF); instr_array = 16'd3; instr_row = 16'd2; instr_data = 8'hA5;
    #1;
    chk(cmd_valid && cmd_ctrl.op == ACMD_WRITE && cmd_ctrl.array_id == 3 &&
        cmd_ctrl.row == 2 && cmd_data == 8'hA5, "write cmd");
    @(negedge clk); instr_valid = 0;
    #1 chk(!cmd_valid, "write one cycle");
    do_search(1, 2, 2, 0, 0, 0);        // T < T_l, no HDAC
    do_search(3, 2, 2, 0, 0, 0);        // TASR
    do_search(3, 2, 2, 1, 30000, 0);    // HDAC + TASR
    do_search(1, 2, 2, 1, 30000, 1);    // HDAC only, stalled
    do_search(1, 2, 2, 1, 100, 0);      // HDAC skipped: p below 1%
    do_search(5, 5, 3, 0, 0, 0);        // T == T_l, three rotations
    chk(stalls > 0, "stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
