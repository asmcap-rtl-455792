// tb_asmcap_unit -- one ASMCap unit driven with raw H-tree commands: writes
// addressed to it (and to another unit, ignored), the HDAC figure example
// (ED* = 1, HD = 5, T = 4: p = 0 keeps ED* 'match', p = max takes HD
// 'mismatch'), the TASR figure example (T = 3 with two right rotations
// matches, T = 1 without rotation does not), all rows against the model, and
// the 3-cycle latency from the last search cycle to res_valid.
module tb_asmcap_unit;
  import asmcap_pkg::*;
  import tb_asmcap_ref_pkg::*;
  localparam int M = 4, N = 16;
  logic clk = 0, rst_n = 0, cmd_valid, res_valid;
  logic [FW-1:0] unit_id;
  logic [15:0] seed;
  acmd_ctrl_t cmd_ctrl;
  base_t [N-1:0] cmd_data;
  logic [M-1:0] res;
  seq_t rows[M];
  logic [15:0] x[M];
  int checks = 0, failures = 0;

  asmcap_unit #(.M(M), .N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(array_op_e op, step_e kind, match_mode_e md, bit rot, bit hdf,
                      bit last, int t, int p, int aid, int row, seq_t s);
    @(negedge clk);
    cmd_valid = 1;
    cmd_ctrl = '{op: op, mode: md, rot_en: rot, rot_dir: ROT_RIGHT, kind: kind,
                 hd_follows: hdf, last: last, threshold: 16'(t), array_id: 16'(aid),
                 row: 16'(row), p: 16'(p)};
    for (int i = 0; i < N; i++) cmd_data[i] = s[i];
  endtask

  task automatic wait_res(output logic [M-1:0] r);
    @(negedge clk); cmd_valid = 0;
    repeat (1) begin
      @(negedge clk);
      checks++;
      if (res_valid) begin failures++; $display("FAIL early res_valid"); end
    end
    @(negedge clk);
    checks++;
    if (!res_valid) begin failures++; $display("FAIL res_valid latency"); end
    r = res;
  endtask

  task automatic expect_rows(logic [M-1:0] got, logic [M-1:0] exp, string tag);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s res=%b exp=%b", tag, got, exp); end
  endtask

  initial begin
    logic [M-1:0] r, e;
    seq_t rd, rr;
    unit_id = 16'd2; seed = 16'h5A5A; cmd_valid = 0; cmd_ctrl = '0; cmd_data = '0;
    for (int i = 0; i < M; i++) begin
      x[i] = seed ^ (16'(i) * 16'h9E37);
      if (x[i] == 0) x[i] = 1;
    end
    #12 rst_n = 1;
    rows[0] = str2seq("CCCCAAATTTAGCATT");
    rows[1] = str2seq("CTCTCCAAACACAGTC");
    rows[2] = rand_seq(N);
    rows[3] = rand_seq(N);
    for (int i = 0; i < M; i++) send(ACMD_WRITE, STEP_ED0, MODE_EDS, 0, 0, 0, 0, 0, 2, i, rows[i]);
    send(ACMD_WRITE, STEP_ED0, MODE_EDS, 0, 0, 0, 0, 0, 5, 3, rand_seq(N));  // other unit

    // HDAC example, p = 0
    rd = str2seq("CGCCATATTGATCAAT");
    send(ACMD_LOAD, STEP_ED0, MODE_EDS, 0, 0, 0, 0, 0, 0, 0, rd);
    send(ACMD_SEARCH, STEP_ED0, MODE_EDS, 0, 1, 0, 4, 0, 0, 0, rd);
    send(ACMD_SEARCH, STEP_HD0, MODE_HD, 0, 0, 1, 4, 0, 0, 0, rd);
    wait_res(r);
    for (int i = 0; i < M; i++) e[i] = mis_count(rows[i], rd, 1) <= 4;
    expect_rows(r, e, "hdac p=0");
    checks++; if (!r[0]) begin failures++; $display("FAIL fig ED* match"); end
    for (int i = 0; i < M; i++) x[i] = lfsr_next(x[i]);
    // HDAC example, p = max
    send(ACMD_SEARCH, STEP_ED0, MODE_EDS, 0, 1, 0, 4, 16'hFFFF, 0, 0, rd);
    send(ACMD_SEARCH, STEP_HD0, MODE_HD, 0, 0, 1, 4, 16'hFFFF, 0, 0, rd);
    wait_res(r);
    for (int i = 0; i < M; i++) begin
      automatic bit ee = mis_count(rows[i], rd, 1) <= 4;
      automatic bit hh = mis_count(rows[i], rd, 0) <= 4;
      e[i] = (ee != hh && x[i] < 16'hFFFF) ? hh : ee;
      x[i] = lfsr_next(x[i]);
    end
    expect_rows(r, e, "hdac p=max");
    checks++; if (r[0]) begin failures++; $display("FAIL fig HD correction"); end

    // TASR example, T = 3 with two right rotations
    rd = str2seq("CTCTCCACACAGTCCC");
    send(ACMD_LOAD, STEP_ED0, MODE_EDS, 0, 0, 0, 0, 0, 0, 0, rd);
    send(ACMD_SEARCH, STEP_ED0, MODE_EDS, 1, 0, 0, 3, 0, 0, 0, rd);
    send(ACMD_SEARCH, STEP_ROT, MODE_EDS, 1, 0, 0, 3, 0, 0, 0, rd);
    send(ACMD_SEARCH, STEP_ROT, MODE_EDS, 0, 0, 1, 3, 0, 0, 0, rd);
    wait_res(r);
    for (int i = 0; i < M; i++) begin
      rr = rd; e[i] = mis_count(rows[i], rr, 1) <= 3;
      for (int k = 0; k < 2; k++) begin rr = rotate(rr, 0); e[i] |= mis_count(rows[i], rr, 1) <= 3; end
    end
    expect_rows(r, e, "tasr");
    checks++; if (!r[1]) begin failures++; $display("FAIL fig TASR match"); end
    // T = 1 < T_l: single ED* search, no rotation
    send(ACMD_LOAD, STEP_ED0, MODE_EDS, 0, 0, 0, 0, 0, 0, 0, rd);
    send(ACMD_SEARCH, STEP_ED0, MODE_EDS, 0, 0, 1, 1, 0, 0, 0, rd);
    wait_res(r);
    for (int i = 0; i < M; i++) e[i] = mis_count(rows[i], rd, 1) <= 1;
    expect_rows(r, e, "no rotation");
    checks++; if (r[1]) begin failures++; $display("FAIL fig T=1 must not match"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
