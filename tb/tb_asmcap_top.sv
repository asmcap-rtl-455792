// tb_asmcap_top -- end-to-end test of the accelerator at reduced size
// (4 arrays of 6 x 16 cells). Reference rows are written through the host
// port, reads stream in through the read port, and a series of searches runs
// under different thresholds and HDAC/TASR settings. Every row of every
// array is compared with a model that applies ED*, HD, the per-row LFSR of
// HDAC and the OR over rotations. It counts how often each mechanism
// happened -- buffer-empty stall, buffer full, HD cycle, HDAC switched off by
// a small p, HDAC taking the HD result, TASR rotations right and left, TASR
// skipped because T < T_l -- and fails if one never did.
module tb_asmcap_top;
  import asmcap_pkg::*;
  import tb_asmcap_ref_pkg::*;
  localparam int NA = 4, M = 6, N = 16;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, mem_valid, mem_ready, res_valid, busy;
  host_op_e instr_op;
  logic [FW-1:0] instr_array, instr_row;
  base_t [N-1:0] instr_data, mem_data;
  cfg_t instr_cfg;
  logic [M-1:0] res [NA];

  seq_t rows[NA][M];
  logic [15:0] x[NA][M];
  seq_t reads[$];
  logic [M-1:0] expq[$][NA];
  int checks = 0, failures = 0, results = 0;
  int n_stall = 0, n_full = 0, n_hd = 0, n_hdoff = 0, n_hdsel = 0;
  int n_rotr = 0, n_rotl = 0, n_norot = 0;

  asmcap_top #(.NUM_ARRAYS(NA), .M(M), .N(N), .GB_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (dut.u_ctrl.stall) n_stall++;
    if (mem_valid && !mem_ready) n_full++;
    if (dut.g_unit[1].u_unit.u_hdac.step && |dut.g_unit[1].u_unit.hd_sel) n_hdsel++;
    if (res_valid) begin
      logic [M-1:0] e [NA];
      e = expq.pop_front();
      results++;
      for (int a = 0; a < NA; a++) begin
        checks++;
        if (res[a] !== e[a]) begin
          failures++;
          $display("FAIL result %0d array %0d res=%b exp=%b", results, a, res[a], e[a]);
        end
      end
    end
  end

  // read memory side: streams the queued reads with random gaps
  initial begin
    mem_valid = 0; mem_data = '0;
    @(posedge rst_n);
    repeat (150) @(negedge clk);   // late start: the first search stalls
    forever begin
      @(negedge clk);
      if (mem_valid && mem_ready) begin mem_valid = 0; void'(reads.pop_front()); end
      if (!mem_valid && reads.size() > 0 && $urandom_range(0, 3) != 0) begin
        mem_valid = 1;
        for (int i = 0; i < N; i++) mem_data[i] = reads[0][i];
      end
    end
  end

  task automatic instr(host_op_e op);
    @(negedge clk);
    instr_valid = 1; instr_op = op;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic write_row(int a, int r, seq_t s);
    rows[a][r] = s;
    instr_array = 16'(a); instr_row = 16'(r);
    for (int i = 0; i < N; i++) instr_data[i] = s[i];
    instr(OP_WRITE_REF);
  endtask

  cfg_t cfg;
  task automatic configure(int t, int t_l, int n_r, rot_dir_e dir, bit hen, int p);
    cfg = '{t: 16'(t), t_l: 16'(t_l), n_r: 8'(n_r), rot_dir: dir, hdac_en: hen, p: 16'(p)};
    instr_cfg = cfg;
    instr(OP_CONFIG);
  endtask

  // queue a read and the expected result of searching it with cfg
  task automatic prep(seq_t rd);
    logic [M-1:0] e [NA];
    bit hd = cfg.hdac_en && cfg.p >= 655;
    bit rot = cfg.t >= cfg.t_l && cfg.n_r != 0;
    int t = (cfg.t > N) ? N : int'(cfg.t);
    if (hd) n_hd++;
    if (cfg.hdac_en && !hd) n_hdoff++;
    if (!rot) n_norot++;
    else if (cfg.rot_dir == ROT_LEFT) n_rotl++;
    else n_rotr++;
    for (int a = 0; a < NA; a++)
      for (int r = 0; r < M; r++) begin
        automatic bit o = mis_count(rows[a][r], rd, 1) <= t;
        if (hd) begin
          automatic bit h = mis_count(rows[a][r], rd, 0) <= t;
          if (h != o && x[a][r] < cfg.p) o = h;
          x[a][r] = lfsr_next(x[a][r]);
        end
        if (rot) begin
          automatic seq_t rr = rd;
          for (int k = 0; k < cfg.n_r; k++) begin
            rr = rotate(rr, cfg.rot_dir == ROT_LEFT);
            o |= mis_count(rows[a][r], rr, 1) <= t;
          end
        end
        e[a][r] = o;
      end
    expq.push_back(e);
    reads.push_back(rd);
  endtask

  task automatic search(seq_t rd, int n = 1);
    repeat (n) prep(rd);
    repeat (n) instr(OP_SEARCH);
  endtask

  initial begin
    seq_t rd;
    instr_valid = 0; instr_op = OP_NOP; instr_array = 0; instr_row = 0;
    instr_data = '0; instr_cfg = '0;
    for (int a = 0; a < NA; a++) begin
      automatic logic [15:0] sd = 16'hACE1 ^ 16'(a * 16'h3B5);
      for (int r = 0; r < M; r++) begin
        x[a][r] = sd ^ (16'(r) * 16'h9E37);
        if (x[a][r] == 0) x[a][r] = 1;
      end
    end
    #12 rst_n = 1;
    for (int a = 0; a < NA; a++)
      for (int r = 0; r < M; r++) write_row(a, r, rand_seq(N));
    write_row(1, 0, str2seq("CCCCAAATTTAGCATT"));
    write_row(2, 1, str2seq("CTCTCCAAACACAGTC"));

    // the two figure examples first, then random reads near stored rows
    configure(4, 6, 2, ROT_RIGHT, 1, 16'hFFFF);
    search(str2seq("CGCCATATTGATCAAT"));
    configure(3, 2, 2, ROT_RIGHT, 0, 0);
    search(str2seq("CTCTCCACACAGTCCC"));
    for (int k = 0; k < 40; k++) begin
      int sel = k % 5;
      case (sel)
        0: configure($urandom_range(0, 6), 3, 2, ROT_RIGHT, 1, $urandom_range(1000, 65535));
        1: configure($urandom_range(0, 6), 3, 2, ROT_LEFT, 0, 0);
        2: configure($urandom_range(0, 6), 2, $urandom_range(1, 3), ROT_RIGHT, 1, 100);
        3: configure(20, 6, 2, ROT_LEFT, 1, 32768);
        default: configure($urandom_range(0, 4), 8, 2, ROT_RIGHT, 1, 40000);
      endcase
      // a stored row with a few random edits
      rd = rows[$urandom_range(0, NA - 1)][$urandom_range(0, M - 1)];
      repeat ($urandom_range(0, 3)) rd[$urandom_range(0, N - 1)] = b2_t'($urandom_range(0, 3));
      if ($urandom_range(0, 2) == 0) begin rd.delete($urandom_range(0, N - 1)); rd.push_back(2'd0); end
      search(rd, (k % 7 == 3) ? 7 : $urandom_range(1, 2));
    end
    wait (expq.size() == 0);
    repeat (30) @(negedge clk);
    checks++;
    if (results == 0) failures++;
    $display("mechanisms: stall=%0d full=%0d hd=%0d hd_off=%0d hd_sel=%0d rot_r=%0d rot_l=%0d no_rot=%0d",
             n_stall, n_full, n_hd, n_hdoff, n_hdsel, n_rotr, n_rotl, n_norot);
    if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (n_full == 0) begin failures++; $display("FAIL buffer never full"); end
    if (n_hd == 0) begin failures++; $display("FAIL no HD cycle"); end
    if (n_hdoff == 0) begin failures++; $display("FAIL HDAC never switched off"); end
    if (n_hdsel == 0) begin failures++; $display("FAIL HDAC never took HD"); end
    if (n_rotr == 0 || n_rotl == 0) begin failures++; $display("FAIL rotation direction unused"); end
    if (n_norot == 0) begin failures++; $display("FAIL TASR never skipped"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
