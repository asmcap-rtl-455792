// tb_asmcap_array -- ASMCap array with the sequences printed in the paper's
// figures plus random rows. The mismatch count of a row is recovered by
// sweeping T (the smallest T that matches is n_mis) and compared with the
// reference model and with the printed HD/ED* values. Also checks the
// two-cycle search latency, HD mode and rotated searches.
module tb_asmcap_array;
  import asmcap_pkg::*;
  import tb_asmcap_ref_pkg::*;
  localparam int M = 6, N = 16, AW = 3, CW = 5;
  logic clk = 0, rst_n = 0;
  logic wr_en, ld_en, srch_en, rot_en, match_valid;
  logic [AW-1:0] wr_addr;
  base_t [N-1:0] wr_data, ld_data;
  match_mode_e mode;
  rot_dir_e rot_dir;
  logic [CW-1:0] threshold;
  logic [M-1:0] match;
  seq_t rows[M];
  seq_t rd;
  int checks = 0, failures = 0;

  asmcap_array #(.M(M), .N(N), .AW(AW), .CW(CW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    wr_en = 0; ld_en = 0; srch_en = 0; rot_en = 0;
  endtask

  task automatic write_row(int r, seq_t s);
    @(negedge clk); idle(); wr_en = 1; wr_addr = AW'(r);
    for (int i = 0; i < N; i++) wr_data[i] = s[i];
    rows[r] = s;
    @(negedge clk); idle();
  endtask

  task automatic load(seq_t s);
    @(negedge clk); idle(); ld_en = 1;
    for (int i = 0; i < N; i++) ld_data[i] = s[i];
    @(negedge clk); idle();
  endtask

  // one search; returns match vector and checks the latency
  task automatic search(match_mode_e md, int t, output logic [M-1:0] mv);
    @(negedge clk); idle(); srch_en = 1; mode = md; threshold = CW'(t);
    @(negedge clk); idle();
    checks++;
    if (match_valid) begin failures++; $display("FAIL early valid"); end
    @(negedge clk);
    checks++;
    if (!match_valid) begin failures++; $display("FAIL no valid at latency 2"); end
    mv = match;
  endtask

  // n_mis of every row by sweeping T
  task automatic measure(match_mode_e md, output int nm[M]);
    logic [M-1:0] mv;
    for (int r = 0; r < M; r++) nm[r] = -1;
    for (int t = 0; t <= N; t++) begin
      search(md, t, mv);
      for (int r = 0; r < M; r++) if (mv[r] && nm[r] < 0) nm[r] = t;
    end
  endtask

  task automatic check_rows(match_mode_e md, seq_t rd_s, string tag);
    int nm[M];
    measure(md, nm);
    for (int r = 0; r < M; r++) begin
      int e = mis_count(rows[r], rd_s, md == MODE_EDS);
      checks++;
      if (nm[r] != e) begin
        failures++;
        $display("FAIL %s row %0d n_mis=%0d exp=%0d", tag, r, nm[r], e);
      end
    end
  endtask

  initial begin
    int nm[M];
    logic [M-1:0] mv;
    idle(); wr_addr = 0; wr_data = '0; ld_data = '0; mode = MODE_EDS;
    rot_dir = ROT_RIGHT; threshold = 0;
    #12 rst_n = 1;
    write_row(0, str2seq("CCCCAAATTTAGCATT"));   // HDAC figure
    write_row(1, str2seq("CTCTCCAAACACAGTC"));   // TASR figure
    for (int r = 2; r < M; r++) write_row(r, rand_seq(N));

    // HDAC figure: HD = 5, ED* = 1
    load(str2seq("CGCCATATTGATCAAT"));
    measure(MODE_EDS, nm);
    checks++; if (nm[0] != 1) begin failures++; $display("FAIL fig ED* %0d", nm[0]); end
    measure(MODE_HD, nm);
    checks++; if (nm[0] != 5) begin failures++; $display("FAIL fig HD %0d", nm[0]); end

    // TASR figure: ED* = 4, rotated right once 0, twice 2
    rd = str2seq("CTCTCCACACAGTCCC");
    load(rd);
    measure(MODE_EDS, nm);
    checks++; if (nm[1] != 4) begin failures++; $display("FAIL fig rot0 %0d", nm[1]); end
    check_rows(MODE_EDS, rd, "rot0");
    check_rows(MODE_HD, rd, "hd0");
    for (int k = 1; k <= 2; k++) begin
      // a search with rot_en rotates the read for the next search
      @(negedge clk); idle(); srch_en = 1; rot_en = 1; rot_dir = ROT_RIGHT; threshold = 0;
      @(negedge clk); idle();
      rd = rotate(rd, 0);
      measure(MODE_EDS, nm);
      checks++;
      if (nm[1] != ((k == 1) ? 0 : 2)) begin failures++; $display("FAIL fig rot%0d %0d", k, nm[1]); end
      check_rows(MODE_EDS, rd, "rotR");
    end
    // left rotation and random reads
    @(negedge clk); idle(); srch_en = 1; rot_en = 1; rot_dir = ROT_LEFT;
    @(negedge clk); idle();
    rd = rotate(rd, 1);
    check_rows(MODE_EDS, rd, "rotL");
    for (int k = 0; k < 4; k++) begin
      rd = rand_seq(N);
      if (k == 0) rd = rows[3];
      load(rd);
      check_rows(MODE_EDS, rd, "rand_eds");
      check_rows(MODE_HD, rd, "rand_hd");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
