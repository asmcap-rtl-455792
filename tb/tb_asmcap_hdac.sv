// tb_asmcap_hdac -- HDAC selection: agreeing rows unchanged, disagreeing
// rows take HD exactly when the row's LFSR value x < p (LFSR modelled
// independently), and the HD share at p = 1/2 is near one half.
module tb_asmcap_hdac;
  import tb_asmcap_ref_pkg::*;
  localparam int M = 8;
  logic clk = 0, rst_n = 0, step;
  logic [15:0] seed;
  logic [M-1:0] o_eds, o_hd, o, hd_sel;
  logic [15:0] p;
  logic [15:0] x[M];
  int checks = 0, failures = 0, taken = 0, differ = 0;

  asmcap_hdac #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seed = 16'h1234; step = 0; o_eds = 0; o_hd = 0; p = 0;
    for (int r = 0; r < M; r++) begin
      x[r] = seed ^ (16'(r) * 16'h9E37);
      if (x[r] == 0) x[r] = 1;
    end
    #12 rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      o_eds = 8'($urandom); o_hd = 8'($urandom);
      p = (k < 50) ? 16'd0 : (k < 100) ? 16'hFFFF : (k < 150) ? 16'($urandom) : 16'h8000;
      step = 1;
      #1;
      for (int r = 0; r < M; r++) begin
        automatic bit sel = (o_hd[r] != o_eds[r]) && (x[r] < p);
        checks++;
        if (o[r] !== (sel ? o_hd[r] : o_eds[r]) || hd_sel[r] !== sel) begin
          failures++;
          $display("FAIL k=%0d r=%0d", k, r);
        end
        if (k >= 150 && o_hd[r] != o_eds[r]) begin
          differ++;
          if (sel) taken++;
        end
      end
      @(posedge clk);
      for (int r = 0; r < M; r++) x[r] = lfsr_next(x[r]);
    end
    checks++;
    if (taken * 100 < differ * 40 || taken * 100 > differ * 60) begin
      failures++;
      $display("FAIL HD share %0d of %0d at p=1/2", taken, differ);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
