// tb_asmcap_shift_reg -- load, hold and one-base left/right rotations
// against the reference rotate().
module tb_asmcap_shift_reg;
  import asmcap_pkg::*;
  import tb_asmcap_ref_pkg::*;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, ld_en, rot_en;
  rot_dir_e rot_dir;
  base_t [N-1:0] ld_data, q;
  seq_t model;
  int checks = 0, failures = 0;

  asmcap_shift_reg #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_en = 0; rot_en = 0; rot_dir = ROT_RIGHT; ld_data = '0;
    #12 rst_n = 1;
    for (int k = 0; k < 120; k++) begin
      int op;
      @(negedge clk);
      op = (k == 0) ? 0 : $urandom_range(0, 4);
      ld_en = (op == 0); rot_en = (op == 1 || op == 2);
      rot_dir = (op == 2) ? ROT_LEFT : ROT_RIGHT;
      if (ld_en) begin
        model = rand_seq(N);
        for (int i = 0; i < N; i++) ld_data[i] = model[i];
      end else if (rot_en) model = rotate(model, op == 2);
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (q[i] !== model[i]) begin
          failures++;
          $display("FAIL k=%0d op=%0d i=%0d q=%0d exp=%0d", k, op, i, q[i], model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
