// tb_asmcap_sense_amp -- the SA latches 1 when V_ML <= V_ref on an enabled
// edge and holds otherwise.
module tb_asmcap_sense_amp;
  localparam int CW = 5;
  logic clk = 0, rst_n = 0, en, match;
  logic [CW-1:0] v_ml, v_ref;
  logic exp_m;
  int checks = 0, failures = 0;

  asmcap_sense_amp #(.CW(CW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; v_ml = 0; v_ref = 0; exp_m = 0;
    #12 rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      v_ml = CW'($urandom); v_ref = (k % 3 == 0) ? v_ml : CW'($urandom);
      if (en) exp_m = (v_ml <= v_ref);
      @(posedge clk); #1;
      checks++;
      if (match !== exp_m) begin
        failures++;
        $display("FAIL v_ml=%0d v_ref=%0d match=%b", v_ml, v_ref, match);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
