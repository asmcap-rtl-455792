// tb_asmcap_sram_bit -- checks the SRAM bits: differential write with WL,
// hold when WL is low or when both rails are low.
module tb_asmcap_sram_bit;
  localparam int W = 4;
  logic clk = 0, wl;
  logic [W-1:0] sl, sl_b, d, d_b, exp_d;
  int checks = 0, failures = 0;

  asmcap_sram_bit #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk();
    checks++;
    if (d !== exp_d || d_b !== ~exp_d) begin
      failures++;
      $display("FAIL d=%b exp=%b", d, exp_d);
    end
  endtask

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = 1; sl = 4'b1010; sl_b = 4'b0101; exp_d = 4'b1010;
    @(negedge clk); chk();
    for (int k = 0; k < 40; k++) begin
      logic [W-1:0] v, idle;
      v = W'($urandom); idle = W'($urandom);
      wl = ($urandom_range(0, 1) == 1);
      sl = v & ~idle; sl_b = ~v & ~idle;   // idle bits: both rails low
      if (wl) exp_d = (exp_d & idle) | (v & ~idle);
      @(negedge clk); chk();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
