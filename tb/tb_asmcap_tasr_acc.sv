// tb_asmcap_tasr_acc -- OR accumulation over a read's results, framed by
// first/last, with a one-cycle out_valid pulse.
module tb_asmcap_tasr_acc;
  localparam int M = 8;
  logic clk = 0, rst_n = 0, in_valid, first, last, out_valid;
  logic [M-1:0] o_in, o_out, model;
  int checks = 0, failures = 0;

  asmcap_tasr_acc #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; first = 0; last = 0; o_in = 0;
    #12 rst_n = 1;
    for (int rd = 0; rd < 40; rd++) begin
      automatic int n = $urandom_range(1, 4);
      model = 0;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        if (k > 0 && $urandom_range(0, 1)) begin   // a gap cycle
          in_valid = 0; @(negedge clk);
        end
        in_valid = 1; first = (k == 0); last = (k == n - 1);
        o_in = 8'($urandom);
        model |= o_in;
        @(posedge clk); #1;
        checks++;
        if (out_valid !== last) begin failures++; $display("FAIL out_valid"); end
        if (last) begin
          checks++;
          if (o_out !== model) begin failures++; $display("FAIL o_out=%b exp=%b", o_out, model); end
        end
      end
      @(negedge clk); in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
