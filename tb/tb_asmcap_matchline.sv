// tb_asmcap_matchline -- the matchline count equals the number of
// mismatched cells, for random and corner patterns.
module tb_asmcap_matchline;
  localparam int N = 40;
  logic [N-1:0] o;
  logic [$clog2(N+1)-1:0] n_mis;
  int checks = 0, failures = 0;

  asmcap_matchline #(.N(N)) dut (.*);

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      automatic int e = 0;
      if (k == 0) o = '0;
      else if (k == 1) o = '1;
      else o = {$urandom, $urandom};
      for (int i = 0; i < N; i++) e += o[i];
      #1;
      checks++;
      if (int'(n_mis) != e) begin
        failures++;
        $display("FAIL o=%b n_mis=%0d exp=%0d", o, n_mis, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
