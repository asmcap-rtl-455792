// tb_asmcap_global_buffer -- FIFO order, full back-pressure, empty valid,
// simultaneous push/pop, against a queue model.
module tb_asmcap_global_buffer;
  import asmcap_pkg::*;
  localparam int N = 4, DEPTH = 4, PW = 2;
  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready;
  base_t [N-1:0] in_data, out_data;
  logic [PW:0] level;
  logic [2*N-1:0] q[$];
  int checks = 0, failures = 0, fulls = 0;

  asmcap_global_buffer #(.N(N), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    #12 rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      automatic bit ph = (k % 100) < 50;   // fill phases and drain phases
      @(negedge clk);
      in_valid = ph ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      out_ready = ph ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      in_data = 8'($urandom);
      #1;
      checks++;
      if (in_ready !== (q.size() < DEPTH) || out_valid !== (q.size() > 0) ||
          int'(level) != q.size() || (q.size() > 0 && out_data !== q[0])) begin
        failures++;
        $display("FAIL k=%0d level=%0d model=%0d", k, level, q.size());
      end
      if (!in_ready) fulls++;
      @(posedge clk);
      begin
        automatic bit push = in_valid && q.size() < DEPTH;
        if (out_ready && q.size() > 0) void'(q.pop_front());
        if (push) q.push_back(in_data);
      end
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
