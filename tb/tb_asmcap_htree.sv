// tb_asmcap_htree -- every leaf receives each payload unchanged,
// log2(LEAVES)+1 cycles after it entered.
module tb_asmcap_htree;
  localparam int W = 12, LEAVES = 8, LAT = 4;
  logic clk = 0, rst_n = 0, in_valid;
  logic [W-1:0] in_data;
  logic out_valid [LEAVES];
  logic [W-1:0] out_data [LEAVES];
  logic hv[$];
  logic [W-1:0] hd[$];
  int checks = 0, failures = 0;

  asmcap_htree #(.W(W), .LEAVES(LEAVES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0;
    for (int i = 0; i < LAT - 1; i++) begin hv.push_back(0); hd.push_back(0); end
    #12 rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 1); in_data = W'($urandom);
      hv.push_back(in_valid); hd.push_back(in_data);
      @(posedge clk); #1;
      begin
        automatic logic ev = hv.pop_front();
        automatic logic [W-1:0] ed = hd.pop_front();
        if (k >= LAT)
          for (int l = 0; l < LEAVES; l++) begin
            checks++;
            if (out_valid[l] !== ev || (ev && out_data[l] !== ed)) begin
              failures++;
              $display("FAIL k=%0d leaf %0d", k, l);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
