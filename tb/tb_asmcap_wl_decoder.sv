// tb_asmcap_wl_decoder -- one-hot wordline one cycle after a write request,
// all low otherwise and for out-of-range addresses.
module tb_asmcap_wl_decoder;
  localparam int M = 12;
  localparam int AW = 4;
  logic clk = 0, rst_n = 0, wr_en;
  logic [AW-1:0] addr;
  logic [M-1:0] wl, exp_wl;
  int checks = 0, failures = 0;

  asmcap_wl_decoder #(.M(M), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; addr = 0;
    #12 rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      @(negedge clk);
      wr_en = ($urandom_range(0, 3) != 0);
      addr = AW'($urandom);
      exp_wl = '0;
      if (wr_en && addr < M) exp_wl[addr] = 1'b1;
      @(posedge clk); #1;
      checks++;
      if (wl !== exp_wl) begin
        failures++;
        $display("FAIL addr=%0d wr=%b wl=%b", addr, wr_en, wl);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
