// tb_natsa_spm: writes the whole 1 KB scratchpad with random words, then
// reads every word back with the one-cycle read latency and compares, while
// random writes to other addresses continue.
module tb_natsa_spm;
  logic clk = 0, wr_en = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [31:0] shadow [256];
  int checks = 0, failures = 0;

  natsa_spm dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(a); wr_data = $urandom; shadow[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < 2000; r++) begin
      rd_addr = 8'($urandom);
      wr_en = ($urandom_range(0, 1) == 1);
      wr_addr = rd_addr + 8'd1 + 8'($urandom_range(0, 200));
      wr_data = $urandom;
      @(posedge clk);
      if (wr_en) shadow[wr_addr] = wr_data;
      #1;
      checks++;
      if (rd_data !== shadow[rd_addr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", rd_addr, rd_data, shadow[rd_addr]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
