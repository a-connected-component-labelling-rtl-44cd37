// tb_delay_line: advances the delay line at random, writes a counting
// pattern and checks that each read returns the group written exactly
// DEPTH advances earlier and that the output holds between advances.
module tb_delay_line;
  import ccl_pkg::*;
  localparam int D = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic adv;
  label_t wd [4], rd [4];
  delay_line #(.LABEL_BITS(10), .DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .adv_i(adv), .wdata_i(wd), .rdata_o(rd));

  int checks = 0, failures = 0;
  int k = 0;
  label_t last_rd [4];

  initial begin
    adv = 0;
    for (int i = 0; i < 4; i++) wd[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      adv = ($urandom % 3) != 0;
      for (int i = 0; i < 4; i++) wd[i] = label_t'((k * 4 + i) % 1024);
      @(posedge clk); #1;
      if (adv) begin
        if (k >= D)
          for (int i = 0; i < 4; i++) begin
            checks++;
            if (rd[i] != label_t'(((k - D) * 4 + i) % 1024)) begin
              failures++;
              if (failures < 10) $display("FAIL k%0d i%0d got %0d", k, i, rd[i]);
            end
          end
        k++;
      end else if (k > D) begin
        checks++;
        if (rd != last_rd) failures++;
      end
      last_rd = rd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
