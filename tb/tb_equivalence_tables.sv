// tb_equivalence_tables: double-buffered equivalence tables with 5-bit
// labels.
//
// Per frame the testbench writes a random forest (each label pointing to a
// smaller one, chains of any depth) through the write port, checks the four
// lookup ports and the chain-stack port against its own copy (including a
// read in the same cycle as the write), then ends the frame. It checks that
// the TABLE stream lists every label once, in order, with the root of its
// chain (the final recoding), that the other bank takes over already
// initialised (every label maps to itself), and that the finished bank is
// initialised again for the frame after.
module tb_equivalence_tables;
  import ccl_pkg::*;
  localparam int LB = 5, NL = 1 << LB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  merge_t wr;
  label_t la [4], ld [4], ca, cd, ta, td;
  logic fd, ready, canf, tv;

  equivalence_tables #(.LABEL_BITS(LB)) dut (.clk(clk), .rst_n(rst_n), .wr_i(wr), .lk_addr_i(la),
    .lk_data_o(ld), .cs_addr_i(ca), .cs_data_o(cd), .frame_done_i(fd), .ready_o(ready),
    .can_finish_o(canf), .tbl_valid_o(tv), .tbl_addr_o(ta), .tbl_data_o(td));

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  int M [NL];
  int exp_root [NL];
  int tbl_cnt = 0, frame_tbl = 0;

  always @(posedge clk) if (rst_n && tv) begin
    check(int'(ta) == tbl_cnt % NL, $sformatf("TABLE addr %0d expected %0d", ta, tbl_cnt % NL));
    check(int'(td) == exp_root[ta], $sformatf("TABLE[%0d]=%0d expected %0d", ta, td, exp_root[ta]));
    tbl_cnt++;
  end

  task automatic lookup_all();
    for (int l = 0; l < NL; l += 4) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) la[i] = label_t'(l + i);
      ca = label_t'(NL - 1 - l);
      @(negedge clk);
      for (int i = 0; i < 4; i++) check(int'(ld[i]) == M[l + i], $sformatf("lookup %0d", l + i));
      check(int'(cd) == M[NL - 1 - l], "chain-stack lookup");
    end
  endtask

  task automatic frame();
    // tables start as identity
    for (int l = 0; l < NL; l++) M[l] = l;
    wait (ready);
    lookup_all();
    // random forest, written label by label
    for (int l = 1; l < NL; l++) begin
      int d;
      d = $urandom % l;
      if (d == 0) continue;
      @(negedge clk);
      wr = '{1'b1, label_t'(l), label_t'(d)};
      la[0] = label_t'(l);                     // same-cycle read sees the write
      M[l] = d;
      @(negedge clk);
      wr = '0;
      check(int'(ld[0]) == d, "write-first read");
    end
    lookup_all();
    wait (canf && tbl_cnt == frame_tbl);
    for (int l = 0; l < NL; l++) begin
      int r;
      r = l;
      while (M[r] != r) r = M[r];
      exp_root[l] = r;
    end
    wait (canf && tbl_cnt == frame_tbl);
    @(negedge clk);
    fd = 1;
    @(negedge clk);
    fd = 0;
    frame_tbl += NL;
  endtask

  initial begin
    wr = '0; fd = 0; ca = '0;
    for (int i = 0; i < 4; i++) la[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) frame();
    wait (tbl_cnt == frame_tbl);
    repeat (3) @(posedge clk);
    check(tbl_cnt == 4 * NL, "TABLE beats");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
