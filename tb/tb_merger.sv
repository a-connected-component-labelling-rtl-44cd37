// tb_merger: loads random merger groups (0..4 mergers) at the rate the
// label assigner allows and checks that they leave one per cycle, in order,
// as table writes and as stack pushes at consecutive addresses; that the
// stack address returns to 0 on sp_clear; and, with a 6-entry stack, that
// surplus pushes are dropped and flagged.
module tb_merger;
  import ccl_pkg::*;
  localparam int SD = 6;
  localparam int SPW = $clog2(SD + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, clr;
  merge_t mi [4];
  logic [2:0] n;
  merge_t wr, pd;
  logic push, busy, ovf;
  logic [SPW-1:0] pa, sp;

  merger #(.STACK_DEPTH(SD)) dut (.clk(clk), .rst_n(rst_n), .load_i(load), .merges_i(mi), .n_i(n),
    .sp_clear_i(clr), .wr_o(wr), .push_o(push), .push_addr_o(pa), .push_data_o(pd), .sp_o(sp),
    .busy_o(busy), .overflow_o(ovf));

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  merge_t exp_q [$];
  int exp_sp = 0;
  bit exp_ovf = 0;

  // monitor: compare every cycle
  always @(negedge clk) if (rst_n) begin
    if (exp_q.size() > 0) begin
      merge_t e;
      e = exp_q.pop_front();
      check(wr == e, $sformatf("write %0d->%0d expected %0d->%0d", wr.src, wr.dst, e.src, e.dst));
      if (exp_sp < SD) begin
        check(push && pa == SPW'(exp_sp) && pd == e, "push address/data");
        exp_sp++;
      end else begin
        check(!push, "push into full stack");
        exp_ovf = 1;
      end
    end else check(!wr.valid && !push, "idle output");
  end

  initial begin
    load = 0; clr = 0; n = 0;
    for (int k = 0; k < 4; k++) mi[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int nn;
      @(posedge clk); #1;
      nn = $urandom % 5;
      load = 1; n = 3'(nn);
      for (int k = 0; k < 4; k++) begin
        mi[k].valid = (k < nn);
        mi[k].src   = label_t'(20 + $urandom % 100);
        mi[k].dst   = label_t'(1 + $urandom % 19);
      end
      @(posedge clk); #1;
      load = 0;
      for (int k = 0; k < nn; k++) exp_q.push_back(mi[k]);
      // wait until at most one merger is left (the assigner's pause)
      repeat ((nn > 1) ? nn - 2 : 0) @(posedge clk);
      if (t % 7 == 6) begin
        // line end: drain, then clear the stack address
        wait (!busy);
        #1;
        @(posedge clk); #1;
        check(sp == SPW'(exp_sp), "stack pointer before clear");
        check(ovf == exp_ovf, "overflow flag");
        clr = 1;
        @(posedge clk); #1;
        clr = 0;
        exp_sp = 0;
        check(sp == 0, "stack pointer cleared");
      end
    end
    wait (!busy);
    repeat (2) @(posedge clk);
    check(exp_q.size() == 0, "all mergers written");
    check(exp_ovf, "overflow exercised");
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
