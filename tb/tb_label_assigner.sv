// tb_label_assigner: checks the label assigner on the worked examples of
// the design description and on random neighbourhoods.
//
// Worked examples (labels worked out by hand):
//   G=1, L5..L0 = 0 0 4 0 7 0, pixels P3..P0 = 1 0 1 0:
//     labels 1,0,1,0 (P1 sees L3 already recoded by P3's merger);
//     mergers (4->1), (7->1); pause 1 cycle.
//   merger chain example: G=9, L = 9 0 7 0 5 / 0 4 0 2, two groups:
//     mergers 9->7, 7->5 in the first, 5->4, 4->2 in the second, which
//     the analysis rewrites to 9->5, 7->5 and 5->2, 4->2.
// Random groups use a consistent context (neighbouring upper labels equal
// when both set, G equal to L5 when both set). For each, the testbench
// builds the 11-pixel neighbourhood graph and checks that every pair of
// adjacent foreground pixels ends up with equivalent labels under the
// group's mergers, that every merger joins labels of one connected piece,
// that new labels are handed out in order, and that pause lasts n-1 cycles.
// A second instance with 3-bit labels checks saturation and the overflow
// flag and its clearing at the next frame start.
module tb_label_assigner;
  import ccl_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       acc, sof, last, fcol;
  logic [3:0] pix;
  label_t     ctx [6];
  merge_t     bus;
  label_t     lab [4];
  merge_t     mg  [4];
  logic [2:0] n;
  logic [1:0] chain;
  logic       pause, ovf;

  label_assigner #(.LABEL_BITS(10)) dut (
    .clk(clk), .rst_n(rst_n), .accept_i(acc), .pix_i(pix), .sof_i(sof), .last_i(last),
    .first_col_i(fcol), .ctx_i(ctx), .bus_i(bus), .labels_o(lab), .merges_o(mg),
    .n_merges_o(n), .chain_o(chain), .pause_o(pause), .overflow_o(ovf));

  // small-label instance for overflow
  logic       acc3, sof3;
  label_t     lab3 [4];
  merge_t     mg3  [4];
  logic [2:0] n3;
  logic [1:0] chain3;
  logic       pause3, ovf3;
  label_t     zctx [6];
  assign zctx = '{default: '0};
  label_assigner #(.LABEL_BITS(3)) dut3 (
    .clk(clk), .rst_n(rst_n), .accept_i(acc3), .pix_i(4'b1010), .sof_i(sof3), .last_i(1'b1),
    .first_col_i(1'b1), .ctx_i(zctx), .bus_i('0), .labels_o(lab3), .merges_o(mg3),
    .n_merges_o(n3), .chain_o(chain3), .pause_o(pause3), .overflow_o(ovf3));

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  // present a group at the negative edge, accept at the next positive edge
  task automatic present(logic [3:0] p, label_t c5, label_t c4, label_t c3, label_t c2,
                         label_t c1, label_t c0, bit s, bit l, bit fc);
    @(negedge clk);
    acc = 1; pix = p; sof = s; last = l; fcol = fc;
    ctx[5] = c5; ctx[4] = c4; ctx[3] = c3; ctx[2] = c2; ctx[1] = c1; ctx[0] = c0;
    #1;
  endtask

  task automatic idle();
    @(negedge clk);
    acc = 0; #1;
  endtask

  // ---- random-test helpers ----
  int up [6];    // context labels
  int g;         // G label
  int uf [int];
  function automatic int rt(int x);
    if (!uf.exists(x)) uf[x] = x;
    while (uf[x] != x) x = uf[x];
    return x;
  endfunction

  initial begin
    acc = 0; sof = 0; last = 0; fcol = 0; pix = 0; bus = '0;
    acc3 = 0; sof3 = 0;
    for (int j = 0; j < 6; j++) ctx[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- Fig. 2 / 3 / 6 example: G = 1 comes from a previous group ----
    present(4'b0001, 0, 0, 0, 0, 0, 0, 1, 0, 1);   // first group: P0 gets label 1
    check(lab[0] == 1, "first new label is 1");
    present(4'b1010, 0, 0, 4, 0, 7, 0, 0, 0, 0);
    // P1 sees L3 already recoded 4 -> 1 by the merger of P3
    check(lab[3] == 1 && lab[2] == 0 && lab[1] == 1 && lab[0] == 0,
          $sformatf("example raw labels 1,0,1,0: %0d %0d %0d %0d", lab[3], lab[2], lab[1], lab[0]));
    check(n == 2, "example has two mergers");
    check(mg[0] == '{1'b1, label_t'(4), label_t'(1)} && mg[1] == '{1'b1, label_t'(7), label_t'(1)},
          "example mergers 4->1, 7->1");
    @(negedge clk); acc = 0; #1;
    check(pause == 1, "pause after two mergers");
    @(negedge clk); #1;
    check(pause == 0, "pause lasts one cycle");

    // ---- Fig. 4 merger chain: G=9 ----
    // group A: P3..P0 under L5..L0 = 9 0 7 0 5 0 with pixels 1 0 1 0
    present(4'b0001, 0, 0, 0, 0, 0, 9, 0, 0, 0);   // makes G = 9 via L0
    check(lab[0] == 9, "chain setup G=9");
    present(4'b1010, 9, 0, 7, 0, 5, 0, 0, 0, 0);
    check(lab[3] == 7 && lab[1] == 5, "chain labels 7,5");
    check(n == 2 && mg[0] == '{1'b1, label_t'(9), label_t'(5)} && mg[1] == '{1'b1, label_t'(7), label_t'(5)},
          "chain mergers 9->7, 7->5 become 9->5, 7->5");
    idle(); idle();
    present(4'b1010, 5, 0, 4, 0, 2, 0, 0, 1, 0);   // G = 0: P0 of the first group is background
    check(lab[3] == 4 && lab[1] == 2, "chain labels 4,2");
    check(n == 2 && mg[0] == '{1'b1, label_t'(5), label_t'(2)} && mg[1] == '{1'b1, label_t'(4), label_t'(2)},
          "chain mergers 5->4, 4->2 become 5->2, 4->2");
    idle(); idle();

    // ---- G recode by the table write of the cycle ----
    present(4'b0001, 0, 0, 0, 0, 0, 6, 0, 0, 0);   // G <= 6
    @(negedge clk); acc = 0; bus = '{1'b1, label_t'(6), label_t'(3)}; #1;
    @(negedge clk); bus = '0;
    present(4'b1000, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    check(lab[3] == 3, "G recoded by table write");
    idle();

    // ---- random consistent neighbourhoods ----
    for (int t = 0; t < 3000; t++) begin
      logic [3:0] p;
      int nl, cnt_before, exp_next;
      bit fgu [6];
      int lbl [4];
      // upper row: runs of foreground share a label
      for (int j = 5; j >= 0; j--) begin
        fgu[j] = $urandom % 2;
        if (!fgu[j]) up[j] = 0;
        else if (j < 5 && fgu[j+1]) up[j] = up[j+1];
        else up[j] = 1 + $urandom % 30;
      end
      g = ($urandom % 2) ? ((up[5] != 0) ? up[5] : 1 + $urandom % 30) : 0;
      p = 4'($urandom);
      // set G through a preceding group (label via L0 with pixel P0)
      present(4'b0001, 0, 0, 0, 0, 0, label_t'(g), 1, 0, 0);
      idle();
      if (g == 0) begin present(4'b0000, 0, 0, 0, 0, 0, 0, 0, 1, 0); idle(); end
      cnt_before = dut.cnt_q;
      present(p, label_t'(up[5]), label_t'(up[4]), label_t'(up[3]), label_t'(up[2]),
              label_t'(up[1]), label_t'(up[0]), 0, 0, 0);
      for (int i = 0; i < 4; i++) lbl[i] = lab[i];
      nl = n;
      // union-find of the group's mergers
      uf.delete();
      for (int k = 0; k < nl; k++) begin
        int a, b;
        a = rt(mg[k].src); b = rt(mg[k].dst);
        if (a != b) uf[a] = b;
      end
      exp_next = cnt_before;
      for (int i = 3; i >= 0; i--) begin
        int l, ul, u, ur;
        if (!p[i]) begin check(lbl[i] == 0, $sformatf("t%0d bg label", t)); continue; end
        check(lbl[i] != 0, $sformatf("t%0d fg label 0", t));
        l  = (i == 3) ? g : (p[i+1] ? lbl[i+1] : 0);
        ul = up[i+2]; u = up[i+1]; ur = up[i];
        if (l == 0 && ul == 0 && u == 0 && ur == 0) begin
          exp_next++;
          check(lbl[i] == exp_next, $sformatf("t%0d new label order", t));
        end
        if (l  != 0) check(rt(l)  == rt(lbl[i]), $sformatf("t%0d left not joined", t));
        if (ul != 0) check(rt(ul) == rt(lbl[i]), $sformatf("t%0d up-left not joined", t));
        if (u  != 0) check(rt(u)  == rt(lbl[i]), $sformatf("t%0d up not joined", t));
        if (ur != 0) check(rt(ur) == rt(lbl[i]), $sformatf("t%0d up-right not joined", t));
      end
      // every merger joins labels that touch the foreground pixels of the group
      for (int k = 0; k < nl; k++) begin
        bit touch_s, touch_d;
        touch_s = 0; touch_d = 0;
        for (int i = 0; i < 4; i++) if (p[i]) begin
          int nb [5];
          nb = '{(i == 3) ? g : 0, up[i+2], up[i+1], up[i], lbl[i]};
          for (int q = 0; q < 5; q++) begin
            if (nb[q] == int'(mg[k].src)) touch_s = 1;
            if (nb[q] == int'(mg[k].dst)) touch_d = 1;
          end
        end
        check(mg[k].valid && mg[k].src > mg[k].dst && touch_s && touch_d,
              $sformatf("t%0d merger %0d->%0d not justified", t, mg[k].src, mg[k].dst));
      end
      // pause lasts n-1 cycles
      @(negedge clk); acc = 0; #1;
      for (int c = 1; c < 4; c++) begin
        check(pause == (c < nl), $sformatf("t%0d pause cycle %0d n=%0d", t, c, nl));
        @(negedge clk); #1;
      end
    end

    // ---- overflow with 3-bit labels (at most 7) ----
    @(negedge clk); acc3 = 1; sof3 = 1; #1;
    check(lab3[3] == 1 && lab3[1] == 2, "3-bit first labels 1,2");
    @(negedge clk); sof3 = 0; #1;
    check(lab3[3] == 3 && lab3[1] == 4, "3-bit labels 3,4");
    @(negedge clk); #1;
    check(lab3[3] == 5 && lab3[1] == 6 && !ovf3, "3-bit labels 5,6");
    @(negedge clk); #1;
    check(lab3[3] == 7 && lab3[1] == 7, "3-bit labels saturate at 7");
    @(negedge clk); acc3 = 0; #1;
    check(ovf3, "overflow flag set");
    @(negedge clk); acc3 = 1; sof3 = 1; #1;
    check(lab3[3] == 1, "counter restarts at frame start");
    @(negedge clk); acc3 = 0; sof3 = 0; #1;
    check(!ovf3, "overflow flag cleared at frame start");

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
