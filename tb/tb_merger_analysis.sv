// tb_merger_analysis: the worked example of the design description
// ((4 -> 1), (7 -> 4) becomes (4 -> 1), (7 -> 1)) plus random merger
// pairs. For every pair the testbench checks the rewritten mergers against
// its own case analysis and checks that the pair still describes the same
// equivalence (same partition of the labels involved).
module tb_merger_analysis;
  import ccl_pkg::*;
  merge_t m1, m2, o1, o2;
  logic   s1, s2;
  int checks = 0, failures = 0;

  merger_analysis dut (.m1_i(m1), .m2_i(m2), .m1_o(o1), .m2_o(o2), .stack1_o(s1), .stack2_o(s2));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  // root of label l in a tiny union-find built from a merger list
  function automatic int root(int p [16], int l);
    while (p[l] != l) l = p[l];
    return l;
  endfunction

  function automatic void partition(merge_t a, merge_t b, output int r [16]);
    int p [16];
    for (int i = 0; i < 16; i++) p[i] = i;
    if (a.valid) begin int x, y; x = root(p, a.src); y = root(p, a.dst); if (x != y) p[x] = y; end
    if (b.valid) begin int x, y; x = root(p, b.src); y = root(p, b.dst); if (x != y) p[x] = y; end
    for (int i = 0; i < 16; i++) r[i] = root(p, i);
  endfunction

  initial begin
    m1 = '{1'b1, label_t'(4), label_t'(1)};
    m2 = '{1'b1, label_t'(7), label_t'(4)};
    #1;
    check(o1 == '{1'b1, label_t'(4), label_t'(1)} && o2 == '{1'b1, label_t'(7), label_t'(1)},
          "paper example 4->1, 7->1");
    check(s1 == 0 && s2 == 0, "paper example flags");

    for (int t = 0; t < 4000; t++) begin
      int ra [16], rb [16];
      int a1, b1, a2, b2;
      bit e1, e2;
      merge_t x1, x2;
      // random mergers over labels 1..9, higher -> lower
      a1 = 2 + $urandom % 8; b1 = 1 + $urandom % (a1 - 1);
      a2 = 2 + $urandom % 8; b2 = 1 + $urandom % (a2 - 1);
      if (t % 4 == 1) a2 = a1;          // same source
      if (t % 4 == 2 && b2 < a1) begin a2 = a1 + 1 + $urandom % 3; b2 = a1; end  // m2 -> m1.src
      if (t % 4 == 3 && b1 > 1) begin a2 = b1; b2 = 1 + $urandom % (b1 - 1); end  // m1.dst -> m2
      m1 = '{1'b1, label_t'(a1), label_t'(b1)};
      m2 = '{1'b1, label_t'(a2), label_t'(b2)};
      #1;
      // expected (Algorithm 1)
      x1 = m1; x2 = m2;
      if (a1 == a2) begin
        if (b1 > b2) begin x1.src = label_t'(b1); x1.dst = label_t'(b2); end
        else begin x2.src = label_t'(b2); x2.dst = label_t'(b1); end
        e1 = 1; e2 = 1;
      end else if (a1 == b2) begin
        x2.dst = label_t'(b1); e1 = 0; e2 = 0;
      end else if (b1 == a2) begin
        x1.dst = label_t'(b2); e1 = 1; e2 = 1;
      end else begin
        e1 = 1; e2 = 0;
      end
      if (x1.src == x1.dst) x1.valid = 0;
      if (x2.src == x2.dst) x2.valid = 0;
      check(o1 == x1 && o2 == x2, $sformatf("t%0d (%0d->%0d),(%0d->%0d) rewrite", t, a1, b1, a2, b2));
      check(s1 == e1 && s2 == e2, $sformatf("t%0d flags", t));
      partition(m1, m2, ra);
      partition(o1, o2, rb);
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++)
          if ((ra[i] == ra[j]) != (rb[i] == rb[j])) begin
            check(0, $sformatf("t%0d partition %0d %0d", t, i, j));
            i = 16; break;
          end
      check(!(o1.valid && o2.valid && (o1.dst == o2.src || o2.dst == o1.src)) || a1 == a2 || (o1.dst == o2.dst),
            $sformatf("t%0d indirect link left", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
