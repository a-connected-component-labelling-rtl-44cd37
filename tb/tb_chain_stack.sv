// tb_chain_stack: line-end resolution of the chain stack.
//
// The testbench models one copy of the equivalence table (synchronous read,
// write-first, one cycle latency) and plays a sequence of lines. In each
// line it draws random mergers (src > dst) between labels that were roots at
// the start of the line, some of them already merged earlier in the line
// (outdated labels, as they can reach the merger), writes each straight into
// the table as the merger module does and pushes it onto the stack. After
// the resolution it checks, against its own union-find over all mergers so
// far, that every label of the line points directly at a root and that two
// labels share a root exactly when they are equivalent. It includes the
// chain 9->7, 7->5, 5->4, 4->2 of the design description, after which
// 9, 7, 5 and 4 must all hold 2.
module tb_chain_stack;
  import ccl_pkg::*;
  localparam int LB = 7, SD = 64, NL = 1 << LB;
  localparam int SPW = $clog2(SD + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push, start, busy, done;
  logic [SPW-1:0] pa, cnt;
  merge_t pd, wr;
  label_t ra, rdat;

  chain_stack #(.LABEL_BITS(LB), .STACK_DEPTH(SD)) dut (.clk(clk), .rst_n(rst_n), .push_i(push),
    .push_addr_i(pa), .push_data_i(pd), .start_i(start), .count_i(cnt), .rd_addr_o(ra),
    .rd_data_i(rdat), .wr_o(wr), .busy_o(busy), .done_o(done));

  // table model; the testbench's own direct writes use tb_we
  int     T [NL];
  logic   tb_we;
  label_t tb_a, tb_d;
  always @(posedge clk) begin
    if (wr.valid && tb_we) $error("two writers");
    if (wr.valid && ra == wr.src) rdat <= wr.dst;
    else rdat <= label_t'(T[ra[LB-1:0]]);
    if (wr.valid) T[wr.src[LB-1:0]] = int'(wr.dst);
    if (tb_we) T[tb_a] = int'(tb_d);
  end

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  int uf [NL];
  function automatic int rt(int x);
    while (uf[x] != x) x = uf[x];
    return x;
  endfunction

  task automatic line(int a [$], int b [$]);
    int used [$];
    @(negedge clk);
    for (int k = 0; k < a.size(); k++) begin
      push = 1; pa = SPW'(k); pd = '{1'b1, label_t'(a[k]), label_t'(b[k])};
      tb_we = 1; tb_a = label_t'(a[k]); tb_d = label_t'(b[k]);
      begin int x, y; x = rt(a[k]); y = rt(b[k]); if (x != y) uf[x] = y; end
      used.push_back(a[k]); used.push_back(b[k]);
      @(negedge clk);
    end
    push = 0; tb_we = 0;
    start = 1; cnt = SPW'(a.size());
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    foreach (used[i]) begin
      int l;
      l = used[i];
      check(T[T[l]] == T[l], $sformatf("label %0d not flat", l));
      check(T[l] <= l, $sformatf("label %0d points up to %0d", l, T[l]));
      foreach (used[j]) begin
        int m;
        m = used[j];
        check((rt(l) == rt(m)) == (T[l] == T[m]), $sformatf("labels %0d %0d", l, m));
      end
    end
  endtask

  initial begin
    int a [$], b [$];
    int T0 [NL];
    push = 0; start = 0; tb_we = 0; cnt = 0; pa = 0; pd = '0; tb_a = 0; tb_d = 0;
    for (int i = 0; i < NL; i++) begin T[i] = i; uf[i] = i; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // chain example
    a = '{9, 7, 5, 4}; b = '{7, 5, 4, 2};
    line(a, b);
    check(T[9] == 2 && T[7] == 2 && T[5] == 2 && T[4] == 2, "chain 9,7,5,4 -> 2");
    // empty line
    a.delete(); b.delete();
    line(a, b);
    // random lines
    for (int t = 0; t < 40; t++) begin
      int n;
      a.delete(); b.delete();
      n = 1 + $urandom % 30;
      T0 = T;
      for (int k = 0; k < n; k++) begin
        int x, y;
        // labels reach the merger as table lookups: roots at the start of
        // the line, possibly merged since then (outdated)
        x = 1 + $urandom % (NL - 1);
        y = 1 + $urandom % (NL - 1);
        while (T0[x] != x) x = T0[x];
        while (T0[y] != y) y = T0[y];
        if (x == y) continue;
        if (x < y) begin int s; s = x; x = y; y = s; end
        a.push_back(x); b.push_back(y);
      end
      line(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
