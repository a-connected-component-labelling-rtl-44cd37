// tb_context_generator: position tracking, edge zeroing and recoding of
// the context registers.
//
// Groups are accepted at random over a 32 x 3 frame (8 groups per row),
// each bringing a random label group on next_i; random table writes appear
// on bus_i. The testbench keeps its own history of the groups fed in, recodes
// the history with every table write (taking effect at the next clock edge;
// the label assigner applies the write of the current cycle), and checks L5..L0 against it: at the
// acceptance of group j, L4..L1 are the group fed two acceptances earlier,
// L5 the last label of the one before, L0 the first label of the latest;
// all zero in the first row, L5 zero in the first column, L0 zero in the
// last. It also checks eol/eof and the column flags.
module tb_context_generator;
  import ccl_pkg::*;
  localparam int W = 32, H = 3, NG = W / 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adv, sof, last;
  label_t nx [4], ctx [6];
  merge_t bus;
  logic fc, lc, fr, eol, eof;

  context_generator #(.WIDTH(W), .HEIGHT(H)) dut (.clk(clk), .rst_n(rst_n), .adv_i(adv), .sof_i(sof),
    .last_i(last), .next_i(nx), .bus_i(bus), .ctx_o(ctx), .first_col_o(fc), .last_col_o(lc),
    .first_row_o(fr), .eol_o(eol), .eof_o(eof));

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  typedef int grp_t [4];
  grp_t hist [$];

  initial begin
    int j = 0;
    adv = 0; sof = 0; last = 0; bus = '0;
    for (int i = 0; i < 4; i++) nx[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) hist.push_back('{0, 0, 0, 0});
    while (j < 4 * H * NG) begin
      int col, row;
      grp_t g;
      @(negedge clk);
      col = j % NG; row = (j / NG) % H;
      // random table write on labels 1..15
      bus = ($urandom % 3 == 0) ? '{1'b1, label_t'(8 + $urandom % 8), label_t'(1 + $urandom % 7)} : '0;
      adv = ($urandom % 4) != 0;
      sof = (col == 0 && row == 0);
      last = (col == NG - 1);
      for (int i = 0; i < 4; i++) begin g[i] = 1 + $urandom % 15; nx[i] = label_t'(g[i]); end
      #1;
      if (adv) begin
        int e [6];
        grp_t gl, gm, gr;
        gl = hist[hist.size() - 3]; gm = hist[hist.size() - 2]; gr = hist[hist.size() - 1];
        e[5] = gl[0]; e[4] = gm[3]; e[3] = gm[2]; e[2] = gm[1]; e[1] = gm[0]; e[0] = gr[3];
        if (col == 0) e[5] = 0;
        if (col == NG - 1) e[0] = 0;
        if (row == 0) e = '{0, 0, 0, 0, 0, 0};
        for (int i = 0; i < 6; i++) check(int'(ctx[i]) == e[i], $sformatf("j%0d L%0d got %0d exp %0d", j, i, ctx[i], e[i]));
        check(fc == (col == 0) && lc == (col == NG - 1) && fr == (row == 0), $sformatf("j%0d flags", j));
        check(eol == last && eof == (last && row == H - 1), $sformatf("j%0d eol/eof", j));
        hist.push_back(g);
        j++;
      end else check(!eol && !eof, "no eol without acceptance");
      // the registers take this cycle's table write at the clock edge
      foreach (hist[q]) for (int i = 0; i < 4; i++)
        if (bus.valid && hist[q][i] == int'(bus.src)) hist[q][i] = int'(bus.dst);
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
