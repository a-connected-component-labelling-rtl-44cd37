// tb_ccl_uhd_15bit: one full UHD frame (3840 x 2160, four pixels per
// clock) through ccl_top with 15-bit labels (32767 labels), the wider
// label configuration of the design. Same structure and checks as the
// 10-bit full-size test, with a busier image: many more discs and combs,
// so that the frame needs several thousand provisional labels, far more
// than 10 bits could number.
//
// The frame is generated here: filled discs of random position and radius,
// and comb shapes (vertical teeth joined by a bar along their bottom edge)
// whose teeth each start a new label and are merged one after another at
// the bar, giving long merger chains inside a line. With 4000 small discs
// and 60 combs the frame has thousands of components and needs several
// thousand provisional labels.
// The input is streamed without gaps and the LABELS output is always
// accepted, so the cycle count is that of the line-end stalls alone.
//
// Checks: after applying the frame's TABLE stream to the LABELS stream,
// background pixels read 0 and two foreground pixels share a final label
// exactly when a reference union-find over the pixels (8-connectivity)
// puts them in one component; tuser/tlast framing; TABLE length and order;
// no overflow flag; and the number of clock cycles the frame took, which
// must stay within the 133.3 MHz / 60 fps budget of 2,222,222 cycles.
module tb_ccl_uhd_15bit;
  import ccl_pkg::*;

  localparam int LB     = 15;
  localparam int W      = 3840;
  localparam int H      = 2160;
  localparam int NG     = W / 4;
  localparam int NLAB   = 1 << LB;
  localparam int BUDGET = 2222222;  // 133.3e6 / 60

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            s_tvalid, s_tready, s_tuser, s_tlast;
  logic [3:0]      s_tdata;
  logic            m_tvalid, m_tready, m_tuser, m_tlast;
  logic [4*LB-1:0] m_tdata;
  logic            tbl_valid;
  logic [LB-1:0]   tbl_addr, tbl_data;
  logic            label_overflow, stack_overflow;

  ccl_top #(.LABEL_BITS(LB)) dut (.*);

  bit          img [H][W];
  int unsigned lab [H][W];
  int unsigned tbl [NLAB];
  int checks = 0, failures = 0;
  int out_beats = 0, tbl_beats = 0;
  longint cyc = 0, t_first = -1, t_last = 0;
  int n_pause = 0, n_resolve = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- image generation ----------------
  function automatic void make_image();
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) img[y][x] = 0;
    // discs
    for (int n = 0; n < 4000; n++) begin
      int cx, cy, r;
      cx = $urandom % W; cy = $urandom % H; r = 2 + $urandom % 25;
      for (int y = cy - r; y <= cy + r; y++)
        for (int x = cx - r; x <= cx + r; x++)
          if (y >= 0 && y < H && x >= 0 && x < W && (x-cx)*(x-cx) + (y-cy)*(y-cy) <= r*r)
            img[y][x] = 1;
    end
    // combs: teeth of width 1..2 and gap 1..3, joined at the bottom
    for (int n = 0; n < 60; n++) begin
      int x0, y0, teeth, tw, gap, h;
      teeth = 10 + $urandom % 30; tw = 1 + $urandom % 2; gap = 1 + $urandom % 3;
      h = 10 + $urandom % 200;
      x0 = $urandom % (W - teeth * (tw + gap) - 1);
      y0 = $urandom % (H - h - 2);
      for (int t = 0; t < teeth; t++)
        for (int y = y0; y < y0 + h; y++)
          for (int x = x0 + t * (tw + gap); x < x0 + t * (tw + gap) + tw; x++) img[y][x] = 1;
      for (int x = x0; x < x0 + teeth * (tw + gap); x++) img[y0 + h][x] = 1;
    end
    // one fixed patch in the style of the two-merger example: separate
    // pixels in one row, a solid run below them, so groups carry two
    // mergers each and the assigner pauses
    for (int x = 100; x < 140; x++) begin
      img[10][x] = (x % 2 == 0);
      img[11][x] = 1;
    end
  endfunction

  // ---------------- driver ----------------
  initial begin : drive
    s_tvalid = 0; s_tdata = 0; s_tuser = 0; s_tlast = 0;
    m_tready = 1;
    make_image();
    repeat (5) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int y = 0; y < H; y++)
      for (int g = 0; g < NG; g++) begin
        s_tvalid = 1;
        for (int i = 0; i < 4; i++) s_tdata[i] = img[y][4*g+i];
        s_tuser = (y == 0 && g == 0);
        s_tlast = (g == NG - 1);
        #1;
        while (!s_tready) begin
          @(negedge clk);
          #1;
        end
        @(negedge clk);
        s_tvalid = 0;
      end
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (s_tvalid && s_tready && s_tuser) t_first = cyc;
      if (s_tvalid && s_tready && s_tlast) t_last = cyc;
      if (dut.accept && dut.n_merges >= 2) n_pause++;
      if (dut.cs_start && dut.sp != 0) n_resolve++;
    end
  end

  // ---------------- output monitors ----------------
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int y, g;
    y = out_beats / NG;
    g = out_beats % NG;
    if (y < H) begin
      for (int i = 0; i < 4; i++) lab[y][4*g+i] = m_tdata[i*LB +: LB];
      if (m_tuser != (y == 0 && g == 0)) check(0, $sformatf("tuser y%0d g%0d", y, g));
      if (m_tlast != (g == NG - 1)) check(0, $sformatf("tlast y%0d g%0d", y, g));
    end
    out_beats++;
  end

  always @(posedge clk) if (rst_n && tbl_valid) begin
    check(tbl_addr == LB'(tbl_beats % NLAB), "TABLE address order");
    tbl[tbl_addr] = tbl_data;
    tbl_beats++;
  end

  // ---------------- reference labelling ----------------
  int par [H*W];
  function automatic int find(int i);
    while (par[i] != i) begin
      par[i] = par[par[i]];
      i = par[i];
    end
    return i;
  endfunction
  function automatic void unite(int a, int b);
    int ra, rb;
    ra = find(a); rb = find(b);
    if (ra != rb) par[ra] = rb;
  endfunction

  task automatic check_frame();
    int comp2lab [int];
    int lab2comp [int];
    int bad = 0;
    for (int i = 0; i < H * W; i++) par[i] = i;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) if (img[y][x]) begin
        if (x > 0 && img[y][x-1]) unite(y*W+x, y*W+x-1);
        if (y > 0) for (int dx = -1; dx <= 1; dx++)
          if (x+dx >= 0 && x+dx < W && img[y-1][x+dx]) unite(y*W+x, (y-1)*W+x+dx);
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int fl, c;
        bit ok;
        fl = tbl[lab[y][x]];
        ok = 1;
        if (!img[y][x]) ok = (lab[y][x] == 0);
        else begin
          c = find(y*W+x);
          if (fl == 0) ok = 0;
          if (comp2lab.exists(c)) begin
            if (comp2lab[c] != fl) ok = 0;
          end else comp2lab[c] = fl;
          if (lab2comp.exists(fl)) begin
            if (lab2comp[fl] != c) ok = 0;
          end else lab2comp[fl] = c;
        end
        checks++;
        if (!ok) begin
          failures++;
          if (bad++ < 20) $display("FAIL: pixel (%0d,%0d) label %0d final %0d", x, y, lab[y][x], fl);
        end
      end
    $display("frame: %0d components, %0d provisional labels used", comp2lab.num(), dut.u_label_assigner.cnt_q);
  endtask

  initial begin : finish
    wait (tbl_beats == NLAB);
    repeat (10) @(posedge clk);
    check_frame();
    check(out_beats == H * NG, "LABELS beat count");
    check(!label_overflow && !stack_overflow, "no overflow flags");
    $display("input cycles for the frame: %0d (groups %0d, budget %0d), pause=%0d resolve=%0d",
             t_last - t_first + 1, H * NG, BUDGET, n_pause, n_resolve);
    check(t_last - t_first + 1 <= BUDGET, "frame exceeds the 60 fps cycle budget");
    check(n_pause > 0 && n_resolve > 0, "pause and line resolution occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog: out_beats=%0d tbl_beats=%0d", out_beats, tbl_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
