// tb_ccl_top: end-to-end test of the CCL pipeline.
//
// Several frames are streamed through ccl_top: the three neighbourhood
// examples of the design description tiled over a frame, random images of
// different densities, an empty frame and a full frame. Input valid and
// output ready are toggled at random. The testbench labels every frame
// itself (8-connectivity, union-find over pixels) and checks that, after
// applying the TABLE stream of the frame to the LABELS stream, background
// pixels read 0 and two foreground pixels share a final label exactly when
// they belong to the same component. It also checks tuser/tlast framing,
// the TABLE length, full throughput on the empty frame, and that each
// mechanism occurred: groups with two or more mergers (pause), non-empty
// line-end resolutions, bank swaps, input and output back-pressure, and
// label overflow: the last frame holds 1024 isolated pixels, one more than
// 10-bit labels can number, so only the overflow flag is checked for it.
// (The stack overflow flag cannot be raised with STACK_DEPTH = WIDTH: a
// line produces fewer mergers than it has pixels. It is checked in the
// merger testbench.)
module tb_ccl_top;
  import ccl_pkg::*;

  localparam int LB     = 10;
  localparam int W      = 64;
  localparam int H      = 64;
  localparam int NF     = 13;   // frame NF-1: label overflow
  localparam int NG     = W / 4;
  localparam int NLAB   = 1 << LB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            s_tvalid, s_tready, s_tuser, s_tlast;
  logic [3:0]      s_tdata;
  logic            m_tvalid, m_tready, m_tuser, m_tlast;
  logic [4*LB-1:0] m_tdata;
  logic            tbl_valid;
  logic [LB-1:0]   tbl_addr, tbl_data;
  logic            label_overflow, stack_overflow;

  ccl_top #(.LABEL_BITS(LB), .WIDTH(W), .HEIGHT(H)) dut (.*);

  bit          img  [NF][H][W];
  int unsigned lab  [NF][H][W];
  int unsigned tbl  [NF][NLAB];
  int checks = 0, failures = 0;
  int out_beats = 0, tbl_beats = 0;
  int cyc = 0;

  // mechanism counters
  int n_pause = 0, n_resolve = 0, n_swap = 0, n_in_stall = 0, n_out_stall = 0;
  int n_label_ovf = 0, n_ovf_wrong = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- image generation ----------------
  // Rows of the neighbourhood examples (Fig. 2, Fig. 4, Fig. 5): upper row
  // pattern over a lower row pattern, '1' = foreground.
  function automatic void make_images();
    for (int f = 0; f < NF; f++) begin
      int dens;
      dens = (f == 2) ? 0 : (f == 3) ? 100 : 20 + 3 * (f % 8);
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          if (f == 0) begin
            // Fig. 2 / Fig. 6 style: alternating upper row, gaps below
            img[f][y][x] = (y % 2 == 0) ? (x % 2 == 0) : (x % 4 != 1);
          end else if (f == 1) begin
            // Fig. 4 style merger chains: columns joined by a lower row
            img[f][y][x] = (y % 6 == 5) ? (x % 2 == 1) : (x % 2 == 0) && (y % 6 != 4);
          end else if (f == NF - 1) begin
            // isolated pixels: (W/2)*(H/2) = 1024 components
            img[f][y][x] = (y % 2 == 0) && (x % 2 == 0);
          end else begin
            img[f][y][x] = ($urandom % 100) < dens;
          end
        end
    end
  endfunction

  // ---------------- driver ----------------
  initial begin : drive
    s_tvalid = 0; s_tdata = 0; s_tuser = 0; s_tlast = 0;
    make_images();
    repeat (5) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < H; y++)
        for (int g = 0; g < NG; g++) begin
          // random idle cycles on the input, none on the empty frame
          while (f != 2 && ($urandom % 8) == 0) @(negedge clk);
          s_tvalid = 1;
          for (int i = 0; i < 4; i++) s_tdata[i] = img[f][y][4*g+i];
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

  // throughput on the empty frame (frame 2): one group per clock inside a line
  int f2_stall = 0;
  int in_frame = 0;
  always @(posedge clk) if (rst_n && s_tvalid && s_tuser && s_tready) in_frame++;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (s_tvalid && !s_tready) begin
        n_in_stall++;
        if (in_frame == 3 && !s_tuser && dut.line_q == 0 && !dut.pause && m_tready)
          f2_stall++;
      end
      if (m_tvalid && !m_tready) n_out_stall++;
      if (dut.accept && dut.n_merges >= 2) n_pause++;
      if (dut.cs_start && dut.sp != 0) n_resolve++;
      if (dut.frame_done) begin
        n_swap++;
        // the flag describes the frame that has just finished
        if (label_overflow) n_label_ovf++;
        if (label_overflow != (n_swap == NF)) n_ovf_wrong++;
        if (stack_overflow) n_ovf_wrong++;
      end
    end
  end

  // ---------------- output monitors ----------------
  always @(posedge clk) m_tready <= (cyc % 97 < 80) ? 1'b1 : ($urandom % 2);

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int f, y, g;
    f = out_beats / (H * NG);
    y = (out_beats / NG) % H;
    g = out_beats % NG;
    if (f < NF) begin
      for (int i = 0; i < 4; i++) lab[f][y][4*g+i] = m_tdata[i*LB +: LB];
      check(m_tuser == (y == 0 && g == 0), $sformatf("tuser f%0d y%0d g%0d", f, y, g));
      check(m_tlast == (g == NG - 1), $sformatf("tlast f%0d y%0d g%0d", f, y, g));
    end
    out_beats++;
  end

  always @(posedge clk) if (rst_n && tbl_valid) begin
    int f;
    f = tbl_beats / NLAB;
    check(tbl_addr == LB'(tbl_beats % NLAB), "TABLE address order");
    if (f < NF) tbl[f][tbl_addr] = tbl_data;
    tbl_beats++;
  end

  // ---------------- reference labelling ----------------
  int par [H*W];
  function automatic int find(int i);
    while (par[i] != i) i = par[i];
    return i;
  endfunction
  function automatic void unite(int a, int b);
    int ra, rb;
    ra = find(a); rb = find(b);
    if (ra != rb) par[ra] = rb;
  endfunction

  task automatic check_frame(int f);
    int comp2lab [int];
    int lab2comp [int];
    for (int i = 0; i < H * W; i++) par[i] = i;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) if (img[f][y][x]) begin
        if (x > 0 && img[f][y][x-1]) unite(y*W+x, y*W+x-1);
        if (y > 0) for (int dx = -1; dx <= 1; dx++)
          if (x+dx >= 0 && x+dx < W && img[f][y-1][x+dx]) unite(y*W+x, (y-1)*W+x+dx);
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int fl, c;
        fl = tbl[f][lab[f][y][x]];
        if (!img[f][y][x]) check(lab[f][y][x] == 0, $sformatf("f%0d (%0d,%0d) background not 0", f, x, y));
        else begin
          c = find(y*W+x);
          check(fl != 0, $sformatf("f%0d (%0d,%0d) foreground final label 0", f, x, y));
          if (comp2lab.exists(c)) check(comp2lab[c] == fl, $sformatf("f%0d (%0d,%0d) component split", f, x, y));
          else comp2lab[c] = fl;
          if (lab2comp.exists(fl)) check(lab2comp[fl] == c, $sformatf("f%0d (%0d,%0d) components merged", f, x, y));
          else lab2comp[fl] = c;
        end
      end
    $display("frame %0d: %0d components", f, comp2lab.num());
  endtask

  initial begin : finish
    wait (tbl_beats == NF * NLAB);
    repeat (10) @(posedge clk);
    for (int f = 0; f < NF - 1; f++) check_frame(f);
    check(out_beats == NF * H * NG, "LABELS beat count");
    check(n_ovf_wrong == 0, $sformatf("overflow flag wrong in %0d frames", n_ovf_wrong));
    check(f2_stall == 0, $sformatf("empty frame stalls inside lines: %0d", f2_stall));
    $display("mechanisms: pause=%0d resolve=%0d swap=%0d in_stall=%0d out_stall=%0d label_ovf=%0d",
             n_pause, n_resolve, n_swap, n_in_stall, n_out_stall, n_label_ovf);
    check(n_label_ovf == 1, "label overflow count");
    check(n_pause > 0, "pause never happened");
    check(n_resolve > 0, "line resolution never happened");
    check(n_swap == NF, "bank swap count");
    check(n_in_stall > 0, "input back-pressure never happened");
    check(n_out_stall > 0, "output back-pressure never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: out_beats=%0d tbl_beats=%0d", out_beats, tbl_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
