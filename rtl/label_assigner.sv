// label_assigner: labels the four pixels of a group in one clock cycle.
//
// Inputs per accepted group (accept_i): the four binary pixels pix_i[3..0]
// (3 = leftmost, P3), the previous-row context ctx_i[5..0] (L5..L0, already
// zeroed at the frame and line edges by the context generator) and the
// table write of this cycle (bus_i). Work done in that single cycle:
//   1. the context and the left label G are recoded with bus_i, the merger
//      of the previous group that is being written to the table now;
//   2. four ccl_pixel_unit instances run in sequence P3 -> P0; each passes
//      its label on as the next pixel's left label, and each merger it finds
//      recodes the remaining context before the next pixel sees it;
//   3. new labels come from a counter that restarts at the first group of a
//      frame (sof_i, the AXI4-Stream tuser) and saturates at
//      2**LABEL_BITS-1, setting the sticky overflow_o;
//   4. the mergers found are packed into merges_o[0..n-1]; with exactly two
//      the merger analysis (Algorithm 1) rewrites them;
//   5. G becomes the (recoded) label of P0, or 0 after the last group of a
//      line (last_i, tlast).
// With n mergers, pause_o is high for the n-1 cycles after the group, while
// the merger module writes the remaining ones; the pipeline must not accept
// a group then. labels_o are the raw labels, recoded afterwards by a recode
// instance with merges_o. The structure follows the paper; the paper bounds
// n by two, while this block handles up to four (a label that is one merger
// behind can produce more) and pauses accordingly.
module label_assigner
  import ccl_pkg::*;
#(
  parameter int unsigned LABEL_BITS = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        accept_i,
  input  logic [PPC-1:0] pix_i,
  input  logic        sof_i,
  input  logic        last_i,
  input  logic        first_col_i,
  input  label_t      ctx_i [PPC+2],
  input  merge_t      bus_i,
  output label_t      labels_o [PPC],
  output merge_t      merges_o [MAX_MERGES],
  output logic [2:0]  n_merges_o,
  output logic [1:0]  chain_o,
  output logic        pause_o,
  output logic        overflow_o
);

  localparam label_t MAXL = label_t'((1 << LABEL_BITS) - 1);

  label_t     g_q;       // label of the pixel left of the group (G)
  label_t     cnt_q;     // last label handed out in this frame
  logic [1:0] pause_q;

  // ---- label assignment (combinational) ----
  // Stage k handles pixel index PPC-1-k (P3 first). Each stage has its own
  // copy of the context (c_in), recoded with the mergers of the stages
  // before it, so the chain P3 -> P0 has no loop through a shared signal.
  label_t lab   [PPC];
  merge_t mrg   [PPC];
  logic   used  [PPC];
  label_t nused [PPC+1];
  label_t base;

  assign base     = sof_i ? '0 : cnt_q;
  assign nused[0] = '0;

  for (genvar k = 0; k < PPC; k++) begin : g_px
    localparam int I = PPC - 1 - k;
    label_t c_in [PPC+2];  // context seen by this pixel
    label_t l_in;          // left label seen by this pixel
    label_t newl;

    if (k == 0) begin : g_first
      for (genvar j = 0; j < PPC + 2; j++) begin : g_c
        assign c_in[j] = recode1(ctx_i[j], bus_i);
      end
      assign l_in = first_col_i ? '0 : recode1(g_q, bus_i);
    end else begin : g_next
      for (genvar j = 0; j < PPC + 2; j++) begin : g_c
        assign c_in[j] = recode1(g_px[k-1].c_in[j], mrg[k-1]);
      end
      assign l_in = lab[k-1];
    end

    assign newl = (base + nused[k] >= MAXL) ? MAXL : base + nused[k] + 1'b1;
    ccl_pixel_unit u_px (
      .p_i       (pix_i[I]),
      .l_i       (l_in),
      .ul_i      (c_in[I+2]),
      .u_i       (c_in[I+1]),
      .ur_i      (c_in[I]),
      .new_i     (newl),
      .label_o   (lab[k]),
      .merge_o   (mrg[k]),
      .used_new_o(used[k])
    );
    assign nused[k+1]  = nused[k] + label_t'(used[k]);
    assign labels_o[I] = lab[k];
  end

  // ---- merger list and analysis ----
  merge_t     list [MAX_MERGES];
  logic [2:0] n;
  merge_t     am1, am2;
  logic       st1, st2;

  always_comb begin
    for (int j = 0; j < MAX_MERGES; j++) list[j] = '0;
    n = '0;
    for (int k = 0; k < PPC; k++)
      if (mrg[k].valid) begin
        list[n[1:0]] = mrg[k];
        n = n + 1'b1;
      end
  end

  merger_analysis u_analysis (
    .m1_i    (list[0]),
    .m2_i    (list[1]),
    .m1_o    (am1),
    .m2_o    (am2),
    .stack1_o(st1),
    .stack2_o(st2)
  );

  always_comb begin
    merges_o = list;
    if (n == 3'd2) begin
      merges_o[0] = am1;
      merges_o[1] = am2;
    end
    n_merges_o = n;
    chain_o    = (n == 3'd2) ? {st2, st1} : {1'b0, n != '0};
  end

  // G for the next group: label of P0 after the group's own mergers.
  label_t g_next;
  always_comb begin
    g_next = lab[PPC-1];
    for (int j = 0; j < MAX_MERGES; j++) g_next = recode1(g_next, merges_o[j]);
  end

  // Overflow: a new label was needed while the counter was already at MAXL.
  logic need_ovf;
  always_comb begin
    need_ovf = 1'b0;
    for (int k = 0; k < PPC; k++)
      if (used[k] && (base + nused[k] >= MAXL)) need_ovf = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q        <= '0;
      cnt_q      <= '0;
      pause_q    <= '0;
      overflow_o <= 1'b0;
    end else begin
      if (pause_q != '0) pause_q <= pause_q - 1'b1;
      if (accept_i) begin
        g_q     <= last_i ? '0 : g_next;
        cnt_q   <= (base + nused[PPC] > MAXL) ? MAXL : base + nused[PPC];
        pause_q <= (n > 3'd1) ? 2'(n - 3'd1) : 2'd0;
        if (sof_i)         overflow_o <= need_ovf;
        else if (need_ovf) overflow_o <= 1'b1;
      end else begin
        g_q <= recode1(g_q, bus_i);
      end
    end
  end

  assign pause_o = (pause_q != '0);

  a_no_accept_in_pause: assert property (@(posedge clk) disable iff (!rst_n)
                                         pause_o |-> !accept_i);

endmodule
