// equivalence_tables: double-buffered equivalence tables.
//
// Two eq_bank instances take turns: while one serves the frame being
// labelled (ACTIVE), the other performs the final recoding of the previous
// frame, streams it on the TABLE output and re-initialises itself so that
// every cell points to itself again. The banks swap at the end of a frame.
//
// Interface (all lookups have one cycle of read latency):
//   wr_i          table write (merger or chain-stack resolution), applied to
//                 all five copies of the active bank;
//   lk_addr_i     four labels of a delay-line group -> lk_data_o;
//   cs_addr_i     chain-stack lookup -> cs_data_o (fifth copy);
//   frame_done_i  the last line of the frame is resolved: the active bank
//                 starts its final recoding and the other bank takes over;
//   ready_o       the active bank is initialised and may take a frame;
//   can_finish_o  the idle bank is not busy with final recoding, so a
//                 frame_done_i may be given (only matters for tiny frames);
//   tbl_*         TABLE stream: addr = provisional label, data = final label.
// Reset initialises both banks; bank 0 serves the first frame.
module equivalence_tables
  import ccl_pkg::*;
#(
  parameter int unsigned LABEL_BITS = 10
) (
  input  logic   clk,
  input  logic   rst_n,
  input  merge_t wr_i,
  input  label_t lk_addr_i [PPC],
  output label_t lk_data_o [PPC],
  input  label_t cs_addr_i,
  output label_t cs_data_o,
  input  logic   frame_done_i,
  output logic   ready_o,
  output logic   can_finish_o,
  output logic   tbl_valid_o,
  output label_t tbl_addr_o,
  output label_t tbl_data_o
);

  logic        act;
  bank_state_e st      [2];
  label_t      lk_data [2][PPC];
  label_t      cs_data [2];
  logic        tv      [2];
  label_t      ta      [2];
  label_t      td      [2];

  for (genvar b = 0; b < 2; b++) begin : g_bank
    eq_bank #(.LABEL_BITS(LABEL_BITS)) u_bank (
      .clk        (clk),
      .rst_n      (rst_n),
      .activate_i (act == 1'(b)),
      .finish_i   (act == 1'(b) && frame_done_i),
      .wr_i       (wr_i),
      .lk_addr_i  (lk_addr_i),
      .lk_data_o  (lk_data[b]),
      .cs_addr_i  (cs_addr_i),
      .cs_data_o  (cs_data[b]),
      .tbl_valid_o(tv[b]),
      .tbl_addr_o (ta[b]),
      .tbl_data_o (td[b]),
      .state_o    (st[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            act <= 1'b0;
    else if (frame_done_i) act <= ~act;
  end

  assign lk_data_o    = lk_data[act];
  assign cs_data_o    = cs_data[act];
  assign ready_o      = (st[act] == BANK_ACTIVE);
  assign can_finish_o = (st[~act] != BANK_FINAL);
  assign tbl_valid_o  = tv[0] | tv[1];
  assign tbl_addr_o   = tv[1] ? ta[1] : ta[0];
  assign tbl_data_o   = tv[1] ? td[1] : td[0];

  // The idle bank must never be in final recoding when a frame ends.
  a_finish_ok: assert property (@(posedge clk) disable iff (!rst_n)
                                frame_done_i |-> can_finish_o);

endmodule
