// delay_line: circular buffer that delays the label groups of one image row
// so that they can form the context of the next row.
//
// DEPTH entries of four labels. On every accepted pixel group (adv_i) the
// entry at the current address is read to rdata_o and the new group is
// written to the same address (read-first), then the address advances,
// wrapping from DEPTH-1 to 0. rdata_o therefore returns the group written
// DEPTH accepted groups earlier and holds its value between advances.
// DEPTH is one row of groups minus the groups in flight between this
// buffer and the centre of the context (see ccl_top). Follows the paper;
// the exact latency budget is this design's.
module delay_line
  import ccl_pkg::*;
#(
  parameter int unsigned LABEL_BITS = 10,
  parameter int unsigned DEPTH      = 956
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   adv_i,
  input  label_t wdata_i [PPC],
  output label_t rdata_o [PPC]
);

  typedef logic [PPC*LABEL_BITS-1:0] word_t;
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t          mem [DEPTH];
  word_t          q;
  logic [AW-1:0]  addr;
  word_t          w;

  always_comb
    for (int i = 0; i < PPC; i++) w[i*LABEL_BITS +: LABEL_BITS] = wdata_i[i][LABEL_BITS-1:0];

  always_ff @(posedge clk) begin
    if (adv_i) begin
      q         <= mem[addr];
      mem[addr] <= w;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              addr <= '0;
    else if (adv_i && addr == AW'(DEPTH-1))  addr <= '0;
    else if (adv_i)                          addr <= addr + 1'b1;
  end

  for (genvar i = 0; i < PPC; i++) begin : g_out
    assign rdata_o[i] = label_t'(q[i*LABEL_BITS +: LABEL_BITS]);
  end

endmodule
