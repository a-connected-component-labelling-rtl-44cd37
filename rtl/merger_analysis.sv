// merger_analysis: rewrites the two mergers found in one pixel group so that
// they never form an indirect link (Algorithm 1 of the design description).
//
// A merger m = (src -> dst) points a higher label at a lower one. Given two
// valid mergers m1 and m2 of the same group:
//   * same source      : the two destinations are merged with each other
//                        (larger destination -> smaller) and the other merger
//                        keeps the source -> smaller destination; both are
//                        flagged as chain mergers;
//   * m1.src == m2.dst : m2 is redirected to m1.dst; no chain flags;
//   * m1.dst == m2.src : m1 is redirected to m2.dst; both flagged;
//   * otherwise        : unchanged, only m1 flagged.
// Example: (4 -> 1), (7 -> 4) becomes (4 -> 1), (7 -> 1).
// The flags (stack1/stack2) are the paper's chain-of-mergers decision. In
// this implementation every merger is pushed to the chain stack anyway (see
// merger.sv), so they are informational. A rewritten merger whose source
// equals its destination (two identical inputs) is dropped; that guard is
// this design's addition. Purely combinational.
module merger_analysis
  import ccl_pkg::*;
(
  input  merge_t m1_i,
  input  merge_t m2_i,
  output merge_t m1_o,
  output merge_t m2_o,
  output logic   stack1_o,
  output logic   stack2_o
);

  always_comb begin
    m1_o     = m1_i;
    m2_o     = m2_i;
    stack1_o = 1'b0;
    stack2_o = 1'b0;
    if (m1_i.valid && m2_i.valid) begin
      if (m1_i.src == m2_i.src) begin
        if (m1_i.dst > m2_i.dst) begin
          m1_o.src = m1_i.dst;
          m1_o.dst = m2_i.dst;
        end else begin
          m2_o.src = m2_i.dst;
          m2_o.dst = m1_i.dst;
        end
        stack1_o = 1'b1;
        stack2_o = 1'b1;
      end else if (m1_i.src == m2_i.dst) begin
        m2_o.dst = m1_i.dst;
      end else if (m1_i.dst == m2_i.src) begin
        m1_o.dst = m2_i.dst;
        stack1_o = 1'b1;
        stack2_o = 1'b1;
      end else begin
        stack1_o = 1'b1;
      end
      if (m1_o.src == m1_o.dst) m1_o.valid = 1'b0;
      if (m2_o.src == m2_o.dst) m2_o.valid = 1'b0;
    end
  end

endmodule
