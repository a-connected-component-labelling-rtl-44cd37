// recode: replaces labels by the targets of mergers that the equivalence
// table does not reflect yet.
//
// Every label of the input group is compared with the source (higher
// label) of each merger, applied in order; on a match it is replaced by the
// merger's destination (lower label). Label 0 (background) is never
// changed. The block is purely combinational.
//
// The architecture uses two instances: one recodes the labels leaving the
// label assigner with the group's own mergers (its output is the LABELS
// stream and the delay-line input), the other recodes the labels read from
// the equivalence tables with the table write of the current cycle, which
// the synchronous memory has not returned yet. The paper names both uses;
// the compare-and-replace structure is this design's.
module recode
  import ccl_pkg::*;
#(
  parameter int unsigned N_LABELS = 4,
  parameter int unsigned N_MERGES = 2
) (
  input  label_t labels_i [N_LABELS],
  input  merge_t merges_i [N_MERGES],
  output label_t labels_o [N_LABELS]
);

  always_comb begin
    for (int i = 0; i < N_LABELS; i++) begin
      labels_o[i] = labels_i[i];
      for (int k = 0; k < N_MERGES; k++)
        labels_o[i] = recode1(labels_o[i], merges_i[k]);
    end
  end

endmodule
