// ccl_pkg: types, constants and small functions shared by the blocks of the
// four-pixel-per-clock connected component labelling (CCL) pipeline.
//
// Pixels arrive four per clock. Inside a group, index 3 is the leftmost
// pixel (P3) and index 0 the rightmost (P0), following the naming of the
// neighbourhood P3..P0 / L5..L0 / G used throughout the design. Label 0 is
// the background; real labels are 1 .. 2**LABEL_BITS-1.
//
// A merger (a -> b) always points a higher label a at a lower label b.
// The same record type is used for every write into the equivalence table,
// so that one recode function serves all places where labels held in
// registers must follow the table.
package ccl_pkg;

  // Number of pixels per clock cycle (the design is built around four).
  localparam int unsigned PPC = 4;
  // Maximum number of mergers a single group can produce (one per pixel).
  localparam int unsigned MAX_MERGES = PPC;

  // One merger / one equivalence-table write: table[src] <= dst.
  // Width-generic code uses a label width of up to 16 bits.
  localparam int unsigned LW_MAX = 16;
  typedef logic [LW_MAX-1:0] label_t;

  typedef struct packed {
    logic   valid;
    label_t src;  // higher label (table address)
    label_t dst;  // lower label (table data)
  } merge_t;

  // Apply one merger to one label.
  function automatic label_t recode1(label_t l, merge_t m);
    return (m.valid && l == m.src && l != '0) ? m.dst : l;
  endfunction

  function automatic label_t lmin(label_t a, label_t b);
    return (a < b) ? a : b;
  endfunction

  function automatic label_t lmax(label_t a, label_t b);
    return (a > b) ? a : b;
  endfunction

  // Operating state of one equivalence-table bank.
  typedef enum logic [1:0] {
    BANK_INIT,    // writing table[l] = l for every label
    BANK_READY,   // initialised, waiting to be used for a frame
    BANK_ACTIVE,  // in use for the frame being labelled
    BANK_FINAL    // final recoding, streaming the TABLE output
  } bank_state_e;

endpackage
