// context_generator: builds the previous-row neighbourhood of each pixel
// group and tracks the group's position in the frame.
//
// Context registers hold three consecutive groups of the previous row:
// grp[0] = column g-1, grp[1] = column g, grp[2] = column g+1, when group g
// is presented on the input. The labels given to the label assigner are
//   L5 = rightmost label of grp[0], L4..L1 = grp[1], L0 = leftmost of grp[2].
// When a group is accepted (adv_i) the registers shift left and grp[2]
// takes the next group from the delay line, already recoded through the
// equivalence table (next_i). Every register is also recoded, every cycle,
// with the table write on bus_i: while shifting ("red" units, mergers from
// the label assigner) and in place while the pipeline waits ("blue" units,
// writes of the chain-stack resolution between lines).
// Edges: in the first row all six context labels are 0; in the first column
// L5 is 0; in the last column L0 is 0. The position comes from counters:
// the column advances per accepted group and returns to 0 after tlast
// (last_i), the row advances after tlast; a group with tuser (sof_i) is row
// 0, column 0. eol_o / eof_o flag the acceptance of the last group of a
// line / of a frame (row HEIGHT-1).
// Follows the paper; the register layout and counter rules are this
// design's.
module context_generator
  import ccl_pkg::*;
#(
  parameter int unsigned WIDTH  = 3840,
  parameter int unsigned HEIGHT = 2160
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   adv_i,
  input  logic   sof_i,
  input  logic   last_i,
  input  label_t next_i [PPC],
  input  merge_t bus_i,
  output label_t ctx_o [PPC+2],
  output logic   first_col_o,
  output logic   last_col_o,
  output logic   first_row_o,
  output logic   eol_o,
  output logic   eof_o
);

  localparam int unsigned NG = WIDTH / PPC;
  localparam int unsigned CW = $clog2(NG + 1);
  localparam int unsigned RW = $clog2(HEIGHT + 1);

  label_t         grp [3][PPC];
  logic [CW-1:0]  col_q, col;
  logic [RW-1:0]  row_q, row;

  assign col         = sof_i ? '0 : col_q;
  assign row         = sof_i ? '0 : row_q;
  assign first_col_o = (col == '0);
  assign last_col_o  = (col == CW'(NG - 1));
  assign first_row_o = (row == '0);
  assign eol_o       = adv_i && last_i;
  assign eof_o       = adv_i && last_i && (row == RW'(HEIGHT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q <= '0;
      row_q <= '0;
    end else if (adv_i) begin
      if (last_i) begin
        col_q <= '0;
        row_q <= (row == RW'(HEIGHT - 1)) ? '0 : row + 1'b1;
      end else begin
        col_q <= col + 1'b1;
        row_q <= row;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < PPC; i++) grp[g][i] <= '0;
    end else begin
      for (int i = 0; i < PPC; i++) begin
        if (adv_i) begin
          grp[0][i] <= recode1(grp[1][i], bus_i);
          grp[1][i] <= recode1(grp[2][i], bus_i);
          grp[2][i] <= recode1(next_i[i], bus_i);
        end else begin
          for (int g = 0; g < 3; g++) grp[g][i] <= recode1(grp[g][i], bus_i);
        end
      end
    end
  end

  always_comb begin
    ctx_o[PPC+1] = grp[0][0];
    for (int i = 0; i < PPC; i++) ctx_o[i+1] = grp[1][i];
    ctx_o[0] = grp[2][PPC-1];
    if (first_col_o) ctx_o[PPC+1] = '0;
    if (last_col_o)  ctx_o[0]     = '0;
    if (first_row_o)
      for (int j = 0; j < PPC + 2; j++) ctx_o[j] = '0;
  end

endmodule
