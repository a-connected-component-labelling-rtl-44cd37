// merger: writes the mergers of a pixel group into the equivalence tables
// and onto the chain stack.
//
// On load_i (a group accepted by the label assigner) the group's n_i
// mergers (0..4) are captured. From the next cycle on, one merger per cycle
// is driven on wr_o: table[src] <= dst, larger label as address, smaller as
// data. The same merger is pushed onto the chain stack at address sp_o,
// which then increments. A group with two mergers thus takes two cycles,
// covered by the label assigner's one-cycle pause; a load may arrive in the
// cycle the last queued merger is driven. sp_clear_i (end of line, after
// the stack has been resolved) moves the stack address back to 0.
// A push into a full stack is dropped and sets the sticky overflow_o.
// Follows the paper, except that every merger is pushed, not only those
// the merger analysis flags as chain mergers: the line-end resolution
// (chain_stack) performs a full union over all of them, which keeps the
// labelling exact even when a merger's source label is already outdated.
module merger
  import ccl_pkg::*;
#(
  parameter int unsigned STACK_DEPTH = 3840,
  localparam int unsigned SPW = $clog2(STACK_DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load_i,
  input  merge_t         merges_i [MAX_MERGES],
  input  logic [2:0]     n_i,
  input  logic           sp_clear_i,
  output merge_t         wr_o,
  output logic           push_o,
  output logic [SPW-1:0] push_addr_o,
  output merge_t         push_data_o,
  output logic [SPW-1:0] sp_o,
  output logic           busy_o,
  output logic           overflow_o
);

  merge_t     q [MAX_MERGES];
  logic [2:0] cnt;
  logic [1:0] idx;
  logic [SPW-1:0] sp;

  assign wr_o        = (cnt != '0) ? q[idx] : '0;
  assign push_o      = wr_o.valid && (sp < SPW'(STACK_DEPTH));
  assign push_addr_o = sp;
  assign push_data_o = wr_o;
  assign sp_o        = sp;
  assign busy_o      = (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      idx        <= '0;
      sp         <= '0;
      overflow_o <= 1'b0;
      for (int j = 0; j < MAX_MERGES; j++) q[j] <= '0;
    end else begin
      if (load_i) begin
        q   <= merges_i;
        cnt <= n_i;
        idx <= '0;
      end else if (cnt != '0) begin
        cnt <= cnt - 1'b1;
        idx <= idx + 1'b1;
      end
      if (sp_clear_i)  sp <= '0;
      else if (push_o) sp <= sp + 1'b1;
      if (wr_o.valid && !push_o) overflow_o <= 1'b1;
    end
  end

  a_load_when_free: assert property (@(posedge clk) disable iff (!rst_n)
                                     load_i |-> cnt <= 3'd1);
  a_no_clear_busy:  assert property (@(posedge clk) disable iff (!rst_n)
                                     sp_clear_i |-> !wr_o.valid);

endmodule
