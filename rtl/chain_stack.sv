// chain_stack: stores the mergers of the current image line and resolves
// them into the equivalence table between lines.
//
// During a line the merger module pushes every merger (src -> dst) into a
// block RAM of STACK_DEPTH entries. After the line's last group (start_i,
// with count_i entries on the stack) the stack is processed from the top
// down, twice, while the video input is held off:
//   union pass   for each entry (a, b): follow table pointers from a and
//                from b to their roots ra and rb (one read per cycle on the
//                fifth table copy, rd_addr_o -> rd_data_i one cycle later)
//                and, if they differ, write table[max] = min;
//   flatten pass for each entry: find the roots again and write
//                table[a] = ra and table[b] = rb.
// Afterwards every label touched in the line points straight at its root,
// so a single table lookup recodes any label of the line just finished.
// All writes leave on wr_o (address = larger label, data = smaller), the
// same path the merger uses, so the context registers recode with them.
// done_o pulses when the resolution is complete.
// The paper keeps only chain mergers on the stack and resolves them with
// one recoding read per entry; the two-pass union-find is this design's
// choice, made so that the result stays exact for any merger order.
module chain_stack
  import ccl_pkg::*;
#(
  parameter int unsigned LABEL_BITS  = 10,
  parameter int unsigned STACK_DEPTH = 3840,
  localparam int unsigned SPW = $clog2(STACK_DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           push_i,
  input  logic [SPW-1:0] push_addr_i,
  input  merge_t         push_data_i,
  input  logic           start_i,
  input  logic [SPW-1:0] count_i,
  output label_t         rd_addr_o,
  input  label_t         rd_data_i,
  output merge_t         wr_o,
  output logic           busy_o,
  output logic           done_o
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_LD, S_FA, S_FB, S_WB} state_e;
  typedef logic [2*LABEL_BITS-1:0] entry_t;

  entry_t         mem [STACK_DEPTH];
  entry_t         sq;
  state_e         state;
  logic           flatten;
  logic [SPW-1:0] idx, cnt;
  label_t         a, b, x, ra, rb;

  // Stack RAM: written by the merger, read during resolution.
  always_ff @(posedge clk) begin
    if (push_i)
      mem[push_addr_i] <= {push_data_i.src[LABEL_BITS-1:0], push_data_i.dst[LABEL_BITS-1:0]};
    if (state == S_RD) sq <= mem[idx];
  end

  label_t sa, sb;
  assign sa = label_t'(sq[2*LABEL_BITS-1:LABEL_BITS]);
  assign sb = label_t'(sq[LABEL_BITS-1:0]);

  // Table read address for the next cycle.
  always_comb begin
    rd_addr_o = '0;
    unique case (state)
      S_LD: rd_addr_o = sa;
      S_FA: rd_addr_o = (rd_data_i == x) ? b : rd_data_i;
      S_FB: rd_addr_o = rd_data_i;
      default: ;
    endcase
  end

  // Table writes.
  always_comb begin
    wr_o = '0;
    if (state == S_FB && rd_data_i == x) begin
      if (!flatten) begin
        wr_o.valid = (ra != x);
        wr_o.src   = lmax(ra, x);
        wr_o.dst   = lmin(ra, x);
      end else begin
        wr_o.valid = (a != ra);
        wr_o.src   = a;
        wr_o.dst   = ra;
      end
    end else if (state == S_WB) begin
      wr_o.valid = (b != rb);
      wr_o.src   = b;
      wr_o.dst   = rb;
    end
  end

  logic last_entry;
  assign last_entry = (idx == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      flatten <= 1'b0;
      idx     <= '0;
      cnt     <= '0;
      a       <= '0;
      b       <= '0;
      x       <= '0;
      ra      <= '0;
      rb      <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state)
        S_IDLE: if (start_i) begin
          if (count_i == '0) done_o <= 1'b1;
          else begin
            cnt     <= count_i;
            idx     <= count_i - 1'b1;
            flatten <= 1'b0;
            state   <= S_RD;
          end
        end
        S_RD: state <= S_LD;
        S_LD: begin
          a     <= sa;
          b     <= sb;
          x     <= sa;
          state <= S_FA;
        end
        S_FA: begin
          if (rd_data_i == x) begin
            ra    <= x;
            x     <= b;
            state <= S_FB;
          end else x <= rd_data_i;
        end
        S_FB: begin
          if (rd_data_i == x) begin
            rb <= x;
            if (flatten) state <= S_WB;
            else if (!last_entry) begin
              idx   <= idx - 1'b1;
              state <= S_RD;
            end else begin
              flatten <= 1'b1;
              idx     <= cnt - 1'b1;
              state   <= S_RD;
            end
          end else x <= rd_data_i;
        end
        S_WB: begin
          if (!last_entry) begin
            idx   <= idx - 1'b1;
            state <= S_RD;
          end else begin
            done_o <= 1'b1;
            state  <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state != S_IDLE);

endmodule
