// eq_bank: one bank of the double-buffered equivalence tables.
//
// A bank holds five identical copies of the table (eq_ram). Every write goes
// to all five, so they never disagree. Copies 0..3 recode the four labels of
// a group read from the delay line; copy 4 serves the reads of the chain
// stack resolution between lines. Read latency is one cycle.
//
// States (bank_state_e):
//   BANK_ACTIVE  merger and chain-stack writes (wr_i) are applied and the
//                read ports serve lookups;
//   BANK_FINAL   final recoding: for l = 0 .. 2**LABEL_BITS-1 in ascending
//                order, p = copy0[l] is read, then r = copy1[p]; r is sent
//                on the TABLE stream (addr l, data r) and written back to
//                table[l]. Because every entry points to a smaller label
//                and the pass ascends, table[p] is already final when it is
//                read, so one pass resolves chains of any length. Three
//                cycles per label;
//   BANK_INIT    table[l] = l for all l, one word per cycle;
//   BANK_READY   initialised and idle until activate_i.
// Reset puts the bank in BANK_INIT. The read-two-copies final recoding and
// the three states follow the paper; the write-back that makes the single
// ascending pass complete and the cycle counts are this design's.
module eq_bank
  import ccl_pkg::*;
#(
  parameter int unsigned LABEL_BITS = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        activate_i,    // READY -> ACTIVE
  input  logic        finish_i,      // ACTIVE -> FINAL (frame completed)
  input  merge_t      wr_i,          // table write while ACTIVE
  input  label_t      lk_addr_i [PPC],
  output label_t      lk_data_o [PPC],
  input  label_t      cs_addr_i,
  output label_t      cs_data_o,
  output logic        tbl_valid_o,
  output label_t      tbl_addr_o,
  output label_t      tbl_data_o,
  output bank_state_e state_o
);

  localparam int unsigned NCOPY = PPC + 1;
  localparam logic [LABEL_BITS-1:0] LAST = '1;

  typedef logic [LABEL_BITS-1:0] lab_t;

  bank_state_e state;
  lab_t        cnt;
  logic [1:0]  phase;

  logic we;
  lab_t waddr, wdata;
  lab_t raddr [NCOPY];
  lab_t rdata [NCOPY];

  for (genvar c = 0; c < NCOPY; c++) begin : g_copy
    eq_ram #(.ADDR_BITS(LABEL_BITS), .DATA_BITS(LABEL_BITS)) u_ram (
      .clk  (clk),
      .we   (we),
      .waddr(waddr),
      .wdata(wdata),
      .raddr(raddr[c]),
      .rdata(rdata[c])
    );
  end

  // Write port and read addresses.
  always_comb begin
    we    = 1'b0;
    waddr = '0;
    wdata = '0;
    for (int c = 0; c < PPC; c++) raddr[c] = lab_t'(lk_addr_i[c]);
    raddr[PPC] = lab_t'(cs_addr_i);
    unique case (state)
      BANK_ACTIVE: begin
        we    = wr_i.valid;
        waddr = lab_t'(wr_i.src);
        wdata = lab_t'(wr_i.dst);
      end
      BANK_FINAL: begin
        raddr[0] = cnt;
        raddr[1] = rdata[0];
        we       = (phase == 2'd2);
        waddr    = cnt;
        wdata    = rdata[1];
      end
      BANK_INIT: begin
        we    = 1'b1;
        waddr = cnt;
        wdata = cnt;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= BANK_INIT;
      cnt         <= '0;
      phase       <= '0;
      tbl_valid_o <= 1'b0;
      tbl_addr_o  <= '0;
      tbl_data_o  <= '0;
    end else begin
      tbl_valid_o <= 1'b0;
      unique case (state)
        BANK_INIT: begin
          cnt <= cnt + 1'b1;
          if (cnt == LAST) state <= BANK_READY;
        end
        BANK_READY:  if (activate_i) state <= BANK_ACTIVE;
        BANK_ACTIVE: if (finish_i) begin
          state <= BANK_FINAL;
          cnt   <= '0;
          phase <= '0;
        end
        BANK_FINAL: begin
          if (phase == 2'd2) begin
            phase       <= '0;
            tbl_valid_o <= 1'b1;
            tbl_addr_o  <= label_t'(cnt);
            tbl_data_o  <= label_t'(rdata[1]);
            cnt         <= cnt + 1'b1;
            if (cnt == LAST) state <= BANK_INIT;
          end else begin
            phase <= phase + 1'b1;
          end
        end
        default: state <= BANK_INIT;
      endcase
    end
  end

  for (genvar c = 0; c < PPC; c++) begin : g_lk
    assign lk_data_o[c] = label_t'(rdata[c]);
  end
  assign cs_data_o = label_t'(rdata[PPC]);
  assign state_o   = state;

endmodule
