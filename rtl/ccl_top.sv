// ccl_top: connected component labelling of a binary video stream carrying
// four pixels per clock cycle.
//
// Interfaces
//   VIDEO_IN  (s_*)  AXI4-Stream, tdata[3:0] = four binary pixels, bit 0 the
//                    leftmost (first in raster order); tuser marks the first
//                    group of a frame, tlast the last group of a line.
//   LABELS    (m_*)  AXI4-Stream, one provisional label per pixel,
//                    LABEL_BITS each, leftmost pixel in the low bits; same
//                    tuser/tlast framing as the input.
//   TABLE     (tbl_*) after each frame: for every label l = 0 ..
//                    2**LABEL_BITS-1 one beat (addr = l, data = final label).
//                    The final label of a pixel is TABLE[its LABELS value].
//   label_overflow   the frame needed more than 2**LABEL_BITS-1 labels.
//   stack_overflow   a line produced more than STACK_DEPTH mergers.
//
// Data path per accepted group (one group per clock when nothing stalls):
//   delay_line -> s1 register -> equivalence_tables lookup -> recode ->
//   context_generator (three groups of the previous row) -> label_assigner
//   -> recode with the group's mergers -> LABELS output and delay_line.
// The assigner's mergers go through the merger module into the table
// (all five copies) and onto the chain stack. Every table write is also
// applied to the labels held in the context registers and the G register,
// so no label in flight misses a merger.
//
// The input is held off (s_tready low) while
//   * the label assigner pauses for a group with two or more mergers,
//   * after each line, the chain stack is being resolved into the table,
//   * after a frame, until the next table bank is initialised,
//   * the LABELS output is full and not accepted.
//
// Pipeline bookkeeping: a delay-line entry read at acceptance j becomes the
// middle context group at acceptance j+4, so the delay line is WIDTH/4 - 4
// groups long. WIDTH must be a multiple of 4 and at least 20.
// Block structure and interfaces follow the paper; the stall sources other
// than pause, the union-find line resolution and the bit order of tdata are
// this design's choices.
//
// Lint notes: verilator reports rst_n as both synchronous and asynchronous
// only because the assertions below use it in "disable iff"; the logic
// itself resets asynchronously. The context generator's last_col/first_row
// flags and the assigner's chain flags are unused here (the line-end
// resolution handles every merger), and the upper bits of the 16-bit label
// type above LABEL_BITS are unused.
module ccl_top
  import ccl_pkg::*;
#(
  parameter int unsigned LABEL_BITS  = 10,
  parameter int unsigned WIDTH       = 3840,
  parameter int unsigned HEIGHT      = 2160,
  parameter int unsigned STACK_DEPTH = WIDTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // VIDEO_IN
  input  logic                      s_tvalid,
  output logic                      s_tready,
  input  logic [PPC-1:0]            s_tdata,
  input  logic                      s_tuser,
  input  logic                      s_tlast,
  // LABELS
  output logic                      m_tvalid,
  input  logic                      m_tready,
  output logic [PPC*LABEL_BITS-1:0] m_tdata,
  output logic                      m_tuser,
  output logic                      m_tlast,
  // TABLE
  output logic                      tbl_valid,
  output logic [LABEL_BITS-1:0]     tbl_addr,
  output logic [LABEL_BITS-1:0]     tbl_data,
  // status
  output logic                      label_overflow,
  output logic                      stack_overflow
);

  localparam int unsigned NG       = WIDTH / PPC;
  localparam int unsigned DL_DEPTH = NG - 4;
  localparam int unsigned SPW      = $clog2(STACK_DEPTH + 1);

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {L_RUN, L_WAITM, L_RES, L_FRAME} line_e;
  line_e line_q;
  logic  eof_q;

  logic   accept;
  logic   pause, tbl_ready, can_finish, mg_busy, cs_done, cs_busy;
  logic   eol, eof, first_col, last_col, first_row;
  logic   cs_start, frame_done;
  merge_t bus, mg_wr, cs_wr;

  assign s_tready = tbl_ready && !pause && (line_q == L_RUN) && (!m_tvalid || m_tready);
  assign accept   = s_tvalid && s_tready;
  assign cs_start   = (line_q == L_WAITM) && !mg_busy;
  assign frame_done = (line_q == L_FRAME) && can_finish;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_q <= L_RUN;
      eof_q  <= 1'b0;
    end else begin
      unique case (line_q)
        L_RUN:   if (eol) begin
          line_q <= L_WAITM;
          eof_q  <= eof;
        end
        L_WAITM: if (!mg_busy) line_q <= L_RES;
        L_RES:   if (cs_done) line_q <= eof_q ? L_FRAME : L_RUN;
        L_FRAME: if (can_finish) line_q <= L_RUN;
        default: line_q <= L_RUN;
      endcase
    end
  end

  // One table write per cycle: merger writes during a line, chain-stack
  // writes between lines; they never overlap.
  assign bus = mg_wr.valid ? mg_wr : cs_wr;

  // ------------------------------------------------------ delay line + lookup
  label_t dl_q [PPC];
  label_t s1   [PPC];
  label_t lk_addr [PPC];
  label_t lk_data [PPC];
  label_t lk_rec  [PPC];
  label_t out_rec [PPC];

  delay_line #(.LABEL_BITS(LABEL_BITS), .DEPTH(DL_DEPTH)) u_delay_line (
    .clk    (clk),
    .rst_n  (rst_n),
    .adv_i  (accept),
    .wdata_i(out_rec),
    .rdata_o(dl_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      for (int i = 0; i < PPC; i++) s1[i] <= '0;
    else if (accept) s1 <= dl_q;
  end

  // Read address: the group that s1 will hold in the next cycle, so that the
  // table output always matches s1.
  assign lk_addr = accept ? dl_q : s1;

  label_t cs_addr, cs_data;
  logic   tv;
  label_t ta, td;

  equivalence_tables #(.LABEL_BITS(LABEL_BITS)) u_equivalence_tables (
    .clk         (clk),
    .rst_n       (rst_n),
    .wr_i        (bus),
    .lk_addr_i   (lk_addr),
    .lk_data_o   (lk_data),
    .cs_addr_i   (cs_addr),
    .cs_data_o   (cs_data),
    .frame_done_i(frame_done),
    .ready_o     (tbl_ready),
    .can_finish_o(can_finish),
    .tbl_valid_o (tv),
    .tbl_addr_o  (ta),
    .tbl_data_o  (td)
  );

  assign tbl_valid = tv;
  assign tbl_addr  = ta[LABEL_BITS-1:0];
  assign tbl_data  = td[LABEL_BITS-1:0];

  // Labels read from the table miss the write of this very cycle.
  merge_t bus_list [1];
  assign bus_list[0] = bus;

  recode #(.N_LABELS(PPC), .N_MERGES(1)) u_recode_table (
    .labels_i(lk_data),
    .merges_i(bus_list),
    .labels_o(lk_rec)
  );

  // ------------------------------------------------------------- context
  label_t ctx [PPC+2];

  context_generator #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_context_generator (
    .clk        (clk),
    .rst_n      (rst_n),
    .adv_i      (accept),
    .sof_i      (s_tuser),
    .last_i     (s_tlast),
    .next_i     (lk_rec),
    .bus_i      (bus),
    .ctx_o      (ctx),
    .first_col_o(first_col),
    .last_col_o (last_col),
    .first_row_o(first_row),
    .eol_o      (eol),
    .eof_o      (eof)
  );

  // ------------------------------------------------------------- assigner
  logic [PPC-1:0] pix;
  label_t         raw [PPC];
  merge_t         merges [MAX_MERGES];
  logic [2:0]     n_merges;
  logic [1:0]     chain;

  for (genvar i = 0; i < PPC; i++) begin : g_pix
    assign pix[PPC-1-i] = s_tdata[i];
  end

  label_assigner #(.LABEL_BITS(LABEL_BITS)) u_label_assigner (
    .clk        (clk),
    .rst_n      (rst_n),
    .accept_i   (accept),
    .pix_i      (pix),
    .sof_i      (s_tuser),
    .last_i     (s_tlast),
    .first_col_i(first_col),
    .ctx_i      (ctx),
    .bus_i      (bus),
    .labels_o   (raw),
    .merges_o   (merges),
    .n_merges_o (n_merges),
    .chain_o    (chain),
    .pause_o    (pause),
    .overflow_o (label_overflow)
  );

  recode #(.N_LABELS(PPC), .N_MERGES(MAX_MERGES)) u_recode_out (
    .labels_i(raw),
    .merges_i(merges),
    .labels_o(out_rec)
  );

  // ------------------------------------------------------ merger and stack
  logic           push;
  logic [SPW-1:0] push_addr, sp;
  merge_t         push_data;

  merger #(.STACK_DEPTH(STACK_DEPTH)) u_merger (
    .clk        (clk),
    .rst_n      (rst_n),
    .load_i     (accept),
    .merges_i   (merges),
    .n_i        (n_merges),
    .sp_clear_i (cs_done),
    .wr_o       (mg_wr),
    .push_o     (push),
    .push_addr_o(push_addr),
    .push_data_o(push_data),
    .sp_o       (sp),
    .busy_o     (mg_busy),
    .overflow_o (stack_overflow)
  );

  chain_stack #(.LABEL_BITS(LABEL_BITS), .STACK_DEPTH(STACK_DEPTH)) u_chain_stack (
    .clk        (clk),
    .rst_n      (rst_n),
    .push_i     (push),
    .push_addr_i(push_addr),
    .push_data_i(push_data),
    .start_i    (cs_start),
    .count_i    (sp),
    .rd_addr_o  (cs_addr),
    .rd_data_i  (cs_data),
    .wr_o       (cs_wr),
    .busy_o     (cs_busy),
    .done_o     (cs_done)
  );

  // ---------------------------------------------------------- LABELS output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tuser  <= 1'b0;
      m_tlast  <= 1'b0;
    end else if (accept) begin
      m_tvalid <= 1'b1;
      m_tuser  <= s_tuser;
      m_tlast  <= s_tlast;
      for (int i = 0; i < PPC; i++)
        m_tdata[i*LABEL_BITS +: LABEL_BITS] <= out_rec[PPC-1-i][LABEL_BITS-1:0];
    end else if (m_tready) begin
      m_tvalid <= 1'b0;
    end
  end

  // ------------------------------------------------------------ assertions
  a_labels_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tlast) && $stable(m_tuser));
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    !(mg_wr.valid && cs_wr.valid));
  a_stack_idle_in_line: assert property (@(posedge clk) disable iff (!rst_n)
    (line_q == L_RUN) |-> !cs_busy);

endmodule
