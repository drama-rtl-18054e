// drama_top: DRAMA search controller for a rank of commodity DDR3 chips.
//
// DRAMA turns unmodified DRAM into a content addressable memory. Reference
// words are stored transposed, one word per bit-column, each bit as a pair of
// complementary cells (or each DNA base as four one-hot cells). A search
// walks the query one symbol at a time: activating the row that encodes the
// symbol reads, in every column at once, whether the stored symbol matches;
// in-DRAM row copy and majority AND/OR, obtained by issuing ACT-PRE-ACT with
// shortened gaps, fold these per-symbol results into a match row that is
// finally read out. The DRAM is not changed; all the work is in the order and
// timing of the commands, which this controller generates.
//
// Blocks:
//   drama_compare_seq    command list of a NAND, NOR or HD<=1 search
//   drama_row_map        query symbol -> row address (inside the sequencer)
//   drama_cmd_timer      issues commands with normal, copy or logic timing
//   drama_refresh_timer  auto-refresh while no search runs
//   drama_result_collect numbers the read bursts, unifies the match polarity,
//                        counts matches
// The DRAM itself is outside: its command bus and read data are ports. All
// CHIPS chips take the same command and each returns BURST_BITS bits per read,
// so one search covers CHIPS*NCOL*BURST_BITS columns in each bank it names;
// with all BANKS banks named, the same query is compared with
// BANKS*CHIPS*NCOL*BURST_BITS stored words (1,048,576 at the defaults).
//
// Interface: a request (mode, enc, bank_mask, base_row, qlen, query) is taken
// when start is high and busy is low; err pulses instead if it is illegal.
// Results stream out on res_valid/res_bank/res_col/res_data (1 = match),
// match_count holds the total, and done pulses when the last burst has
// arrived. Timing: a search of m symbols in B banks takes about
// (init + m*loop steps) x (2*tRAS + tRP + 2B) cycles plus B*NCOL*tCCD for the
// read-out. Measured with the DDR3-1600 defaults, a 32-base one-hot exact
// search takes 6,275 cycles in one bank and 10,471 in eight banks (1,048,576
// words), of which 4,096 are the read-out; an approximate search takes
// 34,679 cycles in eight banks.
// Broadcasting to all chips and the bank-parallel schedule are this design's
// choices; the command lists and timing regimes follow the paper.
module drama_top
  import drama_pkg::*;
#(
  parameter int                   CHIPS      = 16,
  parameter int                   BANKS      = 8,
  parameter int                   NCOL       = 128,
  parameter int                   BURST_BITS = 64,
  parameter int                   QMAX       = 64,
  parameter logic [ROW_W_DEF-1:0] RSV_BASE   = 16'hFFF0,
  localparam int                  DW         = CHIPS * BURST_BITS,
  localparam int                  CNT_W      = $clog2(DW * NCOL * BANKS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // search request
  input  logic                  start,
  input  mode_e                 mode,
  input  enc_e                  enc,
  input  logic [BANKS-1:0]      bank_mask,
  input  logic [ROW_W_DEF-1:0]  base_row,
  input  logic [7:0]            qlen,
  input  logic [QMAX-1:0]       query,
  input  drama_timing_t         tcfg,
  output logic                  busy,
  output logic                  err,
  output logic                  done,
  // DRAM command bus (to every chip)
  output dram_cmd_e             dram_cmd,
  output logic [BANK_W_DEF-1:0] dram_bank,
  output logic [ROW_W_DEF-1:0]  dram_row,
  output logic [COL_W_DEF-1:0]  dram_col,
  // DRAM read data (all chips side by side)
  input  logic                  rd_valid,
  input  logic [DW-1:0]         rd_data,
  // results
  output logic                  res_valid,
  output logic [BANK_W_DEF-1:0] res_bank,
  output logic [COL_W_DEF-1:0]  res_col,
  output logic [DW-1:0]         res_data,
  output logic [CNT_W-1:0]      match_count,
  output logic [3:0]            ref_pending,
  output logic                  ref_missed
);

  logic       seq_busy, seq_err, seq_done;
  mode_e      seq_mode;
  logic       seq_valid, seq_ready;
  drama_op_t  seq_op;
  logic       accept;

  assign accept = start && !busy;

  drama_compare_seq #(
    .QMAX     (QMAX),
    .NCOL     (NCOL),
    .BANKS    (BANKS),
    .RSV_BASE (RSV_BASE)
  ) u_seq (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (accept),
    .mode     (mode),
    .enc      (enc),
    .bank_mask(bank_mask),
    .base_row (base_row),
    .qlen     (qlen),
    .query    (query),
    .busy     (seq_busy),
    .err      (seq_err),
    .done     (seq_done),
    .cur_mode (seq_mode),
    .op_valid (seq_valid),
    .op       (seq_op),
    .op_ready (seq_ready)
  );

  // ------------------------------------------------------------ refresh
  logic       ref_req, ref_ack;

  drama_refresh_timer u_ref (
    .clk     (clk),
    .rst_n   (rst_n),
    .trefi   (tcfg.trefi),
    .idle    (!busy),
    .ref_req (ref_req),
    .ref_ack (ref_ack),
    .pending (ref_pending),
    .missed  (ref_missed)
  );

  // ------------------------------------------------------------ command mux
  logic      t_valid, t_ready;
  drama_op_t t_op;

  always_comb begin
    if (seq_busy) begin
      t_valid = seq_valid;
      t_op    = seq_op;
    end else begin
      t_valid   = ref_req && !start;
      t_op      = '0;
      t_op.cmd  = CMD_REF;
    end
  end

  assign seq_ready = seq_busy && t_ready;
  assign ref_ack   = !seq_busy && t_valid && t_ready;

  drama_cmd_timer #(.BANKS(BANKS)) u_tmr (
    .clk       (clk),
    .rst_n     (rst_n),
    .tcfg      (tcfg),
    .op_valid  (t_valid),
    .op        (t_op),
    .op_ready  (t_ready),
    .dram_cmd  (dram_cmd),
    .dram_bank (dram_bank),
    .dram_row  (dram_row),
    .dram_col  (dram_col)
  );

  // ------------------------------------------------------------ results
  logic col_done;

  drama_result_collect #(
    .DW    (DW),
    .NCOL  (NCOL),
    .COL_W (COL_W_DEF),
    .BANKS (BANKS),
    .CNT_W (CNT_W)
  ) u_col (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (accept),
    .nor_mode    (mode == MODE_NOR),
    .bank_mask   (bank_mask),
    .rd_valid    (rd_valid),
    .rd_data     (rd_data),
    .res_valid   (res_valid),
    .res_bank    (res_bank),
    .res_col     (res_col),
    .res_data    (res_data),
    .match_count (match_count),
    .done        (col_done)
  );

  // busy from an accepted start until both the last burst is in and the
  // closing precharge has been issued
  logic waiting;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting <= 1'b0;
    end else begin
      if (accept)                   waiting <= 1'b1;
      else if (seq_err || col_done) waiting <= 1'b0;
    end
  end

  assign busy = seq_busy || waiting;
  assign err  = seq_err;
  assign done = col_done;

  // seq_done and seq_mode are observed by the assertion below only.
  a_done_busy: assert property (@(posedge clk) disable iff (!rst_n) seq_done |-> !seq_busy);
  a_banks: assert property (@(posedge clk) BANKS <= 2 ** BANK_W_DEF);
  a_mode: assert property (@(posedge clk) disable iff (!rst_n)
                           seq_busy |-> seq_mode != 2'd3);

endmodule
