// drama_compare_seq: expands one search into the DRAMA command list.
//
// A DRAMA compare runs bit-serially through the query. For every symbol it
// activates the row that encodes the query symbol (a plain DRAM read, which
// leaves the per-column XNOR in the row buffer) and folds that result into a
// running match row with a majority-based AND (or OR) done inside the DRAM.
// Every step is one of two shapes, each four commands long:
//   copy  CPY(dst, src) : PRE, ACT src, PRE (normal tRAS), ACT dst after a
//                         shortened tRP. The row buffer still holds src and is
//                         written into dst.
//   logic AND/OR        : PRE, ACT R1, PRE (minimal tRAS), ACT R2 (minimal
//                         tRP). R1, R3 and R2 are all opened and take their
//                         majority. With R1 preset to 0 this is R2 AND R3,
//                         with R1 or R3 preset to 1 it is an OR.
// The XNOR read is a copy whose source is the query row, so the compare of one
// symbol is: XNOR into R3, preset R1, fold into R2.
//
// Step lists (after the paper's pseudocode):
//   NAND   init  CPY(R2,C1)
//          loop  CPY(R3,Q)  CPY(R1,C0)  AND
//   NOR    init  CPY(R2,C0)
//          loop  CPY(R3,~Q) CPY(R1,C1)  OR        (result 0 = match)
//   APPROX init  CPY(R2,C1) CPY(RB,C1) CPY(RC,C1)
//          loop  CPY(R3,Q)  CPY(RA,R3)  CPY(R1,C0)  CPY(R2,RB)  AND
//                CPY(R3,C1) CPY(R2,RB)  CPY(RB,R1)  CPY(R1,RA)  OR
//                CPY(R1,C0) CPY(R2,RC)  AND         CPY(RC,R2)
//          RB holds the running exact match, RC the running match within
//          Hamming distance 1: approx_j = approx_{j-1} & (xnor_j | exact_{j-1}).
//          The step CPY(RB,R1), which stores the new exact match, is this
//          design's addition: the paper's listing never updates RB.
// After the loop: PRE, ACT R2, NCOL column reads of the result row, PRE.
//
// Bank parallelism: a request names a set of banks (bank_mask). The same
// query runs in every selected bank, each on its own stored words, and the
// banks share the command bus. Each step is spread over the banks so that
// the two timing-critical commands stay adjacent within a bank:
//   copy  : PRE to every bank, ACT src to every bank, then per bank the
//           pair PRE, ACT dst (adjacent, so the shortened tRP holds)
//   logic : PRE to every bank, then per bank the triple ACT R1, PRE, ACT R2
// While one bank waits out tRP or tRAS the others use the bus, so eight
// banks cost little more time than one. Read-out opens R2 in every bank and
// reads the banks one after the other, lowest bank first.
//
// Reserved rows sit at RSV_BASE + offsets from drama_pkg (R3, R1, R2 end in
// 00, 01, 10 and share their upper bits, as the in-DRAM AND requires).
//
// Interface: start/mode/enc/bank_mask/base_row/qlen/query are sampled when start is
// high and the sequencer is idle. An illegal request (qlen of 0 or too long,
// NOR with one-hot coding, unknown mode, no bank) pulses err instead.
// Commands leave on op_valid/op/op_ready: op is valid from the cycle after
// the previous one was taken, so the timer sets every gap. done pulses when
// the closing PREs have been taken. Command count of a search in B banks:
//   4*B*(init steps) + 4*B*m*(loop steps) + 2*B + B*NCOL + B.
module drama_compare_seq
  import drama_pkg::*;
#(
  parameter int                        QMAX     = 64,   // query bits
  parameter int                        NCOL     = 128,  // column bursts per row
  parameter int                        BANKS    = 8,
  parameter logic [ROW_W_DEF-1:0]      RSV_BASE = 16'hFFF0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // search request
  input  logic                  start,
  input  mode_e                 mode,
  input  enc_e                  enc,
  input  logic [BANKS-1:0]      bank_mask, // banks searched in parallel
  input  logic [ROW_W_DEF-1:0]  base_row,
  input  logic [7:0]            qlen,      // symbols (bits or bases)
  input  logic [QMAX-1:0]       query,
  output logic                  busy,
  output logic                  err,
  output logic                  done,
  output mode_e                 cur_mode,  // mode of the running search
  // command stream
  output logic                  op_valid,
  output drama_op_t             op,
  input  logic                  op_ready
);

  localparam int COL_W = COL_W_DEF;

  typedef enum logic [2:0] {
    PH_IDLE, PH_INIT, PH_LOOP, PH_FIN, PH_READ, PH_CLOSE
  } phase_e;

  typedef enum logic [3:0] {
    S_Q, S_R1, S_R2, S_R3, S_C0, S_C1, S_RA, S_RB, S_RC
  } rsel_e;

  // One step: copy src -> dst, or the majority operation (logic = 1).
  typedef struct packed {
    logic  logic_op;
    rsel_e src;
    rsel_e dst;
  } step_t;

  localparam step_t ST_AND = '{logic_op: 1'b1, src: S_R1, dst: S_R2};

  function automatic step_t cpy(rsel_e dst, rsel_e src);
    return '{logic_op: 1'b0, src: src, dst: dst};
  endfunction

  function automatic int unsigned n_init(mode_e m);
    return (m == MODE_APPROX) ? 3 : 1;
  endfunction

  function automatic int unsigned n_loop(mode_e m);
    return (m == MODE_APPROX) ? 14 : 3;
  endfunction

  function automatic step_t init_step(mode_e m, logic [3:0] i);
    step_t s;
    s = cpy(S_R2, S_C1);
    if (m == MODE_NOR) s = cpy(S_R2, S_C0);
    else if (m == MODE_APPROX) begin
      case (i)
        4'd0:    s = cpy(S_R2, S_C1);
        4'd1:    s = cpy(S_RB, S_C1);
        default: s = cpy(S_RC, S_C1);
      endcase
    end
    return s;
  endfunction

  function automatic step_t loop_step(mode_e m, logic [3:0] i);
    step_t s;
    s = ST_AND;
    if (m == MODE_APPROX) begin
      case (i)
        4'd0:    s = cpy(S_R3, S_Q);   // XNOR of query bit into R3
        4'd1:    s = cpy(S_RA, S_R3);  // keep XNOR in RA
        4'd2:    s = cpy(S_R1, S_C0);
        4'd3:    s = cpy(S_R2, S_RB);  // previous exact match
        4'd4:    s = ST_AND;           // exact_j in R1, R2, R3
        4'd5:    s = cpy(S_R3, S_C1);  // R3 <- 1: next majority is an OR
        4'd6:    s = cpy(S_R2, S_RB);  // exact_{j-1}
        4'd7:    s = cpy(S_RB, S_R1);  // RB <- exact_j (R1 still holds it)
        4'd8:    s = cpy(S_R1, S_RA);  // xnor_j
        4'd9:    s = ST_AND;           // OR: xnor_j | exact_{j-1}
        4'd10:   s = cpy(S_R1, S_C0);
        4'd11:   s = cpy(S_R2, S_RC);  // approx_{j-1}
        4'd12:   s = ST_AND;           // approx_j
        default: s = cpy(S_RC, S_R2);
      endcase
    end else begin
      case (i)
        4'd0:    s = cpy(S_R3, S_Q);
        4'd1:    s = cpy(S_R1, (m == MODE_NOR) ? S_C1 : S_C0);
        default: s = ST_AND;
      endcase
    end
    return s;
  endfunction

  // ---------------------------------------------------------------- state
  phase_e                phase;
  logic [3:0]            step;      // step within init or loop body
  logic [1:0]            sub;       // command slot within a step
  logic [BANK_W_DEF-1:0] bk;        // bank of the current command
  logic [BANKS-1:0]      r_mask;
  logic [7:0]            j;         // query symbol
  logic [COL_W-1:0]      col;
  mode_e                 r_mode;
  enc_e                  r_enc;
  logic [ROW_W_DEF-1:0]  r_base;
  logic [7:0]            r_qlen;
  logic [QMAX-1:0]       r_query;

  // ---------------------------------------------------------------- request check
  logic req_ok;
  always_comb begin
    req_ok = (qlen != 8'd0) && (mode != 2'd3) && (bank_mask != '0);
    if (enc == ENC_ONEHOT)
      req_ok = req_ok && (mode != MODE_NOR) && (int'(qlen) * 2 <= QMAX);
    else
      req_ok = req_ok && (int'(qlen) <= QMAX);
  end

  // ---------------------------------------------------------------- current command
  logic [1:0]           qsym;
  logic [ROW_W_DEF-1:0] qrow;

  always_comb begin
    if (r_enc == ENC_ONEHOT) qsym = 2'(r_query >> {j, 1'b0});
    else                     qsym = {1'b0, 1'(r_query >> j)};
  end

  drama_row_map #(.ROW_W(ROW_W_DEF)) u_map (
    .enc      (r_enc),
    .invert   (r_mode == MODE_NOR),
    .base_row (r_base),
    .idx      (j),
    .sym      (qsym),
    .row      (qrow)
  );

  function automatic logic [ROW_W_DEF-1:0] rsv(logic [3:0] off);
    return RSV_BASE + ROW_W_DEF'(off);
  endfunction

  function automatic logic [ROW_W_DEF-1:0] row_of(rsel_e s, logic [ROW_W_DEF-1:0] q);
    case (s)
      S_Q:     return q;
      S_R1:    return rsv(OFF_R1);
      S_R2:    return rsv(OFF_R2);
      S_R3:    return rsv(OFF_R3);
      S_C0:    return rsv(OFF_C0);
      S_C1:    return rsv(OFF_C1);
      S_RA:    return rsv(OFF_RA);
      S_RB:    return rsv(OFF_RB);
      default: return rsv(OFF_RC);
    endcase
  endfunction

  step_t cur_step;
  always_comb begin
    cur_step = (phase == PH_INIT) ? init_step(r_mode, step) : loop_step(r_mode, step);
  end

  // ---------------------------------------------------------------- bank walk
  function automatic logic [BANK_W_DEF-1:0] first_bank(logic [BANKS-1:0] m);
    for (int b = BANKS - 1; b >= 0; b--)
      if (m[b]) first_bank = BANK_W_DEF'(b);
    if (m == '0) first_bank = '0;
  endfunction

  function automatic logic last_bank(logic [BANKS-1:0] m, logic [BANK_W_DEF-1:0] b);
    last_bank = 1'b1;
    for (int i = 0; i < BANKS; i++)
      if (m[i] && i > int'(b)) last_bank = 1'b0;
  endfunction

  function automatic logic [BANK_W_DEF-1:0] next_bank(logic [BANKS-1:0] m, logic [BANK_W_DEF-1:0] b);
    next_bank = b;
    for (int i = BANKS - 1; i >= 0; i--)
      if (m[i] && i > int'(b)) next_bank = BANK_W_DEF'(i);
  endfunction

  logic is_last;
  assign is_last = last_bank(r_mask, bk);

  // ---------------------------------------------------------------- current command
  always_comb begin
    op        = '0;
    op.cmd    = CMD_NOP;
    op.tclass = T_NORM;
    op.bank   = bk;
    op_valid  = 1'b0;
    case (phase)
      PH_INIT, PH_LOOP: begin
        op_valid = 1'b1;
        case (sub)
          2'd0: op.cmd = CMD_PRE;
          2'd1: begin
            op.cmd = CMD_ACT;
            op.row = row_of(cur_step.src, qrow);
          end
          2'd2: begin
            op.cmd    = CMD_PRE;
            op.tclass = cur_step.logic_op ? T_LOGIC : T_NORM;
          end
          default: begin
            op.cmd    = CMD_ACT;
            op.tclass = cur_step.logic_op ? T_LOGIC : T_COPY;
            op.row    = row_of(cur_step.dst, qrow);
          end
        endcase
      end
      PH_FIN: begin
        op_valid = 1'b1;
        op.cmd   = (sub == 2'd0) ? CMD_PRE : CMD_ACT;
        op.row   = rsv(OFF_R2);
      end
      PH_READ: begin
        op_valid = 1'b1;
        op.cmd   = CMD_RD;
        op.row   = rsv(OFF_R2);
        op.col   = col;
      end
      PH_CLOSE: begin
        op_valid = 1'b1;
        op.cmd   = CMD_PRE;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- sequencing
  logic take;
  assign take = op_valid && op_ready;

  // end of one step of the init or loop list
  logic step_last;
  always_comb begin
    if (phase == PH_INIT) step_last = (32'(step) == n_init(r_mode) - 1);
    else                  step_last = (32'(step) == n_loop(r_mode) - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= PH_IDLE;
      step    <= '0;
      sub     <= '0;
      bk      <= '0;
      j       <= '0;
      col     <= '0;
      r_mode  <= MODE_NAND;
      r_enc   <= ENC_BINARY;
      r_mask  <= '0;
      r_base  <= '0;
      r_qlen  <= '0;
      r_query <= '0;
      err     <= 1'b0;
      done    <= 1'b0;
    end else begin
      err  <= 1'b0;
      done <= 1'b0;
      case (phase)
        PH_IDLE: if (start) begin
          if (req_ok) begin
            phase   <= PH_INIT;
            r_mode  <= mode;
            r_enc   <= enc;
            r_mask  <= bank_mask;
            r_base  <= base_row;
            r_qlen  <= qlen;
            r_query <= query;
            step    <= '0;
            sub     <= '0;
            bk      <= first_bank(bank_mask);
            j       <= '0;
            col     <= '0;
          end else begin
            err <= 1'b1;
          end
        end
        PH_INIT, PH_LOOP: if (take) begin
          case (sub)
            2'd0: begin                       // PRE to every bank
              if (is_last) begin sub <= 2'd1; bk <= first_bank(r_mask); end
              else bk <= next_bank(r_mask, bk);
            end
            2'd1: begin                       // ACT src
              if (cur_step.logic_op) sub <= 2'd2;          // triple stays in bank
              else if (is_last) begin sub <= 2'd2; bk <= first_bank(r_mask); end
              else bk <= next_bank(r_mask, bk);
            end
            2'd2: sub <= 2'd3;                // PRE, then ACT dst right after
            default: begin                    // ACT dst
              if (!is_last) begin
                bk  <= next_bank(r_mask, bk);
                sub <= cur_step.logic_op ? 2'd1 : 2'd2;
              end else begin
                bk  <= first_bank(r_mask);
                sub <= 2'd0;
                if (!step_last) step <= step + 4'd1;
                else begin
                  step <= '0;
                  if (phase == PH_INIT)        phase <= PH_LOOP;
                  else if (j == r_qlen - 8'd1) phase <= PH_FIN;
                  else                         j     <= j + 8'd1;
                end
              end
            end
          endcase
        end
        PH_FIN: if (take) begin
          if (!is_last) bk <= next_bank(r_mask, bk);
          else begin
            bk <= first_bank(r_mask);
            if (sub == 2'd1) begin
              sub   <= '0;
              phase <= PH_READ;
            end else begin
              sub <= 2'd1;
            end
          end
        end
        PH_READ: if (take) begin
          col <= col + COL_W'(1);
          if (32'(col) == NCOL - 1) begin
            col <= '0;
            if (is_last) begin phase <= PH_CLOSE; bk <= first_bank(r_mask); end
            else bk <= next_bank(r_mask, bk);
          end
        end
        PH_CLOSE: if (take) begin
          if (is_last) begin
            phase <= PH_IDLE;
            done  <= 1'b1;
          end else begin
            bk <= next_bank(r_mask, bk);
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  assign busy     = (phase != PH_IDLE);
  assign cur_mode = r_mode;

  // The DRAM needs the shortened gaps to be exact: a command, once offered,
  // stays offered unchanged until taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (op_valid && !op_ready) |=> (op_valid && $stable(op));
  endproperty
  a_hold: assert property (p_hold);

endmodule
