// drama_cmd_timer: DRAM command issue with programmable, off-spec timing.
//
// DRAMA's in-DRAM row copy and AND/OR need a memory controller whose timing
// is set by the user: a copy cuts the precharge short (tRP far below the
// specification) and AND/OR cuts both the activation (tRAS) and the
// precharge to a minimum. This block takes command requests tagged with a
// timing class and puts each on the DRAM command bus as soon as, and exactly
// when, the gap its class demands has passed:
//   ACT  T_NORM : tRP after PRE          T_COPY : trp_copy    T_LOGIC : trp_logic
//   PRE  T_NORM : tRAS after ACT and tRTP after RD            T_LOGIC : tras_logic
//   RD          : tRCD after ACT and tCCD after RD
//   REF         : every bank closed, tRP after its PRE
//   every command waits tRFC after REF.
// ACT-to-PRE and PRE-to-ACT gaps are kept per bank, so the banks of a
// bank-parallel search overlap their waits; RD-to-RD, RD-to-PRE and REF gaps
// are kept for the whole device. Every gap is counted from the previous
// command of its kind in a saturating counter. Because a command leaves on the first cycle its gap allows, a
// requester that offers the next command right away gets the exact gap,
// which the copy and logic steps depend on. Timing values are inputs
// (drama_pkg::drama_timing_t) so software can tune them per device; the
// rules are standard DDR3 plus the paper's two shortened regimes.
//
// Interface: op_valid/op/op_ready handshake; op_ready is high in the cycle
// the command is issued. The bus outputs are registered: a command accepted
// in cycle t appears on dram_cmd in cycle t+1 for one cycle, with its bank,
// row and column on dram_bank, dram_row, dram_col.
module drama_cmd_timer
  import drama_pkg::*;
#(
  parameter int BANKS = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  drama_timing_t         tcfg,
  input  logic                  op_valid,
  input  drama_op_t             op,
  output logic                  op_ready,
  output dram_cmd_e             dram_cmd,
  output logic [BANK_W_DEF-1:0] dram_bank,
  output logic [ROW_W_DEF-1:0]  dram_row,
  output logic [COL_W_DEF-1:0]  dram_col
);

  logic [7:0]       since_act [BANKS];
  logic [7:0]       since_pre [BANKS];
  logic [BANKS-1:0] open_b;
  logic [7:0]       since_rd, since_ref;
  logic [7:0]       sa, sp;
  logic             all_closed;
  logic             ok;

  assign sa = since_act[op.bank];
  assign sp = since_pre[op.bank];

  always_comb begin
    all_closed = (open_b == '0);
    for (int b = 0; b < BANKS; b++)
      if (since_pre[b] < tcfg.trp) all_closed = 1'b0;
  end

  always_comb begin
    ok = (since_ref >= tcfg.trfc);
    case (op.cmd)
      CMD_ACT: case (op.tclass)
        T_COPY:  ok = ok && (sp >= tcfg.trp_copy);
        T_LOGIC: ok = ok && (sp >= tcfg.trp_logic);
        default: ok = ok && (sp >= tcfg.trp);
      endcase
      CMD_PRE: begin
        if (op.tclass == T_LOGIC) ok = ok && (sa >= tcfg.tras_logic);
        else ok = ok && (sa >= tcfg.tras) && (since_rd >= tcfg.trtp);
      end
      CMD_RD:  ok = ok && (sa >= tcfg.trcd) && (since_rd >= tcfg.tccd);
      CMD_REF: ok = ok && all_closed;
      default: ok = 1'b1;
    endcase
  end

  assign op_ready = ok;

  logic issue;
  assign issue = op_valid && ok && (op.cmd != CMD_NOP);

  function automatic logic [7:0] bump(logic [7:0] c);
    return (c == 8'hFF) ? c : c + 8'd1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) begin
        since_act[b] <= 8'hFF;
        since_pre[b] <= 8'hFF;
      end
      open_b    <= '0;
      since_rd  <= 8'hFF;
      since_ref <= 8'hFF;
      dram_cmd  <= CMD_NOP;
      dram_bank <= '0;
      dram_row  <= '0;
      dram_col  <= '0;
    end else begin
      for (int b = 0; b < BANKS; b++) begin
        since_act[b] <= (issue && op.cmd == CMD_ACT && 32'(op.bank) == b) ? 8'd1 : bump(since_act[b]);
        since_pre[b] <= (issue && op.cmd == CMD_PRE && 32'(op.bank) == b) ? 8'd1 : bump(since_pre[b]);
      end
      if (issue && op.cmd == CMD_ACT) open_b[op.bank] <= 1'b1;
      if (issue && op.cmd == CMD_PRE) open_b[op.bank] <= 1'b0;
      since_rd  <= (issue && op.cmd == CMD_RD)  ? 8'd1 : bump(since_rd);
      since_ref <= (issue && op.cmd == CMD_REF) ? 8'd1 : bump(since_ref);
      dram_cmd  <= issue ? op.cmd : CMD_NOP;
      if (issue) begin
        dram_bank <= op.bank;
        dram_row  <= op.row;
        dram_col  <= op.col;
      end
    end
  end

endmodule
