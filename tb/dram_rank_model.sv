// dram_rank_model: behavioural model of commodity DRAM under DRAMA timing.
// Not synthesizable; stands in for the unmodified DDR3 chips in simulation.
//
// The model works at command level, one row of W bits per bank and row
// address (all chips of the rank side by side), stored sparsely. Each bank
// has its own row buffer and its own ACT/PRE history. It mimics
// what the sense amplifiers do under the three timing regimes:
//   normal ACT (PRE->ACT gap above THR)   the row is sensed into the row
//                                          buffer (a read; the cells restore)
//   copy ACT   (PRE->ACT gap <= THR, the   the bitlines were never
//               ACT before that PRE held   precharged, so the row buffer
//               longer than THR)           still drives the old value and
//                                          overwrites the newly opened row
//   logic ACT  (ACT->PRE and PRE->ACT      rows R1 (first ACT), R2 (second
//               both <= THR)               ACT) and R3 = R1 with its two low
//                                          address bits cleared are open at
//                                          once; all three take their bitwise
//                                          majority
// A logic ACT whose rows break the 01/10 low-bit rule or differ in upper bits
// is counted in n_bad. RD returns W/NCOL bits of the open row CL cycles later
// on rd_valid/rd_data. Counters n_act, n_copy, n_logic, n_rd, n_ref let a
// testbench see which mechanisms were exercised. Unwritten rows read 0.
module dram_rank_model
  import drama_pkg::*;
#(
  parameter int BANK_W = 3,
  parameter int NCOL   = 128,
  parameter int DW     = 1024,
  parameter int CL     = 11,
  parameter int THR    = 3
) (
  input  logic                  clk,
  input  dram_cmd_e             cmd,
  input  logic [BANK_W-1:0]     bank,
  input  logic [ROW_W_DEF-1:0]  row,
  input  logic [COL_W_DEF-1:0]  col,
  output logic                  rd_valid,
  output logic [DW-1:0]         rd_data
);

  localparam int W = DW * NCOL;
  typedef logic [BANK_W+ROW_W_DEF-1:0] key_t;

  localparam int NB = 2 ** BANK_W;

  logic [W-1:0] mem [key_t];
  logic [W-1:0] rowbuf [NB];

  longint unsigned now = 1000;
  longint unsigned t_act [NB];
  longint unsigned t_pre [NB];
  logic [ROW_W_DEF-1:0] act_row [NB];

  int n_act = 0, n_copy = 0, n_logic = 0, n_rd = 0, n_ref = 0, n_bad = 0;

  logic          pipe_v [CL];
  logic [DW-1:0] pipe_d [CL];

  function automatic logic [W-1:0] get_row(logic [BANK_W-1:0] b, logic [ROW_W_DEF-1:0] r);
    key_t k = {b, r};
    if (mem.exists(k)) return mem[k];
    return '0;
  endfunction

  task automatic write_row(logic [BANK_W-1:0] b, logic [ROW_W_DEF-1:0] r, logic [W-1:0] d);
    mem[{b, r}] = d;
  endtask

  task automatic set_bit(logic [BANK_W-1:0] b, logic [ROW_W_DEF-1:0] r, int c, logic v);
    logic [W-1:0] d;
    d = get_row(b, r);
    d[c] = v;
    mem[{b, r}] = d;
  endtask

  initial begin
    for (int i = 0; i < CL; i++) begin
      pipe_v[i] = 1'b0;
      pipe_d[i] = '0;
    end
    rd_valid = 1'b0;
    rd_data  = '0;
    for (int b = 0; b < NB; b++) begin
      rowbuf[b]  = '0;
      t_act[b]   = 0;
      t_pre[b]   = 0;
      act_row[b] = '0;
    end
  end

  always @(posedge clk) begin
    logic [ROW_W_DEF-1:0] r1, r3;
    logic [W-1:0] a, b2, c;
    now = now + 1;
    // read data pipeline
    rd_valid <= pipe_v[CL-1];
    rd_data  <= pipe_d[CL-1];
    for (int i = CL - 1; i > 0; i--) begin
      pipe_v[i] = pipe_v[i-1];
      pipe_d[i] = pipe_d[i-1];
    end
    pipe_v[0] = 1'b0;
    case (cmd)
      CMD_ACT: begin
        n_act++;
        if ((now - t_pre[bank]) <= THR && (t_pre[bank] - t_act[bank]) <= THR) begin
          // ACT R1, PRE, ACT R2 with minimal gaps: triple activation
          r1 = act_row[bank];
          r3 = {r1[ROW_W_DEF-1:2], 2'b00};
          if (r1[1:0] != 2'b01 || row[1:0] != 2'b10 || r1[ROW_W_DEF-1:2] != row[ROW_W_DEF-1:2])
            n_bad++;
          a  = get_row(bank, r1);
          b2 = get_row(bank, row);
          c  = get_row(bank, r3);
          rowbuf[bank] = (a & b2) | (a & c) | (b2 & c);
          write_row(bank, r1, rowbuf[bank]);
          write_row(bank, row, rowbuf[bank]);
          write_row(bank, r3, rowbuf[bank]);
          n_logic++;
        end else if ((now - t_pre[bank]) <= THR) begin
          // interrupted precharge: row buffer overwrites the new row
          write_row(bank, row, rowbuf[bank]);
          n_copy++;
        end else begin
          rowbuf[bank] = get_row(bank, row);
        end
        t_act[bank]   = now;
        act_row[bank] = row;
      end
      CMD_PRE: begin
        t_pre[bank] = now;
      end
      CMD_RD: begin
        n_rd++;
        pipe_v[0] = 1'b1;
        pipe_d[0] = rowbuf[bank][int'(col) * DW +: DW];
      end
      CMD_REF: n_ref++;
      default: ;
    endcase
  end

endmodule
