// tb_drama_cmd_timer: exact command spacing under the three timing regimes.
//
// Offers a random stream of ACT/PRE/RD/REF commands to random banks with
// random timing classes, sometimes back to back and sometimes after idle
// cycles, under two timing sets (DDR3 defaults and a random one). A reference
// kept here computes the earliest legal issue cycle of each command from the
// gaps the timer must respect (per bank: tRP, trp_copy, trp_logic, tRAS,
// tras_logic, tRCD; for the device: tCCD, tRTP, tRFC, and all banks closed
// before REF); since the timer must issue exactly then, every command's cycle
// is compared with it, and its bank/row/column are checked on the bus.
module tb_drama_cmd_timer;
  import drama_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  drama_timing_t tcfg = TIMING_DEFAULT;
  logic op_valid = 0, op_ready;
  drama_op_t op = '0;
  dram_cmd_e dram_cmd;
  logic [2:0] dram_bank;
  logic [15:0] dram_row;
  logic [6:0] dram_col;

  drama_cmd_timer dut (.clk, .rst_n, .tcfg, .op_valid, .op, .op_ready,
                       .dram_cmd, .dram_bank, .dram_row, .dram_col);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint last_act [8];
  longint last_pre [8];
  logic   is_open [8];
  longint last_rd, last_ref;
  int n_by_class [3];
  int n_ref = 0;

  function automatic longint mx(longint a, longint b);
    return a > b ? a : b;
  endfunction

  initial begin : wd
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(drama_op_t o);
    longint offer, exp, seen;
    int guard;
    @(negedge clk);
    op = o; op_valid = 1;
    offer = cyc + 1;
    guard = 0;
    // wait for acceptance
    while (1) begin
      @(posedge clk);
      #1;
      if (dram_cmd != CMD_NOP) break;
      guard++;
      if (guard > 1000) break;
    end
    seen = cyc;
    op_valid = 0;
    exp = mx(offer, last_ref + tcfg.trfc);
    case (o.cmd)
      CMD_ACT: case (o.tclass)
        T_COPY:  exp = mx(exp, last_pre[o.bank] + tcfg.trp_copy);
        T_LOGIC: exp = mx(exp, last_pre[o.bank] + tcfg.trp_logic);
        default: exp = mx(exp, last_pre[o.bank] + tcfg.trp);
      endcase
      CMD_PRE: if (o.tclass == T_LOGIC) exp = mx(exp, last_act[o.bank] + tcfg.tras_logic);
               else exp = mx(mx(exp, last_act[o.bank] + tcfg.tras), last_rd + tcfg.trtp);
      CMD_RD:  exp = mx(mx(exp, last_act[o.bank] + tcfg.trcd), last_rd + tcfg.tccd);
      default: for (int b = 0; b < 8; b++) exp = mx(exp, last_pre[b] + tcfg.trp);
    endcase
    checks++;
    if (seen != exp || dram_cmd != o.cmd || dram_row != o.row || dram_col != o.col || dram_bank != o.bank) begin
      failures++;
      if (failures < 10)
        $display("FAIL cmd %s class %0d at %0d exp %0d (bus %s row %h)", o.cmd.name(), o.tclass, seen, exp,
                 dram_cmd.name(), dram_row);
    end
    n_by_class[o.tclass]++;
    case (o.cmd)
      CMD_ACT: begin last_act[o.bank] = seen; is_open[o.bank] = 1; end
      CMD_PRE: begin last_pre[o.bank] = seen; is_open[o.bank] = 0; end
      CMD_RD:  last_rd  = seen;
      default: begin last_ref = seen; n_ref++; end
    endcase
  endtask

  task automatic stream(int n);
    drama_op_t o;
    for (int i = 0; i < n; i++) begin
      o = '0;
      case ($urandom % 8)
        0, 1, 2: o.cmd = CMD_ACT;
        3, 4, 5: o.cmd = CMD_PRE;
        6:       o.cmd = CMD_RD;
        default: o.cmd = ($urandom % 4 == 0) ? CMD_REF : CMD_RD;
      endcase
      o.tclass = tclass_e'($urandom % 3);
      if (o.cmd == CMD_PRE && o.tclass == T_COPY) o.tclass = T_NORM;
      if (o.cmd == CMD_RD || o.cmd == CMD_REF) o.tclass = T_NORM;
      o.bank = 3'($urandom % 3);
      if (o.cmd == CMD_REF)
        for (int b = 0; b < 8; b++) if (is_open[b]) o.cmd = CMD_RD;
      o.row = 16'($urandom);
      o.col = 7'($urandom);
      if ($urandom % 4 == 0) repeat ($urandom % 20) @(negedge clk);
      one(o);
    end
  endtask

  initial begin
    for (int b = 0; b < 8; b++) begin last_act[b] = -1000; last_pre[b] = -1000; is_open[b] = 0; end
    last_rd = -1000; last_ref = -1000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    stream(400);
    tcfg.trcd = 8'(3 + $urandom % 10); tcfg.trp = 8'(3 + $urandom % 10);
    tcfg.tras = 8'(10 + $urandom % 20); tcfg.trp_copy = 8'(1 + $urandom % 2);
    tcfg.tras_logic = 8'(1 + $urandom % 2); tcfg.trp_logic = 8'(1 + $urandom % 2);
    tcfg.tccd = 8'(2 + $urandom % 4); tcfg.trtp = 8'(2 + $urandom % 6);
    tcfg.trfc = 8'(20 + $urandom % 30);
    stream(400);
    checks++;
    if (n_by_class[T_COPY] == 0 || n_by_class[T_LOGIC] == 0 || n_ref == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
