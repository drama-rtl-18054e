// tb_drama_top_full: one k-mer search at the full default size.
//
// drama_top with its default parameters: 16 chips, 128 column bursts of 64
// bits per chip, so one row holds 131072 reference words, and a 64-bit query
// (32 DNA bases, one-hot coded in 128 rows). The testbench stores random
// 32-mers with planted exact and one-base-off copies of the query in all
// eight banks (bank b holds the same word list rotated by b*7919 columns, so
// every bank's result differs). It runs an exact (NAND) search in bank 5
// alone, then exact and approximate (HD<=1) searches across all eight banks,
// and checks every column of every result and the match count against a
// reference computed here. It checks the single-bank NAND search time, first
// command to last result, against the cycle count derived from the timing
// set, checks that the eight-bank search is faster than eight single-bank
// searches, and prints the search rate in k-mers per second at 800 MHz.
module tb_drama_top_full;
  import drama_pkg::*;

  localparam int DW = 16 * 64, NCOL = 128, NC = DW * NCOL, QMAX = 64, K = 32, CL = 11;
  localparam logic [15:0] RSV = 16'hFFF0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  mode_e mode = MODE_NAND;
  enc_e enc = ENC_ONEHOT;
  logic [7:0] bank_mask = 8'h20;
  logic [15:0] base_row = 16'd512;
  logic [7:0] qlen = 8'(K);
  logic [QMAX-1:0] query = '0;
  drama_timing_t tcfg = TIMING_DEFAULT;
  logic busy, err, done, res_valid, ref_missed;
  dram_cmd_e dram_cmd;
  logic [2:0] dram_bank;
  logic [15:0] dram_row;
  logic [6:0] dram_col;
  logic rd_valid;
  logic [DW-1:0] rd_data, res_data;
  logic [6:0] res_col;
  logic [2:0] res_bank;
  logic [20:0] match_count;
  logic [3:0] ref_pending;

  drama_top dut (
    .clk, .rst_n, .start, .mode, .enc, .bank_mask, .base_row, .qlen, .query, .tcfg,
    .busy, .err, .done, .dram_cmd, .dram_bank, .dram_row, .dram_col,
    .rd_valid, .rd_data, .res_valid, .res_bank, .res_col, .res_data, .match_count,
    .ref_pending, .ref_missed);

  dram_rank_model #(.NCOL(NCOL), .DW(DW), .CL(CL)) u_dram (
    .clk, .cmd(dram_cmd), .bank(dram_bank), .row(dram_row), .col(dram_col), .rd_valid, .rd_data);

  int checks = 0, failures = 0;
  longint cyc = 0, t_first = -1, t_done = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (dram_cmd != CMD_NOP && t_first < 0) t_first <= cyc;

  logic [QMAX-1:0] w [NC];
  logic [NC-1:0] got [8];
  always @(posedge clk) if (res_valid) got[res_bank][int'(res_col)*DW +: DW] <= res_data;

  // word stored in column c of bank b
  function automatic int src(int b, int c);
    return (c + b * 7919) % NC;
  endfunction

  function automatic int hd_bases(logic [QMAX-1:0] a, logic [QMAX-1:0] b);
    int n = 0;
    for (int j = 0; j < K; j++) if (a[2*j +: 2] != b[2*j +: 2]) n++;
    return n;
  endfunction

  initial begin : wd
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(mode_e md, logic [7:0] mask, int maxhd);
    logic [NC-1:0] exp;
    int n = 0, nexp = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    mode = md; bank_mask = mask; start = 1; t_first = -1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t_done = cyc;
    @(negedge clk);
    for (int c = 0; c < NC; c++) exp[c] = hd_bases(w[c], query) <= maxhd;
    for (int b = 0; b < 8; b++) if (mask[b]) begin
      for (int c = 0; c < NC; c++)
        if (got[b][c] != exp[src(b, c)]) begin
          n++;
          if (n < 5) $display("FAIL mode %0d bank %0d col %0d got %0d", md, b, c, got[b][c]);
        end
      nexp += $countones(exp);
    end
    checks++;
    if (n != 0) failures++;
    checks++;
    if (int'(match_count) != nexp) begin
      failures++;
      $display("FAIL count %0d exp %0d", match_count, nexp);
    end
    $display("mode %0d banks %b: %0d matches, %0d cycles, %0.1f Gkmers/s at 800 MHz",
             md, mask, match_count, t_done - t_first,
             real'(NC * $countones(mask)) * 0.8 / real'(t_done - t_first));
  endtask

  initial begin
    logic [NC-1:0] r;
    int exp_cyc;
    longint t_one;
    query = {32'($urandom), 32'($urandom)};
    for (int c = 0; c < NC; c++) w[c] = {32'($urandom), 32'($urandom)};
    for (int c = 0; c < NC; c += 997) w[c] = query;                   // exact
    for (int c = 13; c < NC; c += 1009) begin                         // one base off
      w[c] = query;
      w[c][2*(c % K) +: 2] = ~w[c][2*(c % K) +: 2];
    end
    for (int b = 0; b < 8; b++) begin
      for (int j = 0; j < K; j++)
        for (int k = 0; k < 4; k++) begin
          for (int c = 0; c < NC; c++) r[c] = (w[src(b, c)][2*j +: 2] == 2'(k));
          u_dram.write_row(3'(b), base_row + 16'(4*j+k), r);
        end
      u_dram.write_row(3'(b), RSV + 16'(OFF_C0), '0);
      u_dram.write_row(3'(b), RSV + 16'(OFF_C1), '1);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    run(MODE_NAND, 8'h20, 0);
    // first command to last burst: init copy, K x (2 copies + AND), read-out
    exp_cyc = (tcfg.trp + tcfg.tras + tcfg.trp_copy)
            + K * (2 * (2*tcfg.tras + tcfg.trp + tcfg.trp_copy)
                   + (tcfg.tras + tcfg.trp + tcfg.tras_logic + tcfg.trp_logic))
            + tcfg.tras + tcfg.trp + tcfg.trcd + (NCOL-1) * tcfg.tccd
            + CL + 2;
    checks++;
    if (int'(t_done - t_first) != exp_cyc) begin
      failures++;
      $display("FAIL NAND search cycles %0d exp %0d", t_done - t_first, exp_cyc);
    end
    t_one = t_done - t_first;
    run(MODE_NAND, 8'hFF, 0);
    checks++;
    if (t_done - t_first >= 8 * t_one || t_done - t_first <= t_one) begin
      failures++;
      $display("FAIL eight-bank search %0d cycles, single bank %0d", t_done - t_first, t_one);
    end
    run(MODE_APPROX, 8'hFF, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
