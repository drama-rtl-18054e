// tb_drama_compare_seq: sequencer + command timer + DRAM model.
//
// Stores random transposed words (with planted exact, distance-1, distance-2
// and don't-care columns) in the DRAM model, runs NAND, NOR, NAND-TCAM,
// NOR-TCAM, approximate (HD<=1) and one-hot DNA searches, and compares the
// raw result row read back with a per-column reference computed here. It also
// checks the number of copy and logic operations the DRAM saw and the exact
// cycle count of a NAND search, worked out from the timing values.
module tb_drama_compare_seq;
  import drama_pkg::*;

  localparam int QMAX = 16;
  localparam int NCOL = 2;
  localparam int DW   = 32;
  localparam int NC   = NCOL * DW;   // columns = stored words
  localparam int CL   = 4;
  localparam logic [15:0] RSV = 16'hFFF0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  mode_e mode = MODE_NAND;
  enc_e enc = ENC_BINARY;
  logic [15:0] base_row = '0;
  logic [7:0] bank_mask = 8'h01;
  logic [7:0] qlen = '0;
  logic [QMAX-1:0] query = '0;
  logic busy, err, done;
  mode_e cur_mode;
  logic op_valid, op_ready;
  drama_op_t op;
  drama_timing_t tcfg = TIMING_DEFAULT;

  dram_cmd_e dcmd;
  logic [2:0] dbank;
  logic [15:0] drow;
  logic [6:0] dcol;
  logic rd_valid;
  logic [DW-1:0] rd_data;

  drama_compare_seq #(.QMAX(QMAX), .NCOL(NCOL), .RSV_BASE(RSV)) dut (
    .clk, .rst_n, .start, .mode, .enc, .bank_mask, .base_row, .qlen, .query,
    .busy, .err, .done, .cur_mode, .op_valid, .op, .op_ready);

  drama_cmd_timer u_tmr (
    .clk, .rst_n, .tcfg, .op_valid, .op, .op_ready,
    .dram_cmd(dcmd), .dram_bank(dbank), .dram_row(drow), .dram_col(dcol));

  dram_rank_model #(.NCOL(NCOL), .DW(DW), .CL(CL)) u_dram (
    .clk, .cmd(dcmd), .bank(dbank), .row(drow), .col(dcol), .rd_valid, .rd_data);

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // collect read bursts
  logic [NC-1:0] got;
  int nb = 0;
  always @(posedge clk) if (rd_valid) begin
    got[nb*DW +: DW] <= rd_data;
    nb <= nb + 1;
  end

  // first command and closing PRE of a search
  longint unsigned t_first = 0, t_last = 0;
  logic seen_first = 0;
  always @(posedge clk) if (dcmd != CMD_NOP) begin
    if (!seen_first) begin t_first <= cyc; seen_first <= 1; end
    t_last <= cyc;
  end

  // reference data
  logic [QMAX-1:0] w    [NC];
  logic [QMAX-1:0] care [NC];

  task automatic store_binary(logic [15:0] base, int m, logic nor_code);
    logic [NC-1:0] r0, r1;
    for (int j = 0; j < m; j++) begin
      for (int c = 0; c < NC; c++) begin
        if (!care[c][j]) begin
          r0[c] = !nor_code;  // don't care: 11 for NAND, 00 for NOR
          r1[c] = !nor_code;
        end else begin
          r0[c] = !w[c][j];
          r1[c] = w[c][j];
        end
      end
      u_dram.write_row(0, base + 16'(2*j), r0);
      u_dram.write_row(0, base + 16'(2*j+1), r1);
    end
  endtask

  task automatic store_onehot(logic [15:0] base, int m);
    logic [NC-1:0] r;
    for (int j = 0; j < m; j++)
      for (int k = 0; k < 4; k++) begin
        for (int c = 0; c < NC; c++) r[c] = (w[c][2*j +: 2] == 2'(k));
        u_dram.write_row(0, base + 16'(4*j+k), r);
      end
  endtask

  task automatic search(mode_e md, enc_e en, logic [15:0] base, int m, logic [QMAX-1:0] q);
    int guard = 0;
    @(negedge clk);
    mode = md; enc = en; base_row = base; qlen = 8'(m); query = q; start = 1;
    nb = 0; seen_first = 0;
    @(negedge clk);
    start = 0;
    while (!(done && nb == NCOL) && guard < 200000) begin
      @(negedge clk);
      if (done) ;
      guard++;
      if (!busy && nb == NCOL) break;
    end
    repeat (CL + 3) @(negedge clk);
  endtask

  task automatic check_result(string name, logic [NC-1:0] exp);
    checks++;
    if (got !== exp || nb != NCOL) begin
      failures++;
      $display("FAIL %s: got %h exp %h bursts %0d", name, got, exp, nb);
    end
  endtask

  function automatic int hd(logic [QMAX-1:0] a, logic [QMAX-1:0] b, int m);
    int n = 0;
    for (int j = 0; j < m; j++) if (a[j] != b[j]) n++;
    return n;
  endfunction

  function automatic int hd_bases(logic [QMAX-1:0] a, logic [QMAX-1:0] b, int m);
    int n = 0;
    for (int j = 0; j < m; j++) if (a[2*j +: 2] != b[2*j +: 2]) n++;
    return n;
  endfunction

  initial begin : wd
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [QMAX-1:0] q;
    logic [NC-1:0] exp;
    int m, nc0, nl0, exp_cyc;
    int unsigned seed;
    seed = 7;
    void'($urandom(seed));
    for (int c = 0; c < NC; c++) begin
      w[c] = QMAX'($urandom);
      care[c] = '1;
    end
    u_dram.write_row(0, RSV + 16'(OFF_C0), '0);
    u_dram.write_row(0, RSV + 16'(OFF_C1), '1);
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int trial = 0; trial < 3; trial++) begin
      m = (trial == 0) ? QMAX : 5 + trial * 4;
      q = QMAX'($urandom);
      // plant: col 0 exact, col 1..4 distance 1, col 5 distance 2,
      // col 6 differs in one bit that is don't care
      for (int c = 0; c < NC; c++) begin w[c] = QMAX'($urandom); care[c] = '1; end
      w[0] = q;
      for (int c = 1; c <= 4; c++) begin w[c] = q; w[c][$urandom % m] ^= 1'b1; end
      w[5] = q; w[5][0] ^= 1'b1; w[5][m-1] ^= 1'b1;
      w[6] = q; w[6][1] ^= 1'b1; care[6][1] = 1'b0;
      w[7] = q; care[7] = '0;               // all don't care

      // NAND (ternary)
      store_binary(16'd0, m, 1'b0);
      nc0 = u_dram.n_copy; nl0 = u_dram.n_logic;
      search(MODE_NAND, ENC_BINARY, 16'd0, m, q);
      for (int c = 0; c < NC; c++) exp[c] = (((w[c] ^ q) & care[c]) & ((QMAX'(1) << m) - 1)) == 0;
      check_result($sformatf("NAND m=%0d", m), exp);
      checks++;
      if (u_dram.n_copy - nc0 != 1 + 2*m || u_dram.n_logic - nl0 != m) begin
        failures++;
        $display("FAIL NAND op counts copy %0d logic %0d", u_dram.n_copy - nc0, u_dram.n_logic - nl0);
      end
      // latency: first PRE to closing PRE
      exp_cyc = (tcfg.trp + tcfg.tras + tcfg.trp_copy)                          // init copy
              + m * (2 * (2*tcfg.tras + tcfg.trp + tcfg.trp_copy)
                     + (tcfg.tras + tcfg.trp + tcfg.tras_logic + tcfg.trp_logic))
              + tcfg.tras + tcfg.trp + tcfg.trcd + (NCOL-1) * tcfg.tccd
              + ((tcfg.trtp > tcfg.tras - tcfg.trcd - (NCOL-1)*tcfg.tccd)
                 ? tcfg.trtp : tcfg.tras - tcfg.trcd - (NCOL-1)*tcfg.tccd);
      checks++;
      if (int'(t_last - t_first) != exp_cyc) begin
        failures++;
        $display("FAIL NAND cycles %0d exp %0d", t_last - t_first, exp_cyc);
      end

      // NOR (ternary, don't care coded 00), raw row: 1 = mismatch
      store_binary(16'd256, m, 1'b1);
      search(MODE_NOR, ENC_BINARY, 16'd256, m, q);
      for (int c = 0; c < NC; c++) exp[c] = (((w[c] ^ q) & care[c]) & ((QMAX'(1) << m) - 1)) != 0;
      check_result($sformatf("NOR m=%0d", m), exp);

      // approximate, binary without don't cares
      for (int c = 0; c < NC; c++) care[c] = '1;
      w[6] = q; w[6][1] ^= 1'b1;
      w[7] = ~q;
      store_binary(16'd512, m, 1'b0);
      nc0 = u_dram.n_copy; nl0 = u_dram.n_logic;
      search(MODE_APPROX, ENC_BINARY, 16'd512, m, q);
      for (int c = 0; c < NC; c++) exp[c] = hd(w[c], q, m) <= 1;
      check_result($sformatf("APPROX m=%0d", m), exp);
      checks++;
      if (u_dram.n_copy - nc0 != 3 + 11*m || u_dram.n_logic - nl0 != 3*m) begin
        failures++;
        $display("FAIL APPROX op counts copy %0d logic %0d", u_dram.n_copy - nc0, u_dram.n_logic - nl0);
      end

      // one-hot DNA, m/2 bases
      store_onehot(16'd1024, m/2);
      search(MODE_NAND, ENC_ONEHOT, 16'd1024, m/2, q);
      for (int c = 0; c < NC; c++) exp[c] = hd_bases(w[c], q, m/2) == 0;
      check_result($sformatf("ONEHOT NAND bases=%0d", m/2), exp);
      search(MODE_APPROX, ENC_ONEHOT, 16'd1024, m/2, q);
      for (int c = 0; c < NC; c++) exp[c] = hd_bases(w[c], q, m/2) <= 1;
      check_result($sformatf("ONEHOT APPROX bases=%0d", m/2), exp);
    end

    // illegal requests are refused
    @(negedge clk);
    mode = MODE_NOR; enc = ENC_ONEHOT; qlen = 8'd4; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!err || busy) begin failures++; $display("FAIL NOR+onehot not refused"); end
    @(negedge clk);
    mode = MODE_NAND; enc = ENC_BINARY; qlen = 8'd0; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!err || busy) begin failures++; $display("FAIL qlen=0 not refused"); end

    checks++;
    if (u_dram.n_bad != 0) begin failures++; $display("FAIL bad logic rows %0d", u_dram.n_bad); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
