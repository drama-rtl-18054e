// tb_drama_top: end-to-end searches through the whole controller.
//
// A reduced rank (2 chips x 2 bursts x 16 bits = 64 stored words per row) is
// modelled by dram_rank_model. The testbench stores random words transposed,
// plants exact, distance-1, distance-2 and don't-care columns, and runs
// through drama_top: NAND, NAND-TCAM, NOR, NOR-TCAM, approximate (HD<=1),
// one-hot DNA exact and approximate searches, NOR and NAND alternating over
// the same stored rows, in one bank and in several
// banks at once (each bank holding different words), with a
// short refresh interval so that refreshes are issued between searches and
// credits overflow during a long search. Every result burst is compared with
// a reference computed here (1 = match in every mode), as is match_count.
// It counts how often each mechanism happened (row copy, in-DRAM AND/OR, NOR
// result inversion, refresh, missed refresh credit, refused request,
// bank-parallel search) and fails any that never did.
module tb_drama_top;
  import drama_pkg::*;

  localparam int CHIPS = 2, NCOL = 2, BB = 16, QMAX = 16;
  localparam int DW = CHIPS * BB, NC = DW * NCOL, CL = 5;
  localparam logic [15:0] RSV = 16'hFFF0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  mode_e mode = MODE_NAND;
  enc_e enc = ENC_BINARY;
  logic [7:0] bank_mask = '0;
  logic [15:0] base_row = '0;
  logic [7:0] qlen = '0;
  logic [QMAX-1:0] query = '0;
  drama_timing_t tcfg;
  logic busy, err, done, res_valid, ref_missed;
  dram_cmd_e dram_cmd;
  logic [2:0] dram_bank;
  logic [15:0] dram_row;
  logic [6:0] dram_col;
  logic rd_valid;
  logic [DW-1:0] rd_data, res_data;
  logic [6:0] res_col;
  logic [2:0] res_bank;
  logic [$clog2(DW*NCOL*8+1)-1:0] match_count;
  logic [3:0] ref_pending;

  drama_top #(.CHIPS(CHIPS), .NCOL(NCOL), .BURST_BITS(BB), .QMAX(QMAX), .RSV_BASE(RSV)) dut (
    .clk, .rst_n, .start, .mode, .enc, .bank_mask, .base_row, .qlen, .query, .tcfg,
    .busy, .err, .done, .dram_cmd, .dram_bank, .dram_row, .dram_col,
    .rd_valid, .rd_data, .res_valid, .res_bank, .res_col, .res_data, .match_count,
    .ref_pending, .ref_missed);

  dram_rank_model #(.NCOL(NCOL), .DW(DW), .CL(CL)) u_dram (
    .clk, .cmd(dram_cmd), .bank(dram_bank), .row(dram_row), .col(dram_col), .rd_valid, .rd_data);

  int checks = 0, failures = 0;
  int n_missed = 0, n_err = 0, n_nor = 0, n_multi = 0;
  logic [7:0] banks_seen = '0;
  always @(posedge clk) if (ref_missed) n_missed++;
  always @(posedge clk) if (dram_cmd == CMD_ACT) banks_seen[dram_bank] <= 1'b1;

  logic [NC-1:0] got [8];
  int nb = 0;
  always @(posedge clk) if (res_valid) begin
    got[res_bank][int'(res_col)*DW +: DW] <= res_data;
    nb <= nb + 1;
  end

  // stored words of the bank being written, and expected results per bank
  logic [QMAX-1:0] w [NC];
  logic [QMAX-1:0] care [NC];
  logic [NC-1:0]   exp_b [8];
  logic [NC-1:0]   exp_a [8];

  task automatic store_binary(logic [2:0] b, logic [15:0] base, int m, logic nor_code);
    logic [NC-1:0] r0, r1;
    for (int j = 0; j < m; j++) begin
      for (int c = 0; c < NC; c++) begin
        r0[c] = care[c][j] ? !w[c][j] : !nor_code;
        r1[c] = care[c][j] ?  w[c][j] : !nor_code;
      end
      u_dram.write_row(b, base + 16'(2*j), r0);
      u_dram.write_row(b, base + 16'(2*j+1), r1);
    end
  endtask

  task automatic store_onehot(logic [2:0] b, logic [15:0] base, int m);
    logic [NC-1:0] r;
    for (int j = 0; j < m; j++)
      for (int k = 0; k < 4; k++) begin
        for (int c = 0; c < NC; c++) r[c] = (w[c][2*j +: 2] == 2'(k));
        u_dram.write_row(b, base + 16'(4*j+k), r);
      end
  endtask

  task automatic search(mode_e md, enc_e en, logic [7:0] mask, logic [15:0] base, int m,
                        logic [QMAX-1:0] q, string name);
    int guard = 0, nexp = 0, bad = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    mode = md; enc = en; bank_mask = mask; base_row = base; qlen = 8'(m); query = q; start = 1;
    nb = 0;
    @(negedge clk);
    start = 0;
    while (!done && guard < 200000) begin @(negedge clk); guard++; end
    @(negedge clk);
    for (int b = 0; b < 8; b++) if (mask[b]) begin
      nexp += $countones(exp_b[b]);
      if (got[b] !== exp_b[b]) begin
        bad++;
        $display("FAIL %s bank %0d: got %h exp %h", name, b, got[b], exp_b[b]);
      end
    end
    checks++;
    if (bad != 0 || nb != NCOL * $countones(mask) || int'(match_count) != nexp) begin
      failures++;
      $display("FAIL %s: bursts %0d count %0d exp %0d", name, nb, match_count, nexp);
    end
    if (md == MODE_NOR) n_nor++;
    if ($countones(mask) > 1) n_multi++;
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [QMAX-1:0] q;
    logic [NC-1:0] exp;
    logic [2:0] b;
    int m;
    tcfg = TIMING_DEFAULT;
    tcfg.trefi = 16'd2000;   // short, so refresh shows up in a short run
    tcfg.trfc  = 8'd40;
    for (int bk = 0; bk < 8; bk++) begin
      u_dram.write_row(3'(bk), RSV + 16'(OFF_C0), '0);
      u_dram.write_row(3'(bk), RSV + 16'(OFF_C1), '1);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int trial = 0; trial < 4; trial++) begin
      logic [7:0] mask;
      m = (trial == 0) ? QMAX : 4 + 3 * trial;
      mask = (trial == 0) ? 8'h01 : (trial == 1) ? 8'h08 : (trial == 2) ? 8'b1001_0110 : 8'hFF;
      q = QMAX'($urandom);

      // each selected bank gets its own words; plants differ per bank
      for (int bk = 0; bk < 8; bk++) if (mask[bk]) begin
        b = 3'(bk);
        for (int c = 0; c < NC; c++) begin w[c] = QMAX'($urandom); care[c] = '1; end
        w[bk] = q;
        for (int c = 10; c <= 13; c++) begin w[c] = q; w[c][$urandom % m] ^= 1'b1; end
        w[15] = q; w[15][0] ^= 1'b1; w[15][m-1] ^= 1'b1;
        w[16] = q; w[16][1] ^= 1'b1; care[16][1] = 1'b0;
        w[19 + bk] = q; care[19 + bk] = '0;
        store_binary(b, 16'd0, m, 1'b0);      // NAND coding, ternary
        store_binary(b, 16'd200, m, 1'b1);    // NOR coding, ternary
        for (int c = 0; c < NC; c++) exp_b[bk][c] = (((w[c] ^ q) & care[c]) & ((QMAX'(1) << m) - 1)) == 0;
      end
      search(MODE_NAND, ENC_BINARY, mask, 16'd0, m, q, $sformatf("NAND m=%0d", m));
      search(MODE_NOR, ENC_BINARY, mask, 16'd200, m, q, $sformatf("NOR m=%0d", m));

      for (int bk = 0; bk < 8; bk++) if (mask[bk]) begin
        b = 3'(bk);
        for (int c = 0; c < NC; c++) begin w[c] = QMAX'($urandom); care[c] = '1; end
        w[bk] = q;
        for (int c = 10; c <= 13; c++) begin w[c] = q; w[c][$urandom % m] ^= 1'b1; end
        w[15] = q; w[15][0] ^= 1'b1; w[15][m-1] ^= 1'b1;
        w[20] = ~q;
        store_binary(b, 16'd400, m, 1'b0);
        for (int c = 0; c < NC; c++) exp_b[bk][c] = hd(w[c], q, m) <= 1;
        for (int c = 0; c < NC; c++) exp_a[bk][c] = hd(w[c], q, m) == 0;
      end
      search(MODE_APPROX, ENC_BINARY, mask, 16'd400, m, q, $sformatf("APPROX m=%0d", m));
      // the same binary rows (no don't cares) serve NAND and NOR alike, so
      // the two modes can alternate over one copy of the data
      exp_b = exp_a;
      search(MODE_NOR, ENC_BINARY, mask, 16'd400, m, q, $sformatf("NOR same rows m=%0d", m));
      search(MODE_NAND, ENC_BINARY, mask, 16'd400, m, q, $sformatf("NAND same rows m=%0d", m));

      for (int bk = 0; bk < 8; bk++) if (mask[bk]) begin
        b = 3'(bk);
        for (int c = 0; c < NC; c++) w[c] = QMAX'($urandom);
        w[bk] = q;
        for (int c = 10; c <= 13; c++) begin w[c] = q; w[c][2*(c % (m/2)) +: 2] ^= 2'(1 + $urandom % 3); end
        store_onehot(b, 16'd1000, m / 2);
        for (int c = 0; c < NC; c++) exp_b[bk][c] = hd_bases(w[c], q, m / 2) == 0;
        for (int c = 0; c < NC; c++) exp_a[bk][c] = hd_bases(w[c], q, m / 2) <= 1;
      end
      search(MODE_NAND, ENC_ONEHOT, mask, 16'd1000, m / 2, q, $sformatf("ONEHOT m=%0d", m / 2));
      exp_b = exp_a;
      search(MODE_APPROX, ENC_ONEHOT, mask, 16'd1000, m / 2, q, $sformatf("ONEHOT APPROX m=%0d", m / 2));
      repeat (2500) @(negedge clk);   // idle: refresh credits paid back
    end

    // refused request
    @(negedge clk);
    mode = MODE_NOR; enc = ENC_ONEHOT; qlen = 8'd3; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!err) begin failures++; $display("FAIL refused request"); end else n_err++;

    // mechanisms
    checks++; if (u_dram.n_copy == 0)  begin failures++; $display("FAIL no row copy"); end
    checks++; if (u_dram.n_logic == 0) begin failures++; $display("FAIL no in-DRAM AND/OR"); end
    checks++; if (u_dram.n_ref == 0)   begin failures++; $display("FAIL no refresh"); end
    checks++; if (n_missed == 0)       begin failures++; $display("FAIL no missed refresh credit"); end
    checks++; if (n_nor == 0)          begin failures++; $display("FAIL no NOR inversion"); end
    checks++; if (n_err == 0)          begin failures++; $display("FAIL no refused request"); end
    checks++; if (n_multi == 0 || banks_seen != 8'hFF) begin failures++; $display("FAIL bank-parallel search"); end
    checks++; if (u_dram.n_bad != 0)   begin failures++; $display("FAIL bad AND rows"); end
    $display("mechanisms: copy=%0d logic=%0d ref=%0d missed=%0d nor=%0d refused=%0d multibank=%0d rd=%0d",
             u_dram.n_copy, u_dram.n_logic, u_dram.n_ref, n_missed, n_nor, n_err, n_multi, u_dram.n_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
