// tb_drama_result_collect: burst numbering, NOR inversion and match count.
//
// Feeds NCOL random bursts (with gaps) per selected bank for NAND and NOR
// searches over one bank and over several, and checks each output burst's
// bank, column number and data (inverted for NOR), the final match count
// against a popcount done here, and the single done pulse on the last burst.
module tb_drama_result_collect;
  localparam int DW = 64, NCOL = 8, COL_W = 7, CNT_W = 13;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, nor_mode = 0, rd_valid = 0;
  logic [7:0] bank_mask = '0;
  logic [2:0] res_bank;
  logic [DW-1:0] rd_data = '0;
  logic res_valid, done;
  logic [COL_W-1:0] res_col;
  logic [DW-1:0] res_data;
  logic [CNT_W-1:0] match_count;

  drama_result_collect #(.DW(DW), .NCOL(NCOL), .COL_W(COL_W), .CNT_W(CNT_W)) dut (
    .clk, .rst_n, .clear, .nor_mode, .bank_mask, .rd_valid, .rd_data,
    .res_valid, .res_bank, .res_col, .res_data, .match_count, .done);

  int checks = 0, failures = 0;
  logic [DW-1:0] sent [8*NCOL];
  logic [2:0]    sent_bank [8*NCOL];
  int nsent = 0;
  int outn = 0, dones = 0, donecol = -1;
  logic cur_nor = 0;

  always @(posedge clk) if (rst_n) begin
    if (res_valid) begin
      checks++;
      if (int'(res_col) != outn % NCOL || res_bank != sent_bank[outn]
          || res_data !== (cur_nor ? ~sent[outn] : sent[outn])) begin
        failures++;
        $display("FAIL burst %0d col %0d data %h", outn, res_col, res_data);
      end
      outn++;
    end
    if (done) begin dones++; donecol = outn; end
  end

  initial begin : wd
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic nm, logic [7:0] mask);
    int ones = 0, b = 0;
    @(negedge clk);
    clear = 1; nor_mode = nm; cur_nor = nm; bank_mask = mask;
    @(negedge clk);
    clear = 0; outn = 0; dones = 0; nsent = 0;
    for (int bk = 0; bk < 8; bk++) if (mask[bk])
      for (int c = 0; c < NCOL; c++) begin
        b = nsent;
        sent[b] = {32'($urandom), 32'($urandom)};
        sent_bank[b] = 3'(bk);
        if (c == 2) sent[b] = '0;
        if (c == 3) sent[b] = '1;
        ones += nm ? $countones(~sent[b]) : $countones(sent[b]);
        nsent++;
        rd_valid = 1; rd_data = sent[b];
        @(negedge clk);
        rd_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
    repeat (3) @(negedge clk);
    checks++;
    if (outn != nsent || dones != 1 || donecol != nsent || int'(match_count) != ones) begin
      failures++;
      $display("FAIL nor=%0d bursts %0d dones %0d at %0d count %0d exp %0d",
               nm, outn, dones, donecol, match_count, ones);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1'b0, 8'h01);
    run(1'b1, 8'h01);
    run(1'b0, 8'b1010_0100);
    run(1'b1, 8'hFF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
