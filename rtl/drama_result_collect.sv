// drama_result_collect: gathers the match row read back from the DRAM.
//
// At the end of a search the running result row R2 is open and the
// controller reads it out burst by burst. Each bit of the row is the result
// of one stored data word (one bit-column), so the column address of a 1 tells
// the host which reference word matched; in the genome use the column group
// identifies the species. This block numbers the incoming bursts 0..NCOL-1,
// turns NOR results (where the DRAM leaves 0 for a match) into the NAND
// convention so that its output always has 1 = match, and counts the matches
// of the whole row. In a bank-parallel search the banks are read one after
// the other, lowest first, and each burst is also tagged with its bank.
//
// Interface: clear (one cycle, from the start of a search) resets the burst
// counter and the match count and samples nor_mode and bank_mask. Every
// rd_valid cycle produces, one cycle later, res_valid with res_bank, res_col
// and res_data, and adds the ones of res_data to match_count. done pulses
// with the last burst of the last bank. The burst
// numbering and the count are this design's; the inversion for NOR follows the
// paper.
module drama_result_collect #(
  parameter int DW    = 1024,  // bits per read burst (all chips together)
  parameter int NCOL  = 128,   // bursts per row
  parameter int COL_W = 7,
  parameter int BANKS = 8,
  parameter int CNT_W = 21     // holds DW*NCOL*BANKS (1,048,576)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              nor_mode,
  input  logic [BANKS-1:0]  bank_mask,
  input  logic              rd_valid,
  input  logic [DW-1:0]     rd_data,
  output logic              res_valid,
  output logic [2:0]        res_bank,
  output logic [COL_W-1:0]  res_col,
  output logic [DW-1:0]     res_data,
  output logic [CNT_W-1:0]  match_count,
  output logic              done
);

  logic             inv;
  logic [COL_W-1:0] next_col;
  logic [BANKS-1:0] left;       // banks not yet read completely
  logic [2:0]       cur_bank;   // lowest bank in left
  logic [DW-1:0]    m;

  always_comb begin
    cur_bank = '0;
    for (int b = BANKS - 1; b >= 0; b--)
      if (left[b]) cur_bank = 3'(b);
  end

  assign m = inv ? ~rd_data : rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inv         <= 1'b0;
      next_col    <= '0;
      left        <= '0;
      res_valid   <= 1'b0;
      res_bank    <= '0;
      res_col     <= '0;
      res_data    <= '0;
      match_count <= '0;
      done        <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      done      <= 1'b0;
      if (clear) begin
        inv         <= nor_mode;
        left        <= bank_mask;
        next_col    <= '0;
        match_count <= '0;
      end else if (rd_valid) begin
        res_valid   <= 1'b1;
        res_bank    <= cur_bank;
        res_col     <= next_col;
        res_data    <= m;
        match_count <= match_count + CNT_W'($countones(m));
        next_col    <= next_col + COL_W'(1);
        if (32'(next_col) == NCOL - 1) begin
          next_col <= '0;
          left[cur_bank] <= 1'b0;
          done     <= (left == (BANKS'(1) << cur_bank));
        end
      end
    end
  end

endmodule
