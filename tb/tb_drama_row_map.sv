// tb_drama_row_map: exhaustive check of the query-to-row mapping.
//
// For binary coding, bit j compared with q opens base+2j+q (base+2j+!q for
// NOR); for one-hot coding, base j with code b opens base+4j+b. The expected
// rows are computed here from those rules for many bases, indices and symbols.
module tb_drama_row_map;
  import drama_pkg::*;

  enc_e        enc;
  logic        invert;
  logic [15:0] base_row;
  logic [7:0]  idx;
  logic [1:0]  sym;
  logic [15:0] row;

  drama_row_map dut (.enc, .invert, .base_row, .idx, .sym, .row);

  int checks = 0, failures = 0;

  initial begin : wd
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    for (int t = 0; t < 2000; t++) begin
      enc      = enc_e'($urandom % 2);
      invert   = 1'($urandom);
      base_row = 16'($urandom % 4096);
      idx      = 8'($urandom);
      sym      = 2'($urandom);
      #1;
      if (enc == ENC_ONEHOT) exp = int'(base_row) + 4 * int'(idx) + int'(sym);
      else                   exp = int'(base_row) + 2 * int'(idx) + int'(sym[0] ^ invert);
      checks++;
      if (row !== 16'(exp)) begin
        failures++;
        if (failures < 10) $display("FAIL enc=%0d inv=%0d base=%0d idx=%0d sym=%0d row=%0d exp=%0d",
                                    enc, invert, base_row, idx, sym, row, exp);
      end
    end
    // parity rule of the paper: '0' opens an even row, '1' an odd row
    enc = ENC_BINARY; invert = 0; base_row = 16'd100; idx = 8'd3;
    sym = 2'd0; #1; checks++; if (row[0] !== 1'b0) failures++;
    sym = 2'd1; #1; checks++; if (row[0] !== 1'b1) failures++;
    invert = 1;
    sym = 2'd0; #1; checks++; if (row[0] !== 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
