// drama_row_map: query symbol to row address.
//
// In DRAMA the query never travels on the data bus. Each query symbol is
// compared by activating one row of the stored, transposed data word, and the
// row chosen encodes the symbol:
//   binary coding  : bit j of a word occupies rows base+2j (holding ~D) and
//                    base+2j+1 (holding D). Comparing with '0' opens the even
//                    row, with '1' the odd row; the opened row reads 1 in every
//                    column whose stored bit equals the query bit (XNOR).
//                    For NOR CAM the query is inverted, so the row read holds
//                    1 where the bit mismatches. A ternary "don't care" is
//                    stored as 11 (NAND) or 00 (NOR) and needs nothing here.
//   one-hot coding : DNA base j occupies rows base+4j .. base+4j+3, one-hot
//                    (A, G, C, T at offsets 0, 1, 2, 3). The query base opens
//                    row base+4j+code, which reads 1 where the stored base is
//                    the same.
// The two codings and the even/odd rule follow the paper; the order of rows
// within a pair or a group of four is this design's reading of it.
//
// Purely combinational; ROW_W is the row address width.
module drama_row_map
  import drama_pkg::*;
#(
  parameter int ROW_W = drama_pkg::ROW_W_DEF
) (
  input  enc_e             enc,
  input  logic             invert,    // NOR CAM: compare with the inverted bit
  input  logic [ROW_W-1:0] base_row,  // first row of the data word slot
  input  logic [7:0]       idx,       // symbol index j
  input  logic [1:0]       sym,       // query bit in sym[0], or base code
  output logic [ROW_W-1:0] row
);

  always_comb begin
    if (enc == ENC_ONEHOT)
      row = base_row + ROW_W'({idx, 2'b00}) + ROW_W'(sym);
    else
      row = base_row + ROW_W'({idx, 1'b0}) + ROW_W'(sym[0] ^ invert);
  end

endmodule
