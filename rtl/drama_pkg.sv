// drama_pkg: types and constants shared by the DRAMA search controller.
//
// DRAMA searches a commodity DRAM as a content addressable memory. Data words
// are stored transposed (one word per bit-column), and the query is applied
// one symbol at a time by choosing which row to activate. The controller only
// sends standard DRAM commands (ACT, PRE, RD, REF); row copy and bulk AND/OR
// come from issuing ACT-PRE-ACT with shortened gaps.
//
// This package holds the command encoding, the timing class that tells the
// command timer which gap to apply, the search modes, the command record that
// travels from the sequencer to the timer, and the programmable timing set.
// Encodings and default timings are this design's own choices (DDR3-1600
// cycle counts); the command set and the three timing regimes follow the paper.
package drama_pkg;

  // DRAM command on the bus.
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_REF = 3'd4
  } dram_cmd_e;

  // Which gap precedes a command.
  //   T_NORM  : within specification (tRP before ACT, tRAS before PRE)
  //   T_COPY  : ACT after an interrupted precharge (short tRP), row copy
  //   T_LOGIC : minimal tRAS before PRE and minimal tRP before ACT, AND/OR
  typedef enum logic [1:0] {
    T_NORM  = 2'd0,
    T_COPY  = 2'd1,
    T_LOGIC = 2'd2
  } tclass_e;

  // Search mode.
  typedef enum logic [1:0] {
    MODE_NAND   = 2'd0,  // exact (and ternary) match, AND accumulation
    MODE_NOR    = 2'd1,  // exact (and ternary) match, OR of mismatches
    MODE_APPROX = 2'd2   // NAND based, tolerates Hamming distance 1
  } mode_e;

  // Storage coding of the reference data.
  typedef enum logic {
    ENC_BINARY = 1'b0,   // two rows per bit: row 2j = ~D, row 2j+1 = D
    ENC_ONEHOT = 1'b1    // four rows per DNA base, one-hot
  } enc_e;

  localparam int ROW_W_DEF  = 16;
  localparam int COL_W_DEF  = 7;
  localparam int BANK_W_DEF = 3;   // up to 8 banks

  // One command request from the sequencer to the timer.
  typedef struct packed {
    dram_cmd_e             cmd;
    tclass_e               tclass;
    logic [BANK_W_DEF-1:0] bank;
    logic [ROW_W_DEF-1:0]  row;
    logic [COL_W_DEF-1:0]  col;
  } drama_op_t;

  // Programmable timing, in controller clock cycles.
  typedef struct packed {
    logic [7:0]  trcd;       // ACT to RD
    logic [7:0]  trp;        // PRE to ACT, normal
    logic [7:0]  tras;       // ACT to PRE, normal
    logic [7:0]  trp_copy;   // PRE to ACT in a row copy (shortened)
    logic [7:0]  tras_logic; // ACT to PRE in AND/OR (minimal)
    logic [7:0]  trp_logic;  // PRE to ACT in AND/OR (minimal)
    logic [7:0]  tccd;       // RD to RD
    logic [7:0]  trtp;       // RD to PRE
    logic [7:0]  trfc;       // REF to next command
    logic [15:0] trefi;      // refresh interval
  } drama_timing_t;

  // DDR3-1600 (800 MHz) values; copy and logic gaps are one cycle.
  localparam drama_timing_t TIMING_DEFAULT = '{
    trcd: 8'd11, trp: 8'd11, tras: 8'd28,
    trp_copy: 8'd1, tras_logic: 8'd1, trp_logic: 8'd1,
    tccd: 8'd4, trtp: 8'd6, trfc: 8'd128, trefi: 16'd6240
  };

  // Reserved rows, as offsets from the reserved base row. R1, R2 and R3 share
  // their upper bits and end in 01, 10 and 00: activating R1 then R2 with
  // minimal gaps also opens R3.
  localparam logic [3:0] OFF_R3 = 0;
  localparam logic [3:0] OFF_R1 = 1;
  localparam logic [3:0] OFF_R2 = 2;
  localparam logic [3:0] OFF_C0 = 4;
  localparam logic [3:0] OFF_C1 = 5;
  localparam logic [3:0] OFF_RA = 6;
  localparam logic [3:0] OFF_RB = 7;
  localparam logic [3:0] OFF_RC = 8;

endpackage
