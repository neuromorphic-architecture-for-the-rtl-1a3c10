// htm_pkg -- sizes, message formats and shared helpers of the HTM region.
//
// The region is one slice of a Hierarchical Temporal Memory: 100 columns of
// 3 cells, a spatial pooler (SP) that turns a 256-bit binary input into a
// sparse set of 20 winning columns, and a temporal memory (TM) that learns
// transitions between those sets and predicts the next one.
//
// Numbers that follow the paper: 100 columns, 16 proximal synapses per
// column, permanence threshold 127 on an 8-bit permanence, +1/-1 learning
// steps, minOverlap 2, 20 % sparsity (20 winners), 3 cells per column,
// 3 distal segments per cell, 10 synapses per segment, 50 % segment match
// threshold, 8-bit input packets (16x16 input = 32 packets), 4-bit overlap
// values, 7-bit column numbers, 11-bit cell addresses, 3-bit column-to-cell
// command with codes 111 (winner) and 101 (loser).
//
// Choices of this design: the encoding of the 14-bit broadcast message
// (3-bit opcode + 11-bit data), the layout of the 11-bit cell address and of
// the 4-bit codes that cells send down the pipeline.
package htm_pkg;

  // ---------------- spatial pooler ----------------
  localparam int unsigned N_COL    = 100;  // columns per region slice
  localparam int unsigned N_SYN    = 16;   // proximal synapses per column
  localparam int unsigned IN_BITS  = 256;  // 16x16 binarised image
  localparam int unsigned PKT_W    = 8;    // encoder packet (one byte)
  localparam int unsigned N_PKT    = IN_BITS / PKT_W;
  localparam int unsigned PERM_W   = 8;    // permanence 0..255
  localparam int unsigned P_TH     = 127;  // permanence threshold
  localparam int unsigned MIN_OVL  = 2;    // minOverlap
  localparam int unsigned K_WIN    = 20;   // winners (20 % of 100)
  localparam int unsigned OVL_W    = 4;    // overlap value width
  localparam int unsigned COL_AW   = 7;    // column number width

  // ---------------- temporal memory ----------------
  localparam int unsigned N_CELL   = 3;    // cells per column
  localparam int unsigned N_SEG    = 3;    // distal segments per cell
  localparam int unsigned N_DSYN   = 10;   // synapses per distal segment
  localparam int unsigned M_TH     = 5;    // 50 % of a segment must match
  localparam int unsigned P_INIT   = P_TH - 2; // new distal synapse permanence
  localparam int unsigned CELL_AW  = 11;   // cell address width

  // ---------------- broadcast (H-Bridge) message ----------------
  typedef enum logic [2:0] {
    HB_NOP    = 3'b000,
    HB_PACKET = 3'b001,  // data[7:0] = next input packet
    HB_SEND   = 3'b010,  // data[1:0] = what columns load into Pip-Reg
    HB_WINCOL = 3'b011,  // data[6:0] = number of a winning column
    HB_LEARN  = 3'b100,  // data[0] = SP learn, data[1] = TM learn; starts TM phase-1
    HB_CELL   = 3'b101,  // data = address of a winning (learning) cell
    HB_TMGO   = 3'b110,  // data[0] = TM learn; starts TM phase-2 and phase-3
    HB_INIT   = 3'b111   // initialise synapse memories
  } hb_op_e;

  typedef struct packed {
    hb_op_e           op;
    logic [CELL_AW-1:0] data;
  } hb_msg_t;           // 14 bits

  localparam logic [1:0] SEND_OVL  = 2'd0;  // overlap value
  localparam logic [1:0] SEND_ACT  = 2'd1;  // cell activity code
  localparam logic [1:0] SEND_PRED = 2'd2;  // cell predictive code

  // Column -> cell command bus
  localparam logic [2:0] CMD_NONE   = 3'b000;
  localparam logic [2:0] CMD_WINNER = 3'b111;
  localparam logic [2:0] CMD_LOSER  = 3'b101;

  // Pipeline word travelling from column to column towards the MCU.
  typedef struct packed {
    logic             valid;
    logic [OVL_W-1:0] data;
  } pipe_t;

  // 4-bit activity code: {active, burst, learn cell[1:0]}
  // 4-bit predictive code: {1'b0, predictive cells[2:0]}

  // 11-bit cell address: {slice[1:0], column[6:0], cell[1:0]}
  function automatic logic [CELL_AW-1:0] cell_addr(input logic [1:0] slice,
                                                   input logic [COL_AW-1:0] col,
                                                   input logic [1:0] cell_i);
    return {slice, col, cell_i};
  endfunction

  // 8-bit Fibonacci LFSR, taps 8,6,5,4 (maximal length, period 255).
  function automatic logic [7:0] lfsr8_next(input logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction

  // 7-bit LFSR, taps 7,6 (maximal length, period 127).
  function automatic logic [6:0] lfsr7_next(input logic [6:0] s);
    return {s[5:0], s[6] ^ s[5]};
  endfunction

  // Seed of a column's synapse-address LFSR: distinct and non-zero for
  // every column number below 255.
  function automatic logic [7:0] col_seed(input int unsigned col);
    return 8'(((col * 37) % 255) + 1);
  endfunction

endpackage
