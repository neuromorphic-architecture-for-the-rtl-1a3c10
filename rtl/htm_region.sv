// htm_region -- one HTM region slice: spatial pooler and temporal memory.
//
// What it does: learns, without supervision, a sparse distributed
// representation (SDR) of each 256-bit binary input (20 of 100 columns
// active) and, from the order of those SDRs, which input is likely to come
// next, expressed as predictive cells.
//
// How it works: the MCU (htm_mcu) receives the input from the encoder and
// broadcasts it, and every later command, through the H-Bridge network
// (htm_hbridge) to N columns.  Each column (htm_column) computes its overlap
// with the input using synthetic synapses and updates them; its cell unit
// (htm_cells) holds the column's 3 cells for the temporal memory.  Results
// travel back to the MCU through a pipeline formed by the columns' output
// registers: column i takes the word of column i+1 every clock and column 0
// delivers to the MCU.  The paper draws the columns as an N x N grid with
// one such chain per row; here all columns form a single chain.
//
// Interface: enc_valid/enc_data/enc_ready carry the 32 input bytes (packet 0
// holds input bits 7..0); sp_learn / tm_learn enable learning for that
// input.  After processing, out_valid pulses for one clock with sdr (one
// bit per column), cells_active and cells_pred (bit 3*col+cell).  The router
// that would join several slices, and the encoder, are outside this module.
//
// Timing: about N_PKT*(N_SYN+1) + 4N + 127 + 3*(N_CELL*N_SEG*N_DSYN) + 150
// clocks per input at the default sizes (see README for measured numbers).
module htm_region
  import htm_pkg::*;
#(
  parameter int unsigned N        = N_COL,
  parameter int unsigned K        = K_WIN,
  parameter logic [1:0]  SLICE_ID = 2'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enc_valid,
  input  logic [PKT_W-1:0]  enc_data,
  output logic              enc_ready,
  input  logic              sp_learn,
  input  logic              tm_learn,
  output logic              out_valid,
  output logic [N-1:0]      sdr,
  output logic [N*N_CELL-1:0] cells_active,
  output logic [N*N_CELL-1:0] cells_pred,
  output logic [$clog2(K+1)-1:0] n_winners
);

  localparam int unsigned HB_LEVELS = $clog2(N) + 1;

  hb_msg_t hb_root;
  hb_msg_t hb_leaf [N];
  pipe_t   pipe    [N+1];        // pipe[i] = output of column i, pipe[N] = end of chain
  logic [N-1:0] col_busy, cell_busy;

  assign pipe[N] = '0;

  htm_mcu #(.N(N), .K(K), .HB_LAT(HB_LEVELS), .SLICE_ID(SLICE_ID)) u_mcu (
    .clk, .rst_n,
    .enc_valid, .enc_data, .enc_ready, .sp_learn, .tm_learn,
    .hb_out(hb_root), .pipe_in(pipe[0]), .net_busy((|col_busy) || (|cell_busy)),
    .out_valid, .sdr, .cells_active, .cells_pred, .n_winners
  );

  htm_hbridge #(.N_LEAF(N), .LEVELS(HB_LEVELS)) u_hb (
    .clk, .rst_n, .msg_in(hb_root), .msg_out(hb_leaf)
  );

  for (genvar i = 0; i < N; i++) begin : g_col
    logic [2:0] cmd;
    logic [3:0] act_code, pred_code;

    htm_column #(.COL_ID(i)) u_col (
      .clk, .rst_n, .hb_in(hb_leaf[i]), .pipe_in(pipe[i+1]), .pipe_out(pipe[i]),
      .act_code, .pred_code, .cmd, .busy(col_busy[i])
    );

    htm_cells #(.K(K)) u_cells (
      .clk, .rst_n, .cmd, .hb_in(hb_leaf[i]), .act_code, .pred_code,
      .cell_active(), .cell_learn(), .cell_pred(), .timeline(),
      .busy(cell_busy[i])
    );
  end

endmodule
