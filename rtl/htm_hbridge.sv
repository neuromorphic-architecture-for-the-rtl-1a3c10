// htm_hbridge -- H-Bridge broadcast network from the MCU to the columns.
//
// What it does: delivers every 14-bit message the MCU issues (opcode plus
// 11-bit data: packets, winning column numbers, winning cell addresses,
// phase commands) to all N_LEAF columns, all in the same clock.
//
// How it works: a binary tree of registers, as an H-tree is laid out on a
// chip.  Level 0 is one register fed by the MCU; each register of level l
// drives two registers of level l+1.  Leaf i is register i of the last
// level.  Every path has the same number of registers, so all columns see
// a message in the same clock and the columns run in lock-step.  The paper
// names the network and its 11-bit data width; the tree of registers is
// this design's choice.
//
// Interface: msg_in from the MCU, msg_out[i] to column i.
//
// Timing: fixed latency of LATENCY = LEVELS clocks, one message per clock.
module htm_hbridge
  import htm_pkg::*;
#(
  parameter int unsigned N_LEAF = N_COL,
  parameter int unsigned LEVELS = $clog2(N_LEAF) + 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  hb_msg_t msg_in,
  output hb_msg_t msg_out [N_LEAF]
);

  localparam int unsigned WIDTH = 1 << (LEVELS - 1);   // registers in last level

  hb_msg_t tree [LEVELS][WIDTH];

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar j = 0; j < (1 << l); j++) begin : g_node
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)       tree[l][j] <= '{op: HB_NOP, data: '0};
        else if (l == 0)  tree[l][j] <= msg_in;
        else              tree[l][j] <= tree[(l > 0) ? l-1 : 0][j >> 1];
      end
    end
  end

  for (genvar i = 0; i < N_LEAF; i++) begin : g_leaf
    assign msg_out[i] = tree[LEVELS-1][i];
  end

  initial begin
    assert (WIDTH >= N_LEAF) else $error("htm_hbridge: too few levels for %0d leaves", N_LEAF);
  end

endmodule
