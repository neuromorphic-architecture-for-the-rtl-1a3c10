// htm_kwta -- k-winner-take-all unit of the MCU.
//
// What it does: receives one (overlap, column number) pair per clock and
// keeps the K pairs with the largest overlaps seen since the last clear,
// sorted from largest to smallest.  Pairs whose overlap is below MIN_OVL
// (minOverlap) are not nominated and never enter.
//
// How it works: as in the paper's Fig. 3, a chain of K registers, each with
// its own comparator.  Every comparator checks whether the incoming overlap
// is larger than its register's; the first register that loses takes the
// new pair and every register after it takes its predecessor's contents
// (an insertion sorter).  On equal overlaps the earlier arrival stays ahead.
//
// Interface: clr empties the chain; in_valid/in_ovl/in_col present a pair;
// win_valid[i], win_ovl[i], win_col[i] are register i (0 = largest);
// count is the number of occupied registers.
//
// Timing: one pair per clock, no stall; outputs are registered, so a pair
// shows up in the outputs the clock after it is presented.
module htm_kwta
  import htm_pkg::*;
#(
  parameter int unsigned K       = K_WIN,
  parameter int unsigned OW      = OVL_W,
  parameter int unsigned CW      = COL_AW,
  parameter int unsigned MIN_OV  = MIN_OVL
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  in_valid,
  input  logic [OW-1:0]         in_ovl,
  input  logic [CW-1:0]         in_col,
  output logic [K-1:0]          win_valid,
  output logic [K-1:0][OW-1:0]  win_ovl,
  output logic [K-1:0][CW-1:0]  win_col,
  output logic [$clog2(K+1)-1:0] count
);

  logic [K-1:0] beats;   // incoming pair beats register i
  logic [K-1:0] beats_prev;
  logic         nominated;

  assign nominated = in_valid && (in_ovl >= OW'(MIN_OV));

  always_comb begin
    for (int i = 0; i < K; i++)
      beats[i] = !win_valid[i] || (in_ovl > win_ovl[i]);
  end
  if (K > 1) begin : g_prev
    assign beats_prev = {beats[K-2:0], 1'b0};
  end else begin : g_prev1
    assign beats_prev = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid <= '0;
      win_ovl   <= '0;
      win_col   <= '0;
      count     <= '0;
    end else if (clr) begin
      win_valid <= '0;
      count     <= '0;
    end else if (nominated) begin
      for (int i = 0; i < K; i++) begin
        if (beats[i]) begin
          if (!beats_prev[i]) begin              // insertion point
            win_valid[i] <= 1'b1;
            win_ovl[i]   <= in_ovl;
            win_col[i]   <= in_col;
          end else begin                        // shift down
            win_valid[i] <= win_valid[(i > 0) ? i-1 : 0];
            win_ovl[i]   <= win_ovl[(i > 0) ? i-1 : 0];
            win_col[i]   <= win_col[(i > 0) ? i-1 : 0];
          end
        end
      end
      if (!win_valid[K-1]) count <= count + 1'b1;
    end
  end

  // The chain stays sorted: a valid register never follows an empty one.
  for (genvar i = 1; i < K; i++) begin : g_chk
    a_sorted: assert property (@(posedge clk) disable iff (!rst_n)
      win_valid[i] |-> (win_valid[i-1] && win_ovl[i-1] >= win_ovl[i]));
  end

endmodule
