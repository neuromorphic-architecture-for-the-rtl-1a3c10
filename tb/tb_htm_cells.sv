// tb_htm_cells -- self-checking test of one temporal-memory cell unit.
//
// Acts as column and MCU for one cell unit.  Each time step it sends the
// column command (111 winner / 101 loser), then the list of learning cells
// of the region (HB_CELL) and HB_TMGO, and reads back the activity and
// predictive codes.  Sequences used (A, B, C, E are lists of ten learning
// cells of other columns; the column itself wins only at B):
//   A B A B ...  the column bursts at B until the segment grown on cell 0
//                towards A has permanences above P_TH, then cell 0 is
//                predicted at A and becomes the only active cell at B
//   C B          a new context bursts again and is learned by cell 1
//                (cell 0 already owns a segment)
//   A E A E ...  cell 0 is predicted but its column does not win: the
//                segment is weakened by 1 per step until it stops predicting
// A model of the segment permanence in the testbench gives the expected
// code of every step.  Also checks the bursting scan length (NS+1 clocks).
module tb_htm_cells;
  import htm_pkg::*;

  localparam int COL = 33;
  localparam int NS  = N_CELL * N_SEG * N_DSYN;

  logic clk = 0, rst_n = 0;
  logic [2:0] cmd;
  hb_msg_t hb_in;
  logic [3:0] act_code, pred_code;
  logic [N_CELL-1:0] cell_active, cell_learn, cell_pred;
  logic [2:0][3*N_CELL-1:0] timeline;
  logic busy;

  int checks = 0, failures = 0;

  htm_cells dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int burst_clocks;

  // one time step; returns activity and predictive codes
  task automatic step(input bit winner, input int list_base, output logic [3:0] ac,
                      output logic [3:0] pc);
    int nb;
    cmd = winner ? CMD_WINNER : CMD_LOSER;
    @(negedge clk);
    cmd = CMD_NONE;
    nb = 0;
    while (busy) begin nb++; @(negedge clk); end
    burst_clocks = nb;
    ac = act_code;
    for (int i = 0; i < 10; i++) begin
      hb_in = '{op: HB_CELL, data: cell_addr(2'd0, COL_AW'(list_base + i), 2'(i % 3))};
      @(negedge clk);
    end
    if (winner) begin
      hb_in = '{op: HB_CELL, data: cell_addr(2'd0, COL_AW'(COL), ac[1:0])};
      @(negedge clk);
    end
    hb_in = '{op: HB_TMGO, data: 11'd1};
    @(negedge clk);
    hb_in = '{op: HB_NOP, data: '0};
    while (busy) @(negedge clk);
    pc = pred_code;
  endtask

  localparam int A = 40, B = 60, C = 80, E = 100;

  initial begin
    logic [3:0] ac, pc;
    int p0;        // permanence of cell 0's segment (all its synapses move together)
    bit seg0;
    cmd = CMD_NONE;
    hb_in = '{op: HB_NOP, data: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    hb_in = '{op: HB_INIT, data: '0};
    @(negedge clk);
    hb_in = '{op: HB_NOP, data: '0};
    while (busy) @(negedge clk);

    seg0 = 0; p0 = 0;
    for (int r = 0; r < 8; r++) begin
      bit exp_pred;
      step(0, A, ac, pc);
      exp_pred = seg0 && (p0 > P_TH);
      check(ac == 4'b0000, "loser has no active cell");
      check(pc == {1'b0, 2'b00, exp_pred}, $sformatf("rep %0d at A: pred %b want %b", r, pc, exp_pred));
      step(1, B, ac, pc);
      if (exp_pred) begin
        check(ac == 4'b1000, $sformatf("rep %0d at B: predicted cell 0 alone active, got %b", r, ac));
        p0++;
      end else begin
        check(ac == 4'b1100, $sformatf("rep %0d at B: burst with cell 0 learning, got %b", r, ac));
        check(burst_clocks == NS + 1, $sformatf("burst scan %0d clocks", burst_clocks));
        if (!seg0) begin seg0 = 1; p0 = P_INIT; end
        else p0++;
      end
    end
    // second context for B: new cell
    step(0, C, ac, pc);
    check(pc == 4'b0000, "no prediction after C");
    step(1, B, ac, pc);
    check(ac == 4'b1101, $sformatf("new context: burst with cell 1 learning, got %b", ac));
    // predicted but not activated: weaken
    for (int r = 0; r < 6; r++) begin
      bit exp_pred;
      step(0, A, ac, pc);
      exp_pred = (p0 > P_TH);
      check(pc == {1'b0, 2'b00, exp_pred}, $sformatf("weaken %0d at A: pred %b want %b (p0=%0d)", r, pc, exp_pred, p0));
      step(0, E, ac, pc);
      if (exp_pred) p0--;
    end
    check(p0 <= P_TH, "segment weakened below threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
