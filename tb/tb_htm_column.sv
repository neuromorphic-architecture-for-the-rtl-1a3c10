// tb_htm_column -- self-checking test of one spatial-pooler column.
//
// Acts as the MCU for a single column: initialises it, broadcasts random
// 256-bit inputs as 32 packets, reads the overlap back through the pipeline
// register and, on some inputs, declares the column a winner and lets it
// learn.  A reference model in the testbench regenerates the synapse
// addresses with its own LFSR, keeps its own permanences and computes the
// expected overlap and the +1/-1 learning.  Also checks the 3-bit command
// to the cells (111 / 101), the pipeline shift path, the busy time of each
// packet and of learning (N_SYN clocks), and both cell-code selections.
module tb_htm_column;
  import htm_pkg::*;

  localparam int COL = 5;

  logic clk = 0, rst_n = 0;
  hb_msg_t hb_in;
  pipe_t pipe_in, pipe_out;
  logic [3:0] act_code, pred_code;
  logic [2:0] cmd;
  logic busy;

  int checks = 0, failures = 0;

  htm_column #(.COL_ID(COL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  // reference model
  int addr [N_SYN];
  int perm [N_SYN];
  bit stat [N_SYN];
  logic [IN_BITS-1:0] x;

  function automatic int next8(int s);
    int fb;
    fb = ((s >> 7) ^ (s >> 5) ^ (s >> 4) ^ (s >> 3)) & 1;
    return ((s << 1) & 255) | fb;
  endfunction

  task automatic send(input hb_op_e op, input int data);
    hb_in = '{op: op, data: CELL_AW'(data)};
    @(negedge clk);
    hb_in = '{op: HB_NOP, data: '0};
  endtask

  task automatic present_input(output int ovl_hw);
    int nb;
    for (int p = 0; p < N_PKT; p++) begin
      send(HB_PACKET, int'(x[p*8 +: 8]));
      nb = 0;
      while (busy) begin nb++; @(negedge clk); end
      if (p == 0) check(nb == N_SYN, $sformatf("packet busy %0d clocks", nb));
    end
    send(HB_SEND, int'(SEND_OVL));
    check(pipe_out.valid, "pipeline loads on HB_SEND");
    ovl_hw = int'(pipe_out.data);
  endtask

  initial begin
    int s, ovl_hw, exp_ovl, nb;
    hb_in = '{op: HB_NOP, data: '0};
    pipe_in = '0;
    act_code = 4'hA;
    pred_code = 4'h5;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // synapse addresses and initial permanences of the model
    s = ((COL * 37) % 255) + 1;
    for (int k = 0; k < N_SYN; k++) begin
      addr[k] = s;
      perm[k] = P_TH - 2 + (s & 3);
      s = next8(s);
    end
    send(HB_INIT, 0);
    nb = 0;
    while (busy) begin nb++; @(negedge clk); end
    check(nb == N_SYN, $sformatf("init busy %0d clocks", nb));

    for (int t = 0; t < 60; t++) begin
      bit win, learn;
      // input: random, with the synapse bits biased on so overlaps vary
      for (int b = 0; b < IN_BITS; b++) x[b] = ($urandom_range(99, 0) < 30);
      for (int k = 0; k < N_SYN; k++) if ($urandom_range(99, 0) < 40) x[addr[k]] = 1'b1;
      present_input(ovl_hw);
      exp_ovl = 0;
      for (int k = 0; k < N_SYN; k++) begin
        stat[k] = x[addr[k]];
        if (x[addr[k]] && perm[k] >= P_TH) exp_ovl++;
      end
      if (exp_ovl > 15) exp_ovl = 15;
      check(ovl_hw == exp_ovl, $sformatf("t=%0d overlap %0d want %0d", t, ovl_hw, exp_ovl));
      // pipeline shift path
      pipe_in = '{valid: 1'b1, data: 4'(t)};
      @(negedge clk);
      check(pipe_out.valid && pipe_out.data == 4'(t), "pipeline takes neighbour word");
      pipe_in = '0;
      @(negedge clk);
      check(!pipe_out.valid, "pipeline drains");
      // winners
      win   = (t % 3 != 2);
      learn = (t % 5 != 4);
      send(HB_WINCOL, win ? COL : COL + 1);
      send(HB_WINCOL, COL + 7);
      hb_in = '{op: HB_LEARN, data: CELL_AW'({1'b1, learn})};
      @(negedge clk);
      hb_in = '{op: HB_NOP, data: '0};
      check(cmd == (win ? CMD_WINNER : CMD_LOSER), $sformatf("t=%0d cmd %b", t, cmd));
      @(negedge clk);
      check(cmd == CMD_NONE, "cmd is a single pulse");
      nb = 1;
      while (busy) begin nb++; @(negedge clk); end
      if (win && learn) begin
        check(nb == N_SYN, $sformatf("learn busy %0d clocks", nb));
        for (int k = 0; k < N_SYN; k++) begin
          if (stat[k]) perm[k] = (perm[k] < 255) ? perm[k] + 1 : 255;
          else         perm[k] = (perm[k] > 0) ? perm[k] - 1 : 0;
        end
      end
      send(HB_SEND, int'(SEND_ACT));
      check(pipe_out.data == 4'hA, "activity code selected");
      send(HB_SEND, int'(SEND_PRED));
      check(pipe_out.data == 4'h5, "predictive code selected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
