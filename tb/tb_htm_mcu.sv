// tb_htm_mcu -- self-checking test of the main control unit.
//
// The columns are replaced by a model in the testbench that answers the
// MCU's broadcasts: it streams back random overlaps, activity codes and
// predictive codes, one column per clock, whenever HB_SEND arrives.  For
// several inputs the test checks that the 32 encoder bytes are broadcast
// in order one every N_SYN+1 clocks, that the winning columns are the K
// largest overlaps at or above minOverlap (ties may go either way), that
// the SDR, the learning-cell list (HB_CELL), the cell activity and
// predictive outputs agree with the codes the model sent, and that the
// learn flags reach HB_LEARN and HB_TMGO.
module tb_htm_mcu;
  import htm_pkg::*;

  localparam int N = N_COL;
  localparam int K = K_WIN;

  logic clk = 0, rst_n = 0;
  logic enc_valid = 0, enc_ready, sp_learn = 0, tm_learn = 0;
  logic [PKT_W-1:0] enc_data = '0;
  hb_msg_t hb_out;
  pipe_t pipe_in;
  logic net_busy;
  logic out_valid;
  logic [N-1:0] sdr;
  logic [N*N_CELL-1:0] cells_active, cells_pred;
  logic [$clog2(K+1)-1:0] n_winners;

  int checks = 0, failures = 0;

  htm_mcu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
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

  // network model
  int ovl [N];
  logic [3:0] act [N];
  logic [3:0] prd [N];
  bit is_win [N];
  int stream_sel = -1, stream_i = 0;
  int pkts [$];
  int pkt_time [$];
  int wincols [$];
  int cells [$];
  int learn_data = -1, tmgo_data = -1;
  int cyc = 0;
  int busy_left = 0;

  assign net_busy = (busy_left > 0);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy_left > 0) busy_left <= busy_left - 1;
    // pipeline stream
    if (stream_sel >= 0) begin
      if (stream_i < N) begin
        pipe_in.valid <= 1'b1;
        pipe_in.data  <= (stream_sel == 0) ? 4'(ovl[stream_i]) :
                         (stream_sel == 1) ? act[stream_i] : prd[stream_i];
        stream_i <= stream_i + 1;
      end else begin
        pipe_in <= '0;
        stream_sel <= -1;
      end
    end else pipe_in <= '0;
    unique case (hb_out.op)
      HB_PACKET: begin pkts.push_back(int'(hb_out.data[7:0])); pkt_time.push_back(cyc); busy_left <= 5; end
      HB_SEND:   begin stream_sel <= int'(hb_out.data[1:0]); stream_i <= 0; end
      HB_WINCOL: wincols.push_back(int'(hb_out.data[6:0]));
      HB_LEARN:  begin learn_data <= int'(hb_out.data[1:0]); busy_left <= 30; end
      HB_CELL:   cells.push_back(int'(hb_out.data));
      HB_TMGO:   begin tmgo_data <= int'(hb_out.data[0]); busy_left <= 40; end
      default: ;
    endcase
  end

  initial begin
    int bytes [N_PKT];
    pipe_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int nom, minwin, maxlose;
      pkts.delete(); pkt_time.delete(); wincols.delete(); cells.delete();
      for (int i = 0; i < N; i++) ovl[i] = (t == 5) ? $urandom_range(2, 0) : $urandom_range(15, 0);
      sp_learn = t[0]; tm_learn = t[1];
      // encoder
      for (int p = 0; p < N_PKT; p++) begin
        bytes[p] = $urandom_range(255, 0);
        enc_valid = 1; enc_data = 8'(bytes[p]);
        while (!enc_ready) @(negedge clk);
        @(negedge clk);
      end
      enc_valid = 0;
      // wait until the winning columns are broadcast, then prepare codes
      while (learn_data < 0) @(negedge clk);
      for (int i = 0; i < N; i++) is_win[i] = 0;
      foreach (wincols[j]) is_win[wincols[j]] = 1;
      for (int i = 0; i < N; i++) begin
        act[i] = is_win[i] ? {1'b1, 1'($urandom_range(1, 0)), 2'($urandom_range(2, 0))} : 4'b0;
        prd[i] = {1'b0, 3'($urandom_range(7, 0))};
      end
      while (!out_valid) @(negedge clk);
      // packets
      check(pkts.size() == N_PKT, $sformatf("%0d packets broadcast", pkts.size()));
      for (int p = 0; p < N_PKT && p < pkts.size(); p++) begin
        check(pkts[p] == bytes[p], $sformatf("packet %0d", p));
        if (p > 0) check(pkt_time[p] - pkt_time[p-1] == N_SYN + 1, "packet spacing N_SYN+1");
      end
      // winners
      nom = 0; minwin = 99; maxlose = -1;
      for (int i = 0; i < N; i++) if (ovl[i] >= MIN_OVL) nom++;
      for (int i = 0; i < N; i++) begin
        if (is_win[i]) begin
          if (ovl[i] < minwin) minwin = ovl[i];
        end else if (ovl[i] >= MIN_OVL && ovl[i] > maxlose) maxlose = ovl[i];
      end
      check(wincols.size() == ((nom < K) ? nom : K), $sformatf("t=%0d %0d winners, %0d nominated", t, wincols.size(), nom));
      check(int'(n_winners) == wincols.size(), "n_winners");
      check(wincols.size() == 0 || (minwin >= MIN_OVL && minwin >= maxlose), "winners have the largest overlaps");
      for (int i = 0; i < N; i++) check(sdr[i] == is_win[i], "sdr bit");
      check(learn_data == {tm_learn, sp_learn}, "HB_LEARN flags");
      check(tmgo_data == tm_learn, "HB_TMGO flag");
      // learning cells and cell outputs
      begin
        int j;
        j = 0;
        for (int i = 0; i < N; i++) begin
          for (int c = 0; c < N_CELL; c++) begin
            check(cells_active[i*N_CELL+c] == (act[i][3] && (act[i][2] || act[i][1:0] == 2'(c))), "cell active bit");
            check(cells_pred[i*N_CELL+c] == prd[i][c], "cell predictive bit");
          end
          if (act[i][3]) begin
            check(j < cells.size() && cells[j] == int'(cell_addr(2'd0, COL_AW'(i), act[i][1:0])),
                  $sformatf("learning cell %0d", j));
            j++;
          end
        end
        check(cells.size() == j, "learning cell count");
      end
      learn_data = -1; tmgo_data = -1;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
