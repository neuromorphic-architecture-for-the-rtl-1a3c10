// tb_htm_kwta -- self-checking test of the k-winner-take-all chain.
//
// Presents 100 (overlap, column) pairs per trial, one per clock, in a
// shuffled column order with random overlaps 0..15, then compares the K
// registers with a reference selection: the K largest overlaps not below
// minOverlap, equal overlaps ordered by arrival.  Also checks that a pair
// reaches the outputs one clock after it is presented and that clr empties
// the chain.
module tb_htm_kwta;
  import htm_pkg::*;

  localparam int K = K_WIN;
  localparam int N = N_COL;

  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0;
  logic [OVL_W-1:0] in_ovl = '0;
  logic [COL_AW-1:0] in_col = '0;
  logic [K-1:0] win_valid;
  logic [K-1:0][OVL_W-1:0] win_ovl;
  logic [K-1:0][COL_AW-1:0] win_col;
  logic [$clog2(K+1)-1:0] count;

  int checks = 0, failures = 0;

  htm_kwta dut (.*);

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

  int ovl [N];
  int order [N];
  bit taken [N];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      // shuffled order
      for (int i = 0; i < N; i++) order[i] = i;
      for (int i = N - 1; i > 0; i--) begin
        int j, t;
        j = $urandom_range(i, 0);
        t = order[i]; order[i] = order[j]; order[j] = t;
      end
      for (int i = 0; i < N; i++) begin
        ovl[i] = (trial % 3 == 0) ? $urandom_range(4, 0) : $urandom_range(15, 0);
        taken[i] = 0;
      end
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      check(count == 0 && win_valid == '0, "clr empties the chain");
      for (int a = 0; a < N; a++) begin
        in_valid = 1; in_ovl = OVL_W'(ovl[order[a]]); in_col = COL_AW'(order[a]);
        @(negedge clk);
        if (a == 0) check(win_valid[0] == (ovl[order[0]] >= MIN_OVL), "one-clock latency");
      end
      in_valid = 0;
      @(negedge clk);
      // reference: rank r = largest overlap, earliest arrival
      begin
        int expn;
        expn = 0;
        for (int r = 0; r < K; r++) begin
          int best_a, best_o;
          best_a = -1; best_o = -1;
          for (int a = 0; a < N; a++)
            if (!taken[a] && ovl[order[a]] >= MIN_OVL && ovl[order[a]] > best_o) begin
              best_o = ovl[order[a]]; best_a = a;
            end
          if (best_a < 0) begin
            check(!win_valid[r], $sformatf("trial %0d rank %0d empty", trial, r));
          end else begin
            taken[best_a] = 1; expn++;
            check(win_valid[r] && win_ovl[r] == OVL_W'(best_o) && win_col[r] == COL_AW'(order[best_a]),
                  $sformatf("trial %0d rank %0d: got col %0d ovl %0d, want col %0d ovl %0d",
                            trial, r, win_col[r], win_ovl[r], order[best_a], best_o));
          end
        end
        check(int'(count) == expn, $sformatf("count %0d want %0d", count, expn));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
