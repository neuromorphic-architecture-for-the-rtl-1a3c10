// tb_htm_region -- end-to-end test of the HTM region at its default size.
//
// Feeds a repeating sequence of five random 256-bit inputs (16x16 binary
// images) through the encoder port with spatial-pooler and temporal-memory
// learning on, then breaks the sequence, then presents an empty input.
//
// Spatial pooler: a reference model in the testbench regenerates every
// column's synapse addresses with its own LFSR, keeps all permanences,
// computes the overlaps and applies the +1/-1 rule to the winners.  Each
// step it checks that the SDR has min(K, nominated) columns and that every
// winner's overlap is at least minOverlap and at least that of every
// nominated loser (k-WTA ties may go either way; the model then follows the
// hardware's choice).
//
// Temporal memory: per step, the active cells must cover exactly the SDR
// columns, with either one or all three cells active in each.  The test
// counts the mechanisms of the design and fails if one never happens:
// bursting, activation of a predicted cell, prediction of the next input,
// a prediction that the next input does not confirm (segment weakening),
// SP learning, and a step with fewer nominated columns than K.  It prints
// the prediction accuracy per repetition and the clocks per input.
module tb_htm_region;
  import htm_pkg::*;

  localparam int N = N_COL;
  localparam int K = K_WIN;
  localparam int SEQ = 5;
  localparam int REPS = 9;

  logic clk = 0, rst_n = 0;
  logic enc_valid = 0, enc_ready, sp_learn = 1, tm_learn = 1;
  logic [PKT_W-1:0] enc_data = '0;
  logic out_valid;
  logic [N-1:0] sdr;
  logic [N*N_CELL-1:0] cells_active, cells_pred;
  logic [$clog2(K+1)-1:0] n_winners;

  int checks = 0, failures = 0;

  htm_region dut (.*);

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
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- SP reference model ----------------
  int addr [N][N_SYN];
  int perm [N][N_SYN];

  function automatic int next8(int s);
    int fb;
    fb = ((s >> 7) ^ (s >> 5) ^ (s >> 4) ^ (s >> 3)) & 1;
    return ((s << 1) & 255) | fb;
  endfunction

  logic [IN_BITS-1:0] seq [SEQ];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_burst = 0, n_pred_act = 0, n_pred = 0, n_miss = 0, n_sp_learn = 0, n_sparse = 0;

  task automatic run_input(input logic [IN_BITS-1:0] x, output int clocks,
                           output logic [N-1:0] sdr_o);
    int t0, ov [N];
    int nom, minwin, maxlose, nw;
    for (int p = 0; p < N_PKT; p++) begin
      enc_valid = 1; enc_data = x[p*8 +: 8];
      while (!enc_ready) @(negedge clk);
      if (p == 0) t0 = cyc;
      @(negedge clk);
    end
    enc_valid = 0;
    while (!out_valid) @(negedge clk);
    clocks = cyc - t0;
    sdr_o = sdr;
    // SP model
    nom = 0; minwin = 99; maxlose = -1; nw = 0;
    for (int j = 0; j < N; j++) begin
      ov[j] = 0;
      for (int k = 0; k < N_SYN; k++) if (x[addr[j][k]] && perm[j][k] >= P_TH) ov[j]++;
      if (ov[j] > 15) ov[j] = 15;
      if (ov[j] >= MIN_OVL) nom++;
      if (sdr[j]) begin nw++; if (ov[j] < minwin) minwin = ov[j]; end
      else if (ov[j] >= MIN_OVL && ov[j] > maxlose) maxlose = ov[j];
    end
    check(nw == ((nom < K) ? nom : K), $sformatf("SDR has %0d columns, %0d nominated", nw, nom));
    check(int'(n_winners) == nw, "n_winners matches SDR");
    check(nw == 0 || (minwin >= MIN_OVL && minwin >= maxlose), "winners have the largest overlaps");
    if (nom < K) n_sparse++;
    if (sp_learn && nw > 0) begin
      n_sp_learn++;
      for (int j = 0; j < N; j++) if (sdr[j])
        for (int k = 0; k < N_SYN; k++) begin
          if (x[addr[j][k]]) perm[j][k] = (perm[j][k] < 255) ? perm[j][k] + 1 : 255;
          else               perm[j][k] = (perm[j][k] > 0) ? perm[j][k] - 1 : 0;
        end
    end
    // TM: active cells cover the SDR, one or all cells per column
    for (int j = 0; j < N; j++) begin
      logic [2:0] a;
      a = cells_active[j*N_CELL +: N_CELL];
      if (sdr[j]) begin
        check(a == 3'b111 || $onehot(a), $sformatf("column %0d active cells %b", j, a));
        if (a == 3'b111) n_burst++; else n_pred_act++;
      end else check(a == 3'b000, "loser column has no active cell");
    end
  endtask

  initial begin
    int clocks, hits, preds;
    logic [N-1:0] s_cur;
    logic [N-1:0] pred_cols;
    int s;
    for (int j = 0; j < N; j++) begin
      s = ((j * 37) % 255) + 1;
      for (int k = 0; k < N_SYN; k++) begin
        addr[j][k] = s;
        perm[j][k] = P_TH - 2 + (s & 3);
        s = next8(s);
      end
    end
    for (int i = 0; i < SEQ; i++)
      for (int b = 0; b < IN_BITS; b++) seq[i][b] = ($urandom_range(99, 0) < 35);
    repeat (2) @(negedge clk);
    rst_n = 1;
    pred_cols = '0;
    for (int r = 0; r < REPS; r++) begin
      hits = 0; preds = 0;
      for (int i = 0; i < SEQ; i++) begin
        run_input(seq[i], clocks, s_cur);
        // accuracy of the prediction made at the previous step
        for (int j = 0; j < N; j++) if (pred_cols[j]) begin
          preds++;
          if (s_cur[j]) hits++; else n_miss++;
        end
        pred_cols = '0;
        for (int j = 0; j < N; j++) pred_cols[j] = |cells_pred[j*N_CELL +: N_CELL];
        if (pred_cols != '0) n_pred++;
        if (r == 0 && i == 0) $display("clocks per input: %0d", clocks);
      end
      $display("rep %0d: %0d predicted columns, %0d confirmed", r, preds, hits);
    end
    // break the sequence: the prediction made after the last input fails
    begin
      logic [IN_BITS-1:0] xr;
      for (int b = 0; b < IN_BITS; b++) xr[b] = ($urandom_range(99, 0) < 35);
      run_input(xr, clocks, s_cur);
      for (int j = 0; j < N; j++) if (pred_cols[j] && !s_cur[j]) n_miss++;
    end
    // empty input: nothing is nominated
    run_input('0, clocks, s_cur);
    check(s_cur == '0, "empty input gives an empty SDR");
    $display("mechanisms: burst=%0d predicted-activation=%0d prediction-steps=%0d missed-predictions=%0d sp-learn=%0d sparse=%0d",
             n_burst, n_pred_act, n_pred, n_miss, n_sp_learn, n_sparse);
    check(n_burst > 0, "bursting happened");
    check(n_pred_act > 0, "a predicted cell was activated");
    check(n_pred > 0, "predictions were made");
    check(n_miss > 0, "a prediction was not confirmed");
    check(n_sp_learn > 0, "SP learning happened");
    check(n_sparse > 0, "a step had fewer than K nominated columns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
