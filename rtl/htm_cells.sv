// htm_cells -- temporal-memory cell unit of one column (3 cells).
//
// What it does: implements the cells of one HTM column.  When the column
// wins it decides which cells become active (the predicted cell, or all
// cells when the input was not predicted -- "bursting") and which cell
// learns; it then receives the list of all learning cells of the region,
// sets cells with a sufficiently matching distal segment into the
// predictive state, and adapts distal synapses.
//
// How it works: following the paper (Sec. III-C, Fig. 5), the three cells
// are not three circuits but one datapath with a partitioned memory:
//   Cells Segment partition  N_CELL*N_SEG*N_DSYN x 11  presynaptic cell addresses
//   Permanence partition     N_CELL*N_SEG*N_DSYN x 8
//   Cells History partition  2K x 11   learning cells of steps t-1 and t-2
//   Current Status partition K x 11    learning cells of step t
//   CellsTimeLine            active / learning / predictive bits of t, t-1, t-2
// The memories are walked one synapse per clock; the K current (or
// history) addresses are compared in parallel with the synapse address.
//   Phase-1 (command 111): a cell predicted in the previous step becomes
//     active and learning.  Otherwise all cells burst; the Bursting block
//     counts, per segment, synapses that point to a learning cell of t-1,
//     and the cell owning the best segment learns (if no segment matches
//     at all, the cell with the fewest segments learns on a new segment).
//     The 4-bit code {active, burst, learn cell[1:0]} goes to the column.
//   HB_CELL messages fill the Current Status partition.
//   Phase-2 (HB_TMGO): the Prediction block counts, per segment, connected
//     synapses (perm > P_TH) pointing to a current learning cell; a cell that
//     is not active and has a segment with at least M_TH matches becomes
//     predictive (code {0, predictive[2:0]}).
//   Phase-3 (when TM learning is on): the Learning block compares the
//     learning cell's segment with the history (SynMatchVector).  Matching
//     synapses get +1; a non-matching synapse that is unused or has decayed
//     below P_INIT is replaced by a history address not yet in the segment,
//     with permanence P_INIT = P_TH-2; other non-matching synapses get -1.
//     A cell that was predicted but did not become active gets -1 on the
//     matching synapses of the segment that predicted it.
//   Finally the current list moves into the history and the timeline shifts.
//
// Interface: cmd is the column command (111 winner, 101 loser); hb_in is
// the broadcast message; act_code / pred_code go back through the column;
// cell_active / cell_learn / cell_pred give the state of the current step;
// busy is high while a phase runs.
//
// Timing: HB_INIT N_CELL*N_SEG*N_DSYN clocks; phase-1 one clock when
// predicted, NS+1 clocks when bursting; phase-2 NS+1 clocks; phase-3
// 2*N_DSYN+2 clocks per adapted segment; then one clock to rotate.
//
// Design choices where the paper is silent: the synapse-valid bits, the
// best-matching rule (address match with t-1 learning cells, ignoring
// permanence), the tie break (fewest segments, then lowest cell), the
// segment replacement pointer, the replacement rule for decayed synapses,
// and learning from the step t-1 half of the history only.
module htm_cells
  import htm_pkg::*;
#(
  parameter int unsigned NC       = N_CELL,
  parameter int unsigned NSG      = N_SEG,
  parameter int unsigned ND       = N_DSYN,
  parameter int unsigned K        = K_WIN,
  parameter int unsigned MTH      = M_TH,
  parameter int unsigned PTH      = P_TH,
  parameter int unsigned PINIT    = P_INIT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [2:0]            cmd,
  input  hb_msg_t               hb_in,
  output logic [3:0]            act_code,
  output logic [3:0]            pred_code,
  output logic [NC-1:0]         cell_active,
  output logic [NC-1:0]         cell_learn,
  output logic [NC-1:0]         cell_pred,
  output logic [2:0][3*NC-1:0]  timeline,   // [0]=t, [1]=t-1, [2]=t-2: {pred, learn, active}
  output logic                  busy
);

  localparam int unsigned NSEGS = NC * NSG;          // segments in the unit
  localparam int unsigned NS    = NSEGS * ND;        // synapses in the unit
  localparam int unsigned EW    = $clog2(NS + 1);
  localparam int unsigned SW    = $clog2(NSEGS + 1);
  localparam int unsigned DW    = $clog2(ND + 1);
  localparam int unsigned CW    = $clog2(NC + 2);
  localparam int unsigned KW    = $clog2(K + 1);
  localparam int unsigned SGW   = $clog2(NSG + 1);
  localparam int unsigned MW    = $clog2(ND + 1);    // match counter width

  typedef logic [CELL_AW-1:0] caddr_t;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_BM, S_BM_SEL, S_PRED, S_PRED_SEL,
    S_JOB, S_LA, S_LB, S_ROT
  } state_e;

  state_e state;

  // ---------------- memory bank ----------------
  caddr_t            seg_addr [NS];     // Cells Segment partition
  logic [PERM_W-1:0] perm     [NS];     // Permanence partition
  logic [NS-1:0]     syn_v;             // synapse in use
  logic [NSEGS-1:0]  seg_v;             // segment in use
  caddr_t            hist     [2*K];    // Cells History: [0..K-1] t-1, [K..2K-1] t-2
  logic [KW-1:0]     hist_n   [2];
  caddr_t            cur      [K];      // Current Status partition
  logic [KW-1:0]     cur_n;
  logic [2:0][3*NC-1:0] tl;             // CellsTimeLine
  logic [NC-1:0][SGW-1:0] pred_seg_prev, pred_seg_next;
  logic [NC-1:0][SGW-1:0] rr;           // segment replacement pointer per cell

  // ---------------- working registers ----------------
  logic [EW-1:0]     e;                 // synapse index of a scan
  logic [MW-1:0]     cnt [NSEGS];       // per-segment match counters
  logic [NC-1:0]     act_now, lrn_now, pred_next;
  logic              burst;
  logic [1:0]        learn_idx;
  logic [SGW-1:0]    tgt_seg;
  logic              tgt_new;
  logic              tm_learn;
  logic [CW-1:0]     job;               // 0 = learning cell, 1..NC = weaken cell job-1
  logic [SW-1:0]     jseg;              // segment of the current job
  logic              jweaken;
  logic [DW-1:0]     kk;
  logic [ND-1:0]     match_vec;         // SynMatchVector
  logic [K-1:0]      hist_used;

  logic [NC-1:0] pred_prev;
  assign pred_prev = tl[0][3*NC-1 -: NC];

  // ---------------- parallel address comparators ----------------
  function automatic logic [SW-1:0] seg_of(input logic [EW-1:0] idx);
    return SW'(idx / ND);
  endfunction

  caddr_t        rd_addr;
  logic [K-1:0]  hist_hit, cur_hit;
  logic [EW-1:0] ra;                    // synapse being read
  assign ra      = (state == S_LA || state == S_LB) ? EW'(jseg * ND + kk) : e;
  assign rd_addr = seg_addr[ra];

  always_comb begin
    for (int i = 0; i < K; i++) begin
      hist_hit[i] = (KW'(i) < hist_n[0]) && (hist[i] == rd_addr);
      cur_hit[i]  = (KW'(i) < cur_n)     && (cur[i]  == rd_addr);
    end
  end

  // First history entry not yet present in the segment.
  logic          free_found;
  logic [KW-1:0] free_idx;
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = K - 1; i >= 0; i--) begin
      if ((KW'(i) < hist_n[0]) && !hist_used[i]) begin
        free_found = 1'b1;
        free_idx   = KW'(i);
      end
    end
  end

  // Best segment after the bursting scan.
  logic [SW-1:0]  best_seg;
  logic [MW-1:0]  best_cnt;
  logic [1:0]     fewest_cell;
  logic [SGW-1:0] fewest_free;        // free segment of that cell, or rr pointer
  always_comb begin
    int unsigned nseg, best_n;
    best_seg = '0;
    best_cnt = '0;
    for (int i = 0; i < NSEGS; i++) begin
      if (cnt[i] > best_cnt) begin
        best_cnt = cnt[i];
        best_seg = SW'(i);
      end
    end
    fewest_cell = '0;
    best_n      = NSG + 1;
    for (int c = 0; c < NC; c++) begin
      nseg = 0;
      for (int s = 0; s < NSG; s++) nseg += int'(seg_v[c*NSG+s]);
      if (nseg < best_n) begin
        best_n      = nseg;
        fewest_cell = 2'(c);
      end
    end
    fewest_free = rr[fewest_cell];
    for (int s = NSG - 1; s >= 0; s--)
      if (!seg_v[int'(fewest_cell)*NSG + s]) fewest_free = SGW'(s);
  end

  // First predicted cell of the previous step.
  logic [1:0] first_pred;
  always_comb begin
    first_pred = '0;
    for (int c = NC - 1; c >= 0; c--)
      if (pred_prev[c]) first_pred = 2'(c);
  end

  // Cell that the current job adapts, and whether the job has work.
  logic          job_on;
  logic [1:0]    job_cell;
  always_comb begin
    job_cell = (job == '0) ? learn_idx : 2'(job - 1'b1);
    if (job == '0) job_on = tm_learn && (|lrn_now);
    else           job_on = tm_learn && pred_prev[job_cell] && !act_now[job_cell];
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      e             <= '0;
      seg_v         <= '0;
      syn_v         <= '0;
      hist_n[0]     <= '0;
      hist_n[1]     <= '0;
      cur_n         <= '0;
      tl            <= '0;
      pred_seg_prev <= '0;
      pred_seg_next <= '0;
      rr            <= '0;
      act_now       <= '0;
      lrn_now       <= '0;
      pred_next     <= '0;
      burst         <= 1'b0;
      learn_idx     <= '0;
      tgt_seg       <= '0;
      tgt_new       <= 1'b0;
      tm_learn      <= 1'b0;
      job           <= '0;
      jseg          <= '0;
      jweaken       <= 1'b0;
      kk            <= '0;
      match_vec     <= '0;
      hist_used     <= '0;
      for (int i = 0; i < NSEGS; i++) cnt[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (hb_in.op == HB_INIT) begin
            state     <= S_INIT;
            e         <= '0;
            seg_v     <= '0;
            syn_v     <= '0;
            hist_n[0] <= '0;
            hist_n[1] <= '0;
            cur_n     <= '0;
            tl        <= '0;
            rr        <= '0;
            act_now   <= '0;
            lrn_now   <= '0;
            burst     <= 1'b0;
          end else if (cmd == CMD_WINNER) begin
            // Phase-1
            if (|pred_prev) begin
              act_now   <= NC'(1) << first_pred;
              lrn_now   <= NC'(1) << first_pred;
              learn_idx <= first_pred;
              burst     <= 1'b0;
              tgt_seg   <= pred_seg_prev[first_pred];
              tgt_new   <= 1'b0;
            end else begin
              act_now <= '1;
              burst   <= 1'b1;
              e       <= '0;
              for (int i = 0; i < NSEGS; i++) cnt[i] <= '0;
              state   <= S_BM;
            end
          end else if (cmd == CMD_LOSER) begin
            act_now <= '0;
            lrn_now <= '0;
            burst   <= 1'b0;
          end else if (hb_in.op == HB_CELL) begin
            if (cur_n < KW'(K)) begin
              cur[cur_n] <= hb_in.data;
              cur_n      <= cur_n + 1'b1;
            end
          end else if (hb_in.op == HB_TMGO) begin
            tm_learn <= hb_in.data[0];
            e        <= '0;
            for (int i = 0; i < NSEGS; i++) cnt[i] <= '0;
            state    <= S_PRED;
          end
        end

        S_INIT: begin
          seg_addr[e] <= '0;
          perm[e]     <= PERM_W'(PINIT);
          e           <= e + 1'b1;
          if (e == EW'(NS - 1)) state <= S_IDLE;
        end

        // Bursting block: count synapses pointing to learning cells of t-1.
        S_BM: begin
          if (seg_v[seg_of(e)] && syn_v[e] && (|hist_hit))
            cnt[seg_of(e)] <= cnt[seg_of(e)] + 1'b1;
          e <= e + 1'b1;
          if (e == EW'(NS - 1)) state <= S_BM_SEL;
        end
        S_BM_SEL: begin
          if (best_cnt != '0) begin
            learn_idx <= 2'(int'(best_seg) / NSG);
            lrn_now   <= NC'(1) << (int'(best_seg) / NSG);
            tgt_seg   <= SGW'(best_seg % NSG);
            tgt_new   <= 1'b0;
          end else begin
            learn_idx <= fewest_cell;
            lrn_now   <= NC'(1) << fewest_cell;
            tgt_seg   <= fewest_free;
            tgt_new   <= 1'b1;
          end
          state <= S_IDLE;
        end

        // Prediction block: connected synapses pointing to current learning cells.
        S_PRED: begin
          if (seg_v[seg_of(e)] && syn_v[e] && (perm[e] > PERM_W'(PTH)) && (|cur_hit))
            cnt[seg_of(e)] <= cnt[seg_of(e)] + 1'b1;
          e <= e + 1'b1;
          if (e == EW'(NS - 1)) state <= S_PRED_SEL;
        end
        S_PRED_SEL: begin
          for (int c = 0; c < NC; c++) begin
            pred_next[c]     <= 1'b0;
            pred_seg_next[c] <= '0;
            for (int s = NSG - 1; s >= 0; s--) begin
              if (!act_now[c] && cnt[c*NSG+s] >= MW'(MTH)) begin
                pred_next[c]     <= 1'b1;
                pred_seg_next[c] <= SGW'(s);
              end
            end
          end
          job   <= '0;
          state <= S_JOB;
        end

        // Learning block: one job per adapted segment.
        S_JOB: begin
          if (job == CW'(NC + 1)) begin
            state <= S_ROT;
          end else if (job_on) begin
            jweaken   <= (job != '0);
            jseg      <= (job == '0) ? SW'(learn_idx * NSG + tgt_seg)
                                     : SW'(job_cell * NSG + pred_seg_prev[job_cell]);
            kk        <= '0;
            match_vec <= '0;
            hist_used <= '0;
            if (job == '0 && tgt_new) begin
              // establish a new segment on the learning cell
              seg_v[int'(learn_idx) * NSG + int'(tgt_seg)] <= 1'b1;
              for (int k = 0; k < ND; k++) syn_v[(int'(learn_idx) * NSG + int'(tgt_seg)) * ND + k] <= 1'b0;
              rr[learn_idx] <= (rr[learn_idx] == SGW'(NSG - 1)) ? '0 : rr[learn_idx] + 1'b1;
            end
            state <= S_LA;
          end else begin
            job <= job + 1'b1;
          end
        end
        S_LA: begin   // fill SynMatchVector, mark history entries already present
          match_vec[kk] <= syn_v[ra] && (|hist_hit);
          if (syn_v[ra]) hist_used <= hist_used | hist_hit;
          kk <= kk + 1'b1;
          if (kk == DW'(ND - 1)) begin
            kk    <= '0;
            state <= S_LB;
          end
        end
        S_LB: begin   // update permanences, grow synapses
          if (jweaken) begin
            if (match_vec[kk] && perm[ra] != '0) perm[ra] <= perm[ra] - 1'b1;
          end else if (match_vec[kk]) begin
            if (perm[ra] != '1) perm[ra] <= perm[ra] + 1'b1;
          end else if ((!syn_v[ra] || perm[ra] < PERM_W'(PINIT)) && free_found) begin
            seg_addr[ra]        <= hist[int'(free_idx)];
            perm[ra]            <= PERM_W'(PINIT);
            syn_v[ra]           <= 1'b1;
            hist_used[free_idx[$clog2(K)-1:0]] <= 1'b1;
          end else if (syn_v[ra] && perm[ra] != '0) begin
            perm[ra] <= perm[ra] - 1'b1;
          end
          kk <= kk + 1'b1;
          if (kk == DW'(ND - 1)) begin
            job   <= job + 1'b1;
            state <= S_JOB;
          end
        end

        S_ROT: begin
          for (int i = 0; i < K; i++) begin
            hist[K + i] <= hist[i];
            hist[i]     <= cur[i];
          end
          hist_n[1]     <= hist_n[0];
          hist_n[0]     <= cur_n;
          cur_n         <= '0;
          tl[2]         <= tl[1];
          tl[1]         <= tl[0];
          tl[0]         <= {pred_next, lrn_now, act_now};
          pred_seg_prev <= pred_seg_next;
          state         <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign act_code    = {|act_now, burst, learn_idx};
  assign pred_code   = {1'b0, 3'(tl[0][3*NC-1 -: NC])};
  assign cell_active = act_now;
  assign cell_learn  = lrn_now;
  assign cell_pred   = pred_prev;
  assign timeline    = tl;
  assign busy        = (state != S_IDLE);

  // The column commands only arrive between steps.
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd != CMD_NONE) |-> (state == S_IDLE));

endmodule
