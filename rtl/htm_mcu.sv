// htm_mcu -- main control unit of an HTM region slice.
//
// What it does: takes a 256-bit binary input from the encoder as 32 byte
// packets, sequences the spatial pooler and temporal memory of all columns
// through the H-Bridge broadcast network, collects overlaps and cell codes
// from the column pipeline, picks the winning columns with a
// k-winner-take-all unit, redistributes the winning (learning) cells, and
// produces the region output: the SDR (one bit per column) and the active
// and predictive state of every cell.
//
// How it works (Fig. 3 of the paper): a memory bank with
//   Input Buffer         N_PKT x 8
//   Overlap RAM          N x 4
//   Winning Columns RAM  K x 7
//   Winning Cells RAM    K x 11
// a k-WTA chain (htm_kwta) and a local control FSM.  One input step:
//   LOAD      accept N_PKT packets (valid/ready)
//   PACKETS   broadcast each packet, one every N_SYN+1 clocks
//   OVERLAP   HB_SEND(overlap); N words arrive in column order, so no column
//             numbers travel with them
//   KWTA      read the Overlap RAM in the pseudo-random order of a 7-bit
//             LFSR into the k-WTA chain; copy its registers into the
//             Winning Columns RAM
//   WINCOL    broadcast the winning column numbers
//   LEARN     HB_LEARN: winners update proximal synapses, cells run phase-1
//   ACT       HB_SEND(activity); store the learning cell of every active
//             column in the Winning Cells RAM
//   CELLS     broadcast the learning cells, then HB_TMGO (phases 2 and 3)
//   PRED      HB_SEND(predictive); then out_valid for one clock
// Every broadcast that starts work in the columns is followed by a wait of
// HB_LAT+3 clocks and then until net_busy (OR of all column and cell busy
// flags) is low.  An assertion checks that every winner handed over by the
// k-WTA chain has reached minOverlap.
//
// Interface: enc_* is the encoder input; sp_learn / tm_learn enable the two
// learning rules for the next input; hb_out feeds the H-Bridge; pipe_in is
// the pipeline word from the column next to the MCU.
//
// Design choices where the paper is silent: the step order above (the
// paper runs SP and TM of consecutive inputs in a pipelined fashion; here
// they are sequential), the busy-based handshakes, the fixed LFSR read
// order, and the 2-bit slice number in the cell address.  The paper's
// figure gives the Winning Cells RAM 10 entries; it is K (20) here, the
// depth of the cells' Current Status partition.
module htm_mcu
  import htm_pkg::*;
#(
  parameter int unsigned N        = N_COL,
  parameter int unsigned K        = K_WIN,
  parameter int unsigned NSYN     = N_SYN,
  parameter int unsigned NPKT     = N_PKT,
  parameter int unsigned NC       = N_CELL,
  parameter int unsigned MIN_OV   = MIN_OVL,
  parameter int unsigned HB_LAT   = $clog2(N) + 1,
  parameter logic [1:0]  SLICE_ID = 2'd0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // encoder
  input  logic                 enc_valid,
  input  logic [PKT_W-1:0]     enc_data,
  output logic                 enc_ready,
  input  logic                 sp_learn,
  input  logic                 tm_learn,
  // network
  output hb_msg_t              hb_out,
  input  pipe_t                pipe_in,
  input  logic                 net_busy,
  // region output
  output logic                 out_valid,
  output logic [N-1:0]         sdr,
  output logic [N*NC-1:0]      cells_active,
  output logic [N*NC-1:0]      cells_pred,
  output logic [$clog2(K+1)-1:0] n_winners
);

  localparam int unsigned PW = $clog2(NPKT + 1);
  localparam int unsigned NW = $clog2(N + 1);
  localparam int unsigned KW = $clog2(K + 1);
  localparam int unsigned GW = $clog2(NSYN + 1);

  typedef enum logic [4:0] {
    S_INIT, S_WAIT, S_LOAD, S_PKT, S_SEND, S_RX, S_KCLR, S_KWTA, S_KCOPY,
    S_WINCOL, S_LEARN, S_CELLS, S_TMGO, S_OUT
  } state_e;

  state_e state, after_wait;

  // memory bank
  logic [PKT_W-1:0]  ibuf     [NPKT];   // Input Buffer
  logic [OVL_W-1:0]  ovl_ram  [N];      // Overlap RAM
  logic [COL_AW-1:0] wincol   [K];      // Winning Columns RAM
  logic [CELL_AW-1:0] wincell [K];      // Winning Cells RAM
  logic [KW-1:0]     n_wincol, n_wincell;

  logic [PW-1:0]     pcnt;
  logic [GW-1:0]     gap;
  logic [NW-1:0]     rx;
  logic [KW-1:0]     bc;
  logic [7:0]        wcnt;
  logic [1:0]        send_sel;
  logic [6:0]        lfsr;
  logic              sp_l, tm_l;

  // k-WTA unit
  logic                    k_clr, k_valid;
  logic [OVL_W-1:0]        k_ovl;
  logic [COL_AW-1:0]       k_col;
  logic [K-1:0]            w_valid;
  logic [K-1:0][OVL_W-1:0] w_ovl;
  logic [K-1:0][COL_AW-1:0] w_col;
  logic [KW-1:0]           w_count;
  logic [6:0]              rd_idx;

  assign rd_idx  = lfsr - 7'd1;
  assign k_clr   = (state == S_KCLR);
  assign k_valid = (state == S_KWTA) && (rd_idx < 7'(N));
  assign k_ovl   = ovl_ram[(rd_idx < 7'(N)) ? NW'(rd_idx) : '0];
  assign k_col   = rd_idx;

  htm_kwta #(.K(K), .OW(OVL_W), .CW(COL_AW), .MIN_OV(MIN_OV)) u_kwta (
    .clk, .rst_n, .clr(k_clr), .in_valid(k_valid), .in_ovl(k_ovl), .in_col(k_col),
    .win_valid(w_valid), .win_ovl(w_ovl), .win_col(w_col), .count(w_count)
  );

  logic [3:0] code;
  assign code = pipe_in.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      after_wait   <= S_LOAD;
      pcnt         <= '0;
      gap          <= '0;
      rx           <= '0;
      bc           <= '0;
      wcnt         <= '0;
      send_sel     <= SEND_OVL;
      lfsr         <= 7'd1;
      sp_l         <= 1'b0;
      tm_l         <= 1'b0;
      n_wincol     <= '0;
      n_wincell    <= '0;
      out_valid    <= 1'b0;
      sdr          <= '0;
      cells_active <= '0;
      cells_pred   <= '0;
      n_winners    <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_INIT: begin
          wcnt       <= '0;
          after_wait <= S_LOAD;
          state      <= S_WAIT;
        end
        S_WAIT: begin
          if (wcnt < 8'(HB_LAT + 3)) wcnt <= wcnt + 1'b1;
          else if (!net_busy) state <= after_wait;
        end
        S_LOAD: begin
          if (enc_valid) begin
            ibuf[pcnt[$clog2(NPKT)-1:0]] <= enc_data;
            pcnt       <= pcnt + 1'b1;
            if (pcnt == PW'(NPKT - 1)) begin
              pcnt  <= '0;
              gap   <= '0;
              sp_l  <= sp_learn;
              tm_l  <= tm_learn;
              state <= S_PKT;
            end
          end
        end
        S_PKT: begin
          gap <= (gap == GW'(NSYN)) ? '0 : gap + 1'b1;
          if (gap == '0) begin
            pcnt <= pcnt + 1'b1;
            if (pcnt == PW'(NPKT - 1)) begin
              pcnt       <= '0;
              wcnt       <= '0;
              send_sel   <= SEND_OVL;
              after_wait <= S_SEND;
              state      <= S_WAIT;
            end
          end
        end
        S_SEND: begin
          rx    <= '0;
          state <= S_RX;
          if (send_sel == SEND_ACT) begin
            n_wincell    <= '0;
            cells_active <= '0;
          end
        end
        S_RX: begin
          if (pipe_in.valid) begin
            rx <= rx + 1'b1;
            unique case (send_sel)
              SEND_OVL: ovl_ram[rx] <= pipe_in.data;
              SEND_ACT: begin
                if (code[3]) begin
                  for (int c = 0; c < NC; c++)
                    cells_active[int'(rx)*NC + c] <= code[2] || (code[1:0] == 2'(c));
                  if (n_wincell < KW'(K)) begin
                    wincell[n_wincell] <= cell_addr(SLICE_ID, COL_AW'(rx), code[1:0]);
                    n_wincell          <= n_wincell + 1'b1;
                  end
                end
              end
              default: begin
                for (int c = 0; c < NC; c++)
                  cells_pred[int'(rx)*NC + c] <= code[c];
              end
            endcase
            if (rx == NW'(N - 1)) begin
              bc <= '0;
              unique case (send_sel)
                SEND_OVL: state <= S_KCLR;
                SEND_ACT: state <= S_CELLS;
                default:  state <= S_OUT;
              endcase
            end
          end
        end
        S_KCLR: begin
          lfsr  <= 7'd1;
          state <= S_KWTA;
        end
        S_KWTA: begin
          lfsr <= lfsr7_next(lfsr);
          if (lfsr7_next(lfsr) == 7'd1) state <= S_KCOPY;
        end
        S_KCOPY: begin
          sdr <= '0;
          for (int i = 0; i < K; i++) begin
            wincol[i] <= w_col[i];
            if (w_valid[i]) sdr[w_col[i]] <= 1'b1;
          end
          n_wincol  <= w_count;
          n_winners <= w_count;
          bc        <= '0;
          state     <= S_WINCOL;
        end
        S_WINCOL: begin
          if (bc == n_wincol) begin
            wcnt       <= '0;
            send_sel   <= SEND_ACT;
            after_wait <= S_SEND;
            state      <= S_LEARN;
          end else begin
            bc <= bc + 1'b1;
          end
        end
        S_LEARN: begin
          state <= S_WAIT;
        end
        S_CELLS: begin
          if (bc == n_wincell) state <= S_TMGO;
          else                 bc <= bc + 1'b1;
        end
        S_TMGO: begin
          wcnt       <= '0;
          send_sel   <= SEND_PRED;
          after_wait <= S_SEND;
          state      <= S_WAIT;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          state     <= S_LOAD;
        end
        default: state <= S_INIT;
      endcase
    end
  end

  // Broadcast message of the current state.
  always_comb begin
    hb_out = '{op: HB_NOP, data: '0};
    unique case (state)
      S_INIT:   hb_out = '{op: HB_INIT, data: '0};
      S_PKT:    if (gap == '0) hb_out = '{op: HB_PACKET, data: CELL_AW'(ibuf[pcnt[$clog2(NPKT)-1:0]])};
      S_SEND:   hb_out = '{op: HB_SEND, data: CELL_AW'(send_sel)};
      S_WINCOL: if (bc != n_wincol) hb_out = '{op: HB_WINCOL, data: CELL_AW'(wincol[bc])};
      S_LEARN:  hb_out = '{op: HB_LEARN, data: CELL_AW'({tm_l, sp_l})};
      S_CELLS:  if (bc != n_wincell) hb_out = '{op: HB_CELL, data: wincell[bc]};
      S_TMGO:   hb_out = '{op: HB_TMGO, data: CELL_AW'(tm_l)};
      default:  ;
    endcase
  end

  assign enc_ready = (state == S_LOAD);

  // Every winner the k-WTA chain hands over has reached minOverlap.
  always_ff @(posedge clk) begin
    if (state == S_KCOPY)
      for (int i = 0; i < K; i++)
        assert (!w_valid[i] || w_ovl[i] >= OVL_W'(MIN_OV))
          else $error("htm_mcu: winner %0d below minOverlap", i);
  end

  initial begin
    assert (N <= 127) else $error("htm_mcu: the 7-bit read-order LFSR covers at most 127 columns");
  end

endmodule
