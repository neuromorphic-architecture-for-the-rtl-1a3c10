// htm_column -- spatial-pooler column with synthetic synapses.
//
// What it does: holds the 16 proximal synapses of one HTM column, counts
// their overlap with the current input, updates their permanences when the
// column wins, tells its cell unit whether it won, and forms one stage of
// the pipeline that carries overlaps and cell codes to the MCU.
//
// How it works (follows the paper's column, Fig. 4): a synapse is not a
// wire but an entry in a 16x9 RAM (8-bit permanence + 1 status bit); its
// address in the 256-bit input space is regenerated by an 8-bit LFSR
// started from a per-column seed.  For every input packet broadcast by the
// MCU the column loads Addr_Reg and walks its 16 synapse addresses, one per
// clock: the upper 5 address bits are compared with Packet_CNT, the lower 3
// decode one bit of Addr_Reg.  A synapse on an active bit writes status 1
// (else 0) and, if its permanence is at least P_TH, increments Overlap_CNT.
// In the learning phase a winning column adds 1 to every synapse with
// status 1 and subtracts 1 from the others (saturating at 0 and 255).
//
// Interface: hb_in is the broadcast message from the H-Bridge; pipe_in comes
// from the neighbour further from the MCU and pipe_out goes to the neighbour
// nearer to it (or to the MCU).  cmd is the 3-bit command to the cell unit
// (111 winner, 101 loser, pulsed once per input); act_code / pred_code come
// back from the cell unit.  busy is high while the column works.
//
// Timing: HB_INIT takes N_SYN clocks, each HB_PACKET N_SYN clocks, the SP
// update N_SYN clocks.  After HB_SEND the pipeline register loads the
// selected value and then shifts one stage per clock, every clock.
//
// Design choices where the paper is silent: initial permanences
// P_TH-2+addr[1:0] (125..128, "near the threshold"); overlap saturates at
// 15 (4-bit overlap RAM in the MCU); the connected test is perm >= P_TH
// (eq. 3); status is the input bit so that synapses on active bits are
// strengthened (Hebbian rule of Sec. II-A); the pipeline shifts freely, the
// MCU counts valid words instead of column numbers.
module htm_column
  import htm_pkg::*;
#(
  parameter int unsigned COL_ID   = 0,
  parameter int unsigned N_SYN_P  = N_SYN,
  parameter int unsigned P_TH_P   = P_TH,
  parameter logic [7:0]  SEED     = col_seed(COL_ID)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  hb_msg_t    hb_in,
  input  pipe_t      pipe_in,
  output pipe_t      pipe_out,
  input  logic [3:0] act_code,
  input  logic [3:0] pred_code,
  output logic [2:0] cmd,
  output logic       busy
);

  localparam int unsigned KW = $clog2(N_SYN_P);

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_OVL, S_LEARN} state_e;

  typedef struct packed {
    logic [PERM_W-1:0] perm;
    logic              status;
  } syn_t;   // one word of the 16x9 synapse RAM

  state_e            state;
  syn_t              ram [N_SYN_P];
  logic [7:0]        lfsr;
  logic [KW-1:0]     k;
  logic [PKT_W-1:0]  addr_reg;
  logic [4:0]        pkt_cnt;
  logic [OVL_W-1:0]  ovl_cnt;
  logic              is_winner;

  // Overlap unit datapath: packet match (En), decoder, threshold compare.
  logic       en, in_bit, connected;
  syn_t       rd;
  assign rd        = ram[k];
  assign en        = (lfsr[7:3] == pkt_cnt);
  assign in_bit    = addr_reg[lfsr[2:0]];
  assign connected = (rd.perm >= PERM_W'(P_TH_P));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      lfsr      <= SEED;
      k         <= '0;
      addr_reg  <= '0;
      pkt_cnt   <= '0;
      ovl_cnt   <= '0;
      is_winner <= 1'b0;
      cmd       <= CMD_NONE;
    end else begin
      cmd <= CMD_NONE;
      unique case (state)
        S_IDLE: begin
          unique case (hb_in.op)
            HB_INIT: begin
              state     <= S_INIT;
              lfsr      <= SEED;
              k         <= '0;
              pkt_cnt   <= '0;
              ovl_cnt   <= '0;
              is_winner <= 1'b0;
            end
            HB_PACKET: begin
              state    <= S_OVL;
              addr_reg <= hb_in.data[PKT_W-1:0];
              lfsr     <= SEED;
              k        <= '0;
              if (pkt_cnt == '0) begin   // first packet of a new input
                ovl_cnt   <= '0;
                is_winner <= 1'b0;
              end
            end
            HB_WINCOL: begin
              if (hb_in.data[COL_AW-1:0] == COL_AW'(COL_ID)) is_winner <= 1'b1;
            end
            HB_LEARN: begin
              cmd <= is_winner ? CMD_WINNER : CMD_LOSER;
              if (hb_in.data[0] && is_winner) begin
                state <= S_LEARN;
                k     <= '0;
              end
            end
            default: ;
          endcase
        end
        S_INIT: begin
          ram[k] <= '{perm: PERM_W'(P_TH_P - 2) + PERM_W'(lfsr[1:0]), status: 1'b0};
          lfsr   <= lfsr8_next(lfsr);
          k      <= k + 1'b1;
          if (k == KW'(N_SYN_P - 1)) state <= S_IDLE;
        end
        S_OVL: begin
          if (en) begin
            ram[k].status <= in_bit;
            if (in_bit && connected && ovl_cnt != '1) ovl_cnt <= ovl_cnt + 1'b1;
          end
          lfsr <= lfsr8_next(lfsr);
          k    <= k + 1'b1;
          if (k == KW'(N_SYN_P - 1)) begin
            state   <= S_IDLE;
            pkt_cnt <= pkt_cnt + 1'b1;
          end
        end
        S_LEARN: begin
          if (rd.status) begin
            if (rd.perm != '1) ram[k].perm <= rd.perm + 1'b1;
          end else begin
            if (rd.perm != '0) ram[k].perm <= rd.perm - 1'b1;
          end
          k <= k + 1'b1;
          if (k == KW'(N_SYN_P - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Output unit: Mux + Pip-Reg.  Loads on HB_SEND, otherwise takes the
  // neighbour's word every clock.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pipe_out <= '0;
    end else if (hb_in.op == HB_SEND) begin
      pipe_out.valid <= 1'b1;
      unique case (hb_in.data[1:0])
        SEND_OVL:  pipe_out.data <= ovl_cnt;
        SEND_ACT:  pipe_out.data <= act_code;
        default:   pipe_out.data <= pred_code;
      endcase
    end else begin
      pipe_out <= pipe_in;
    end
  end

  assign busy = (state != S_IDLE);

  // A new packet must not arrive while the previous one is being examined.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_OVL) |-> (hb_in.op != HB_PACKET));

endmodule
