// loft_estimate: the estimate algorithm of LOFT, run once per major cycle.
//
// After major cycle j (global number jg) has ended and its Z counter arrays
// are in the counter store, start launches the engine. For each minor cycle
// k = 0..Z-1 it
//   CLR  clears the cardinality array numFlow[0..W-1]                (W clocks)
//   CNT  walks the flow table; for every flow active in cycle j it adds one
//        to numFlow[H_{j,k}(f)]: the counter cardinality |ctr_{j,k}[x]|  (T clocks)
//   ACC  walks the table again; for every active flow it adds
//        ctr_{j,k}[H_{j,k}(f)] to A_f and numFlow[H_{j,k}(f)] to C_f    (T clocks)
// and then, in FIN, for every active flow it adds one to |J_f|, clears the
// flow's activity bit and computes the score
//        U_f = (|J_f| / j) * (A_f / C_f)
// as the fixed-point quotient (|J_f| * A_f * 2**FRAC) / (j * C_f) with a
// bit-serial divider (NUM_W clocks per active flow). The W_fm flows with the
// largest scores are kept in a sorted list (insertion in one clock) and
// published as the watchlist (wl_valid pulse) when the engine is done.
// If the major cycle was the last of a reset cycle (start_reset), a final
// pass clears A, C and |J| of every slot and frees slots not active in the
// running cycle; inserts from the sampler are paused meanwhile.
//
// This is Algorithm 1's Estimate procedure. The paper runs it in software;
// here it is a sequential engine. A_f and C_f are added into the table
// directly instead of through per-cycle temporaries (same result). The slot
// walks visit every table slot, so one run takes about
//   Z * (W + 2*T) + 3*T + (NUM_W + 2) * (active flows)  clocks,
// about 9.4 M + 98 * N clocks at the defaults, well inside the 50 M clocks of a
// 250 ms major cycle at 200 MHz for the paper's 130 K flows.
module loft_estimate
  import loft_pkg::*;
#(
  parameter int unsigned IDX_W = 14,
  parameter int unsigned Z     = 16,
  parameter int unsigned TAB_W = 18,
  parameter int unsigned WFM   = 64,
  parameter int unsigned FRAC  = 16,
  parameter int unsigned CW    = CTR_W,
  parameter int unsigned A_W   = 64,
  parameter int unsigned C_W   = 48,
  parameter int unsigned NJ_W  = 16,
  parameter int unsigned S_W   = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       start_j,
  input  logic [15:0]       start_jg,
  input  logic              start_reset,
  output logic              busy,
  output logic              done,
  // flow table, estimate port
  output logic              ft_rd_en,
  output logic [TAB_W-1:0]  ft_rd_slot,
  input  logic              ft_rd_valid,
  input  logic [FLOW_W-1:0] ft_rd_id,
  input  logic [1:0]        ft_rd_act,
  input  logic [A_W-1:0]    ft_rd_a,
  input  logic [C_W-1:0]    ft_rd_c,
  input  logic [NJ_W-1:0]   ft_rd_nj,
  output logic              ft_wr_en,
  output logic [TAB_W-1:0]  ft_wr_slot,
  output logic [A_W-1:0]    ft_wr_a,
  output logic [C_W-1:0]    ft_wr_c,
  output logic [NJ_W-1:0]   ft_wr_nj,
  output logic              ft_wr_clr,
  output logic              ft_wr_clr_par,
  output logic              ft_clr_en,
  output logic [TAB_W-1:0]  ft_clr_slot,
  output logic              ft_clr_keep_par,
  output logic              ft_pause,
  // counter store, read port
  output logic              cs_rd_en,
  output logic              cs_rd_bank,
  output logic [15:0]       cs_rd_k,
  output logic [IDX_W-1:0]  cs_rd_idx,
  input  logic [CW-1:0]     cs_rd_data,
  // watchlist
  output logic              wl_valid,
  output logic [FLOW_W-1:0] wl_id    [WFM],
  output logic [WFM-1:0]    wl_vld,
  output logic [S_W-1:0]    wl_score [WFM],
  output logic [31:0]       n_active
);
  localparam int unsigned W     = 1 << IDX_W;
  localparam int unsigned T     = 1 << TAB_W;
  localparam int unsigned NUM_W = NJ_W + A_W + FRAC;
  localparam int unsigned DEN_W = 16 + C_W;
  localparam int unsigned QC_W  = $clog2(NUM_W + 1);
  localparam int unsigned NF_W  = TAB_W + 1;

  typedef enum logic [3:0] {E_IDLE, E_CLR, E_CNT, E_ACC, E_FIN_RD, E_FIN_W, E_FIN_CHK,
                            E_DIV, E_INS, E_RST, E_DONE} estate_t;
  estate_t          st;

  logic [15:0]      j_r, jg_r;
  logic             rst_r;
  logic             par;               // parity of the cycle being estimated
  logic [15:0]      kk;
  logic [TAB_W:0]   cnt;               // walk counter (issue side)
  logic             rd_pend;           // a table read issued last clock
  logic [TAB_W-1:0] rd_pend_slot;

  logic [NF_W-1:0]  num_flow [W];

  // hash of the flow returned by the table, for the current minor cycle
  logic [IDX_W-1:0] hx;
  logic             is_act;
  loft_hash #(.IDX_W(IDX_W)) u_hash (
    .seed    (make_seed(jg_r, kk)),
    .flow_id (ft_rd_id),
    .idx     (hx)
  );
  assign is_act = ft_rd_valid && (par ? ft_rd_act[1] : ft_rd_act[0]);

  // ACC second stage
  logic             acc_v;
  logic [TAB_W-1:0] acc_slot;
  logic [A_W-1:0]   acc_a;
  logic [C_W-1:0]   acc_c;
  logic [NJ_W-1:0]  acc_nj;
  logic [NF_W-1:0]  acc_nf;

  // FIN: divider
  logic [TAB_W-1:0] f_slot;
  logic [FLOW_W-1:0] f_id;
  logic [NUM_W-1:0] dv_num;
  logic [DEN_W-1:0] dv_den;
  logic [DEN_W-1:0] dv_rem;
  logic [NUM_W-1:0] dv_q;
  logic [QC_W-1:0]  dv_cnt;
  logic [DEN_W:0]   dv_trial;
  logic [S_W-1:0]   score;

  // watchlist insertion position
  int unsigned      pos;

  always_comb begin
    dv_trial = {dv_rem, dv_num[NUM_W-1]};
    score    = (dv_q >> S_W) != '0 ? '1 : S_W'(dv_q);
    pos = 0;
    for (int i = 0; i < WFM; i++)
      if (wl_vld[i] && wl_score[i] >= score) pos = i + 1;
  end

  assign busy = (st != E_IDLE);

  // counter read issued in the clock the table entry returns
  always_comb begin
    cs_rd_en   = (st == E_ACC) && rd_pend && is_act;
    cs_rd_bank = par;
    cs_rd_k    = kk;
    cs_rd_idx  = hx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= E_IDLE;
      j_r           <= '0;
      jg_r          <= '0;
      rst_r         <= 1'b0;
      par           <= 1'b0;
      kk            <= '0;
      cnt           <= '0;
      rd_pend       <= 1'b0;
      rd_pend_slot  <= '0;
      done          <= 1'b0;
      wl_valid      <= 1'b0;
      wl_vld        <= '0;
      for (int i = 0; i < WFM; i++) begin
        wl_id[i]    <= '0;
        wl_score[i] <= '0;
      end
      n_active      <= '0;
      ft_rd_en      <= 1'b0;
      ft_rd_slot    <= '0;
      ft_wr_en      <= 1'b0;
      ft_wr_slot    <= '0;
      ft_wr_a       <= '0;
      ft_wr_c       <= '0;
      ft_wr_nj      <= '0;
      ft_wr_clr     <= 1'b0;
      ft_wr_clr_par <= 1'b0;
      ft_clr_en     <= 1'b0;
      ft_clr_slot   <= '0;
      ft_clr_keep_par <= 1'b0;
      ft_pause      <= 1'b0;
      acc_v         <= 1'b0;
      acc_slot      <= '0;
      acc_a         <= '0;
      acc_c         <= '0;
      acc_nj        <= '0;
      acc_nf        <= '0;
      f_slot        <= '0;
      f_id          <= '0;
      dv_num        <= '0;
      dv_den        <= '0;
      dv_rem        <= '0;
      dv_q          <= '0;
      dv_cnt        <= '0;
    end else begin
      done      <= 1'b0;
      wl_valid  <= 1'b0;
      ft_rd_en  <= 1'b0;
      ft_wr_en  <= 1'b0;
      ft_clr_en <= 1'b0;
      acc_v     <= 1'b0;
      rd_pend   <= ft_rd_en;
      rd_pend_slot <= ft_rd_slot;

      case (st)
        E_IDLE: begin
          if (start) begin
            j_r      <= start_j;
            jg_r     <= start_jg;
            rst_r    <= start_reset;
            par      <= start_jg[0];
            kk       <= '0;
            cnt      <= '0;
            n_active <= '0;
            st       <= E_CLR;
          end
        end

        E_CLR: begin
          num_flow[cnt[IDX_W-1:0]] <= '0;
          cnt <= cnt + 1'b1;
          if (cnt == (TAB_W+1)'(W - 1)) begin
            cnt <= '0;
            st  <= E_CNT;
          end
        end

        E_CNT: begin
          if (cnt < (TAB_W+1)'(T)) begin
            ft_rd_en   <= 1'b1;
            ft_rd_slot <= cnt[TAB_W-1:0];
            cnt        <= cnt + 1'b1;
          end
          if (rd_pend && is_act) num_flow[hx] <= num_flow[hx] + 1'b1;
          if (cnt == (TAB_W+1)'(T) && !ft_rd_en && !rd_pend) begin
            cnt <= '0;
            st  <= E_ACC;
          end
        end

        E_ACC: begin
          if (cnt < (TAB_W+1)'(T)) begin
            ft_rd_en   <= 1'b1;
            ft_rd_slot <= cnt[TAB_W-1:0];
            cnt        <= cnt + 1'b1;
          end
          // stage 1: table data back, read the counter
          if (rd_pend && is_act) begin
            acc_v      <= 1'b1;
            acc_slot   <= rd_pend_slot;
            acc_a      <= ft_rd_a;
            acc_c      <= ft_rd_c;
            acc_nj     <= ft_rd_nj;
            acc_nf     <= num_flow[hx];
          end
          // stage 2: counter back, write the sums
          if (acc_v) begin
            ft_wr_en      <= 1'b1;
            ft_wr_slot    <= acc_slot;
            ft_wr_a       <= acc_a + A_W'(cs_rd_data);
            ft_wr_c       <= acc_c + C_W'(acc_nf);
            ft_wr_nj      <= acc_nj;
            ft_wr_clr     <= 1'b0;
          end
          if (cnt == (TAB_W+1)'(T) && !ft_rd_en && !rd_pend && !acc_v) begin
            cnt <= '0;
            if (kk == 16'(Z - 1)) begin
              wl_vld <= '0;
              st     <= E_FIN_RD;
            end else begin
              kk <= kk + 1'b1;
              st <= E_CLR;
            end
          end
        end

        E_FIN_RD: begin
          if (cnt == (TAB_W+1)'(T)) begin
            cnt <= '0;
            st  <= rst_r ? E_RST : E_DONE;
          end else begin
            ft_rd_en   <= 1'b1;
            ft_rd_slot <= cnt[TAB_W-1:0];
            f_slot     <= cnt[TAB_W-1:0];
            cnt        <= cnt + 1'b1;
            st         <= E_FIN_W;
          end
        end

        E_FIN_W: st <= E_FIN_CHK;      // table read latency

        E_FIN_CHK: begin
          if (is_act) begin
            ft_wr_en      <= 1'b1;
            ft_wr_slot    <= f_slot;
            ft_wr_a       <= ft_rd_a;
            ft_wr_c       <= ft_rd_c;
            ft_wr_nj      <= ft_rd_nj + 1'b1;
            ft_wr_clr     <= 1'b1;
            ft_wr_clr_par <= par;
            f_id          <= ft_rd_id;
            n_active      <= n_active + 1'b1;
            dv_num        <= NUM_W'(ft_rd_nj + 1'b1) * NUM_W'(ft_rd_a) << FRAC;
            dv_den        <= DEN_W'(j_r) * DEN_W'(ft_rd_c);
            dv_rem        <= '0;
            dv_q          <= '0;
            dv_cnt        <= '0;
            st            <= E_DIV;
          end else begin
            st <= E_FIN_RD;
          end
        end

        E_DIV: begin
          // restoring division, one quotient bit per clock
          dv_num <= dv_num << 1;
          if (dv_trial >= {1'b0, dv_den}) begin
            dv_rem <= DEN_W'(dv_trial - {1'b0, dv_den});
            dv_q   <= {dv_q[NUM_W-2:0], 1'b1};
          end else begin
            dv_rem <= DEN_W'(dv_trial);
            dv_q   <= {dv_q[NUM_W-2:0], 1'b0};
          end
          dv_cnt <= dv_cnt + 1'b1;
          if (dv_cnt == QC_W'(NUM_W - 1)) st <= E_INS;
        end

        E_INS: begin
          if (pos < WFM) begin
            for (int i = WFM - 1; i > 0; i--) begin
              if (i > pos) begin
                wl_id[i]    <= wl_id[i-1];
                wl_score[i] <= wl_score[i-1];
                wl_vld[i]   <= wl_vld[i-1];
              end
            end
            wl_id[pos]    <= f_id;
            wl_score[pos] <= score;
            wl_vld[pos]   <= 1'b1;
          end
          st <= E_FIN_RD;
        end

        E_RST: begin
          ft_pause        <= 1'b1;
          ft_clr_en       <= 1'b1;
          ft_clr_slot     <= cnt[TAB_W-1:0];
          ft_clr_keep_par <= !par;
          cnt             <= cnt + 1'b1;
          if (cnt == (TAB_W+1)'(T - 1)) begin
            cnt <= '0;
            st  <= E_DONE;
          end
        end

        E_DONE: begin
          ft_pause <= 1'b0;
          done     <= 1'b1;
          wl_valid <= 1'b1;
          st       <= E_IDLE;
        end

        default: st <= E_IDLE;
      endcase
    end
  end
endmodule
