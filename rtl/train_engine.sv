// train_engine -- training controller and datapath of the sequential
// (OS-ELM based) skip-gram model, following the dataflow form of the
// algorithm in which P and beta stay fixed for one random walk and only
// their accumulated differences change inside the walk.
//
// One run trains one random walk RW of walk_len nodes.  RW is cut into
// walk_len-WIN+1 contexts; context c has centre node RW[c] and the WIN-1
// following nodes as positive samples, and every positive sample is paired
// with the same NNEG negative samples (shared by the whole walk).  Each
// context passes through four stages:
//   Stage 1  H = mu*beta[centre];  v = P*H^T (a dot product per row of P)
//            and u = H*P (H[k] times row k, accumulated).
//   Stage 2  s = H*v = H P H^T, and the rows v[j]*u of P H^T H P, written
//            to the PHHP buffer.
//   Stage 3  for every window position and each of its 1+NNEG samples:
//            e = t - H*beta[sample], t = 1.0 for the positive sample and 0
//            for a negative one, kept in an error buffer.
//   Stage 4  inv = 1/(1+s) (the OS-ELM (I + H P H^T)^-1 for one sample;
//            the algorithm listing's 1/(H P H^T) would make the gain zero);
//            g = v*inv (= P_i H^T);  dP -= PHHP*inv;
//            dBeta[sample] += e*g for every sample of stage 3.
// After the last context: P += dP and beta += dBeta.  dP and dBeta are
// cleared at the start of every run.
//
// Overlap.  Because P and beta do not change inside a walk, stages 1-3 of a
// context depend on nothing that stage 4 of the previous context writes.
// The engine therefore has two sequencers: a front one for stages 1-3 and
// a back one for stage 4.  When the front has finished a context and the
// back is free, the context is handed over (v is copied into g*inv in the
// back's first clock, inv and the error-buffer half go with it) and the
// front starts the next context at once.  The error buffer has two halves,
// used by alternate contexts; the PHHP buffer is single, since the back
// finishes reading it before the front can reach stage 2 again.  The
// divider for 1/(1+s) starts as soon as s is known and runs while the PHHP
// rows and the errors are computed.
//
// Rows are addressed by local row numbers: the host sends only the beta rows
// the walk needs and gives RW and the negative samples as row numbers into
// that set.  beta is held as one row per node (the node's column of the
// N x m output weight matrix), so the centre node's row is also its
// hidden-layer input weight, as in the tied-weight model.
//
// Stage split, shared negatives, the walk-level freeze of P and beta and
// the overlap of successive contexts follow the published algorithm.  The
// following are this design's choices.  The overlap has two levels (stages
// 1-3 against stage 4) rather than one per stage.  The front uses one
// LANES=DIM dot-product unit and one vector multiply-accumulate unit, the
// back a second multiply-accumulate unit; each handles one row per clock.
// Stage 4 uses g = v*inv, which equals P_i*H^T algebraically, so P_i itself
// is never formed inside the walk.  dBeta updates are read-modify-write
// with one cycle of forwarding, so repeated sample rows accumulate
// correctly.
//
// Interface: start pulses a run (walk_len, mu sampled then); busy while
// running; done pulses at the end; cycles holds the length of the last run.
// While idle the ext_* port writes RW/NS indices and beta/P rows and reads
// beta/P rows (registered read, one clock latency).
// Timing per run: CLR + contexts*FRONT + BACK + APPLY + 2 clocks, with
//   CLR   = max(MAX_ROWS, DIM),
//   FRONT = 2 + (DIM+1) + 1 + DIM + (NSAMP+1) + 1 + WAIT,
//   WAIT  = max(0, RECIP - DIM - NSAMP) (rest of the divider, zero at the
//           default sizes), RECIP = 2*FX_FRAC+2,
//   BACK  = 1 + (DIM+1) + (NSAMP+1) (stage 4 of the last context),
//   APPLY = (DIM+1) + (MAX_ROWS+1), NSAMP = (WIN-1)*(NNEG+1).
// The back never holds up the front, as BACK < FRONT for any sizes.
module train_engine
  import n2v_pkg::*;
#(
  parameter int unsigned DIM      = 32,            // embedding dimensions N
  parameter int unsigned MAX_WALK = 80,            // walk length l
  parameter int unsigned WIN      = 8,             // window size w
  parameter int unsigned NNEG     = 10,            // negative samples ns
  parameter int unsigned MAX_ROWS = MAX_WALK + NNEG,
  parameter int unsigned RW_AW    = $clog2(MAX_ROWS),
  parameter int unsigned DIM_AW   = (DIM > 1) ? $clog2(DIM) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [15:0]       walk_len,
  input  fx_t               mu,
  output logic              busy,
  output logic              done,
  output logic [31:0]       cycles,
  // buffer access while idle
  input  logic              ext_we,
  input  buf_sel_e          ext_wsel,
  input  logic [15:0]       ext_waddr,
  input  fx_t               ext_wrow [DIM],
  input  buf_sel_e          ext_rsel,
  input  logic [15:0]       ext_raddr,
  output fx_t               ext_rrow [DIM]
);

  localparam int unsigned NPOS    = WIN - 1;
  localparam int unsigned NSAMP   = NPOS * (NNEG + 1);
  localparam int unsigned CLR_N   = (MAX_ROWS > DIM) ? MAX_ROWS : DIM;
  localparam int unsigned CNT_W   = $clog2(CLR_N + NSAMP + 2);
  localparam int unsigned SAMP_W  = $clog2(NSAMP + 1);
  localparam int unsigned WALK_AW = $clog2(MAX_WALK);
  localparam int unsigned NEG_AW  = $clog2(NNEG + 1);

  // front sequencer: stages 1-3, the handover, and the end-of-walk update
  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S1_RD, S1_H, S1_P, S2_S, S2_ROW, S3_ERR,
    S_HAND, S_DRAIN, S_APP_P, S_APP_B, S_DONE
  } state_e;

  // back sequencer: stage 4
  typedef enum logic [1:0] {B_IDLE, B_G, B_DP, B_DB} bstate_e;

  state_e  state;
  bstate_e bstate;

  // ---------------------------------------------------------------- storage
  logic [RW_AW-1:0] rw_idx [MAX_WALK];
  logic [RW_AW-1:0] ns_idx [NNEG];
  fx_t h [DIM];     // hidden-layer output H
  fx_t v [DIM];     // P H^T
  fx_t u [DIM];     // H P
  fx_t g [DIM];     // P_i H^T = v * inv (back)
  fx_t s_hpht;      // H P H^T
  fx_t inv;         // 1 / (1 + H P H^T), latest divider result
  fx_t b_inv;       // the same, for the context in the back
  fx_t e_buf [2][NSAMP];
  fx_t mu_q;
  logic [15:0] n_ctx;

  // front counters
  logic [15:0]       ctx;
  logic [CNT_W-1:0]  cnt;       // issue-side index
  logic [CNT_W-1:0]  pcnt;      // process-side index (one clock later)
  logic              pv;        // a read issued last clock is being processed
  logic [3:0]        pos_c;     // issue-side window position
  logic [4:0]        itr_c;     // issue-side sample number within a position
  logic              p_pos;     // process side: sample is the positive one
  logic              f_slot;    // error-buffer half written by the front

  // back counters
  logic [15:0]       b_ctx;
  logic [CNT_W-1:0]  b_cnt;
  logic [CNT_W-1:0]  b_pcnt;
  logic              b_pv;
  logic [3:0]        b_pos_c;
  logic [4:0]        b_itr_c;
  logic [RW_AW-1:0]  b_prow;    // process side: sample row
  logic              b_slot;    // error-buffer half read by the back

  // ---------------------------------------------------------------- memories
  logic              beta_we, dbeta_we, p_we, dp_we, phhp_we;
  logic [RW_AW-1:0]  beta_wa, beta_ra, dbeta_wa, dbeta_ra;
  logic [DIM_AW-1:0] p_wa, p_ra, dp_wa, dp_ra, phhp_wa, phhp_ra;
  fx_t beta_wd [DIM], dbeta_wd [DIM], p_wd [DIM], dp_wd [DIM], phhp_wd [DIM];
  fx_t beta_rd [DIM], dbeta_rd [DIM], p_rd [DIM], dp_rd [DIM], phhp_rd [DIM];

  row_ram #(.DEPTH(MAX_ROWS), .LANES(DIM), .AW(RW_AW)) u_beta (
    .clk, .we(beta_we), .waddr(beta_wa), .wdata(beta_wd), .raddr(beta_ra), .rdata(beta_rd));
  row_ram #(.DEPTH(MAX_ROWS), .LANES(DIM), .AW(RW_AW)) u_dbeta (
    .clk, .we(dbeta_we), .waddr(dbeta_wa), .wdata(dbeta_wd), .raddr(dbeta_ra), .rdata(dbeta_rd));
  row_ram #(.DEPTH(DIM), .LANES(DIM), .AW(DIM_AW)) u_p (
    .clk, .we(p_we), .waddr(p_wa), .wdata(p_wd), .raddr(p_ra), .rdata(p_rd));
  row_ram #(.DEPTH(DIM), .LANES(DIM), .AW(DIM_AW)) u_dp (
    .clk, .we(dp_we), .waddr(dp_wa), .wdata(dp_wd), .raddr(dp_ra), .rdata(dp_rd));
  row_ram #(.DEPTH(DIM), .LANES(DIM), .AW(DIM_AW)) u_phhp (
    .clk, .we(phhp_we), .waddr(phhp_wa), .wdata(phhp_wd), .raddr(phhp_ra), .rdata(phhp_rd));

  // ---------------------------------------------------------------- arithmetic
  fx_t dot_a [DIM], dot_b [DIM], dot_y;
  fx_t ax_y [DIM], ax_x [DIM], ax_z [DIM], ax_a;       // front unit
  fx_t bx_y [DIM], bx_x [DIM], bx_z [DIM], bx_a;       // back unit
  fx_t zero_row [DIM];

  fx_dot  #(.LANES(DIM)) u_dot   (.a(dot_a), .b(dot_b), .y(dot_y));
  fx_axpy #(.LANES(DIM)) u_axpy  (.y(ax_y), .a(ax_a), .x(ax_x), .z(ax_z));
  fx_axpy #(.LANES(DIM)) u_baxpy (.y(bx_y), .a(bx_a), .x(bx_x), .z(bx_z));

  logic recip_start, recip_busy, recip_done;
  logic inv_ok;                          // inv holds 1/(1+s) of this context
  fx_t  recip_q;
  recip_unit u_recip (.clk, .rst_n, .start(recip_start), .s(s_hpht),
                      .busy(recip_busy), .done(recip_done), .q(recip_q));

  // dBeta forwarding: row written last clock
  logic              fwd_v;
  logic [RW_AW-1:0]  fwd_row;
  fx_t               fwd_data [DIM];
  fx_t               dbeta_cur [DIM];

  // sample rows seen by the issue sides of stage 3 (front) and stage 4 (back)
  logic [RW_AW-1:0]  issue_row, b_issue_row;
  logic              issue_pos;
  logic [15:0]       pos_node, b_pos_node;

  always_comb begin
    issue_pos = (itr_c == 0);
    pos_node  = ctx + 16'(pos_c) + 16'd1;
    issue_row = issue_pos ? rw_idx[pos_node[WALK_AW-1:0]]
                          : ns_idx[(itr_c == 0) ? 0 : NEG_AW'(itr_c - 5'd1)];
  end

  always_comb begin
    b_pos_node  = b_ctx + 16'(b_pos_c) + 16'd1;
    b_issue_row = (b_itr_c == 0) ? rw_idx[b_pos_node[WALK_AW-1:0]]
                                 : ns_idx[(b_itr_c == 0) ? 0 : NEG_AW'(b_itr_c - 5'd1)];
  end

  always_comb
    for (int unsigned k = 0; k < DIM; k++) zero_row[k] = '0;

  always_comb begin
    if (fwd_v && fwd_row == b_prow) dbeta_cur = fwd_data;
    else                             dbeta_cur = dbeta_rd;
  end

  // ---------------------------------------------------------------- datapath muxes
  always_comb begin
    dot_a = h;   dot_b = v;
    ax_y  = zero_row; ax_a = '0; ax_x = zero_row;
    bx_y  = zero_row; bx_a = '0; bx_x = zero_row;
    beta_we = 1'b0; beta_wa = '0; beta_wd = ax_z; beta_ra = '0;
    dbeta_we = 1'b0; dbeta_wa = '0; dbeta_wd = ax_z; dbeta_ra = '0;
    p_we = 1'b0; p_wa = '0; p_wd = ax_z; p_ra = '0;
    dp_we = 1'b0; dp_wa = '0; dp_wd = ax_z; dp_ra = '0;
    phhp_we = 1'b0; phhp_wa = '0; phhp_wd = ax_z; phhp_ra = '0;
    // front
    unique case (state)
      S_IDLE: begin
        beta_we = ext_we && (ext_wsel == BUF_BETA);
        beta_wa = RW_AW'(ext_waddr);
        beta_wd = ext_wrow;
        beta_ra = RW_AW'(ext_raddr);
        p_we    = ext_we && (ext_wsel == BUF_P);
        p_wa    = DIM_AW'(ext_waddr);
        p_wd    = ext_wrow;
        p_ra    = DIM_AW'(ext_raddr);
      end
      S_CLR: begin
        dbeta_we = (cnt < CNT_W'(MAX_ROWS)); dbeta_wa = RW_AW'(cnt); dbeta_wd = zero_row;
        dp_we    = (cnt < CNT_W'(DIM));      dp_wa    = DIM_AW'(cnt); dp_wd    = zero_row;
      end
      S1_RD: beta_ra = rw_idx[ctx[WALK_AW-1:0]];
      S1_H: begin                               // H = mu * beta[centre]
        ax_a = mu_q; ax_x = beta_rd;
      end
      S1_P: begin                               // v[k] = P[k].H ; u += H[k]*P[k]
        p_ra  = DIM_AW'(cnt);
        dot_a = p_rd; dot_b = h;
        ax_y  = u; ax_a = h[DIM_AW'(pcnt)]; ax_x = p_rd;
      end
      S2_S: begin dot_a = h; dot_b = v; end     // s = H P H^T
      S2_ROW: begin                             // PHHP[j] = v[j] * u
        ax_a = v[DIM_AW'(cnt)]; ax_x = u;
        phhp_we = 1'b1; phhp_wa = DIM_AW'(cnt);
      end
      S3_ERR: begin                             // e = t - H.beta[sample]
        beta_ra = issue_row;
        dot_a = h; dot_b = beta_rd;
      end
      S_APP_P: begin                            // P += dP
        p_ra = DIM_AW'(cnt); dp_ra = DIM_AW'(cnt);
        ax_y = p_rd; ax_a = FX_ONE; ax_x = dp_rd;
        p_we = pv; p_wa = DIM_AW'(pcnt);
      end
      S_APP_B: begin                            // beta += dBeta
        beta_ra = RW_AW'(cnt); dbeta_ra = RW_AW'(cnt);
        ax_y = beta_rd; ax_a = FX_ONE; ax_x = dbeta_rd;
        beta_we = pv; beta_wa = RW_AW'(pcnt);
      end
      default: ;
    endcase
    // back (never active together with S_CLR or S_APP_*)
    unique case (bstate)
      B_G: begin bx_a = b_inv; bx_x = v; end    // g = P_i H^T
      B_DP: begin                               // dP[j] -= PHHP[j]*inv
        dp_ra = DIM_AW'(b_cnt); phhp_ra = DIM_AW'(b_cnt);
        bx_y = dp_rd; bx_a = -b_inv; bx_x = phhp_rd;
        dp_we = b_pv; dp_wa = DIM_AW'(b_pcnt); dp_wd = bx_z;
      end
      B_DB: begin                               // dBeta[sample] += e*g
        dbeta_ra = b_issue_row;
        bx_y = dbeta_cur; bx_a = e_buf[b_slot][SAMP_W'(b_pcnt)]; bx_x = g;
        dbeta_we = b_pv; dbeta_wa = b_prow; dbeta_wd = bx_z;
      end
      default: ;
    endcase
  end

  // The divider starts as soon as s is known and runs alongside the PHHP rows
  // and the error loop; the handover waits only for what is left of it.
  assign recip_start = (state == S2_ROW) && (cnt == 0);

  // ---------------------------------------------------------------- front sequencer
  // lim: issue index limit of the current loop state
  logic [CNT_W-1:0] lim;
  always_comb begin
    unique case (state)
      S1_P, S_APP_P: lim = CNT_W'(DIM);
      S3_ERR:        lim = CNT_W'(NSAMP);
      S_APP_B:       lim = CNT_W'(MAX_ROWS);
      default:       lim = '0;
    endcase
  end

  logic issue, last_proc, hand;
  assign issue     = (cnt < lim);
  assign last_proc = pv && (pcnt == lim - 1'b1);
  assign hand      = (state == S_HAND) && (bstate == B_IDLE) && (inv_ok || recip_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      busy   <= 1'b0;
      done   <= 1'b0;
      cycles <= '0;
      ctx    <= '0;
      n_ctx  <= '0;
      mu_q   <= '0;
      cnt    <= '0;
      pcnt   <= '0;
      pv     <= 1'b0;
      pos_c  <= '0;
      itr_c  <= '0;
      p_pos  <= 1'b0;
      f_slot <= 1'b0;
      s_hpht <= '0;
      inv    <= '0;
      inv_ok <= 1'b0;
      for (int unsigned i = 0; i < MAX_WALK; i++) rw_idx[i] <= '0;
      for (int unsigned i = 0; i < NNEG; i++)     ns_idx[i] <= '0;
      for (int unsigned i = 0; i < NSAMP; i++) begin
        e_buf[0][i] <= '0; e_buf[1][i] <= '0;
      end
      for (int unsigned k = 0; k < DIM; k++) begin
        h[k] <= '0; v[k] <= '0; u[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (busy) cycles <= cycles + 1'b1;
      if (recip_start)     inv_ok <= 1'b0;
      else if (recip_done) inv_ok <= 1'b1;
      if (recip_done) inv <= recip_q;

      // generic pipelined loop bookkeeping
      if (issue) begin
        cnt   <= cnt + 1'b1;
        pv    <= 1'b1;
        pcnt  <= cnt;
        p_pos <= issue_pos;
        if (state == S3_ERR) begin
          if (itr_c == 5'(NNEG)) begin itr_c <= '0; pos_c <= pos_c + 1'b1; end
          else                          itr_c <= itr_c + 1'b1;
        end
      end else begin
        pv <= 1'b0;
      end

      unique case (state)
        S_IDLE: begin
          if (ext_we && ext_wsel == BUF_RW && ext_waddr < 16'(MAX_WALK))
            rw_idx[ext_waddr[WALK_AW-1:0]] <= RW_AW'(ext_wrow[0]);
          if (ext_we && ext_wsel == BUF_NS && ext_waddr < 16'(NNEG))
            ns_idx[NEG_AW'(ext_waddr)] <= RW_AW'(ext_wrow[0]);
          if (start) begin
            busy   <= 1'b1;
            cycles <= '0;
            mu_q   <= mu;
            ctx    <= '0;
            n_ctx  <= walk_len - 16'(WIN) + 16'd1;
            cnt    <= '0;
            pv     <= 1'b0;
            f_slot <= 1'b0;
            state  <= S_CLR;
          end
        end
        S_CLR: begin
          pv <= 1'b0;
          if (cnt == CNT_W'(CLR_N - 1)) begin cnt <= '0; state <= S1_RD; end
          else cnt <= cnt + 1'b1;
        end
        S1_RD: begin
          pv <= 1'b0;
          state <= S1_H;
        end
        S1_H: begin
          h <= ax_z;
          for (int unsigned k = 0; k < DIM; k++) u[k] <= '0;
          cnt <= '0; pv <= 1'b0;
          state <= S1_P;
        end
        S1_P: if (pv) begin
          v[DIM_AW'(pcnt)] <= dot_y;
          u <= ax_z;
          if (last_proc) begin cnt <= '0; state <= S2_S; end
        end
        S2_S: begin
          s_hpht <= dot_y;
          cnt <= '0; pv <= 1'b0;
          state <= S2_ROW;
        end
        S2_ROW: begin
          pv <= 1'b0;
          if (cnt == CNT_W'(DIM - 1)) begin
            cnt <= '0; pos_c <= '0; itr_c <= '0;
            state <= S3_ERR;
          end else cnt <= cnt + 1'b1;
        end
        S3_ERR: if (pv) begin
          e_buf[f_slot][SAMP_W'(pcnt)] <= (p_pos ? FX_ONE : fx_t'(0)) - dot_y;
          if (last_proc) begin cnt <= '0; state <= S_HAND; end
        end
        S_HAND: if (hand) begin
          f_slot <= !f_slot;
          if (ctx + 16'd1 >= n_ctx) state <= S_DRAIN;
          else begin ctx <= ctx + 16'd1; state <= S1_RD; end
        end
        S_DRAIN: if (bstate == B_IDLE) begin cnt <= '0; pv <= 1'b0; state <= S_APP_P; end
        S_APP_P: if (last_proc) begin cnt <= '0; state <= S_APP_B; end
        S_APP_B: if (last_proc) begin cnt <= '0; state <= S_DONE; end
        S_DONE: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- back sequencer
  logic [CNT_W-1:0] b_lim;
  always_comb begin
    unique case (bstate)
      B_DP:    b_lim = CNT_W'(DIM);
      B_DB:    b_lim = CNT_W'(NSAMP);
      default: b_lim = '0;
    endcase
  end

  logic b_issue, b_last;
  assign b_issue = (b_cnt < b_lim);
  assign b_last  = b_pv && (b_pcnt == b_lim - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bstate  <= B_IDLE;
      b_ctx   <= '0;
      b_inv   <= '0;
      b_slot  <= 1'b0;
      b_cnt   <= '0;
      b_pcnt  <= '0;
      b_pv    <= 1'b0;
      b_pos_c <= '0;
      b_itr_c <= '0;
      b_prow  <= '0;
      fwd_v   <= 1'b0;
      fwd_row <= '0;
      for (int unsigned k = 0; k < DIM; k++) begin
        g[k] <= '0; fwd_data[k] <= '0;
      end
    end else begin
      if (b_issue) begin
        b_cnt  <= b_cnt + 1'b1;
        b_pv   <= 1'b1;
        b_pcnt <= b_cnt;
        b_prow <= b_issue_row;
        if (bstate == B_DB) begin
          if (b_itr_c == 5'(NNEG)) begin b_itr_c <= '0; b_pos_c <= b_pos_c + 1'b1; end
          else                            b_itr_c <= b_itr_c + 1'b1;
        end
      end else begin
        b_pv <= 1'b0;
      end
      fwd_v <= 1'b0;

      unique case (bstate)
        B_IDLE: if (hand) begin
          b_ctx  <= ctx;
          b_inv  <= inv_ok ? inv : recip_q;
          b_slot <= f_slot;
          bstate <= B_G;
        end
        B_G: begin
          g <= bx_z;
          b_cnt <= '0; b_pv <= 1'b0;
          bstate <= B_DP;
        end
        B_DP: if (b_last) begin
          b_cnt <= '0; b_pos_c <= '0; b_itr_c <= '0;
          bstate <= B_DB;
        end
        B_DB: begin
          if (b_pv) begin
            fwd_v    <= 1'b1;
            fwd_row  <= b_prow;
            fwd_data <= bx_z;
          end
          if (b_last) begin b_cnt <= '0; bstate <= B_IDLE; end
        end
        default: bstate <= B_IDLE;
      endcase
    end
  end

  assign ext_rrow = (ext_rsel == BUF_P) ? p_rd : beta_rd;

  // the divider is free whenever a context starts it
  assert property (@(posedge clk) disable iff (!rst_n) recip_start |-> !recip_busy)
    else $error("train_engine: divider still busy at the start of a context");
  // the front rewrites PHHP only after the back has read all of it
  assert property (@(posedge clk) disable iff (!rst_n) phhp_we |-> bstate != B_DP)
    else $error("train_engine: PHHP overwritten while stage 4 reads it");
  // dP, dBeta and the multiply-accumulate units of the end-of-walk update are
  // never shared with a running stage 4
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state inside {S_CLR, S_APP_P, S_APP_B}) |-> bstate == B_IDLE)
    else $error("train_engine: stage 4 active during clear or update");
  // one read issued per processed item, never more than the loop limit
  assert property (@(posedge clk) disable iff (!rst_n) (pv && lim != 0) |-> pcnt < lim)
    else $error("train_engine: pipeline index out of range");
  assert property (@(posedge clk) disable iff (!rst_n) (b_pv && b_lim != 0) |-> b_pcnt < b_lim)
    else $error("train_engine: stage 4 index out of range");
  // the engine accepts no buffer writes and no new start while it runs
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !ext_we)
    else $error("train_engine: buffer write while busy");

endmodule
