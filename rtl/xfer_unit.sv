// xfer_unit -- job sequencer and AXI4-Stream interface of the training core.
//
// The host prepares everything one random walk needs and a DMA engine
// streams it in; this unit stores it, starts the training engine and streams
// the trained weights back.  One job is:
//   1. receive, on the slave stream, walk_len words of random-walk row
//      numbers, NNEG words of negative-sample row numbers, num_rows*DIM
//      words of beta (row by row, lane 0 first) and, when load_p is set,
//      DIM*DIM words of P (row by row);
//   2. start the training engine and wait for it;
//   3. send, on the master stream, the num_rows updated beta rows and, when
//      dump_p is set, the DIM rows of P, with tlast on the final word.
// The order of the words and the P load/dump options are this design's
// choice; the transfer order (samples, then weights, train, write back)
// follows the description of the accelerator.  Input tlast is not used.
// Interface: start pulse with the job settings; busy during the job; done
// pulses at its end.  The ext_* port drives the engine's buffer access.
// Timing: one input word per clock while tvalid is high; each output row
// costs two clocks of read plus DIM clocks of transfer when tready is high.
module xfer_unit
  import n2v_pkg::*;
#(
  parameter int unsigned DIM  = 32,
  parameter int unsigned NNEG = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  // job control
  input  logic        start,
  input  logic        load_p,
  input  logic        dump_p,
  input  logic [15:0] walk_len,
  input  logic [15:0] num_rows,
  output logic        busy,
  output logic        done,
  // AXI4-Stream slave (data in)
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  // AXI4-Stream master (data out)
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // training engine
  output logic        eng_start,
  input  logic        eng_done,
  output logic        ext_we,
  output buf_sel_e    ext_wsel,
  output logic [15:0] ext_waddr,
  output fx_t         ext_wrow [DIM],
  output buf_sel_e    ext_rsel,
  output logic [15:0] ext_raddr,
  input  fx_t         ext_rrow [DIM]
);

  typedef enum logic [3:0] {
    X_IDLE, X_RX_RW, X_RX_NS, X_RX_BETA, X_RX_P, X_TRAIN, X_WAIT,
    X_TX_RD, X_TX_LD, X_TX_SEND, X_DONE
  } xstate_e;

  localparam int unsigned LANE_W = (DIM > 1) ? $clog2(DIM) : 1;

  xstate_e          state;
  logic [15:0]      rcnt;          // row (or index word) counter
  logic [LANE_W-1:0] wcnt;         // lane counter within a row
  fx_t              row_buf [DIM];
  logic             load_p_q, dump_p_q;
  logic [15:0]      walk_len_q, num_rows_q;
  buf_sel_e         tx_sel;
  logic [15:0]      rx_rows;
  logic             row_words;     // rows of DIM words (beta, P) vs single words
  logic             accept, last_lane, last_row;

  always_comb begin
    unique case (state)
      X_RX_RW:   begin ext_wsel = BUF_RW;   rx_rows = walk_len_q;   row_words = 1'b0; end
      X_RX_NS:   begin ext_wsel = BUF_NS;   rx_rows = 16'(NNEG);    row_words = 1'b0; end
      X_RX_BETA: begin ext_wsel = BUF_BETA; rx_rows = num_rows_q;   row_words = 1'b1; end
      default:   begin ext_wsel = BUF_P;    rx_rows = 16'(DIM);     row_words = 1'b1; end
    endcase
  end

  assign s_axis_tready = (state == X_RX_RW) || (state == X_RX_NS) ||
                         (state == X_RX_BETA) || (state == X_RX_P);
  assign accept    = s_axis_tvalid && s_axis_tready;
  assign last_lane = !row_words || (wcnt == LANE_W'(DIM - 1));
  assign last_row  = (rcnt == rx_rows - 16'd1);

  // the word being accepted completes the row
  always_comb begin
    for (int unsigned k = 0; k < DIM; k++)
      ext_wrow[k] = (row_words ? (LANE_W'(k) == wcnt) : (k == 0)) ? fx_t'(s_axis_tdata) : row_buf[k];
  end
  assign ext_we    = accept && last_lane;
  assign ext_waddr = rcnt;
  assign ext_rsel  = tx_sel;
  assign ext_raddr = rcnt;
  assign eng_start = (state == X_TRAIN);

  assign m_axis_tvalid = (state == X_TX_SEND);
  assign m_axis_tdata  = row_buf[wcnt];
  assign m_axis_tlast  = (state == X_TX_SEND) && (wcnt == LANE_W'(DIM - 1)) &&
                         (rcnt == ((tx_sel == BUF_P) ? 16'(DIM) : num_rows_q) - 16'd1) &&
                         (tx_sel == BUF_P || !dump_p_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= X_IDLE;
      busy       <= 1'b0;
      done       <= 1'b0;
      rcnt       <= '0;
      wcnt       <= '0;
      load_p_q   <= 1'b0;
      dump_p_q   <= 1'b0;
      walk_len_q <= '0;
      num_rows_q <= '0;
      tx_sel     <= BUF_BETA;
      for (int unsigned k = 0; k < DIM; k++) row_buf[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        X_IDLE: if (start) begin
          busy       <= 1'b1;
          load_p_q   <= load_p;
          dump_p_q   <= dump_p;
          walk_len_q <= walk_len;
          num_rows_q <= num_rows;
          rcnt       <= '0;
          wcnt       <= '0;
          state      <= X_RX_RW;
        end
        X_RX_RW, X_RX_NS, X_RX_BETA, X_RX_P: if (accept) begin
          if (row_words) row_buf[wcnt] <= fx_t'(s_axis_tdata);
          if (!last_lane) wcnt <= wcnt + 1'b1;
          else begin
            wcnt <= '0;
            if (!last_row) rcnt <= rcnt + 16'd1;
            else begin
              rcnt <= '0;
              unique case (state)
                X_RX_RW:   state <= X_RX_NS;
                X_RX_NS:   state <= X_RX_BETA;
                X_RX_BETA: state <= load_p_q ? X_RX_P : X_TRAIN;
                default:   state <= X_TRAIN;
              endcase
            end
          end
        end
        X_TRAIN: state <= X_WAIT;
        X_WAIT: if (eng_done) begin
          tx_sel <= BUF_BETA;
          rcnt   <= '0;
          state  <= X_TX_RD;
        end
        X_TX_RD: state <= X_TX_LD;                 // read issued, data next clock
        X_TX_LD: begin
          row_buf <= ext_rrow;
          wcnt    <= '0;
          state   <= X_TX_SEND;
        end
        X_TX_SEND: if (m_axis_tready) begin
          if (wcnt != LANE_W'(DIM - 1)) wcnt <= wcnt + 1'b1;
          else if (m_axis_tlast) state <= X_DONE;
          else if (rcnt == ((tx_sel == BUF_P) ? 16'(DIM) : num_rows_q) - 16'd1) begin
            tx_sel <= BUF_P;                        // beta sent, P follows
            rcnt   <= '0;
            state  <= X_TX_RD;
          end else begin
            rcnt  <= rcnt + 16'd1;
            state <= X_TX_RD;
          end
        end
        X_DONE: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= X_IDLE;
        end
        default: state <= X_IDLE;
      endcase
    end
  end

  // AXI4-Stream rule: once valid, data is held until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   (m_axis_tvalid && !m_axis_tready) |=> (m_axis_tvalid && $stable(m_axis_tdata)))
    else $error("xfer_unit: output stream changed before it was accepted");

endmodule
