// tb_train_engine -- checks the training engine at a reduced size
// (8 dimensions, walk of up to 16 nodes, window 4, 3 negative samples)
// against a reference model of the training algorithm written in loops
// over contexts, window positions and samples.  Buffers are filled and read
// back through the engine's idle-time port.  Three runs: a full walk, a
// walk in which the same row is updated back to back (negatives repeated
// and equal to positives), and a minimum walk of one context, each checked
// for every beta and P word and for the documented clock count.
// At this size the divider is slower than stages 2 and 3, so the handover
// to stage 4 waits for it; at the default size it never does.
`timescale 1ns/1ps
module tb_train_engine;
  import n2v_pkg::*;
  import n2v_ref_pkg::*;

  localparam int DIM = 8, WALK = 16, WIN = 4, NNEG = 3;
  localparam int MAXR = WALK + NNEG;
  localparam int NSAMP = (WIN-1)*(NNEG+1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_same_row = 0;

  logic start, busy, done, ext_we;
  logic [15:0] walk_len, ext_waddr, ext_raddr;
  fx_t mu;
  logic [31:0] cycles;
  buf_sel_e ext_wsel, ext_rsel;
  fx_t ext_wrow [DIM], ext_rrow [DIM];

  train_engine #(.DIM(DIM), .MAX_WALK(WALK), .WIN(WIN), .NNEG(NNEG)) dut (
    .clk, .rst_n, .start, .walk_len, .mu, .busy, .done, .cycles,
    .ext_we, .ext_wsel, .ext_waddr, .ext_wrow, .ext_rsel, .ext_raddr, .ext_rrow);

  int beta [MAXR][DIM], P [DIM][DIM], rw [WALK], ns [NNEG];

  function automatic int dotp(int a [DIM], int b [DIM]);
    logic signed [79:0] acc;
    acc = 0;
    for (int k = 0; k < DIM; k++) acc += 80'(longint'(a[k]) * longint'(b[k]));
    return int'(acc >>> FRAC);
  endfunction

  task automatic ref_train(input int len, input int m);
    int dP [DIM][DIM], dB [MAXR][DIM], phhp [DIM][DIM];
    int h [DIM], v [DIM], u [DIM], g [DIM], row [DIM], e [NSAMP], srow [NSAMP];
    int s, inv, prev;
    for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) dP[j][k] = 0;
    for (int r = 0; r < MAXR; r++) for (int k = 0; k < DIM; k++) dB[r][k] = 0;
    for (int c = 0; c + WIN <= len; c++) begin
      for (int k = 0; k < DIM; k++) begin h[k] = rmul(m, beta[rw[c]][k]); u[k] = 0; end
      for (int k = 0; k < DIM; k++) begin
        row = P[k]; v[k] = dotp(row, h);
        for (int j = 0; j < DIM; j++) u[j] += rmul(h[k], P[k][j]);
      end
      s = dotp(h, v);
      for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) phhp[j][k] = rmul(v[j], u[k]);
      for (int p = 0; p < WIN-1; p++)
        for (int itr = 0; itr <= NNEG; itr++) begin
          int i = p*(NNEG+1) + itr;
          srow[i] = (itr == 0) ? rw[c+1+p] : ns[itr-1];
          row = beta[srow[i]];
          e[i] = ((itr == 0) ? ONE : 0) - dotp(h, row);
        end
      inv = rrecip(s);
      for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) dP[j][k] += rmul(-inv, phhp[j][k]);
      for (int k = 0; k < DIM; k++) g[k] = rmul(inv, v[k]);
      prev = -1;
      for (int i = 0; i < NSAMP; i++) begin
        if (srow[i] == prev) n_same_row++;
        prev = srow[i];
        for (int k = 0; k < DIM; k++) dB[srow[i]][k] += rmul(e[i], g[k]);
      end
    end
    for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) P[j][k] += dP[j][k];
    for (int r = 0; r < MAXR; r++) for (int k = 0; k < DIM; k++) beta[r][k] += dB[r][k];
  endtask

  task automatic wr_row(input buf_sel_e sel, input int a, input int row [DIM]);
    @(negedge clk); ext_we = 1; ext_wsel = sel; ext_waddr = 16'(a);
    for (int k = 0; k < DIM; k++) ext_wrow[k] = row[k];
    @(negedge clk); ext_we = 0;
  endtask

  task automatic wr_idx(input buf_sel_e sel, input int a, input int v);
    int row [DIM];
    for (int k = 0; k < DIM; k++) row[k] = (k == 0) ? v : 0;
    wr_row(sel, a, row);
  endtask

  task automatic run(input int len, input int m);
    int row [DIM], exp_cycles, t0;
    for (int i = 0; i < len; i++)  wr_idx(BUF_RW, i, rw[i]);
    for (int i = 0; i < NNEG; i++) wr_idx(BUF_NS, i, ns[i]);
    for (int r = 0; r < MAXR; r++) begin row = beta[r]; wr_row(BUF_BETA, r, row); end
    for (int j = 0; j < DIM; j++) begin row = P[j]; wr_row(BUF_P, j, row); end
    @(negedge clk); walk_len = 16'(len); mu = m; start = 1;
    @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    ref_train(len, m);
    exp_cycles = ((MAXR > DIM) ? MAXR : DIM)
               + (len-WIN+1) * (2 + (DIM+1) + 1 + DIM + (NSAMP+1) + 1
                 + (((2*FRAC+2) > DIM+NSAMP) ? (2*FRAC+2) - DIM - NSAMP : 0))
               + (1 + (DIM+1) + (NSAMP+1))
               + (DIM+1) + (MAXR+1) + 2;
    checks++;
    if (cycles != exp_cycles || t0 != exp_cycles) begin
      failures++; $display("FAIL cycles %0d / %0d expected %0d", cycles, t0, exp_cycles);
    end
    for (int r = 0; r < MAXR + DIM; r++) begin
      @(negedge clk);
      ext_rsel = (r < MAXR) ? BUF_BETA : BUF_P; ext_raddr = 16'((r < MAXR) ? r : r - MAXR);
      @(negedge clk);
      for (int k = 0; k < DIM; k++) begin
        int e;
        e = (r < MAXR) ? beta[r][k] : P[r-MAXR][k];
        checks++;
        if (ext_rrow[k] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d got %h expected %h", r, k, ext_rrow[k], e);
        end
      end
    end
  endtask

  function automatic int rnd(int range);
    return int'($urandom % (2*range)) - range;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ext_we = 0; ext_wsel = BUF_RW; ext_waddr = 0; ext_rsel = BUF_BETA; ext_raddr = 0;
    walk_len = 0; mu = 0;
    for (int k = 0; k < DIM; k++) ext_wrow[k] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < MAXR; r++) for (int k = 0; k < DIM; k++) beta[r][k] = rnd(ONE);
    for (int j = 0; j < DIM; j++) for (int k = j; k < DIM; k++) begin
      P[j][k] = (j == k) ? 32*ONE : rnd(ONE/4); P[k][j] = P[j][k];
    end
    // run 1: full walk
    for (int i = 0; i < WALK; i++) rw[i] = $urandom % MAXR;
    for (int i = 0; i < NNEG; i++) ns[i] = $urandom % MAXR;
    run(WALK, 6554);
    // run 2: repeated rows, so delta-beta rows are updated back to back
    for (int i = 0; i < WALK; i++) rw[i] = $urandom % 4;
    for (int i = 0; i < NNEG; i++) ns[i] = 2;
    run(10, 3277);
    // run 3: one context only
    for (int i = 0; i < WALK; i++) rw[i] = $urandom % MAXR;
    run(WIN, 65536);
    checks++;
    if (n_same_row == 0) begin failures++; $display("FAIL back-to-back row never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
