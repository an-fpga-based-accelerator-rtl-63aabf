// tb_n2v_core -- end-to-end test of the training core at its default size
// (32 dimensions, walk length 80, window 8, 10 negative samples).
//
// The testbench plays the host and the DMA engine: it writes the AXI4-Lite
// registers, streams a random walk, negative samples, beta rows and
// (optionally) P into the core, collects the output stream and compares
// every word with a reference model of the training algorithm written here
// from the algorithm itself (loops over contexts, windows and samples, one
// context at a time).  Three jobs are run:
//   job 0  full walk of 80 nodes, P loaded and read back;
//   job 1  walk of 20 nodes with P kept from job 0, repeated sample rows,
//          gaps on the input stream and back-pressure on the output stream;
//   job 2  full walk, P kept, only beta read back.
// It also checks tlast, the CYCLES register against the documented
// per-run formula and the done flag, and counts how often each mechanism
// (P load, P dump, P kept between jobs, input stall, output back-pressure,
// back-to-back updates of the same delta-beta row, and overlapped contexts)
// occurred.  Overlap is measured from the CYCLES register: a context whose
// stage 4 ran alongside the next context saves 1 + (N+1) + (NSAMP+1) clocks
// against running the contexts strictly one after another.
`timescale 1ns/1ps
module tb_n2v_core;
  import n2v_ref_pkg::*;

  localparam int DIM = 32, WALK = 80, WIN = 8, NNEG = 10;
  localparam int MAXR = WALK + NNEG;
  localparam int NSAMP = (WIN-1)*(NNEG+1);

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic [31:0] s_tdata, m_tdata;
  logic        s_tvalid, s_tready, m_tvalid, m_tready, m_tlast;

  n2v_core dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast)
  );

  int checks = 0, failures = 0;
  int n_pload = 0, n_pdump = 0, n_pkeep = 0, n_in_stall = 0, n_out_bp = 0, n_same_row = 0;
  int n_overlap = 0;

  // model state
  int beta [MAXR][DIM];
  int P    [DIM][DIM];
  int rw   [WALK];
  int ns   [NNEG];

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  task automatic axil_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    bready = 1; @(negedge clk); bready = 0;
  endtask

  task automatic axil_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata; rready = 1; @(negedge clk); rready = 0;
  endtask

  task automatic send_word(input int w, input bit gaps);
    if (gaps && ($urandom % 4 == 0)) begin
      s_tvalid = 0; n_in_stall++;
      repeat (1 + $urandom % 3) @(negedge clk);
    end
    s_tdata = w; s_tvalid = 1;
    do @(posedge clk); while (!s_tready);
    @(negedge clk); s_tvalid = 0;
  endtask

  function automatic longint dotp(int a [DIM], int b [DIM]);
    logic signed [79:0] acc = 0;
    for (int k = 0; k < DIM; k++) acc += 80'(longint'(a[k]) * longint'(b[k]));
    return longint'(acc >>> FRAC);
  endfunction

  // reference: one run of the training algorithm over a walk of len nodes
  task automatic ref_train(input int len, input int mu);
    int dP [DIM][DIM];
    int dB [MAXR][DIM];
    int h [DIM], v [DIM], u [DIM], g [DIM], prow [DIM], brow [DIM];
    int phhp [DIM][DIM];
    int e [NSAMP], srow [NSAMP];
    int s, inv, idx, prev;
    for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) dP[j][k] = 0;
    for (int r = 0; r < MAXR; r++) for (int k = 0; k < DIM; k++) dB[r][k] = 0;
    for (int c = 0; c + WIN <= len; c++) begin
      // stage 1
      for (int k = 0; k < DIM; k++) begin h[k] = rmul(mu, beta[rw[c]][k]); u[k] = 0; end
      for (int k = 0; k < DIM; k++) begin
        prow = P[k];
        v[k] = int'(dotp(prow, h));
        for (int j = 0; j < DIM; j++) u[j] = u[j] + rmul(h[k], P[k][j]);
      end
      // stage 2
      s = int'(dotp(h, v));
      for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) phhp[j][k] = rmul(v[j], u[k]);
      // stage 3
      idx = 0;
      for (int p = 0; p < WIN-1; p++)
        for (int itr = 0; itr <= NNEG; itr++) begin
          srow[idx] = (itr == 0) ? rw[c+1+p] : ns[itr-1];
          brow = beta[srow[idx]];
          e[idx] = ((itr == 0) ? ONE : 0) - int'(dotp(h, brow));
          idx++;
        end
      // stage 4
      inv = rrecip(s);
      for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) dP[j][k] = dP[j][k] + rmul(-inv, phhp[j][k]);
      for (int k = 0; k < DIM; k++) g[k] = rmul(inv, v[k]);
      prev = -1;
      for (int i = 0; i < NSAMP; i++) begin
        if (srow[i] == prev) n_same_row++;
        prev = srow[i];
        for (int k = 0; k < DIM; k++) dB[srow[i]][k] = dB[srow[i]][k] + rmul(e[i], g[k]);
      end
    end
    for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) P[j][k] = P[j][k] + dP[j][k];
    for (int r = 0; r < MAXR; r++) for (int k = 0; k < DIM; k++) beta[r][k] = beta[r][k] + dB[r][k];
  endtask

  task automatic run_job(input int len, input int nrows, input int mu, input bit load_p,
                         input bit dump_p, input bit gaps, input bit bp);
    logic [31:0] rd;
    int exp_words, got, exp_cycles, seq_cycles, nctx, ctxc;
    // host side: program and start
    axil_write(6'h04, {30'd0, dump_p, load_p});
    axil_write(6'h08, len);
    axil_write(6'h0C, nrows);
    axil_write(6'h10, mu);
    axil_write(6'h00, 1);
    // DMA side: stream the job in
    for (int i = 0; i < len; i++)  send_word(rw[i], gaps);
    for (int i = 0; i < NNEG; i++) send_word(ns[i], gaps);
    for (int r = 0; r < nrows; r++) for (int k = 0; k < DIM; k++) send_word(beta[r][k], gaps);
    if (load_p) begin
      n_pload++;
      for (int j = 0; j < DIM; j++) for (int k = 0; k < DIM; k++) send_word(P[j][k], gaps);
    end else n_pkeep++;
    ref_train(len, mu);
    // collect the result
    exp_words = nrows*DIM + (dump_p ? DIM*DIM : 0);
    got = 0;
    while (got < exp_words) begin
      m_tready = bp ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      if (m_tvalid && !m_tready) n_out_bp++;
      if (m_tvalid && m_tready) begin
        int expv;
        if (got < nrows*DIM) expv = beta[got / DIM][got % DIM];
        else                 expv = P[(got - nrows*DIM) / DIM][(got - nrows*DIM) % DIM];
        checks++;
        if (m_tdata !== expv) fail($sformatf("word %0d: got %h expected %h", got, m_tdata, expv));
        checks++;
        if (m_tlast !== (got == exp_words-1)) fail($sformatf("tlast wrong at word %0d", got));
        got++;
      end
      @(negedge clk);
    end
    m_tready = 0;
    if (dump_p) n_pdump++;
    // status and cycle count
    repeat (4) @(negedge clk);
    axil_read(6'h00, rd);
    checks++;
    if (rd[1:0] !== 2'b10) fail($sformatf("status %b after job", rd[1:0]));
    axil_read(6'h14, rd);
    nctx = len - WIN + 1;
    ctxc = 2 + (DIM+1) + 1 + DIM + (NSAMP+1) + 1
           + (((2*FRAC+2) > DIM+NSAMP) ? (2*FRAC+2) - DIM - NSAMP : 0);
    exp_cycles = ((MAXR > DIM) ? MAXR : DIM) + nctx*ctxc + (1 + (DIM+1) + (NSAMP+1))
               + (DIM+1) + (MAXR+1) + 2;
    checks++;
    if (rd !== exp_cycles) fail($sformatf("cycles %0d expected %0d", rd, exp_cycles));
    // clocks saved against a strictly sequential schedule, one stage 4 each
    seq_cycles = ((MAXR > DIM) ? MAXR : DIM) + nctx*(ctxc + 1 + (DIM+1) + (NSAMP+1))
               + (DIM+1) + (MAXR+1) + 2;
    if (int'(rd) < seq_cycles) n_overlap += (seq_cycles - int'(rd)) / (1 + (DIM+1) + (NSAMP+1));
    $display("job: walk %0d nodes, %0d contexts, %0d training clocks (%.1f us at 200 MHz)",
             len, nctx, rd, rd * 0.005);
  endtask

  function automatic int rnd_fx(int range);   // uniform in [-range, range)
    return int'($urandom % (2*range)) - range;
  endfunction

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nrows;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0;
    s_tvalid = 0; s_tdata = 0; m_tready = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // initial model: beta random in [-0.5, 0.5), P = 16*I plus a small symmetric part
    for (int r = 0; r < MAXR; r++) for (int k = 0; k < DIM; k++) beta[r][k] = rnd_fx(ONE/2);
    for (int j = 0; j < DIM; j++)
      for (int k = j; k < DIM; k++) begin
        P[j][k] = (j == k) ? 16*ONE : rnd_fx(ONE/8);
        P[k][j] = P[j][k];
      end

    // job 0: full-length walk over 60 local rows
    nrows = 60;
    for (int i = 0; i < WALK; i++) rw[i] = $urandom % nrows;
    for (int i = 0; i < NNEG; i++) ns[i] = $urandom % nrows;
    run_job(WALK, nrows, 655, 1, 1, 0, 0);

    // job 1: short walk, P kept, repeated samples, stalls and back-pressure
    nrows = 12;
    for (int i = 0; i < 20; i++) rw[i] = $urandom % nrows;
    for (int i = 0; i < NNEG; i++) ns[i] = (i < 3) ? 5 : $urandom % nrows;
    ns[NNEG-1] = 7; rw[2] = 5; rw[3] = 7;
    run_job(20, nrows, 3277, 0, 1, 1, 1);

    // job 2: full walk using every row, P kept, beta only
    nrows = MAXR;
    for (int i = 0; i < WALK; i++) rw[i] = $urandom % nrows;
    for (int i = 0; i < NNEG; i++) ns[i] = $urandom % nrows;
    run_job(WALK, nrows, 1311, 0, 0, 0, 1);

    $display("mechanisms: P load %0d, P dump %0d, P kept %0d, input stalls %0d, output back-pressure %0d, same-row updates %0d, overlapped contexts %0d",
             n_pload, n_pdump, n_pkeep, n_in_stall, n_out_bp, n_same_row, n_overlap);
    checks++; if (n_pload == 0)    fail("P load never happened");
    checks++; if (n_pdump == 0)    fail("P dump never happened");
    checks++; if (n_pkeep == 0)    fail("P kept between jobs never happened");
    checks++; if (n_in_stall == 0) fail("input stall never happened");
    checks++; if (n_out_bp == 0)   fail("output back-pressure never happened");
    checks++; if (n_same_row == 0) fail("back-to-back same-row update never happened");
    checks++; if (n_overlap == 0)  fail("stage 4 never overlapped the next context");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
