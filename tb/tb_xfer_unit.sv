// tb_xfer_unit -- checks the job sequencer and stream interface against a
// simple model of the training engine's buffer port kept in the testbench.
// Each job streams indices and rows in (with input gaps), the model engine
// answers eng_start with eng_done a few clocks later and adds a known
// offset to every stored word, and the output stream (with back-pressure)
// must return the rows in order with tlast on the last word only.  Jobs with
// and without P load/dump are run.
`timescale 1ns/1ps
module tb_xfer_unit;
  import n2v_pkg::*;
  localparam int DIM = 4, NNEG = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, load_p, dump_p, busy, done;
  logic [15:0] walk_len, num_rows;
  logic [31:0] s_tdata, m_tdata;
  logic s_tvalid, s_tready, m_tvalid, m_tready, m_tlast;
  logic eng_start, eng_done, ext_we;
  buf_sel_e ext_wsel, ext_rsel;
  logic [15:0] ext_waddr, ext_raddr;
  fx_t ext_wrow [DIM], ext_rrow [DIM];

  xfer_unit #(.DIM(DIM), .NNEG(NNEG)) dut (
    .clk, .rst_n, .start, .load_p, .dump_p, .walk_len, .num_rows, .busy, .done,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast),
    .eng_start, .eng_done, .ext_we, .ext_wsel, .ext_waddr, .ext_wrow,
    .ext_rsel, .ext_raddr, .ext_rrow);

  // engine model
  int m_rw [64], m_ns [NNEG], m_beta [64][DIM], m_p [DIM][DIM];
  int n_eng = 0;
  always @(posedge clk) begin
    if (ext_we) begin
      unique case (ext_wsel)
        BUF_RW:   m_rw[ext_waddr] = ext_wrow[0];
        BUF_NS:   m_ns[ext_waddr] = ext_wrow[0];
        BUF_BETA: for (int k = 0; k < DIM; k++) m_beta[ext_waddr][k] = ext_wrow[k];
        BUF_P:    for (int k = 0; k < DIM; k++) m_p[ext_waddr][k] = ext_wrow[k];
      endcase
    end
    for (int k = 0; k < DIM; k++)
      ext_rrow[k] <= (ext_rsel == BUF_P) ? m_p[ext_raddr % DIM][k] + 1000 : m_beta[ext_raddr % 64][k] + 1000;
  end
  initial begin
    eng_done = 0;
    forever begin
      @(posedge clk);
      if (eng_start) begin
        n_eng++;
        repeat (7) @(posedge clk);
        eng_done <= 1; @(posedge clk); eng_done <= 0;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [31:0] got, input logic [31:0] exp_v, input string what);
    checks++;
    if (got !== exp_v) begin failures++; if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_v); end
  endtask

  task automatic send(input int w);
    if ($urandom % 3 == 0) begin s_tvalid = 0; repeat (1 + $urandom % 2) @(negedge clk); end
    s_tdata = w; s_tvalid = 1;
    do @(posedge clk); while (!s_tready);
    @(negedge clk); s_tvalid = 0;
  endtask

  task automatic job(input int len, input int nrows, input bit lp, input bit dp);
    int rw [64], ns [NNEG], beta [64][DIM], p [DIM][DIM];
    int words, got, eng_before;
    eng_before = n_eng;
    @(negedge clk);
    walk_len = 16'(len); num_rows = 16'(nrows); load_p = lp; dump_p = dp; start = 1;
    @(negedge clk); start = 0;
    chk(busy, 1, "busy after start");
    for (int i = 0; i < len; i++) begin rw[i] = $urandom % 64; send(rw[i]); end
    for (int i = 0; i < NNEG; i++) begin ns[i] = $urandom % 64; send(ns[i]); end
    for (int r = 0; r < nrows; r++) for (int k = 0; k < DIM; k++) begin beta[r][k] = $urandom; send(beta[r][k]); end
    if (lp) for (int r = 0; r < DIM; r++) for (int k = 0; k < DIM; k++) begin p[r][k] = $urandom; send(p[r][k]); end
    else    for (int r = 0; r < DIM; r++) for (int k = 0; k < DIM; k++) p[r][k] = m_p[r][k];
    for (int i = 0; i < len; i++)  chk(m_rw[i], rw[i], "walk index stored");
    for (int i = 0; i < NNEG; i++) chk(m_ns[i], ns[i], "negative index stored");
    for (int r = 0; r < nrows; r++) for (int k = 0; k < DIM; k++) chk(m_beta[r][k], beta[r][k], "beta stored");
    for (int r = 0; r < DIM; r++) for (int k = 0; k < DIM; k++) chk(m_p[r][k], p[r][k], "P stored");
    words = nrows*DIM + (dp ? DIM*DIM : 0);
    got = 0;
    while (got < words) begin
      m_tready = ($urandom % 3 != 0);
      @(posedge clk);
      if (m_tvalid && m_tready) begin
        int e;
        e = (got < nrows*DIM) ? beta[got/DIM][got%DIM] + 1000 : p[(got-nrows*DIM)/DIM][(got-nrows*DIM)%DIM] + 1000;
        chk(m_tdata, e, "output word");
        chk(m_tlast, got == words-1, "tlast");
        got++;
      end
      @(negedge clk);
    end
    m_tready = 0;
    chk(n_eng - eng_before, 1, "engine started once");
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(m_tvalid, 0, "no extra output");
  endtask

  initial begin
    start = 0; load_p = 0; dump_p = 0; walk_len = 0; num_rows = 0;
    s_tvalid = 0; s_tdata = 0; m_tready = 0;
    for (int r = 0; r < DIM; r++) for (int k = 0; k < DIM; k++) m_p[r][k] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    job(10, 5, 1, 1);
    job(6, 3, 0, 0);
    job(12, 1, 0, 1);
    job(5, 7, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
