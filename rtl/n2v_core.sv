// n2v_core -- sequential node2vec training core (the "Core" of the board
// design), top level of this RTL.
//
// The core trains a graph embedding with an OS-ELM style single-pass update
// of a skip-gram model whose input weights are tied to its output weights
// (beta scaled by mu).  A host CPU performs the random walks and draws the
// negative samples; for every walk a DMA engine streams the walk, the
// negative samples and the beta rows of the nodes involved into the core,
// the core trains on all contexts of the walk and streams the updated rows
// back.  The N x N matrix P of the OS-ELM update stays inside the core
// between walks; it is loaded and read back through the same stream when the
// FLAGS register asks for it.
//
// Blocks: axil_ctrl (AXI4-Lite registers), xfer_unit (stream in/out and job
// sequencing) and train_engine (stages 1-4 of the training algorithm, with
// stage 4 of one context overlapped with stages 1-3 of the next; it holds
// the buffers, the dot-product unit, two vector multiply-accumulate units
// and the reciprocal unit).  The AXI4 master port shown on the core in the board
// diagram is not present: its use is not described.
// Interface: AXI4-Lite slave for control, AXI4-Stream slave for data in,
// AXI4-Stream master for data out, all on one clock (200 MHz on the
// original board) with an active-low asynchronous reset.
// Timing: see xfer_unit (transfer) and train_engine (training clocks).
module n2v_core
  import n2v_pkg::*;
#(
  parameter int unsigned DIM      = 32,   // embedding dimensions N
  parameter int unsigned MAX_WALK = 80,   // walk length l
  parameter int unsigned WIN      = 8,    // window size w
  parameter int unsigned NNEG     = 10    // negative samples ns
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [5:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [5:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4-Stream slave
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  // AXI4-Stream master
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast
);

  logic        start, load_p, dump_p, job_busy, job_done;
  logic [15:0] walk_len, num_rows;
  fx_t         mu;
  logic [31:0] cycles;
  logic        eng_start, eng_busy, eng_done;
  logic        ext_we;
  buf_sel_e    ext_wsel, ext_rsel;
  logic [15:0] ext_waddr, ext_raddr;
  fx_t         ext_wrow [DIM];
  fx_t         ext_rrow [DIM];

  axil_ctrl u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .start, .load_p, .dump_p, .walk_len, .num_rows, .mu,
    .busy(job_busy), .done(job_done), .cycles
  );

  xfer_unit #(.DIM(DIM), .NNEG(NNEG)) u_xfer (
    .clk, .rst_n,
    .start, .load_p, .dump_p, .walk_len, .num_rows,
    .busy(job_busy), .done(job_done),
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tready,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .eng_start, .eng_done,
    .ext_we, .ext_wsel, .ext_waddr, .ext_wrow,
    .ext_rsel, .ext_raddr, .ext_rrow
  );

  train_engine #(.DIM(DIM), .MAX_WALK(MAX_WALK), .WIN(WIN), .NNEG(NNEG)) u_engine (
    .clk, .rst_n,
    .start(eng_start), .walk_len, .mu,
    .busy(eng_busy), .done(eng_done), .cycles,
    .ext_we, .ext_wsel, .ext_waddr, .ext_wrow,
    .ext_rsel, .ext_raddr, .ext_rrow
  );

  // The engine only trains inside a job that the register block reports busy.
  assert property (@(posedge clk) disable iff (!rst_n) eng_busy |-> job_busy)
    else $error("n2v_core: engine busy outside a job");

endmodule
