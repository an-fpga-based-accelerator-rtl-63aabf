// tb_axil_ctrl -- checks the AXI4-Lite register block: reset values, write
// and read back of every register, the start pulse (one clock, only when
// idle), the sticky done flag, the read-only cycle count, and held responses
// while bready/rready are low.
`timescale 1ns/1ps
module tb_axil_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic        start, load_p, dump_p, busy, done;
  logic [15:0] walk_len, num_rows;
  logic signed [31:0] mu;
  logic [31:0] cycles;
  int n_start = 0;

  axil_ctrl dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .start, .load_p, .dump_p, .walk_len, .num_rows, .mu, .busy, .done, .cycles);

  always @(posedge clk) if (start) n_start++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [31:0] got, input logic [31:0] exp_v, input string what);
    checks++;
    if (got !== exp_v) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp_v); end
  endtask

  task automatic wr(input logic [5:0] a, input logic [31:0] d, input int delay);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat (delay) begin @(negedge clk); chk(bvalid, 1, "bvalid held"); end
    while (!bvalid) @(negedge clk);
    bready = 1; @(negedge clk); bready = 0;
  endtask

  task automatic rd(input logic [5:0] a, output logic [31:0] d, input int delay);
    logic [31:0] first;
    @(negedge clk); araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    first = rdata;
    repeat (delay) begin @(negedge clk); chk(rvalid && rdata == first, 1, "read data held"); end
    d = rdata; rready = 1; @(negedge clk); rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0; wdata = 0;
    busy = 0; done = 0; cycles = 32'd12345;
    repeat (3) @(negedge clk); rst_n = 1;
    rd(6'h08, d, 0); chk(d, 80, "walk_len reset");
    rd(6'h00, d, 0); chk(d, 0, "status reset");
    wr(6'h04, 32'h3, 2);     chk({dump_p, load_p}, 2'b11, "flags");
    wr(6'h08, 32'd20, 0);    chk(walk_len, 20, "walk_len");
    wr(6'h0C, 32'd57, 0);    chk(num_rows, 57, "num_rows");
    wr(6'h10, 32'h0000_0ccd, 1); chk(mu, 32'h0ccd, "mu");
    rd(6'h04, d, 2); chk(d, 3, "flags read");
    rd(6'h08, d, 0); chk(d, 20, "walk_len read");
    rd(6'h0C, d, 0); chk(d, 57, "num_rows read");
    rd(6'h10, d, 3); chk(d, 32'h0ccd, "mu read");
    rd(6'h14, d, 0); chk(d, 12345, "cycles read");
    rd(6'h3C, d, 0); chk(d, 0, "unmapped read");
    // start: exactly one pulse
    wr(6'h00, 1, 0);
    chk(n_start, 1, "one start pulse");
    busy = 1;
    rd(6'h00, d, 0); chk(d, 1, "busy, not done");
    wr(6'h00, 1, 0);                            // ignored while busy
    chk(n_start, 1, "no start while busy");
    @(negedge clk); done = 1; @(negedge clk); done = 0; busy = 0;
    rd(6'h00, d, 0); chk(d, 2, "done sticky");
    rd(6'h00, d, 0); chk(d, 2, "done still set");
    wr(6'h00, 1, 0);
    chk(n_start, 2, "second start");
    rd(6'h00, d, 0); chk(d, 0, "done cleared by start");
    chk(bresp, 0, "bresp okay"); chk(rresp, 0, "rresp okay");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
