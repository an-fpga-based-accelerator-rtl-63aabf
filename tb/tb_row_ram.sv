// tb_row_ram -- checks the row buffer: write/read of random rows, the one
// clock read latency, old data on a read of the row being written, and
// both a power-of-two depth (32) and a non-power-of-two depth (90).
`timescale 1ns/1ps
module tb_row_ram;
  localparam int L = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we_a, we_b;
  logic [4:0] wa_a, ra_a;
  logic [6:0] wa_b, ra_b;
  logic signed [31:0] wd [L], rd_a [L], rd_b [L];
  int model_a [32][L], model_b [90][L];

  row_ram #(.DEPTH(32), .LANES(L)) dut_a (.clk, .we(we_a), .waddr(wa_a), .wdata(wd), .raddr(ra_a), .rdata(rd_a));
  row_ram #(.DEPTH(90), .LANES(L)) dut_b (.clk, .we(we_b), .waddr(wa_b), .wdata(wd), .raddr(ra_b), .rdata(rd_b));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input int got [L], input int exp_row [L], input string what);
    checks++;
    if (got != exp_row) begin
      failures++;
      if (failures < 10) $display("FAIL %s: lane0 got %h expected %h", what, got[0], exp_row[0]);
    end
  endtask

  initial begin
    int ra_prev_a, ra_prev_b;
    int exp_a [L], exp_b [L];
    we_a = 0; we_b = 0; wa_a = 0; wa_b = 0; ra_a = 0; ra_b = 0;
    // fill both memories
    for (int r = 0; r < 90; r++) begin
      @(negedge clk);
      for (int k = 0; k < L; k++) wd[k] = $urandom;
      we_a = (r < 32); wa_a = 5'(r); we_b = 1; wa_b = 7'(r);
      if (r < 32) for (int k = 0; k < L; k++) model_a[r][k] = wd[k];
      for (int k = 0; k < L; k++) model_b[r][k] = wd[k];
    end
    @(negedge clk); we_a = 0; we_b = 0;
    // random reads mixed with writes; data checked one clock after the address
    for (int t = 0; t < 400; t++) begin
      ra_a = 5'($urandom % 32); ra_b = 7'($urandom % 90);
      exp_a = model_a[ra_a]; exp_b = model_b[ra_b];
      we_a = $urandom % 2; we_b = $urandom % 2;
      wa_a = (t % 5 == 0) ? ra_a : 5'($urandom % 32);   // sometimes the row being read
      wa_b = (t % 5 == 0) ? ra_b : 7'($urandom % 90);
      for (int k = 0; k < L; k++) wd[k] = $urandom;
      @(negedge clk);
      cmp(rd_a, exp_a, "depth 32");
      cmp(rd_b, exp_b, "depth 90");
      if (we_a) for (int k = 0; k < L; k++) model_a[wa_a][k] = wd[k];
      if (we_b) for (int k = 0; k < L; k++) model_b[wa_b][k] = wd[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
