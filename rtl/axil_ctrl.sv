// axil_ctrl -- AXI4-Lite control and status registers of the training core.
//
// The host CPU configures and starts a job through this slave port.  The
// register map (see n2v_pkg) is this design's choice:
//   0x00 CTRL      write bit0 = 1 starts a job; read bit0 busy, bit1 done
//                  (done is sticky and cleared by the next start)
//   0x04 FLAGS     bit0 load P from the stream, bit1 send P back
//   0x08 WALK_LEN  nodes in the random walk
//   0x0C NUM_ROWS  beta rows that accompany the walk
//   0x10 MU        scale factor mu (fixed point, FX_FRAC fraction bits)
//   0x14 CYCLES    read only: clocks taken by the last training run
// A write is taken when address and data are both valid; one response is
// given per request, and responses are always OKAY.  Byte strobes are
// ignored (whole 32-bit registers are written).
// Interface: AXI4-Lite slave (6-bit address, 32-bit data) and the register
// outputs.  Timing: the write response and the read data come one clock
// after the request is accepted; start is a one-clock pulse.
module axil_ctrl
  import n2v_pkg::*;
(
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
  // registers
  output logic        start,
  output logic        load_p,
  output logic        dump_p,
  output logic [15:0] walk_len,
  output logic [15:0] num_rows,
  output fx_t         mu,
  input  logic        busy,
  input  logic        done,
  input  logic [31:0] cycles
);

  logic done_flag;
  logic wr_go, rd_go;

  assign wr_go          = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign rd_go          = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_go;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start         <= 1'b0;
      load_p        <= 1'b0;
      dump_p        <= 1'b0;
      walk_len      <= 16'd80;
      num_rows      <= 16'd1;
      mu            <= fx_t'(655);        // about 0.01
      done_flag     <= 1'b0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      start <= 1'b0;
      if (done) done_flag <= 1'b1;
      // write channel
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr)
          REG_CTRL:     if (s_axil_wdata[0] && !busy) begin start <= 1'b1; done_flag <= 1'b0; end
          REG_FLAGS:    begin load_p <= s_axil_wdata[0]; dump_p <= s_axil_wdata[1]; end
          REG_WALK_LEN: walk_len <= s_axil_wdata[15:0];
          REG_NUM_ROWS: num_rows <= s_axil_wdata[15:0];
          REG_MU:       mu <= fx_t'(s_axil_wdata);
          default: ;
        endcase
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      // read channel
      if (rd_go) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr)
          REG_CTRL:     s_axil_rdata <= {30'd0, done_flag, busy};
          REG_FLAGS:    s_axil_rdata <= {30'd0, dump_p, load_p};
          REG_WALK_LEN: s_axil_rdata <= {16'd0, walk_len};
          REG_NUM_ROWS: s_axil_rdata <= {16'd0, num_rows};
          REG_MU:       s_axil_rdata <= mu;
          REG_CYCLES:   s_axil_rdata <= cycles;
          default:      s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid)
    else $error("axil_ctrl: write response dropped");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)))
    else $error("axil_ctrl: read data dropped or changed");

endmodule
