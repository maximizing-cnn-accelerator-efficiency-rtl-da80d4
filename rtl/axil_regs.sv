// axil_regs: AXI4-Lite slave through which a CLP is started.
//
// Register map (byte offsets, 32-bit registers):
//   0x00 CTRL   write bit0=1 to start (ignored while busy); read bit0 busy, bit1 done,
//               bit2 idle. done stays set from the end of a layer until the next start.
//   0x10 DESC   byte address of the 32-byte layer descriptor
//   0x18 IBASE  byte address of the input maps I[N][(R-1)S+K][(C-1)S+K]
//   0x20 WBASE  byte address of the weights W[M][N][K][K]
//   0x28 BBASE  byte address of the biases bias[M]
//   0x30 OBASE  byte address of the output maps O[M][R][C]
// A write needs AW and W together; both are accepted in the same cycle and answered with
// an OKAY response the cycle after. A read is accepted when no read response is pending and
// answered the cycle after. Byte strobes are ignored (full-word writes).
// The source says only that each CLP has an AXI4-Lite slave to trigger computation; the
// register map and the base-address registers are this design's.
module axil_regs
  import clp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to the CLP
  output logic        start,
  output job_t        job,
  input  logic        done,
  input  logic        idle
);

  logic wr_fire;
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  assign start = wr_fire && (s_awaddr == REG_CTRL) && s_wdata[0] && idle;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      job      <= '0;
    end else begin
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        case (s_awaddr)
          REG_DESC:  job.desc  <= s_wdata;
          REG_IBASE: job.ibase <= s_wdata;
          REG_WBASE: job.wbase <= s_wdata;
          REG_BBASE: job.bbase <= s_wdata;
          REG_OBASE: job.obase <= s_wdata;
          default: ;
        endcase
      end else if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        case (s_araddr)
          REG_CTRL:  s_rdata <= {29'd0, idle, done, !idle};
          REG_DESC:  s_rdata <= job.desc;
          REG_IBASE: s_rdata <= job.ibase;
          REG_WBASE: s_rdata <= job.wbase;
          REG_BBASE: s_rdata <= job.bbase;
          REG_OBASE: s_rdata <= job.obase;
          default:   s_rdata <= '0;
        endcase
      end else if (s_rvalid && s_rready) s_rvalid <= 1'b0;
    end

  // AXI4-Lite: a response stays valid until taken
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid);

endmodule
