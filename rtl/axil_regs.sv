// axil_regs -- AXI4-Lite control registers of the PointNet core.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CTRL   write bit0 = 1: start a run (ignored while busy)
//               read  bit0 = busy, bit1 = done (set at the end of a run,
//                     cleared when CTRL is read), bit2 = idle
//   0x10 MODE   bit0: 0 = weight initialization, 1 = feature extraction
//   0x18 NPTS   number of points of a feature-extraction run
// Other addresses read as zero and ignore writes; every access answers OKAY.
//
// One transaction at a time per direction: a write is taken when address
// and data are both valid and no response is pending; a read when no read
// response is pending. Responses are held until accepted.
//
// The paper only says that the control registers sit behind an AXI4-Lite
// port; the map above follows the usual layout of high-level-synthesis cores
// and is this design's choice.
module axil_regs
  import pointnet_pkg::*;
#(
  parameter int AW = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [AW-1:0]  s_axi_awaddr,
  input  logic           s_axi_awvalid,
  output logic           s_axi_awready,
  input  logic [31:0]    s_axi_wdata,
  input  logic [3:0]     s_axi_wstrb,
  input  logic           s_axi_wvalid,
  output logic           s_axi_wready,
  output logic [1:0]     s_axi_bresp,
  output logic           s_axi_bvalid,
  input  logic           s_axi_bready,
  input  logic [AW-1:0]  s_axi_araddr,
  input  logic           s_axi_arvalid,
  output logic           s_axi_arready,
  output logic [31:0]    s_axi_rdata,
  output logic [1:0]     s_axi_rresp,
  output logic           s_axi_rvalid,
  input  logic           s_axi_rready,
  // to / from the core
  output logic           start,
  output mode_e          mode,
  output logic [31:0]    num_points,
  input  logic           busy,
  input  logic           done
);

  localparam logic [AW-1:0] A_CTRL = AW'(8'h00);
  localparam logic [AW-1:0] A_MODE = AW'(8'h10);
  localparam logic [AW-1:0] A_NPTS = AW'(8'h18);

  logic done_flag;
  logic wr_take, rd_take;

  assign wr_take       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = wr_take;
  assign s_axi_wready  = wr_take;
  assign s_axi_bresp   = 2'b00;
  assign rd_take       = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_arready = rd_take;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      start        <= 1'b0;
      mode         <= MODE_INIT;
      num_points   <= '0;
      done_flag    <= 1'b0;
    end else begin
      start <= 1'b0;
      if (done) done_flag <= 1'b1;
      // write channel
      if (wr_take) begin
        s_axi_bvalid <= 1'b1;
        unique case (s_axi_awaddr)
          A_CTRL: if (s_axi_wstrb[0] && s_axi_wdata[0] && !busy && !start) begin
            start     <= 1'b1;
            done_flag <= 1'b0;
          end
          A_MODE: if (s_axi_wstrb[0]) mode <= mode_e'(s_axi_wdata[0]);
          A_NPTS: for (int b = 0; b < 4; b++)
                    if (s_axi_wstrb[b]) num_points[8*b +: 8] <= s_axi_wdata[8*b +: 8];
          default: ;
        endcase
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
      // read channel
      if (rd_take) begin
        s_axi_rvalid <= 1'b1;
        unique case (s_axi_araddr)
          A_CTRL: begin
            s_axi_rdata <= {29'd0, !(busy || start), done_flag || done, busy || start};
            if (!done) done_flag <= 1'b0;
          end
          A_MODE:  s_axi_rdata <= {31'd0, mode};
          A_NPTS:  s_axi_rdata <= num_points;
          default: s_axi_rdata <= '0;
        endcase
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             (s_axi_bvalid && !s_axi_bready) |=> s_axi_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             (s_axi_rvalid && !s_axi_rready) |=> (s_axi_rvalid && $stable(s_axi_rdata)));

endmodule
