// pointnet_core -- PointNet feature-extraction core (the accelerator IP).
//
// Computes the 1024-D global feature phi(P) of a point cloud P: every point
// p = (x, y, z) goes through five MLP layers, each a fully-connected layer
// followed by batch normalization and ReLU (3 -> 64 -> 64 -> 64 -> 128 ->
// 1024), and the resulting local feature psi(p) is merged into phi by an
// element-wise maximum. Only one local feature per pipeline stage is ever
// stored, so the on-chip memory does not grow with the number of points.
//
// Structure: the eleven modules FC1, BN1, ..., FC5, BN5, MaxPool form a
// pipeline across points, joined by ping-pong channels (vec_buf). While FC5
// works on point n, FC4 can work on point n+1, and so on; the slowest module,
// FC5 (FC(128,1024) with all 128 inputs multiplied per cycle, about 1030
// cycles), sets the steady-state rate of one point per FC5 latency. Unrolling
// factors: FC 1/16/16/32/128, BN-ReLU 1/1/1/1/2, MaxPool 2 (pointnet_pkg).
//
// Interfaces (plain AXI signals, one clock, active-low reset):
//   s_axi_ctrl_*  AXI4-Lite control registers (see axil_regs)
//   s_axis_*      32-bit AXI4-Stream input: parameters or point coordinates
//   m_axis_*      32-bit AXI4-Stream output: acknowledgement or phi
// The run protocol is described in stream_ctrl. The outside DMA engine, the
// interconnect and the host are not part of this module.
//
// The layer structure, the module kinds and their unrolling factors, the
// inter-module pipelining, the two modes and the AXI4-Lite/AXI4-Stream
// interfaces follow the paper. The channels between modules, the register map
// and the stream layout are this design's choices.
module pointnet_core
  import pointnet_pkg::*;
#(
  parameter int W    = DATA_W,
  parameter int FRAC = FRAC_W
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite control
  input  logic [5:0]   s_axi_ctrl_awaddr,
  input  logic         s_axi_ctrl_awvalid,
  output logic         s_axi_ctrl_awready,
  input  logic [31:0]  s_axi_ctrl_wdata,
  input  logic [3:0]   s_axi_ctrl_wstrb,
  input  logic         s_axi_ctrl_wvalid,
  output logic         s_axi_ctrl_wready,
  output logic [1:0]   s_axi_ctrl_bresp,
  output logic         s_axi_ctrl_bvalid,
  input  logic         s_axi_ctrl_bready,
  input  logic [5:0]   s_axi_ctrl_araddr,
  input  logic         s_axi_ctrl_arvalid,
  output logic         s_axi_ctrl_arready,
  output logic [31:0]  s_axi_ctrl_rdata,
  output logic [1:0]   s_axi_ctrl_rresp,
  output logic         s_axi_ctrl_rvalid,
  input  logic         s_axi_ctrl_rready,
  // AXI4-Stream in
  input  logic [31:0]  s_axis_tdata,
  input  logic         s_axis_tvalid,
  output logic         s_axis_tready,
  input  logic         s_axis_tlast,
  // AXI4-Stream out
  output logic [31:0]  m_axis_tdata,
  output logic         m_axis_tvalid,
  input  logic         m_axis_tready,
  output logic         m_axis_tlast
);

  param_wr_t   pw;
  logic        start, busy, done;
  mode_e       mode;
  logic [31:0] num_points;
  logic [4:0]  fc_busy, bn_busy;
  logic        mp_busy;

  axil_regs #(.AW(6)) u_regs (
    .clk, .rst_n,
    .s_axi_awaddr(s_axi_ctrl_awaddr), .s_axi_awvalid(s_axi_ctrl_awvalid), .s_axi_awready(s_axi_ctrl_awready),
    .s_axi_wdata(s_axi_ctrl_wdata), .s_axi_wstrb(s_axi_ctrl_wstrb), .s_axi_wvalid(s_axi_ctrl_wvalid),
    .s_axi_wready(s_axi_ctrl_wready), .s_axi_bresp(s_axi_ctrl_bresp), .s_axi_bvalid(s_axi_ctrl_bvalid),
    .s_axi_bready(s_axi_ctrl_bready), .s_axi_araddr(s_axi_ctrl_araddr), .s_axi_arvalid(s_axi_ctrl_arvalid),
    .s_axi_arready(s_axi_ctrl_arready), .s_axi_rdata(s_axi_ctrl_rdata), .s_axi_rresp(s_axi_ctrl_rresp),
    .s_axi_rvalid(s_axi_ctrl_rvalid), .s_axi_rready(s_axi_ctrl_rready),
    .start, .mode, .num_points, .busy, .done
  );

  // ---------------------------------------------------------------- input channel
  logic              pt_wr_ready, pt_we, pt_commit, pt_rd_valid, pt_release;
  logic [1:0]        pt_waddr;
  logic [W-1:0]      pt_wdata;
  logic [1:0]        pt_raddr;
  logic [0:0][W-1:0] pt_rdata;

  logic                 mp_clear, mp_point_done;
  logic [$clog2(D5)-1:0] mp_rd_addr;
  logic [W-1:0]         mp_rd_data;

  stream_ctrl #(.W(W), .KF(D5)) u_ctrl (
    .clk, .rst_n,
    .start, .mode, .num_points, .busy, .done,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .pw,
    .pt_wr_ready, .pt_wr_en(pt_we), .pt_wr_addr(pt_waddr), .pt_wr_data(pt_wdata), .pt_wr_commit(pt_commit),
    .mp_clear, .mp_point_done, .mp_rd_addr, .mp_rd_data
  );

  vec_buf #(.W(W), .DEPTH(D0), .WL(1), .RL(B_FC1)) u_ch_pt (
    .clk, .rst_n,
    .wr_ready(pt_wr_ready), .wr_en(pt_we), .wr_addr(pt_waddr), .wr_data(pt_wdata), .wr_commit(pt_commit),
    .rd_valid(pt_rd_valid), .rd_addr(pt_raddr), .rd_data(pt_rdata), .rd_release(pt_release)
  );

  // ---------------------------------------------------------------- MLP1
  // FC1(D0, D1) reads channel pt, writes channel f1
  logic                        f1_wr_ready, f1_we, f1_commit, f1_rd_valid, f1_release;
  logic [$clog2(D1)-1:0]      f1_waddr;
  logic [0:0][W-1:0]           f1_wdata;
  logic [(D1/B_BN1 > 1 ? $clog2(D1/B_BN1) : 1)-1:0] f1_raddr;
  logic [B_BN1-1:0][W-1:0]      f1_rdata;

  fc_layer #(.W(W), .FRAC(FRAC), .K(D0), .L(D1), .B(B_FC1), .TGT(0)) u_fc1 (
    .clk, .rst_n, .pw,
    .in_valid(pt_rd_valid), .in_addr(pt_raddr), .in_data(pt_rdata), .in_release(pt_release),
    .out_ready(f1_wr_ready), .out_we(f1_we), .out_addr(f1_waddr), .out_data(f1_wdata),
    .out_commit(f1_commit), .busy(fc_busy[0])
  );

  vec_buf #(.W(W), .DEPTH(D1), .WL(1), .RL(B_BN1)) u_ch_f1 (
    .clk, .rst_n,
    .wr_ready(f1_wr_ready), .wr_en(f1_we), .wr_addr(f1_waddr), .wr_data(f1_wdata), .wr_commit(f1_commit),
    .rd_valid(f1_rd_valid), .rd_addr(f1_raddr), .rd_data(f1_rdata), .rd_release(f1_release)
  );

  // BN-ReLU(D1) reads channel f1, writes channel b1
  logic                        b1_wr_ready, b1_we, b1_commit, b1_rd_valid, b1_release;
  logic [(D1/B_BN1 > 1 ? $clog2(D1/B_BN1) : 1)-1:0] b1_waddr;
  logic [B_BN1-1:0][W-1:0]      b1_wdata;
  logic [(D1/B_FC2 > 1 ? $clog2(D1/B_FC2) : 1)-1:0] b1_raddr;
  logic [B_FC2-1:0][W-1:0] b1_rdata;

  bn_relu #(.W(W), .FRAC(FRAC), .K(D1), .B(B_BN1), .TGT(1)) u_bn1 (
    .clk, .rst_n, .pw,
    .in_valid(f1_rd_valid), .in_addr(f1_raddr), .in_data(f1_rdata), .in_release(f1_release),
    .out_ready(b1_wr_ready), .out_we(b1_we), .out_addr(b1_waddr), .out_data(b1_wdata),
    .out_commit(b1_commit), .busy(bn_busy[0])
  );

  vec_buf #(.W(W), .DEPTH(D1), .WL(B_BN1), .RL(B_FC2)) u_ch_b1 (
    .clk, .rst_n,
    .wr_ready(b1_wr_ready), .wr_en(b1_we), .wr_addr(b1_waddr), .wr_data(b1_wdata), .wr_commit(b1_commit),
    .rd_valid(b1_rd_valid), .rd_addr(b1_raddr), .rd_data(b1_rdata), .rd_release(b1_release)
  );

  // ---------------------------------------------------------------- MLP2
  // FC2(D1, D2) reads channel b1, writes channel f2
  logic                        f2_wr_ready, f2_we, f2_commit, f2_rd_valid, f2_release;
  logic [$clog2(D2)-1:0]      f2_waddr;
  logic [0:0][W-1:0]           f2_wdata;
  logic [(D2/B_BN2 > 1 ? $clog2(D2/B_BN2) : 1)-1:0] f2_raddr;
  logic [B_BN2-1:0][W-1:0]      f2_rdata;

  fc_layer #(.W(W), .FRAC(FRAC), .K(D1), .L(D2), .B(B_FC2), .TGT(2)) u_fc2 (
    .clk, .rst_n, .pw,
    .in_valid(b1_rd_valid), .in_addr(b1_raddr), .in_data(b1_rdata), .in_release(b1_release),
    .out_ready(f2_wr_ready), .out_we(f2_we), .out_addr(f2_waddr), .out_data(f2_wdata),
    .out_commit(f2_commit), .busy(fc_busy[1])
  );

  vec_buf #(.W(W), .DEPTH(D2), .WL(1), .RL(B_BN2)) u_ch_f2 (
    .clk, .rst_n,
    .wr_ready(f2_wr_ready), .wr_en(f2_we), .wr_addr(f2_waddr), .wr_data(f2_wdata), .wr_commit(f2_commit),
    .rd_valid(f2_rd_valid), .rd_addr(f2_raddr), .rd_data(f2_rdata), .rd_release(f2_release)
  );

  // BN-ReLU(D2) reads channel f2, writes channel b2
  logic                        b2_wr_ready, b2_we, b2_commit, b2_rd_valid, b2_release;
  logic [(D2/B_BN2 > 1 ? $clog2(D2/B_BN2) : 1)-1:0] b2_waddr;
  logic [B_BN2-1:0][W-1:0]      b2_wdata;
  logic [(D2/B_FC3 > 1 ? $clog2(D2/B_FC3) : 1)-1:0] b2_raddr;
  logic [B_FC3-1:0][W-1:0] b2_rdata;

  bn_relu #(.W(W), .FRAC(FRAC), .K(D2), .B(B_BN2), .TGT(3)) u_bn2 (
    .clk, .rst_n, .pw,
    .in_valid(f2_rd_valid), .in_addr(f2_raddr), .in_data(f2_rdata), .in_release(f2_release),
    .out_ready(b2_wr_ready), .out_we(b2_we), .out_addr(b2_waddr), .out_data(b2_wdata),
    .out_commit(b2_commit), .busy(bn_busy[1])
  );

  vec_buf #(.W(W), .DEPTH(D2), .WL(B_BN2), .RL(B_FC3)) u_ch_b2 (
    .clk, .rst_n,
    .wr_ready(b2_wr_ready), .wr_en(b2_we), .wr_addr(b2_waddr), .wr_data(b2_wdata), .wr_commit(b2_commit),
    .rd_valid(b2_rd_valid), .rd_addr(b2_raddr), .rd_data(b2_rdata), .rd_release(b2_release)
  );

  // ---------------------------------------------------------------- MLP3
  // FC3(D2, D3) reads channel b2, writes channel f3
  logic                        f3_wr_ready, f3_we, f3_commit, f3_rd_valid, f3_release;
  logic [$clog2(D3)-1:0]      f3_waddr;
  logic [0:0][W-1:0]           f3_wdata;
  logic [(D3/B_BN3 > 1 ? $clog2(D3/B_BN3) : 1)-1:0] f3_raddr;
  logic [B_BN3-1:0][W-1:0]      f3_rdata;

  fc_layer #(.W(W), .FRAC(FRAC), .K(D2), .L(D3), .B(B_FC3), .TGT(4)) u_fc3 (
    .clk, .rst_n, .pw,
    .in_valid(b2_rd_valid), .in_addr(b2_raddr), .in_data(b2_rdata), .in_release(b2_release),
    .out_ready(f3_wr_ready), .out_we(f3_we), .out_addr(f3_waddr), .out_data(f3_wdata),
    .out_commit(f3_commit), .busy(fc_busy[2])
  );

  vec_buf #(.W(W), .DEPTH(D3), .WL(1), .RL(B_BN3)) u_ch_f3 (
    .clk, .rst_n,
    .wr_ready(f3_wr_ready), .wr_en(f3_we), .wr_addr(f3_waddr), .wr_data(f3_wdata), .wr_commit(f3_commit),
    .rd_valid(f3_rd_valid), .rd_addr(f3_raddr), .rd_data(f3_rdata), .rd_release(f3_release)
  );

  // BN-ReLU(D3) reads channel f3, writes channel b3
  logic                        b3_wr_ready, b3_we, b3_commit, b3_rd_valid, b3_release;
  logic [(D3/B_BN3 > 1 ? $clog2(D3/B_BN3) : 1)-1:0] b3_waddr;
  logic [B_BN3-1:0][W-1:0]      b3_wdata;
  logic [(D3/B_FC4 > 1 ? $clog2(D3/B_FC4) : 1)-1:0] b3_raddr;
  logic [B_FC4-1:0][W-1:0] b3_rdata;

  bn_relu #(.W(W), .FRAC(FRAC), .K(D3), .B(B_BN3), .TGT(5)) u_bn3 (
    .clk, .rst_n, .pw,
    .in_valid(f3_rd_valid), .in_addr(f3_raddr), .in_data(f3_rdata), .in_release(f3_release),
    .out_ready(b3_wr_ready), .out_we(b3_we), .out_addr(b3_waddr), .out_data(b3_wdata),
    .out_commit(b3_commit), .busy(bn_busy[2])
  );

  vec_buf #(.W(W), .DEPTH(D3), .WL(B_BN3), .RL(B_FC4)) u_ch_b3 (
    .clk, .rst_n,
    .wr_ready(b3_wr_ready), .wr_en(b3_we), .wr_addr(b3_waddr), .wr_data(b3_wdata), .wr_commit(b3_commit),
    .rd_valid(b3_rd_valid), .rd_addr(b3_raddr), .rd_data(b3_rdata), .rd_release(b3_release)
  );

  // ---------------------------------------------------------------- MLP4
  // FC4(D3, D4) reads channel b3, writes channel f4
  logic                        f4_wr_ready, f4_we, f4_commit, f4_rd_valid, f4_release;
  logic [$clog2(D4)-1:0]      f4_waddr;
  logic [0:0][W-1:0]           f4_wdata;
  logic [(D4/B_BN4 > 1 ? $clog2(D4/B_BN4) : 1)-1:0] f4_raddr;
  logic [B_BN4-1:0][W-1:0]      f4_rdata;

  fc_layer #(.W(W), .FRAC(FRAC), .K(D3), .L(D4), .B(B_FC4), .TGT(6)) u_fc4 (
    .clk, .rst_n, .pw,
    .in_valid(b3_rd_valid), .in_addr(b3_raddr), .in_data(b3_rdata), .in_release(b3_release),
    .out_ready(f4_wr_ready), .out_we(f4_we), .out_addr(f4_waddr), .out_data(f4_wdata),
    .out_commit(f4_commit), .busy(fc_busy[3])
  );

  vec_buf #(.W(W), .DEPTH(D4), .WL(1), .RL(B_BN4)) u_ch_f4 (
    .clk, .rst_n,
    .wr_ready(f4_wr_ready), .wr_en(f4_we), .wr_addr(f4_waddr), .wr_data(f4_wdata), .wr_commit(f4_commit),
    .rd_valid(f4_rd_valid), .rd_addr(f4_raddr), .rd_data(f4_rdata), .rd_release(f4_release)
  );

  // BN-ReLU(D4) reads channel f4, writes channel b4
  logic                        b4_wr_ready, b4_we, b4_commit, b4_rd_valid, b4_release;
  logic [(D4/B_BN4 > 1 ? $clog2(D4/B_BN4) : 1)-1:0] b4_waddr;
  logic [B_BN4-1:0][W-1:0]      b4_wdata;
  logic [(D4/B_FC5 > 1 ? $clog2(D4/B_FC5) : 1)-1:0] b4_raddr;
  logic [B_FC5-1:0][W-1:0] b4_rdata;

  bn_relu #(.W(W), .FRAC(FRAC), .K(D4), .B(B_BN4), .TGT(7)) u_bn4 (
    .clk, .rst_n, .pw,
    .in_valid(f4_rd_valid), .in_addr(f4_raddr), .in_data(f4_rdata), .in_release(f4_release),
    .out_ready(b4_wr_ready), .out_we(b4_we), .out_addr(b4_waddr), .out_data(b4_wdata),
    .out_commit(b4_commit), .busy(bn_busy[3])
  );

  vec_buf #(.W(W), .DEPTH(D4), .WL(B_BN4), .RL(B_FC5)) u_ch_b4 (
    .clk, .rst_n,
    .wr_ready(b4_wr_ready), .wr_en(b4_we), .wr_addr(b4_waddr), .wr_data(b4_wdata), .wr_commit(b4_commit),
    .rd_valid(b4_rd_valid), .rd_addr(b4_raddr), .rd_data(b4_rdata), .rd_release(b4_release)
  );

  // ---------------------------------------------------------------- MLP5
  // FC5(D4, D5) reads channel b4, writes channel f5
  logic                        f5_wr_ready, f5_we, f5_commit, f5_rd_valid, f5_release;
  logic [$clog2(D5)-1:0]      f5_waddr;
  logic [0:0][W-1:0]           f5_wdata;
  logic [(D5/B_BN5 > 1 ? $clog2(D5/B_BN5) : 1)-1:0] f5_raddr;
  logic [B_BN5-1:0][W-1:0]      f5_rdata;

  fc_layer #(.W(W), .FRAC(FRAC), .K(D4), .L(D5), .B(B_FC5), .TGT(8)) u_fc5 (
    .clk, .rst_n, .pw,
    .in_valid(b4_rd_valid), .in_addr(b4_raddr), .in_data(b4_rdata), .in_release(b4_release),
    .out_ready(f5_wr_ready), .out_we(f5_we), .out_addr(f5_waddr), .out_data(f5_wdata),
    .out_commit(f5_commit), .busy(fc_busy[4])
  );

  vec_buf #(.W(W), .DEPTH(D5), .WL(1), .RL(B_BN5)) u_ch_f5 (
    .clk, .rst_n,
    .wr_ready(f5_wr_ready), .wr_en(f5_we), .wr_addr(f5_waddr), .wr_data(f5_wdata), .wr_commit(f5_commit),
    .rd_valid(f5_rd_valid), .rd_addr(f5_raddr), .rd_data(f5_rdata), .rd_release(f5_release)
  );

  // BN-ReLU(D5) reads channel f5, writes channel b5
  logic                        b5_wr_ready, b5_we, b5_commit, b5_rd_valid, b5_release;
  logic [(D5/B_BN5 > 1 ? $clog2(D5/B_BN5) : 1)-1:0] b5_waddr;
  logic [B_BN5-1:0][W-1:0]      b5_wdata;
  logic [(D5/B_MAX > 1 ? $clog2(D5/B_MAX) : 1)-1:0] b5_raddr;
  logic [B_MAX-1:0][W-1:0] b5_rdata;

  bn_relu #(.W(W), .FRAC(FRAC), .K(D5), .B(B_BN5), .TGT(9)) u_bn5 (
    .clk, .rst_n, .pw,
    .in_valid(f5_rd_valid), .in_addr(f5_raddr), .in_data(f5_rdata), .in_release(f5_release),
    .out_ready(b5_wr_ready), .out_we(b5_we), .out_addr(b5_waddr), .out_data(b5_wdata),
    .out_commit(b5_commit), .busy(bn_busy[4])
  );

  vec_buf #(.W(W), .DEPTH(D5), .WL(B_BN5), .RL(B_MAX)) u_ch_b5 (
    .clk, .rst_n,
    .wr_ready(b5_wr_ready), .wr_en(b5_we), .wr_addr(b5_waddr), .wr_data(b5_wdata), .wr_commit(b5_commit),
    .rd_valid(b5_rd_valid), .rd_addr(b5_raddr), .rd_data(b5_rdata), .rd_release(b5_release)
  );

  // ---------------------------------------------------------------- MaxPool
  maxpool #(.W(W), .K(D5), .B(B_MAX)) u_maxpool (
    .clk, .rst_n, .clear(mp_clear),
    .in_valid(b5_rd_valid), .in_addr(b5_raddr), .in_data(b5_rdata), .in_release(b5_release),
    .point_done(mp_point_done), .busy(mp_busy),
    .rd_addr(mp_rd_addr), .rd_data(mp_rd_data)
  );

endmodule
