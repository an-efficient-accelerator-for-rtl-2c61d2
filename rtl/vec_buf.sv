// vec_buf -- ping-pong vector channel between two modules of the PointNet
// pipeline.
//
// The channel holds two banks of DEPTH words. The producer fills one bank
// (WL words per write, at group address wr_addr, i.e. elements
// wr_addr*WL .. wr_addr*WL+WL-1) and marks it full with wr_commit; the
// consumer reads the other bank (RL words per cycle, combinational, at group
// rd_addr) and frees it with rd_release. Banks are used strictly in turn, so
// vectors leave in the order they arrived. With two banks the producer can
// work on point n+1 while the consumer works on point n, which is what lets
// the layer modules overlap across points.
//
// wr_ready is high while the producer's bank is free; rd_valid while the
// consumer's bank is full. A commit and a release in the same cycle are both
// honoured. The RL-wide read port stands for the array partitioning that lets
// an FC module read B inputs per cycle.
//
// The module-to-module pipeline follows the paper; the double-bank channel,
// its handshake and the combinational read are choices of this design.
module vec_buf #(
  parameter int W     = 32,
  parameter int DEPTH = 64,
  parameter int WL    = 1,
  parameter int RL    = 1,
  localparam int WG   = (DEPTH + WL - 1) / WL,
  localparam int RG   = (DEPTH + RL - 1) / RL,
  localparam int WAW  = (WG > 1) ? $clog2(WG) : 1,
  localparam int RAW  = (RG > 1) ? $clog2(RG) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // producer side
  output logic                  wr_ready,
  input  logic                  wr_en,
  input  logic [WAW-1:0]        wr_addr,
  input  logic [WL-1:0][W-1:0]  wr_data,
  input  logic                  wr_commit,
  // consumer side
  output logic                  rd_valid,
  input  logic [RAW-1:0]        rd_addr,
  output logic [RL-1:0][W-1:0]  rd_data,
  input  logic                  rd_release
);

  logic [W-1:0] mem [2][DEPTH];
  logic [1:0]   full;
  logic         wsel, rsel;

  assign wr_ready = !full[wsel];
  assign rd_valid = full[rsel];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < WL; l++) begin
        if (int'(wr_addr) * WL + l < DEPTH)
          mem[wsel][int'(wr_addr) * WL + l] <= wr_data[l];
      end
    end
  end

  always_comb begin
    for (int l = 0; l < RL; l++) begin
      if (int'(rd_addr) * RL + l < DEPTH)
        rd_data[l] = mem[rsel][int'(rd_addr) * RL + l];
      else
        rd_data[l] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wsel <= 1'b0;
      rsel <= 1'b0;
    end else begin
      if (wr_commit) begin
        full[wsel] <= 1'b1;
        wsel       <= ~wsel;
      end
      if (rd_release) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  // A producer commits only into a free bank; a consumer releases only a full one.
  a_commit_free: assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> wr_ready);
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_valid);
  a_write_free: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> wr_ready);

endmodule
