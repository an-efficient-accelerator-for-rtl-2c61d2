// maxpool -- MaxPool(K): keeps the K-D global feature phi and merges one
// point-wise local feature psi into it, B elements per cycle:
// phi_i <- max(phi_i, psi_i).
//
// `clear` sets every phi_i to zero (the start value of a feature-extraction
// run; since psi comes out of a ReLU it is never negative, so zero is the
// identity of the max). When the input channel holds a full bank (in_valid),
// the module walks its K/B groups, one per cycle, comparing as signed numbers,
// then releases the bank and pulses `point_done`; one point keeps `busy` high
// for K/B cycles and the release follows one cycle later (LATENCY = K/B + 1
// from start to release). phi is read out through the combinational port
// rd_addr/rd_data once the run is over.
//
// Function, unrolling and zero start follow the paper; the read-out port and
// the handshake are this design's choices.
module maxpool
  import pointnet_pkg::*;
#(
  parameter int W   = DATA_W,
  parameter int K   = 1024,
  parameter int B   = 2,
  localparam int NG  = K / B,
  localparam int GAW = (NG > 1) ? $clog2(NG) : 1,
  localparam int KAW = (K > 1) ? $clog2(K) : 1,
  localparam int LATENCY = NG + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  output logic [GAW-1:0]       in_addr,
  input  logic [B-1:0][W-1:0]  in_data,
  output logic                 in_release,
  output logic                 point_done,
  output logic                 busy,
  input  logic [KAW-1:0]       rd_addr,
  output logic [W-1:0]         rd_data
);

  logic [W-1:0]   phi [K];
  logic           run;
  logic [GAW-1:0] grp;
  logic           last;

  assign in_addr = grp;
  assign busy    = run;
  assign last    = run && int'(grp) == NG - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      grp        <= '0;
      in_release <= 1'b0;
      point_done <= 1'b0;
    end else begin
      in_release <= 1'b0;
      point_done <= 1'b0;
      if (!run) begin
        if (in_valid && !in_release && !clear) begin
          run <= 1'b1;
          grp <= '0;
        end
      end else if (last) begin
        run        <= 1'b0;
        in_release <= 1'b1;
        point_done <= 1'b1;
      end else begin
        grp <= grp + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int i = 0; i < K; i++) phi[i] <= '0;
    end else if (run) begin
      for (int b = 0; b < B; b++) begin
        if ($signed(in_data[b]) > $signed(phi[int'(grp) * B + b]))
          phi[int'(grp) * B + b] <= in_data[b];
      end
    end
  end

  assign rd_data = phi[rd_addr];

endmodule
