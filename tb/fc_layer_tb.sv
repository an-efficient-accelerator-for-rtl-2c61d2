// fc_layer_tb -- self-checking test of fc_layer at K=8, L=6, B=4.
//
// Loads random weights and biases over the parameter-write bus (plus a few
// words for another target, which must be ignored), then runs four input
// vectors through the layer. One row has large weights so the output
// saturates. Each output vector is compared with pn_ref_pkg::fc_ref, the
// number of writes is checked, and the cycles from start to commit must equal
// L*K/B + log2(B) + 3. The output channel is held not-ready for a while
// before one vector to check that the layer waits.
module fc_layer_tb;
  import pointnet_pkg::*;
  import pn_ref_pkg::*;

  localparam int K = 8, L = 6, B = 4, NCH = K / B;
  localparam int EXP_LAT = L * NCH + 2 + 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t pw;
  logic in_valid, in_release, out_ready, out_we, out_commit, busy;
  logic [0:0] in_addr;
  logic [B-1:0][31:0] in_data;
  logic [2:0] out_addr;
  logic [0:0][31:0] out_data;

  fc_layer #(.K(K), .L(L), .B(B), .TGT(4)) dut (.*);

  int checks = 0, failures = 0;
  vec_t x, wgt, bias, yref;
  int yout [L];
  int nwrites, busy_cycles;
  always @(posedge clk) if (busy) busy_cycles <= busy_cycles + 1;

  int xa [K];
  always_comb
    for (int b = 0; b < B; b++) in_data[b] = xa[int'(in_addr) * B + b];

  always @(posedge clk) if (out_we) begin
    yout[out_addr] <= out_data[0];
    nwrites <= nwrites + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_param(input int tgt, input logic [1:0] kind, input int row, input int col, input int data);
    pw.we = 1; pw.target = target_e'(tgt); pw.kind = kind;
    pw.row = 11'(row); pw.col = 11'(col); pw.data = data;
    @(posedge clk); #1;
    pw.we = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pw = '0; in_valid = 0; out_ready = 1; nwrites = 0; busy_cycles = 0;
    x = new[K];
    wgt = new[L * K];
    bias = new[L];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < L; i++)
      for (int j = 0; j < K; j++) begin
        wgt[i*K+j] = (i == 5) ? 32'sh4000_0000 + rnd(1000) : rnd(40000);
        write_param(4, K_W, i, j, wgt[i*K+j]);
      end
    for (int i = 0; i < L; i++) begin
      bias[i] = rnd(50000);
      write_param(4, K_B, i, 0, bias[i]);
    end
    // words for other targets must not disturb the layer
    write_param(2, K_W, 0, 0, 32'h7fff_ffff);
    write_param(5, K_B, 1, 0, 32'h7fff_ffff);

    for (int v = 0; v < 4; v++) begin
      for (int j = 0; j < K; j++) x[j] = (v == 3) ? 32'sh0100_0000 : rnd(70000);
      foreach (xa[j]) xa[j] = x[j];
      yref = fc_ref(x, wgt, bias, K, L, 32, 15);
      nwrites = 0;
      busy_cycles = 0;
      if (v == 2) begin
        out_ready = 0;
        in_valid = 1;
        repeat (10) @(posedge clk);
        check(!busy, "layer must wait for a free output bank");
        #1 out_ready = 1;
      end
      #1 in_valid = 1;
      @(posedge clk);
      while (!busy) @(posedge clk);
      #1 in_valid = 0;
      while (!out_commit) begin @(posedge clk); #1; end
      check(in_release, "input released with commit");
      @(posedge clk); #1;
      check(busy_cycles == EXP_LAT, $sformatf("latency %0d, expected %0d", busy_cycles, EXP_LAT));
      check(nwrites == L, $sformatf("writes %0d", nwrites));
      for (int i = 0; i < L; i++)
        check(yout[i] == yref[i], $sformatf("v%0d y[%0d] = %0d, expected %0d", v, i, yout[i], yref[i]));
      if (v == 3) check(yref[5] == 32'sh7fff_ffff || yref[5] == 32'sh8000_0000, "saturation case exercised");
      repeat (2) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
