// bn_relu_tb -- self-checking test of bn_relu at K=8, B=2.
//
// Loads random mean, scale and bias words, runs five vectors (with negative
// results, so the ReLU clamps, and one vector large enough to saturate), and
// compares every output with pn_ref_pkg::bn_ref. The number of busy cycles
// per vector must be K/B + 1, and the module must wait while the output
// channel has no free bank.
module bn_relu_tb;
  import pointnet_pkg::*;
  import pn_ref_pkg::*;

  localparam int K = 8, B = 2, NG = K / B;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t pw;
  logic in_valid, in_release, out_ready, out_we, out_commit, busy;
  logic [1:0] in_addr, out_addr;
  logic [B-1:0][31:0] in_data, out_data;

  bn_relu #(.K(K), .B(B), .TGT(7)) dut (.*);

  int checks = 0, failures = 0;
  vec_t x, mu, sc, beta, yref;
  int xa [K];
  int yout [K];
  int nwrites, busy_cycles, zeros;

  always_comb for (int b = 0; b < B; b++) in_data[b] = xa[int'(in_addr) * B + b];
  always @(posedge clk) begin
    if (busy) busy_cycles <= busy_cycles + 1;
    if (out_we) begin
      for (int b = 0; b < B; b++) yout[int'(out_addr) * B + b] <= out_data[b];
      nwrites <= nwrites + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_param(input int tgt, input logic [1:0] kind, input int row, input int data);
    pw.we = 1; pw.target = target_e'(tgt); pw.kind = kind;
    pw.row = 11'(row); pw.col = '0; pw.data = data;
    @(posedge clk); #1;
    pw.we = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pw = '0; in_valid = 0; out_ready = 1; nwrites = 0; busy_cycles = 0; zeros = 0;
    x = new[K]; mu = new[K]; sc = new[K]; beta = new[K];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < K; i++) begin
      mu[i] = rnd(20000);   write_param(7, K_MU, i, mu[i]);
      sc[i] = rnd(60000);   write_param(7, K_S, i, sc[i]);
      beta[i] = rnd(20000); write_param(7, K_BETA, i, beta[i]);
    end
    write_param(6, K_MU, 0, 32'h7fff_ffff);   // another target: ignored
    for (int v = 0; v < 5; v++) begin
      for (int j = 0; j < K; j++) x[j] = (v == 4) ? ((j % 2) ? 32'sh7000_0000 : 32'sh9000_0000) : rnd(100000);
      foreach (xa[j]) xa[j] = x[j];
      yref = bn_ref(x, mu, sc, beta, K, 32, 15);
      nwrites = 0; busy_cycles = 0;
      if (v == 1) begin
        out_ready = 0; in_valid = 1;
        repeat (8) @(posedge clk);
        check(!busy, "waits for a free output bank");
        #1 out_ready = 1;
      end
      #1 in_valid = 1;
      @(posedge clk);
      while (!busy) @(posedge clk);
      #1 in_valid = 0;
      while (!out_commit) begin @(posedge clk); #1; end
      check(in_release, "input released with commit");
      @(posedge clk); #1;
      check(busy_cycles == NG + 1, $sformatf("latency %0d, expected %0d", busy_cycles, NG + 1));
      check(nwrites == NG, $sformatf("writes %0d", nwrites));
      for (int i = 0; i < K; i++) begin
        check(yout[i] == yref[i], $sformatf("v%0d y[%0d] = %0d, expected %0d", v, i, yout[i], yref[i]));
        if (yref[i] == 0) zeros++;
      end
      repeat (2) @(posedge clk);
    end
    check(zeros > 0, "ReLU clamp exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
