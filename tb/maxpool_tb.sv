// maxpool_tb -- self-checking test of maxpool at K=8, B=2.
//
// Merges four local features (signed values, including negative ones) into
// phi, reads phi back and compares it with a running element-wise maximum
// that starts at zero. Then clears phi, merges one more feature and checks
// that the earlier ones are gone. Each merge must keep the module busy K/B cycles and
// produce one point_done pulse.
module maxpool_tb;
  import pn_ref_pkg::*;

  localparam int K = 8, B = 2, NG = K / B;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_release, point_done, busy;
  logic [1:0] in_addr;
  logic [B-1:0][31:0] in_data;
  logic [2:0] rd_addr;
  logic [31:0] rd_data;

  maxpool #(.K(K), .B(B)) dut (.*);

  int checks = 0, failures = 0;
  int xa [K];
  int ref_phi [K];
  int busy_cycles, dones;

  always_comb for (int b = 0; b < B; b++) in_data[b] = xa[int'(in_addr) * B + b];
  always @(posedge clk) begin
    if (busy) busy_cycles <= busy_cycles + 1;
    if (point_done) dones <= dones + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic merge();
    busy_cycles = 0;
    #1 in_valid = 1;
    @(posedge clk);
    while (!in_release) begin @(posedge clk); #1; end
    in_valid = 0;
    check(busy_cycles == NG, $sformatf("latency %0d", busy_cycles));
    for (int i = 0; i < K; i++) if (xa[i] > ref_phi[i]) ref_phi[i] = xa[i];
    @(posedge clk); #1;
  endtask

  task automatic compare(input string tag);
    for (int i = 0; i < K; i++) begin
      rd_addr = 3'(i); #1;
      check($signed(rd_data) == ref_phi[i], $sformatf("%s phi[%0d] = %0d, expected %0d", tag, i, $signed(rd_data), ref_phi[i]));
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; in_valid = 0; rd_addr = 0; dones = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    clear = 1; @(posedge clk); #1; clear = 0;
    foreach (ref_phi[i]) ref_phi[i] = 0;
    compare("cleared");
    for (int p = 0; p < 4; p++) begin
      foreach (xa[i]) xa[i] = rnd(1000000);
      merge();
    end
    compare("after 4");
    check(dones == 4, $sformatf("point_done pulses %0d", dones));
    clear = 1; @(posedge clk); #1; clear = 0;
    foreach (ref_phi[i]) ref_phi[i] = 0;
    foreach (xa[i]) xa[i] = rnd(1000);
    merge();
    compare("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
