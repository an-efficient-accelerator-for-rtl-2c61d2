// adder_tree_tb -- self-checking test of adder_tree with N=8 and N=5.
//
// Feeds a new random operand set every cycle (with gaps) and checks each sum
// against a plain loop sum, and that it appears exactly log2(N) (rounded up)
// cycles after its operands.
module adder_tree_tb;
  localparam int IW = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic v8, v5, ov8, ov5;
  logic [7:0][IW-1:0] d8;
  logic [4:0][IW-1:0] d5;
  logic signed [IW+2:0] s8, s5;

  adder_tree #(.N(8), .IW(IW)) dut8 (.clk, .rst_n, .in_valid(v8), .in_data(d8), .out_valid(ov8), .out_sum(s8));
  adder_tree #(.N(5), .IW(IW)) dut5 (.clk, .rst_n, .in_valid(v5), .in_data(d5), .out_valid(ov5), .out_sum(s5));

  int checks = 0, failures = 0;
  longint exp8 [$], exp5 [$];
  int cyc = 0;
  int t8 [$], t5 [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ov8) begin
      check(exp8.size() > 0 && longint'(s8) == exp8[0], "sum N=8");
      check(t8.size() > 0 && cyc - t8[0] == 3, $sformatf("latency N=8: %0d", cyc - t8[0]));
      void'(exp8.pop_front()); void'(t8.pop_front());
    end
    if (rst_n && ov5) begin
      check(exp5.size() > 0 && longint'(s5) == exp5[0], "sum N=5");
      check(t5.size() > 0 && cyc - t5[0] == 3, $sformatf("latency N=5: %0d", cyc - t5[0]));
      void'(exp5.pop_front()); void'(t5.pop_front());
    end
  end

  initial begin
    v8 = 0; v5 = 0; d8 = '0; d5 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      longint s;
      @(negedge clk);
      v8 = ($urandom_range(3) != 0);
      v5 = v8;
      s = 0;
      for (int i = 0; i < 8; i++) begin
        longint r;
        r = longint'($signed(32'($urandom))) * 64;
        d8[i] = IW'(r);
        s += r;
      end
      if (v8) begin exp8.push_back(s); t8.push_back(cyc); end
      s = 0;
      for (int i = 0; i < 5; i++) begin
        longint r;
        r = longint'($signed(32'($urandom))) * 32;
        d5[i] = IW'(r);
        s += r;
      end
      if (v5) begin exp5.push_back(s); t5.push_back(cyc); end
    end
    @(negedge clk); v8 = 0; v5 = 0;
    repeat (6) @(posedge clk);
    check(exp8.size() == 0 && exp5.size() == 0, "all sums seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
