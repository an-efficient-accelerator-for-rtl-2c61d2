// vec_buf_tb -- self-checking test of vec_buf with DEPTH=8, WL=2, RL=4.
//
// A producer writes numbered vectors (2 words per write) and a consumer reads
// them (4 words per read), each side stalling at random. Every vector must
// arrive whole and in order; the producer must see wr_ready low when both
// banks are full and the consumer rd_valid low when both are empty.
module vec_buf_tb;
  localparam int DEPTH = 8, WL = 2, RL = 4, NV = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_ready, wr_en, wr_commit, rd_valid, rd_release;
  logic [1:0] wr_addr;
  logic [0:0] rd_addr;
  logic [WL-1:0][31:0] wr_data;
  logic [RL-1:0][31:0] rd_data;

  vec_buf #(.W(32), .DEPTH(DEPTH), .WL(WL), .RL(RL)) dut (.*);

  int checks = 0, failures = 0;
  int full_seen = 0, empty_seen = 0, got = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] word(input int v, input int i);
    return 32'(v * 1000 + i * 7 + 3);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    wr_en = 0; wr_commit = 0; wr_addr = 0; wr_data = '0;
    wait (rst_n);
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      while (!wr_ready) begin full_seen++; @(negedge clk); end
      for (int g = 0; g < DEPTH / WL; g++) begin
        wr_en = 1; wr_addr = 2'(g);
        for (int l = 0; l < WL; l++) wr_data[l] = word(v, g * WL + l);
        wr_commit = (g == DEPTH / WL - 1);
        @(negedge clk);
        wr_en = 0; wr_commit = 0;
        repeat ($urandom_range(1)) @(negedge clk);
      end
      repeat ($urandom_range(12)) @(negedge clk);
    end
  end

  // consumer
  initial begin
    rd_release = 0; rd_addr = 0;
    wait (rst_n);
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      while (!rd_valid) begin empty_seen++; @(negedge clk); end
      repeat ($urandom_range(15)) @(negedge clk);
      for (int g = 0; g < DEPTH / RL; g++) begin
        rd_addr = 1'(g); #1;
        for (int l = 0; l < RL; l++)
          check(rd_data[l] == word(v, g * RL + l), $sformatf("vector %0d word %0d", v, g * RL + l));
      end
      rd_release = 1;
      @(negedge clk);
      rd_release = 0;
      got++;
    end
    check(got == NV, "all vectors received");
    check(full_seen > 0, "producer stalled on full channel");
    check(empty_seen > 0, "consumer waited on empty channel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
  end
endmodule
