// tb_hsp_port: streams random bytes in and checks the packed words (first
// byte lowest), then sends random words out and checks the byte order.
// With no back-pressure both directions must move one byte per cycle;
// then random back-pressure on every side checks nothing is lost.
module tb_hsp_port;
  localparam int BY = 4;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready;
  logic [7:0] rx_data = '0;
  logic win_valid, win_ready = 0;
  logic [BY*8-1:0] win_data;
  logic wout_valid = 0, wout_ready;
  logic [BY*8-1:0] wout_data = '0;
  logic tx_valid, tx_ready = 0;
  logic [7:0] tx_data;
  int checks = 0, failures = 0;
  byte unsigned in_q[$], out_q[$];
  int rx_bytes = 0, tx_bytes = 0;
  bit bp = 0;

  hsp_port #(.BYTES(BY)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // word sink and byte sink, sampling at the rising edge
  always @(posedge clk) if (rst_n) begin
    if (win_valid && win_ready)
      for (int i = 0; i < BY; i++) begin
        check(in_q.size() > 0 && win_data[i*8 +: 8] == in_q[0], "packed byte differs");
        if (in_q.size() > 0) void'(in_q.pop_front());
      end
    if (tx_valid && tx_ready) begin
      check(out_q.size() > 0 && tx_data == out_q[0], "sent byte differs");
      if (out_q.size() > 0) void'(out_q.pop_front());
      tx_bytes++;
    end
    if (rx_valid && rx_ready) rx_bytes++;
  end

  always @(negedge clk) begin
    win_ready <= bp ? 1'($urandom) : 1'b1;
    tx_ready  <= bp ? 1'($urandom) : 1'b1;
  end

  task automatic run(input int nwords);
    int t0;
    fork
      begin
        for (int n = 0; n < nwords*BY; n++) begin
          @(negedge clk);
          rx_valid = 0;
          if (bp) while ($urandom_range(0, 2) == 0) @(negedge clk);
          rx_valid = 1; rx_data = 8'($urandom);
          in_q.push_back(rx_data);
          #1; while (!rx_ready) begin @(negedge clk); #1; end
          @(posedge clk);
        end
        @(negedge clk); rx_valid = 0;
      end
      begin
        for (int n = 0; n < nwords; n++) begin
          @(negedge clk);
          wout_valid = 0;
          if (bp) while ($urandom_range(0, 3) == 0) @(negedge clk);
          wout_valid = 1; wout_data = {BY{8'($urandom)}} ^ (BY*8)'($urandom);
          for (int i = 0; i < BY; i++) out_q.push_back(wout_data[i*8 +: 8]);
          #1; while (!wout_ready) begin @(negedge clk); #1; end
          @(posedge clk);
        end
        @(negedge clk); wout_valid = 0;
      end
    join
    t0 = 0;
    while ((in_q.size() > 0 || out_q.size() > 0) && t0 < 1000) begin @(negedge clk); t0++; end
    check(in_q.size() == 0 && out_q.size() == 0, "bytes left over");
  endtask

  initial begin
    int c0, r0;
    time tt0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // full rate: 16 words take 16*BY cycles in each direction
    @(negedge clk);
    tt0 = $time; r0 = rx_bytes; c0 = tx_bytes;
    run(16);
    check(rx_bytes - r0 == 16*BY && tx_bytes - c0 == 16*BY, "byte counts");
    check(($time - tt0) / 10 <= 16*BY + 4, $sformatf("16 words took %0d cycles", ($time - tt0) / 10));
    bp = 1;
    run(40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
