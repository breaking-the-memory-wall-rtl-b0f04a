// tb_dram_array: checks one DRAM array model against a reference memory.
// Writes random words, reads them back and checks the data, the read
// latency of exactly RL cycles and the row-cycle busy time of T_RC cycles.
module tb_dram_array;
  localparam int W = 16, D = 64, RW = 4, SP = 2, TRC = 4, RL = 3;
  localparam int AW = $clog2(D + SP*RW);
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_we = 0;
  logic [AW-1:0] req_addr = '0;
  logic [W-1:0] req_wdata = '0;
  logic busy, rvalid;
  logic [W-1:0] rdata;
  logic [W-1:0] ref_mem [D + SP*RW];
  int checks = 0, failures = 0;

  dram_array #(.WORD_W(W), .DEPTH(D), .ROW_WORDS(RW), .SPARE_ROWS(SP), .T_RC(TRC), .RL(RL)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic access(input bit we, input int a, input logic [W-1:0] d, output int wait_cyc);
    // drive and sample on the falling edge; the array samples on the rising edge
    wait_cyc = 0;
    @(negedge clk);
    while (busy) begin @(negedge clk); wait_cyc++; end
    req_valid = 1; req_we = we; req_addr = AW'(a); req_wdata = d;
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    int wc, lat;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int a = 0; a < D + SP*RW; a++) begin
      automatic logic [W-1:0] d = W'($urandom);
      ref_mem[a] = d;
      access(1, a, d, wc);
      if (a > 0) check(wc == TRC - 2, $sformatf("busy after write lasted %0d cycles", wc + 1));
    end
    for (int n = 0; n < 40; n++) begin
      automatic int a = $urandom_range(0, D + SP*RW - 1);
      access(0, a, '0, wc);
      lat = 1;    // one rising edge since acceptance
      while (!rvalid) begin @(negedge clk); lat++; end
      check(lat == RL, $sformatf("read latency %0d, expected %0d", lat, RL));
      check(rdata == ref_mem[a], $sformatf("addr %0d read %h expected %h", a, rdata, ref_mem[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
