// tb_dram_pool: checks the DRAM PHY of one unit.
// - a stream of consecutive addresses is accepted one per cycle (the
//   arrays' row cycles overlap), while a stride of N_BANKS hits one array
//   and stalls T_RC-1 cycles per access;
// - reads come back in order, RL cycles after acceptance, with their tags;
// - a repaired row is stored in its spare row: corrupting the original
//   row in the array does not change what is read.
module tb_dram_pool;
  import sunrise_pkg::*;
  localparam int NB = 4, W = 32, D = 64, RWD = 4, NR = 2, TRC = 4, RL = 3;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [ADDR_W-1:0] req_addr = '0;
  logic [W-1:0] req_wdata = '0;
  logic [TAG_W-1:0] req_tag = '0;
  logic rsp_valid;
  logic [W-1:0] rsp_data;
  logic [TAG_W-1:0] rsp_tag;
  logic rep_we = 0;
  logic [1:0] rep_slot = '0;
  logic [2:0] rep_bank = '0;
  logic [20:0] rep_row = '0;
  logic stall, repair_hit;
  logic [W-1:0] ref_mem [NB*D];
  int checks = 0, failures = 0, stalls = 0, hits = 0, cyc = 0;
  int exp_tag_q[$];
  int exp_time_q[$];
  logic [W-1:0] exp_data_q[$];

  dram_pool #(.N_BANKS(NB), .WORD_W(W), .BANK_DEPTH(D), .ROW_WORDS(RWD), .N_REPAIR(NR),
              .T_RC(TRC), .RL(RL)) dut (.*);

  always #5 clk = ~clk;
  // All driving and sampling happens on the falling edge.
  always @(negedge clk) cyc++;
  always @(posedge clk) begin
    if (stall) stalls++;
    if (repair_hit) hits++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // response checker
  always @(negedge clk) if (rst_n && rsp_valid) begin
    check(exp_tag_q.size() > 0, "unexpected response");
    if (exp_tag_q.size() > 0) begin
      int t, tm;
      logic [W-1:0] d;
      t = exp_tag_q.pop_front();
      tm = exp_time_q.pop_front();
      d = exp_data_q.pop_front();
      check(rsp_tag == TAG_W'(t), $sformatf("tag %0d expected %0d", rsp_tag, t));
      check(rsp_data == d, $sformatf("data %h expected %h", rsp_data, d));
      check(cyc - tm == RL, $sformatf("latency %0d", cyc - tm));
    end
  end

  task automatic issue(input bit we, input int a, input logic [W-1:0] d, input int tag);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = ADDR_W'(a); req_wdata = d; req_tag = TAG_W'(tag);
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    if (!we) begin exp_tag_q.push_back(tag); exp_time_q.push_back(cyc); exp_data_q.push_back(ref_mem[a]); end
    else ref_mem[a] = d;
    @(posedge clk); #1;
    req_valid = 0;
  endtask

  initial begin
    int t0, s0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // sequential write stream: no stalls, one word per cycle
    s0 = stalls;
    @(negedge clk); #1;
    t0 = cyc;
    for (int a = 0; a < NB*D; a++) begin
      req_valid = 1; req_we = 1; req_addr = ADDR_W'(a); req_wdata = W'($urandom);
      ref_mem[a] = req_wdata;
      #1;
      check(req_ready, "sequential stream stalled");
      while (!req_ready) begin @(negedge clk); #1; end
      @(negedge clk); #1;
    end
    req_valid = 0;
    check(stalls == s0, $sformatf("%0d stalls on a sequential stream", stalls - s0));
    check(cyc - t0 == NB*D, $sformatf("sequential stream took %0d cycles for %0d words", cyc - t0, NB*D));
    // sequential reads
    for (int a = 0; a < 32; a++) issue(0, a, '0, a);
    // same-array stride: T_RC-1 stall cycles per access after the first
    @(posedge clk);
    s0 = stalls;
    for (int n = 0; n < 8; n++) issue(0, n*NB, '0, 100+n);
    check(stalls - s0 == 7*(TRC-1), $sformatf("strided reads stalled %0d cycles, expected %0d", stalls - s0, 7*(TRC-1)));
    repeat (RL + 2) @(posedge clk);
    // repair: array 1, row 2 -> spare slot 1
    @(negedge clk);
    rep_we = 1; rep_slot = 2'd1; rep_bank = 3'd1; rep_row = 21'd2;
    @(negedge clk);
    rep_we = 0;
    for (int c = 0; c < RWD; c++) begin
      automatic int a = ((2*RWD + c) * NB) + 1;   // array 1, row 2, column c
      issue(1, a, W'($urandom), 0);
    end
    check(hits == RWD, $sformatf("repair hits %0d expected %0d", hits, RWD));
    // break the original row and check the spare row serves the data
    for (int c = 0; c < RWD; c++) begin
      check(dut.g_bank[1].u_arr.mem[D + 1*RWD + c] == ref_mem[((2*RWD + c) * NB) + 1], "spare row does not hold the data");
      dut.g_bank[1].u_arr.mem[2*RWD + c] = ~ref_mem[((2*RWD + c) * NB) + 1];
    end
    for (int c = 0; c < RWD; c++) issue(0, ((2*RWD + c) * NB) + 1, '0, 200 + c);
    // an unrepaired row next to it is still read from its own place
    issue(0, ((3*RWD) * NB) + 1, '0, 300);
    repeat (RL + 3) @(posedge clk);
    check(exp_tag_q.size() == 0, "missing responses");
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
