// tb_dsu: checks a data serving unit at 4 arrays of 64 words.
// Fills its DRAM through the access port and reads words back; then runs
// the serve engine with strides that spread over the arrays and with a
// stride that hits one array, and checks the broadcast stream (data, batch
// index, first flag, order), that the access port is held off while
// serving, that srv_busy covers the whole stream, and the stall counts.
module tb_dsu;
  import sunrise_pkg::*;
  localparam int NB = 4, W = 32, D = 64, RWD = 4, TRC = 4, RL = 3, MB = 4;
  logic clk = 0, rst_n = 0;
  logic a_valid = 0, a_ready, a_we = 0;
  logic [ADDR_W-1:0] a_addr = '0;
  logic [W-1:0] a_wdata = '0;
  logic a_rsp_valid;
  logic [W-1:0] a_rsp_data;
  logic srv_start = 0, srv_first = 0, srv_busy;
  logic [ADDR_W-1:0] srv_base = '0, srv_stride = '0;
  logic [2:0] srv_count = '0;
  logic bc_valid, bc_first;
  logic [1:0] bc_b;
  logic [W-1:0] bc_data;
  logic rep_we = 0;
  logic [1:0] rep_slot = '0;
  logic [2:0] rep_bank = '0;
  logic [20:0] rep_row = '0;
  logic stall, repair_hit;
  logic [W-1:0] ref_mem [NB*D];
  int checks = 0, failures = 0, stalls = 0;

  dsu #(.N_BANKS(NB), .WORD_W(W), .BANK_DEPTH(D), .ROW_WORDS(RWD), .N_REPAIR(2),
        .T_RC(TRC), .RL(RL), .MAX_B(MB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (stall) stalls++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic acc(input bit we, input int a, input logic [W-1:0] d, output logic [W-1:0] q);
    @(negedge clk);
    a_valid = 1; a_we = we; a_addr = ADDR_W'(a); a_wdata = d;
    #1; while (!a_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    a_valid = 0;
    if (we) ref_mem[a] = d;
    else begin
      while (!a_rsp_valid) @(negedge clk);
      q = a_rsp_data;
    end
  endtask

  task automatic serve(input int base, input int stride, input int cnt, input bit first);
    int seen = 0, s0 = stalls, cyc = 0;
    @(negedge clk);
    srv_start = 1; srv_base = ADDR_W'(base); srv_stride = ADDR_W'(stride);
    srv_count = 3'(cnt); srv_first = first;
    @(negedge clk);
    srv_start = 0;
    a_valid = 1; a_we = 0; a_addr = '0;   // a waiting access must be held off
    while (srv_busy) begin
      check(!a_ready, "access port not held off while serving");
      if (bc_valid) begin
        check(int'(bc_b) == seen, $sformatf("batch index %0d expected %0d", bc_b, seen));
        check(bc_first == first, "first flag");
        check(bc_data == ref_mem[base + seen*stride], $sformatf("served word %0d differs", seen));
        seen++;
      end
      @(negedge clk); cyc++;
    end
    a_valid = 0;
    check(seen == cnt, $sformatf("served %0d of %0d vectors", seen, cnt));
    if (stride % NB == 0)
      check(stalls - s0 >= (cnt-1)*(TRC-1), $sformatf("same-array serve stalled only %0d cycles", stalls - s0));
    else
      check(cyc <= cnt + RL + 2, $sformatf("spread serve took %0d cycles", cyc));
  endtask

  initial begin
    logic [W-1:0] q;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < NB*D; a++) acc(1, a, W'($urandom), q);
    for (int n = 0; n < 10; n++) begin
      automatic int a = $urandom_range(0, NB*D-1);
      acc(0, a, '0, q);
      check(q == ref_mem[a], $sformatf("access read %0d", a));
    end
    serve(3, 5, 4, 1);
    serve(10, 1, 3, 0);
    serve(7, 4, 4, 0);
    serve(0, 9, 1, 1);
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
