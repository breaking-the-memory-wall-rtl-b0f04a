// tb_vpu: checks the vector processing unit at VEC=4, OC=8, MAX_B=4.
// Loads random weight tiles, broadcasts random features over two input
// chunks for several batch items, and compares every read-out word with a
// reference computed here (dot products, accumulation over chunks, shift,
// ReLU or pass, saturation). Also checks the one-cycle update latency.
module tb_vpu;
  import sunrise_pkg::*;
  localparam int VEC = 4, OC = 8, MB = 4, K = 2;
  logic clk = 0, rst_n = 0;
  logic w_valid = 0;
  logic [$clog2(OC)-1:0] w_row = '0;
  logic [VEC*8-1:0] w_data = '0;
  logic f_valid = 0, f_first = 0;
  logic [1:0] f_b = '0;
  logic [VEC*8-1:0] f_data = '0;
  func_e func_sel = FN_PASS;
  logic [4:0] shift = '0;
  logic [1:0] rd_b = '0;
  logic rd_w = '0;
  logic [VEC*8-1:0] rd_data;
  int checks = 0, failures = 0;
  int wt [K][OC][VEC];
  int x  [MB][K][VEC];
  longint accr [MB][OC];

  vpu #(.VEC(VEC), .OC(OC), .MAX_B(MB)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int post(longint a, int sh, bit relu);
    longint v = a >>> sh;
    if (relu && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic run_pass(input int nb, input bit relu, input int sh);
    for (int k = 0; k < K; k++) begin
      for (int o = 0; o < OC; o++) begin
        w_valid <= 1; w_row <= 3'(o);
        for (int i = 0; i < VEC; i++) begin
          wt[k][o][i] = int'($signed(8'($urandom)));
          w_data[i*8 +: 8] <= 8'(wt[k][o][i]);
        end
        @(posedge clk);
      end
      w_valid <= 0;
      for (int b = 0; b < nb; b++) begin
        f_valid <= 1; f_b <= 2'(b); f_first <= (k == 0);
        for (int i = 0; i < VEC; i++) begin
          x[b][k][i] = int'($signed(8'($urandom)));
          f_data[i*8 +: 8] <= 8'(x[b][k][i]);
        end
        @(posedge clk);
        f_valid <= 0;
        // the sum is visible right after this edge
        for (int o = 0; o < OC; o++) begin
          longint s = (k == 0) ? 0 : accr[b][o];
          for (int i = 0; i < VEC; i++) s += wt[k][o][i] * x[b][k][i];
          accr[b][o] = s;
        end
        #1;
        check(dut.acc[b][0] == 32'(accr[b][0]), "accumulator not updated one cycle after f_valid");
      end
    end
    func_sel <= relu ? FN_RELU : FN_PASS; shift <= 5'(sh);
    for (int b = 0; b < nb; b++)
      for (int w = 0; w < OC/VEC; w++) begin
        rd_b <= 2'(b); rd_w <= 1'(w);
        @(posedge clk); #1;
        for (int i = 0; i < VEC; i++) begin
          int e = post(accr[b][w*VEC+i], sh, relu);
          check($signed(rd_data[i*8 +: 8]) == 8'(e),
                $sformatf("b%0d ch%0d got %0d expected %0d", b, w*VEC+i, $signed(rd_data[i*8 +: 8]), e));
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_pass(MB, 0, 0);
    run_pass(3, 1, 4);
    run_pass(2, 0, 6);
    run_pass(MB, 1, 0);
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
