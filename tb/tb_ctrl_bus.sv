// tb_ctrl_bus: random requests from both masters. Checks the grant
// (master 0 first), that the granted master's access reaches the slave
// unchanged, and that read data returns to the masters.
module tb_ctrl_bus;
  import sunrise_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] m_req = '0;
  bus_req_t m_acc [2];
  logic [1:0] m_gnt;
  logic [REG_DW-1:0] m_rdata, s_rdata = '0;
  bus_req_t s_acc;
  int checks = 0, failures = 0;

  ctrl_bus dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      m_req = 2'($urandom);
      for (int m = 0; m < 2; m++) m_acc[m] = bus_req_t'({$urandom, $urandom});
      s_rdata = $urandom;
      #1;
      if (m_req[0]) begin
        check(m_gnt == 2'b01, "master 0 not granted");
        check(s_acc == m_acc[0], "master 0 access changed");
      end else if (m_req[1]) begin
        check(m_gnt == 2'b10, "master 1 not granted");
        check(s_acc == m_acc[1], "master 1 access changed");
      end else begin
        check(m_gnt == 2'b00, "grant without request");
        check(!s_acc.wr && !s_acc.rd, "access without request");
      end
      check(m_rdata == s_rdata, "read data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
