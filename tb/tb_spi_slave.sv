// tb_spi_slave: a bit-banged SPI host (mode 0, SCLK = core clock / 16)
// writes random values to random registers of a register-file model on
// the bus side and reads them back over MISO. Checks every bus access and
// every value read.
module tb_spi_slave;
  import sunrise_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic req, gnt;
  bus_req_t acc;
  logic [REG_DW-1:0] rdata;
  logic [31:0] regs [64];
  int checks = 0, failures = 0, nwr = 0, nrd = 0;

  spi_slave dut (.*);
  always #5 clk = ~clk;

  // bus side: grant at once, register file model
  assign gnt   = req;
  assign rdata = regs[acc.addr];
  always @(posedge clk) if (req && gnt) begin
    if (acc.wr) begin regs[acc.addr] <= acc.wdata; nwr++; end
    if (acc.rd) nrd++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic spi_frame(input bit wr, input logic [5:0] addr, input logic [31:0] wdata,
                           output logic [31:0] rdv);
    logic [39:0] out = {wr, 1'b0, addr, wdata};
    rdv = '0;
    cs_n = 0;
    repeat (8) @(posedge clk);
    for (int i = 39; i >= 0; i--) begin
      mosi = out[i];
      repeat (8) @(posedge clk);
      sclk = 1;
      if (i < 32) rdv = {rdv[30:0], miso};
      repeat (8) @(posedge clk);
      sclk = 0;
    end
    repeat (8) @(posedge clk);
    cs_n = 1;
    repeat (8) @(posedge clk);
  endtask

  initial begin
    logic [31:0] model [64];
    logic [31:0] v;
    for (int i = 0; i < 64; i++) begin regs[i] = $urandom; model[i] = regs[i]; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 24; n++) begin
      automatic logic [5:0] a = 6'($urandom);
      automatic logic [31:0] d = $urandom;
      automatic int w0 = nwr;
      spi_frame(1, a, d, v);
      check(nwr == w0 + 1, "write frame gave no single bus write");
      model[a] = d;
      check(regs[a] == d, $sformatf("reg %0d = %h expected %h", a, regs[a], d));
    end
    for (int n = 0; n < 24; n++) begin
      automatic logic [5:0] a = 6'($urandom);
      automatic int r0 = nrd;
      spi_frame(0, a, 32'($urandom), v);
      check(nrd == r0 + 1, "read frame gave no single bus read");
      check(v == model[a], $sformatf("read reg %0d = %h expected %h", a, v, model[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
