// tb_repair_loader: an NVM model holds a defect list with valid and empty
// records. Checks that the loader reads every address once, in order, that
// it emits exactly the valid records with their fields, and that init_done
// rises after 2*N_ENTRIES cycles and stays high.
module tb_repair_loader;
  import sunrise_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic nvm_rd_en;
  logic [2:0] nvm_addr;
  logic [31:0] nvm_rdata;
  logic rep_we;
  logic [4:0] rep_unit;
  logic [1:0] rep_slot;
  logic [2:0] rep_bank;
  logic [20:0] rep_row;
  logic init_done;
  repair_entry_t nvm [N];
  int checks = 0, failures = 0, got = 0, cyc = 0, done_cyc = -1, next_addr = 0;

  repair_loader #(.N_ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  // NVM model: data one cycle after the read request
  always_ff @(posedge clk) nvm_rdata <= nvm_rd_en ? 32'(nvm[nvm_addr]) : '0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (nvm_rd_en) begin
      check(int'(nvm_addr) == next_addr, $sformatf("NVM address %0d expected %0d", nvm_addr, next_addr));
      next_addr++;
    end
    if (rep_we) begin
      while (got < N && !nvm[got].valid) got++;
      check(got < N, "more repair writes than valid records");
      if (got < N)
        check(rep_unit == nvm[got].unit && rep_slot == nvm[got].slot && rep_bank == nvm[got].bank &&
              rep_row == nvm[got].row, $sformatf("record %0d fields differ", got));
      got++;
    end
    if (init_done && done_cyc < 0) done_cyc = cyc;
  end

  initial begin
    int nvalid;
    nvalid = 0;
    for (int i = 0; i < N; i++) begin
      nvm[i] = repair_entry_t'($urandom);
      nvm[i].valid = (i % 3 != 1);
      if (nvm[i].valid) nvalid++;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3*N) @(negedge clk);
    while (got < N && !nvm[got].valid) got++;
    check(got == N, $sformatf("only %0d of %0d records applied", got, N));
    check(done_cyc == 2*N + 1, $sformatf("init_done after %0d cycles, expected %0d", done_cyc - 1, 2*N));  // cyc counts from the falling edge before the first active rising edge
    check(init_done, "init_done dropped");
    check(next_addr == N, "NVM read count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
