// tb_sunrise_top: end-to-end test of the accelerator top at reduced size (2 VPUs, 2 DSUs, VEC=4, OC=8, small arrays).
//
// The host side is modelled here: an SPI host that writes and reads
// registers, a byte-stream HSP host, a processor port that polls STATUS
// (so it contends with SPI for the control bus), and an NVM holding a
// defect list. The test
//   1. lets the repair loader apply two row repairs (one DSU, one VPU);
//   2. loads weights into every VPU's DRAM and features into DSU0 over HSP
//      DMA, then overwrites the original defective rows in the arrays, so
//      correct results prove the repaired rows are used;
//   3. runs layer 1 (DSU0 -> DSU1, 3 input chunks, pass function) and
//      layer 2 (DSU1 -> DSU0, its input is layer 1's output, ReLU);
//   4. reads both results back over HSP and compares every byte with a
//      reference model of the layer arithmetic.
// It counts how often each mechanism happened (DRAM stall, repair hit, bus
// contention, both DSU directions, both output functions, multi-chunk
// accumulation, DMA in and out) and fails any that never did.
module tb_sunrise_top;
  import sunrise_pkg::*;
  localparam int NV = 2, ND = 2, VEC = 4, OC = 8, MB = 4;
  localparam int NB_V = 4, NB_D = 2, DEPTH = 256, RWD = 4, NREP = 2, NVM_N = 4;
  localparam int NW = OC / VEC, W = VEC * 8;
  localparam int K1 = 3, B = 3, K2 = NV * NW;
  localparam int FBASE = 16, WBASE = 8, OBASE1 = 1000, WBASE2 = WBASE + K1 * OC, OBASE2 = 3000;
  // repaired rows: the row holding feature word FBASE+1 in DSU0, and the row
  // holding weight word WBASE+OC+3 in the last VPU
  localparam int FA = FBASE + 1, F_BANK = FA % NB_D, F_ROW = (FA / NB_D) / RWD;
  localparam int WA = WBASE + OC + 3, W_BANK = WA % NB_V, W_ROW = (WA / NB_V) / RWD;
  localparam int LAST_V = NV - 1;

  logic clk = 0, rst_n = 0;
  logic spi_sclk = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic hsp_rx_valid = 0, hsp_rx_ready, hsp_tx_valid, hsp_tx_ready = 0;
  logic [7:0] hsp_rx_data = '0, hsp_tx_data;
  logic proc_req = 0, proc_gnt;
  bus_req_t proc_acc = '0;
  logic [REG_DW-1:0] proc_rdata;
  logic nvm_rd_en;
  logic [$clog2(NVM_N)-1:0] nvm_addr;
  logic [31:0] nvm_rdata = '0;
  logic init_done, busy, dram_stall, dram_repair_hit;
  int checks = 0, failures = 0;
  int n_stall = 0, n_hit = 0, n_contend = 0, n_relu = 0, n_pass = 0, n_fwd = 0, n_back = 0;
  int n_multik = 0, n_dma_in = 0, n_dma_out = 0;
  repair_entry_t nvm [NVM_N];

  sunrise_top #(.N_VPU(NV), .N_DSU(ND), .VEC(VEC), .OC(OC), .MAX_B(MB), .VPU_BANKS(NB_V), .DSU_BANKS(NB_D),
                .BANK_DEPTH(DEPTH), .ROW_WORDS(RWD), .N_REPAIR(NREP), .NVM_ENTRIES(NVM_N)) dut (.*);

  always #5 clk = ~clk;

  // NVM model: one-cycle read
  always_ff @(posedge clk) if (nvm_rd_en) nvm_rdata <= 32'(nvm[nvm_addr]);

  always @(posedge clk) if (rst_n) begin
    if (dram_stall) n_stall++;
    if (dram_repair_hit) n_hit++;
    if (dut.u_bus.m_req == 2'b11) n_contend++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // SPI host, mode 0, SCLK = clk/16
  task automatic spi(input bit wr, input logic [5:0] addr, input logic [31:0] wdata, output logic [31:0] rdv);
    logic [39:0] out = {wr, 1'b0, addr, wdata};
    rdv = '0;
    spi_cs_n = 0;
    repeat (8) @(posedge clk);
    for (int i = 39; i >= 0; i--) begin
      spi_mosi = out[i];
      repeat (8) @(posedge clk);
      spi_sclk = 1;
      if (i < 32) rdv = {rdv[30:0], spi_miso};
      repeat (8) @(posedge clk);
      spi_sclk = 0;
    end
    repeat (8) @(posedge clk);
    spi_cs_n = 1;
    repeat (8) @(posedge clk);
  endtask
  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    logic [31:0] dummy;
    spi(1, a, d, dummy);
  endtask

  // firmware-style polling on the processor port until the UCE is idle
  task automatic poll_idle();
    logic [31:0] st = 32'h1;
    int n = 0;
    while (st[0] && n < 2000000) begin
      @(negedge clk);
      proc_req = 1; proc_acc = '{wr: 1'b0, rd: 1'b1, addr: REG_STATUS, wdata: '0};
      #1; while (!proc_gnt) begin @(negedge clk); #1; end
      st = proc_rdata;
      @(negedge clk); proc_req = 0;
      n++;
    end
  endtask
  // poll while an SPI frame is in flight, to exercise bus arbitration
  task automatic wr_contended(input logic [5:0] a, input logic [31:0] d);
    fork
      wr(a, d);
      begin   // back-to-back STATUS reads for longer than one SPI frame
        @(negedge clk); proc_req = 1; proc_acc = '{wr: 1'b0, rd: 1'b1, addr: REG_STATUS, wdata: '0};
        repeat (800) @(negedge clk);
        proc_req = 0;
      end
    join
  endtask
  // processor-port register write
  task automatic pwr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    proc_req = 1; proc_acc = '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    #1; while (!proc_gnt) begin @(negedge clk); #1; end
    @(negedge clk); proc_req = 0;
  endtask

  task automatic hsp_send(input logic [W-1:0] data [$]);
    foreach (data[n])
      for (int i = 0; i < VEC; i++) begin
        @(negedge clk);
        hsp_rx_valid = 1; hsp_rx_data = data[n][i*8 +: 8];
        #1; while (!hsp_rx_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
    @(negedge clk); hsp_rx_valid = 0;
  endtask

  task automatic dma_in(input int unit, input int addr, input logic [W-1:0] data [$]);
    pwr(REG_DMA_UNIT, unit); pwr(REG_DMA_ADDR, addr); pwr(REG_DMA_LEN, data.size());
    pwr(REG_CTRL, 32'h2);
    hsp_send(data);
    poll_idle();
    n_dma_in++;
  endtask
  task automatic dma_out(input int unit, input int addr, input int len, output logic [W-1:0] data [$]);
    logic [W-1:0] word;
    int nb = 0;
    data = {};
    wr(REG_DMA_UNIT, unit); wr(REG_DMA_ADDR, addr); wr(REG_DMA_LEN, len);
    wr(REG_CTRL, 32'h4);
    @(negedge clk);
    hsp_tx_ready = 1;
    while (data.size() < len) begin
      #1;   // a byte shown now moves at the next rising edge
      if (hsp_tx_valid && hsp_tx_ready) begin
        word[nb*8 +: 8] = hsp_tx_data;
        nb++;
        if (nb == VEC) begin data.push_back(word); nb = 0; end
      end
      @(negedge clk);
    end
    @(negedge clk); hsp_tx_ready = 0;
    poll_idle();
    n_dma_out++;
  endtask

  function automatic logic [7:0] post(longint a, int sh, bit relu);
    longint v = a >>> sh;
    if (relu && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction
  function automatic void ref_layer(input logic [W-1:0] x [$], input logic [W-1:0] wt [NV][$],
                                    input int K, input int sh, input bit relu, output logic [W-1:0] y [$]);
    y = {};
    for (int b = 0; b < B; b++)
      for (int j = 0; j < NV; j++)
        for (int w = 0; w < NW; w++) begin
          logic [W-1:0] word;
          for (int i = 0; i < VEC; i++) begin
            longint s = 0;
            int o = w*VEC + i;
            for (int k = 0; k < K; k++)
              for (int e = 0; e < VEC; e++)
                s += longint'($signed(wt[j][k*OC + o][e*8 +: 8])) * longint'($signed(x[b*K + k][e*8 +: 8]));
            word[i*8 +: 8] = post(s, sh, relu);
          end
          y.push_back(word);
        end
  endfunction

  task automatic run_layer(input int src, input int dst, input int fb, input int wb, input int ob,
                           input int K, input int func);
    wr_contended(REG_SRC_DSU, src);
    wr(REG_DST_DSU, dst); wr(REG_FBASE, fb); wr(REG_WBASE, wb);
    wr(REG_OBASE, ob); wr(REG_KCH, K); wr(REG_BATCH, B); wr(REG_FUNC, func);
    wr(REG_CTRL, 1);
    poll_idle();
    if (func[1:0] == 2'd1) n_relu++; else n_pass++;
    if (src == 0 && dst == 1) n_fwd++;
    if (src == 1 && dst == 0) n_back++;
    if (K > 1) n_multik++;
  endtask

  initial begin
    logic [31:0] r;
    logic [W-1:0] x [$], y1 [$], y2 [$], got [$];
    logic [W-1:0] wt1 [NV][$], wt2 [NV][$];
    foreach (nvm[i]) nvm[i] = '0;
    nvm[0] = '{valid: 1'b1, unit: 5'd0, bank: 3'(F_BANK), slot: 2'd0, row: 21'(F_ROW)};
    nvm[NVM_N-1] = '{valid: 1'b1, unit: 5'(ND + LAST_V), bank: 3'(W_BANK), slot: 2'(NREP-1), row: 21'(W_ROW)};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (!init_done) @(negedge clk);
    spi(0, REG_STATUS, 0, r);
    check(r == 32'h2, $sformatf("STATUS after init %h", r));

    // weights and features over the high-speed port
    for (int j = 0; j < NV; j++) begin
      for (int n = 0; n < K1*OC; n++) wt1[j].push_back(W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom}));
      for (int n = 0; n < K2*OC; n++) wt2[j].push_back(W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom}));
      dma_in(ND + j, WBASE, wt1[j]);
      dma_in(ND + j, WBASE2, wt2[j]);
    end
    for (int n = 0; n < B*K1; n++) x.push_back(W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom}));
    dma_in(0, FBASE, x);
    check(n_hit > 0, "no access reached a repaired row");
    // the defective rows now read garbage; the spare rows must be used
    for (int c = 0; c < RWD; c++) begin
      dut.g_dsu[0].u_dsu.u_pool.g_bank[F_BANK].u_arr.mem[F_ROW*RWD + c] = '1;
      dut.g_vpu[LAST_V].u_pool.g_bank[W_BANK].u_arr.mem[W_ROW*RWD + c] = '1;
    end

    run_layer(0, 1, FBASE, WBASE, OBASE1, K1, 32'h0600);
    run_layer(1, 0, OBASE1, WBASE2, OBASE2, K2, 32'h0301);
    spi(0, REG_LAYERS, 0, r);
    check(r == 2, $sformatf("LAYERS = %0d", r));

    ref_layer(x, wt1, K1, 6, 0, y1);
    ref_layer(y1, wt2, K2, 3, 1, y2);
    dma_out(1, OBASE1, B*NV*NW, got);
    foreach (y1[i]) check(got[i] == y1[i], $sformatf("layer 1 word %0d: %h expected %h", i, got[i], y1[i]));
    dma_out(0, OBASE2, B*NV*NW, got);
    foreach (y2[i]) check(got[i] == y2[i], $sformatf("layer 2 word %0d: %h expected %h", i, got[i], y2[i]));

    $display("mechanisms: stall=%0d repair_hit=%0d bus_contention=%0d dsu0->dsu1=%0d dsu1->dsu0=%0d pass=%0d relu=%0d multi_chunk=%0d dma_in=%0d dma_out=%0d",
             n_stall, n_hit, n_contend, n_fwd, n_back, n_pass, n_relu, n_multik, n_dma_in, n_dma_out);
    check(n_stall > 0, "no DRAM stall");
    check(n_hit > 0, "no repair hit");
    check(n_contend > 0, "no bus contention");
    check(n_fwd > 0 && n_back > 0, "DSU direction not switched");
    check(n_pass > 0 && n_relu > 0, "function selector not exercised");
    check(n_multik > 0, "no multi-chunk accumulation");
    check(n_dma_in > 0 && n_dma_out > 0, "DMA not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
