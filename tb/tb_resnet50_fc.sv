// tb_resnet50_fc: runs the last layer of ResNet-50 on the accelerator top with
// every parameter at its default (16 VPUs of 64x32 MACs, 4 DSUs, 4.5 Gb).
//
// The layer is the fully connected classifier: 2048 pooled features in, 1000
// class scores out, here for a batch of 8 images. Those sizes are ResNet-50's
// own; the weights and features are random int8 values, since only the
// arithmetic and the timing are under test. The 1000 outputs are padded to
// the 1024 channels of one pass (16 VPUs x 64) with zero weight rows.
//
// How: weights (2 MB) and features are written straight into the DRAM arrays
// through hierarchical references, using the pools' interleaving rule (word a
// lives in array a mod N at index a / N). This stands in for the HSP DMA, which
// would need two million byte cycles. The layer is configured and started
// over the processor port. When it finishes, the results are read back from
// the destination DSU's arrays, and every byte is compared with a reference
// model: a 2048-term dot product, an arithmetic right shift by 12, and
// saturation to int8 (no ReLU, as the classifier gives raw scores).
//
// Timing: the test measures the layer's cycles from start to idle. It checks
// them against bounds. Each of the 64 input chunks needs 64 weight-row loads.
// Then it needs 8 feature vectors. Here the stride of 64 words always hits the
// same DSU array, so each vector waits out the 4-cycle row time. Write-back
// adds 8 x 16 x 2 words. The test prints the measured MAC utilisation. It
// counts the feed stalls on the dram_stall output, and checks the STALLS
// register (zero: the UCE's own requests never wait here) and LAYERS.
module tb_resnet50_fc;
  import sunrise_pkg::*;
  localparam int NV = 16, ND = 4, VEC = 32, OC = 64, NB_V = 8, NB_D = 4, T_RC = 4;
  localparam int NW = OC / VEC, W = VEC * 8;
  localparam int IN = 2048, OUT = 1000, B = 8, K = IN / VEC, SHIFT = 12;
  localparam int FBASE = 0, WBASE = 0, OBASE = 0;
  localparam int SRC = 0, DST = 1;
  localparam int NVM_N = 16;

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
  int n_stall = 0;

  byte ws [NV*OC][IN];      // weights, row per output channel (rows >= OUT are zero)
  byte xs [B][IN];          // pooled features
  logic [W-1:0] res [B*NV*NW];
  event ev_load, ev_read;

  sunrise_top dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && dram_stall) n_stall++;

  // empty defect list: the NVM reads as zero
  always_ff @(posedge clk) if (nvm_rd_en) nvm_rdata <= '0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pacc(input bit wr, input logic [5:0] a, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk);
    proc_req = 1; proc_acc = '{wr: wr, rd: !wr, addr: a, wdata: d};
    #1; while (!proc_gnt) begin @(negedge clk); #1; end
    q = proc_rdata;
    @(negedge clk); proc_req = 0;
  endtask
  task automatic pwr(input logic [5:0] a, input logic [31:0] d);
    logic [31:0] q;
    pacc(1, a, d, q);
  endtask

  // back-door loaders, one per array (hierarchical names need constant indices)
  for (genvar j = 0; j < NV; j++) begin : g_wload
    for (genvar bk = 0; bk < NB_V; bk++) begin : g_bank
      initial begin
        @(ev_load);
        for (int n = 0; n < K * OC; n++)
          if ((WBASE + n) % NB_V == bk) begin
            automatic int k = n / OC, o = n % OC;
            logic [W-1:0] word;
            for (int e = 0; e < VEC; e++) word[e*8 +: 8] = ws[j*OC + o][k*VEC + e];
            dut.g_vpu[j].u_pool.g_bank[bk].u_arr.mem[(WBASE + n) / NB_V] = word;
          end
      end
    end
  end
  for (genvar bk = 0; bk < NB_D; bk++) begin : g_dsu_io
    initial begin
      @(ev_load);
      for (int n = 0; n < B * K; n++)
        if ((FBASE + n) % NB_D == bk) begin
          automatic int b = n / K, k = n % K;
          logic [W-1:0] word;
          for (int e = 0; e < VEC; e++) word[e*8 +: 8] = xs[b][k*VEC + e];
          dut.g_dsu[SRC].u_dsu.u_pool.g_bank[bk].u_arr.mem[(FBASE + n) / NB_D] = word;
        end
    end
    initial begin
      @(ev_read);
      for (int n = 0; n < B * NV * NW; n++)
        if ((OBASE + n) % NB_D == bk)
          res[n] = dut.g_dsu[DST].u_dsu.u_pool.g_bank[bk].u_arr.mem[(OBASE + n) / NB_D];
    end
  end

  function automatic logic [7:0] post(longint a);
    longint v = a >>> SHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  initial begin
    logic [31:0] q, stalls;
    longint t0, macs, slots;
    int cycles, lo, hi;
    int nbad;
    for (int c = 0; c < NV*OC; c++)
      for (int i = 0; i < IN; i++) ws[c][i] = (c < OUT) ? byte'($urandom) : 8'sd0;
    foreach (xs[b, i]) xs[b][i] = byte'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    while (!init_done) @(negedge clk);
    ->ev_load;
    @(negedge clk);

    pwr(REG_SRC_DSU, SRC); pwr(REG_DST_DSU, DST);
    pwr(REG_FBASE, FBASE); pwr(REG_WBASE, WBASE); pwr(REG_OBASE, OBASE);
    pwr(REG_KCH, K); pwr(REG_BATCH, B); pwr(REG_FUNC, SHIFT << 8);
    @(negedge clk);
    proc_req = 1; proc_acc = '{wr: 1'b1, rd: 1'b0, addr: REG_CTRL, wdata: 32'h1};
    #1; while (!proc_gnt) begin @(negedge clk); #1; end
    @(posedge clk); t0 = longint'($time / 10);
    @(negedge clk); proc_req = 0;
    #1; check(busy, "layer did not start");
    while (busy) @(posedge clk);
    cycles = int'(longint'($time / 10) - t0);

    ->ev_read;
    @(negedge clk);
    nbad = 0;
    for (int b = 0; b < B; b++)
      for (int c = 0; c < NV*OC; c++) begin
        automatic longint s = 0;
        logic [7:0] got;
        for (int i = 0; i < IN; i++) s += longint'(ws[c][i]) * longint'(xs[b][i]);
        got = res[b*NV*NW + (c / OC)*NW + (c % OC) / VEC][((c % OC) % VEC)*8 +: 8];
        checks++;
        if (got !== post(s)) begin
          failures++;
          if (nbad++ < 10) $display("FAIL: image %0d class %0d got %0d expected %0d", b, c, $signed(got), $signed(post(s)));
        end
      end

    // every chunk: OC weight rows, then B vectors each waiting a row cycle
    lo = K * (OC + B * T_RC);
    hi = lo + K * 16 + B * NV * NW + 64;
    check(cycles >= lo && cycles <= hi, $sformatf("layer took %0d cycles, expected %0d..%0d", cycles, lo, hi));
    // the serve engine's waits show on dram_stall; STALLS counts only the
    // UCE's own requests, and weight loads and write-back stream without one
    check(n_stall >= K * (B - 1) * (T_RC - 1), $sformatf("only %0d stall cycles", n_stall));
    pacc(0, REG_STALLS, 0, stalls);
    check(stalls == 0, $sformatf("STALLS %0d", stalls));
    pacc(0, REG_LAYERS, 0, q);
    check(q == 1, $sformatf("LAYERS %0d", q));
    macs = longint'(B * IN * OUT);
    slots = longint'(cycles) * longint'(NV * OC * VEC);
    $display("ResNet-50 FC 2048x1000, batch %0d: %0d cycles, %0d MACs, MAC use %0d.%0d %%, %0d feed stall cycles",
             B, cycles, macs, 100 * macs / slots, (1000 * macs / slots) % 10, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
