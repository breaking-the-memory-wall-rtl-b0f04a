// tb_uce: checks the Unified Control Engine with 2 VPUs and 2 DSUs of small
// DRAM pools (VEC=4, OC=8, MAX_B=4), wired as in the chip top but with the
// control bus and HSP words driven directly. It checks register read-back,
// DMA in to DSU and VPU DRAM, a multi-chunk layer (weight load, serve,
// write-back) against a reference model, DMA out of the results, a second
// layer chained DSU1 -> DSU0 with ReLU, that a start while busy is ignored,
// that operations wait for repair init, and the stall counter.
module tb_uce;
  import sunrise_pkg::*;
  localparam int NV = 2, ND = 2, VEC = 4, OC = 8, MB = 4, NW = OC/VEC;
  localparam int W = VEC*8, BW = 2;
  localparam int NB_V = 4, NB_D = 2, DEPTH = 64, RWD = 4, TRC = 4, RL = 3;
  logic clk = 0, rst_n = 0, init_done = 0, busy;
  bus_req_t s_acc = '0;
  logic [REG_DW-1:0] s_rdata;
  logic win_valid = 0, win_ready, wout_valid, wout_ready = 0;
  logic [W-1:0] win_data = '0, wout_data;
  logic [ND-1:0] d_valid, d_ready, d_rsp_valid, d_srv_start, d_srv_busy, d_bc_valid, d_bc_first;
  logic d_we;
  logic [ADDR_W-1:0] d_addr, srv_base, srv_stride;
  logic [W-1:0] d_wdata;
  logic [W-1:0] d_rsp_data [ND];
  logic [W-1:0] d_bc_data [ND];
  logic [BW-1:0] d_bc_b [ND];
  logic [BW:0] srv_count;
  logic srv_first, f_valid, f_first;
  logic [BW-1:0] f_b;
  logic [W-1:0] f_data;
  logic [NV-1:0] v_valid, v_ready, v_rsp_valid;
  logic v_we;
  logic [ADDR_W-1:0] v_addr;
  logic [W-1:0] v_wdata;
  logic [TAG_W-1:0] v_tag;
  logic [TAG_W-1:0] v_rsp_tag [NV];
  logic [W-1:0] v_rsp_data [NV];
  logic [W-1:0] v_rd_data [NV];
  logic [BW-1:0] rd_b;
  logic rd_w;
  func_e func_sel;
  logic [4:0] shift;
  int checks = 0, failures = 0;

  uce #(.N_VPU(NV), .N_DSU(ND), .VEC(VEC), .OC(OC), .MAX_B(MB)) dut (
    .clk, .rst_n, .init_done, .busy, .s_acc, .s_rdata,
    .win_valid, .win_ready, .win_data, .wout_valid, .wout_ready, .wout_data,
    .d_valid, .d_ready, .d_we, .d_addr, .d_wdata, .d_rsp_valid, .d_rsp_data,
    .d_srv_start, .srv_base, .srv_stride, .srv_count, .srv_first, .d_srv_busy,
    .d_bc_valid, .d_bc_b, .d_bc_first, .d_bc_data, .f_valid, .f_b, .f_first, .f_data,
    .v_valid, .v_ready, .v_we, .v_addr, .v_wdata, .v_tag, .v_rsp_valid,
    .v_rsp_tag0(v_rsp_tag[0]), .v_rsp_data, .rd_b, .rd_w, .v_rd_data, .func_sel, .shift);

  for (genvar d = 0; d < ND; d++) begin : g_dsu
    dsu #(.N_BANKS(NB_D), .WORD_W(W), .BANK_DEPTH(DEPTH), .ROW_WORDS(RWD), .N_REPAIR(2),
          .T_RC(TRC), .RL(RL), .MAX_B(MB)) u_dsu (
      .clk, .rst_n, .a_valid(d_valid[d]), .a_ready(d_ready[d]), .a_we(d_we), .a_addr(d_addr),
      .a_wdata(d_wdata), .a_rsp_valid(d_rsp_valid[d]), .a_rsp_data(d_rsp_data[d]),
      .srv_start(d_srv_start[d]), .srv_base, .srv_stride, .srv_count, .srv_first,
      .srv_busy(d_srv_busy[d]), .bc_valid(d_bc_valid[d]), .bc_b(d_bc_b[d]),
      .bc_first(d_bc_first[d]), .bc_data(d_bc_data[d]),
      .rep_we(1'b0), .rep_slot(2'd0), .rep_bank(3'd0), .rep_row(21'd0), .stall(), .repair_hit());
  end
  for (genvar v = 0; v < NV; v++) begin : g_vpu
    dram_pool #(.N_BANKS(NB_V), .WORD_W(W), .BANK_DEPTH(DEPTH), .ROW_WORDS(RWD), .N_REPAIR(2),
                .T_RC(TRC), .RL(RL)) u_pool (
      .clk, .rst_n, .req_valid(v_valid[v]), .req_ready(v_ready[v]), .req_we(v_we),
      .req_addr(v_addr), .req_wdata(v_wdata), .req_tag(v_tag), .rsp_valid(v_rsp_valid[v]),
      .rsp_data(v_rsp_data[v]), .rsp_tag(v_rsp_tag[v]),
      .rep_we(1'b0), .rep_slot(2'd0), .rep_bank(3'd0), .rep_row(21'd0), .stall(), .repair_hit());
    vpu #(.VEC(VEC), .OC(OC), .MAX_B(MB)) u_vpu (
      .clk, .rst_n, .w_valid(v_rsp_valid[v] && v_rsp_tag[v][TAG_W-1]),
      .w_row(v_rsp_tag[v][2:0]), .w_data(v_rsp_data[v]), .f_valid, .f_b, .f_first, .f_data,
      .func_sel, .shift, .rd_b, .rd_w, .rd_data(v_rd_data[v]));
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk); s_acc = '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(negedge clk); s_acc = '0;
  endtask
  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk); s_acc = '{wr: 1'b0, rd: 1'b1, addr: a, wdata: '0};
    #1 d = s_rdata;
    @(negedge clk); s_acc = '0;
  endtask
  task automatic wait_idle();
    int n = 0;
    @(negedge clk);
    while (busy && n < 100000) begin @(negedge clk); n++; end
  endtask

  // DMA words in / out through the word-level HSP side
  task automatic dma_in(input int unit, input int addr, input logic [W-1:0] data [$]);
    wr(REG_DMA_UNIT, unit); wr(REG_DMA_ADDR, addr); wr(REG_DMA_LEN, data.size());
    wr(REG_CTRL, 32'h2);
    foreach (data[i]) begin
      @(negedge clk); win_valid = 1; win_data = data[i];
      #1; while (!win_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
    end
    @(negedge clk); win_valid = 0;
    wait_idle();
  endtask
  task automatic dma_out(input int unit, input int addr, input int len, output logic [W-1:0] data [$]);
    data = {};
    wr(REG_DMA_UNIT, unit); wr(REG_DMA_ADDR, addr); wr(REG_DMA_LEN, len);
    wr(REG_CTRL, 32'h4);
    @(negedge clk);
    wout_ready = 1;
    while (data.size() < len) begin
      #1;   // a word shown now moves at the next rising edge
      if (wout_valid && wout_ready) data.push_back(wout_data);
      @(negedge clk);
    end
    @(negedge clk); wout_ready = 0;
    wait_idle();
  endtask

  function automatic logic [7:0] post(longint a, int sh, bit relu);
    longint v = a >>> sh;
    if (relu && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  // reference layer: x[b*K+k] words, w[j][k*OC+o] words, result words per b, j, w
  function automatic void ref_layer(input logic [W-1:0] x [$], input logic [W-1:0] wt [NV][$],
                                    input int K, input int B, input int sh, input bit relu,
                                    output logic [W-1:0] y [$]);
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

  initial begin
    logic [31:0] r;
    logic [W-1:0] x [$], y [$], got [$], x2 [$], y2 [$];
    logic [W-1:0] wt [NV][$], wt2 [NV][$];
    int K, B, K2, B2;
    K = 3; B = 3; B2 = 3;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // no operation before repair init
    wr(REG_DMA_LEN, 1); wr(REG_CTRL, 32'h4);
    @(negedge clk); #1 check(!busy, "operation started before init_done");
    init_done = 1;
    // register read-back
    wr(REG_FBASE, 32'h15); rd(REG_FBASE, r); check(r == 32'h15, "FBASE read-back");
    wr(REG_FUNC, 32'h0501); rd(REG_FUNC, r); check(r == 32'h0501, "FUNC read-back");
    rd(REG_STATUS, r); check(r == 32'h2, "STATUS idle, init done");
    // data: features in DSU0 at 16, weights in both VPUs at 8
    for (int n = 0; n < B*K; n++) x.push_back(W'({$urandom}));
    for (int j = 0; j < NV; j++) begin
      for (int n = 0; n < K*OC; n++) wt[j].push_back(W'({$urandom}));
      dma_in(ND + j, 8, wt[j]);
    end
    dma_in(0, 16, x);
    dma_out(0, 16, B*K, got);
    check(got == x, "DMA round trip through DSU0");
    dma_out(ND + 1, 8, K*OC, got);
    check(got == wt[1], "DMA round trip through VPU1 DRAM");
    // layer 1: DSU0 -> DSU1, pass, shift 5
    wr(REG_SRC_DSU, 0); wr(REG_DST_DSU, 1); wr(REG_FBASE, 16); wr(REG_WBASE, 8);
    wr(REG_OBASE, 40); wr(REG_KCH, K); wr(REG_BATCH, B); wr(REG_FUNC, 32'h0500);
    wr(REG_CTRL, 1);
    @(negedge clk); #1 check(busy, "layer did not start");
    wr(REG_OBASE, 99); wr(REG_CTRL, 1);        // ignored while busy
    wait_idle();
    rd(REG_OBASE, r); check(r == 40, "register written while busy");
    rd(REG_LAYERS, r); check(r == 1, "layer count");
    ref_layer(x, wt, K, B, 5, 0, y);
    dma_out(1, 40, B*NV*NW, got);
    check(got.size() == y.size(), "result size");
    foreach (y[i]) check(got[i] == y[i], $sformatf("layer 1 word %0d: %h expected %h", i, got[i], y[i]));
    // layer 2 chained: DSU1 -> DSU0, ReLU, shift 2, K2 = NV*NW chunks
    K2 = NV*NW;
    for (int j = 0; j < NV; j++) begin
      for (int n = 0; n < K2*OC; n++) wt2[j].push_back(W'({$urandom}));
      dma_in(ND + j, 100, wt2[j]);
    end
    wr(REG_SRC_DSU, 1); wr(REG_DST_DSU, 0); wr(REG_FBASE, 40); wr(REG_WBASE, 100);
    wr(REG_OBASE, 0); wr(REG_KCH, K2); wr(REG_BATCH, B2); wr(REG_FUNC, 32'h0201);
    wr(REG_CTRL, 1);
    wait_idle();
    ref_layer(y, wt2, K2, B2, 2, 1, y2);
    dma_out(0, 0, B2*NV*NW, got);
    foreach (y2[i]) check(got[i] == y2[i], $sformatf("layer 2 word %0d: %h expected %h", i, got[i], y2[i]));
    rd(REG_STALLS, r); check(r > 0, "no DRAM stall counted");
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
