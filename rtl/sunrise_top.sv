// sunrise_top: logic die of the near-memory inference accelerator, with the
// DRAM arrays of the memory die bonded beneath each unit.
//
// Blocks: N_VPU vector processing units, each over its own pool of
// VPU_BANKS DRAM arrays holding its weights; N_DSU data serving units, each
// over DSU_BANKS arrays holding features and results; the Unified Control
// Engine that sequences all data movement; the control bus shared by the
// SPI host interface and the on-chip processor; the high-speed data port;
// and the repair loader that applies the NVM defect list to every DRAM PHY
// at power-up. The processor and the NVM are outside this RTL: their ports
// are the proc_* and nvm_* pins.
//
// With the defaults there are 16 x 64 x 32 = 32,768 multiply-accumulators
// and 144 arrays x 131,072 words x 256 bits = 4.5 Gb of DRAM (plus spare
// rows), the two totals the paper gives. How these totals are split into
// units, arrays and tiles is this design's choice. Unit ids for DMA and
// repair: DSUs 0..N_DSU-1, then VPUs N_DSU..N_DSU+N_VPU-1.
//
// Clocking: one clock. init_done rises once the defect list is applied;
// busy is high while the UCE runs an operation.
module sunrise_top
  import sunrise_pkg::*;
#(
  parameter int N_VPU       = 16,
  parameter int N_DSU       = 4,
  parameter int VEC         = 32,
  parameter int OC          = 64,
  parameter int MAX_B       = 8,
  parameter int VPU_BANKS   = 8,
  parameter int DSU_BANKS   = 4,
  parameter int BANK_DEPTH  = 131072,
  parameter int ROW_WORDS   = 8,
  parameter int N_REPAIR    = 4,
  parameter int T_RC        = 4,
  parameter int RL          = 3,
  parameter int NVM_ENTRIES = 16,
  localparam int WORD_W     = VEC * DATA_W,
  localparam int NAW        = (NVM_ENTRIES > 1) ? $clog2(NVM_ENTRIES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // SPI command interface
  input  logic              spi_sclk,
  input  logic              spi_cs_n,
  input  logic              spi_mosi,
  output logic              spi_miso,
  // high-speed data port
  input  logic              hsp_rx_valid,
  output logic              hsp_rx_ready,
  input  logic [7:0]        hsp_rx_data,
  output logic              hsp_tx_valid,
  input  logic              hsp_tx_ready,
  output logic [7:0]        hsp_tx_data,
  // on-chip processor's control-bus master port
  input  logic              proc_req,
  input  bus_req_t          proc_acc,
  output logic              proc_gnt,
  output logic [REG_DW-1:0] proc_rdata,
  // NVM read port (defect list)
  output logic              nvm_rd_en,
  output logic [NAW-1:0]    nvm_addr,
  input  logic [31:0]       nvm_rdata,
  // status
  output logic              init_done,
  output logic              busy,
  // observation: a DRAM request waited on a busy array / hit a repaired row
  output logic              dram_stall,
  output logic              dram_repair_hit
);
  localparam int BW  = (MAX_B > 1) ? $clog2(MAX_B) : 1;
  localparam int RWW = (OC/VEC > 1) ? $clog2(OC/VEC) : 1;

  logic [N_DSU+N_VPU-1:0] unit_stall, unit_hit;
  assign dram_stall      = |unit_stall;
  assign dram_repair_hit = |unit_hit;

  // ---------------------------------------------------------- control bus
  logic        spi_req, spi_gnt;
  bus_req_t    spi_acc, s_acc;
  bus_req_t    m_acc [2];
  logic [1:0]  m_gnt;
  logic [REG_DW-1:0] m_rdata, s_rdata;

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .req(spi_req), .acc(spi_acc), .gnt(spi_gnt), .rdata(m_rdata)
  );

  assign m_acc[0] = spi_acc;
  assign m_acc[1] = proc_acc;
  ctrl_bus u_bus (
    .clk, .rst_n, .m_req({proc_req, spi_req}), .m_acc, .m_gnt, .m_rdata,
    .s_acc, .s_rdata
  );
  assign spi_gnt    = m_gnt[0];
  assign proc_gnt   = m_gnt[1];
  assign proc_rdata = m_rdata;

  // ---------------------------------------------------------- repair
  logic        rep_we;
  logic [4:0]  rep_unit;
  logic [1:0]  rep_slot;
  logic [2:0]  rep_bank;
  logic [20:0] rep_row;

  repair_loader #(.N_ENTRIES(NVM_ENTRIES)) u_rep (
    .clk, .rst_n, .nvm_rd_en, .nvm_addr, .nvm_rdata,
    .rep_we, .rep_unit, .rep_slot, .rep_bank, .rep_row, .init_done
  );

  // ---------------------------------------------------------- HSP
  logic              win_valid, win_ready, wout_valid, wout_ready;
  logic [WORD_W-1:0] win_data, wout_data;

  hsp_port #(.BYTES(VEC)) u_hsp (
    .clk, .rst_n,
    .rx_valid(hsp_rx_valid), .rx_ready(hsp_rx_ready), .rx_data(hsp_rx_data),
    .win_valid, .win_ready, .win_data,
    .wout_valid, .wout_ready, .wout_data,
    .tx_valid(hsp_tx_valid), .tx_ready(hsp_tx_ready), .tx_data(hsp_tx_data)
  );

  // ---------------------------------------------------------- UCE wiring
  logic [N_DSU-1:0]  d_valid, d_ready, d_rsp_valid, d_srv_start, d_srv_busy, d_bc_valid, d_bc_first;
  logic              d_we;
  logic [ADDR_W-1:0] d_addr, srv_base, srv_stride;
  logic [WORD_W-1:0] d_wdata;
  logic [WORD_W-1:0] d_rsp_data [N_DSU];
  logic [WORD_W-1:0] d_bc_data [N_DSU];
  logic [BW-1:0]     d_bc_b [N_DSU];
  logic [BW:0]       srv_count;
  logic              srv_first;
  logic              f_valid, f_first;
  logic [BW-1:0]     f_b;
  logic [WORD_W-1:0] f_data;

  logic [N_VPU-1:0]  v_valid, v_ready, v_rsp_valid;
  logic              v_we;
  logic [ADDR_W-1:0] v_addr;
  logic [WORD_W-1:0] v_wdata;
  logic [TAG_W-1:0]  v_tag;
  logic [TAG_W-1:0]  v_rsp_tag [N_VPU];
  logic [WORD_W-1:0] v_rsp_data [N_VPU];
  logic [WORD_W-1:0] v_rd_data [N_VPU];
  logic [BW-1:0]     rd_b;
  logic [RWW-1:0]    rd_w;
  func_e             func_sel;
  logic [4:0]        shift;

  uce #(.N_VPU(N_VPU), .N_DSU(N_DSU), .VEC(VEC), .OC(OC), .MAX_B(MAX_B)) u_uce (
    .clk, .rst_n, .init_done, .busy,
    .s_acc, .s_rdata,
    .win_valid, .win_ready, .win_data, .wout_valid, .wout_ready, .wout_data,
    .d_valid, .d_ready, .d_we, .d_addr, .d_wdata, .d_rsp_valid, .d_rsp_data,
    .d_srv_start, .srv_base, .srv_stride, .srv_count, .srv_first, .d_srv_busy,
    .d_bc_valid, .d_bc_b, .d_bc_first, .d_bc_data,
    .f_valid, .f_b, .f_first, .f_data,
    .v_valid, .v_ready, .v_we, .v_addr, .v_wdata, .v_tag,
    .v_rsp_valid, .v_rsp_tag0(v_rsp_tag[0]), .v_rsp_data,
    .rd_b, .rd_w, .v_rd_data, .func_sel, .shift
  );

  // ---------------------------------------------------------- DSU pool
  for (genvar d = 0; d < N_DSU; d++) begin : g_dsu
    dsu #(
      .N_BANKS(DSU_BANKS), .WORD_W(WORD_W), .BANK_DEPTH(BANK_DEPTH), .ROW_WORDS(ROW_WORDS),
      .N_REPAIR(N_REPAIR), .T_RC(T_RC), .RL(RL), .MAX_B(MAX_B)
    ) u_dsu (
      .clk, .rst_n,
      .a_valid(d_valid[d]), .a_ready(d_ready[d]), .a_we(d_we), .a_addr(d_addr), .a_wdata(d_wdata),
      .a_rsp_valid(d_rsp_valid[d]), .a_rsp_data(d_rsp_data[d]),
      .srv_start(d_srv_start[d]), .srv_base, .srv_stride, .srv_count, .srv_first,
      .srv_busy(d_srv_busy[d]),
      .bc_valid(d_bc_valid[d]), .bc_b(d_bc_b[d]), .bc_first(d_bc_first[d]), .bc_data(d_bc_data[d]),
      .rep_we(rep_we && rep_unit == 5'(d)), .rep_slot, .rep_bank, .rep_row,
      .stall(unit_stall[d]), .repair_hit(unit_hit[d])
    );
  end

  // ---------------------------------------------------------- VPU pool
  for (genvar v = 0; v < N_VPU; v++) begin : g_vpu
    dram_pool #(
      .N_BANKS(VPU_BANKS), .WORD_W(WORD_W), .BANK_DEPTH(BANK_DEPTH), .ROW_WORDS(ROW_WORDS),
      .N_REPAIR(N_REPAIR), .T_RC(T_RC), .RL(RL)
    ) u_pool (
      .clk, .rst_n,
      .req_valid(v_valid[v]), .req_ready(v_ready[v]), .req_we(v_we), .req_addr(v_addr),
      .req_wdata(v_wdata), .req_tag(v_tag),
      .rsp_valid(v_rsp_valid[v]), .rsp_data(v_rsp_data[v]), .rsp_tag(v_rsp_tag[v]),
      .rep_we(rep_we && rep_unit == 5'(N_DSU + v)), .rep_slot, .rep_bank, .rep_row,
      .stall(unit_stall[N_DSU+v]), .repair_hit(unit_hit[N_DSU+v])
    );

    vpu #(.VEC(VEC), .OC(OC), .MAX_B(MAX_B)) u_vpu (
      .clk, .rst_n,
      .w_valid(v_rsp_valid[v] && v_rsp_tag[v][TAG_W-1]),
      .w_row  (v_rsp_tag[v][$clog2(OC)-1:0]),
      .w_data (v_rsp_data[v]),
      .f_valid, .f_b, .f_first, .f_data,
      .func_sel, .shift, .rd_b, .rd_w,
      .rd_data(v_rd_data[v])
    );
  end

  initial assert (N_DSU + N_VPU <= 32) else $error("sunrise_top: at most 32 units");
endmodule
