// dram_pool: DRAM PHY of one logic unit (DSU or VPU) and its pool of arrays.
//
// A unit owns N_BANKS DRAM arrays bonded directly below it. Word addresses
// are interleaved over the arrays by their low bits, so a stream of
// consecutive addresses keeps every array busy in turn and hides the row
// cycle of each; the load is shared across the pool as the paper describes.
// A request whose array is still busy is held (req_ready low) and counted
// as a stall.
//
// Row repair: the repair table holds N_REPAIR entries {valid, array, row},
// written once at power-up from the NVM defect list. An access to a listed
// row is redirected to spare row <slot> of the same array; a record whose
// slot is N_REPAIR or more is ignored. Interleaving,
// the repair scheme and the handshake are this design's choices; the paper
// states only that arrays are pooled and that the PHY repairs DRAM.
//
// Interface: valid/ready request with write flag, address, data and tag.
// Reads answer in order RL cycles after acceptance on rsp_valid with the
// request's tag. Addresses above the pool's capacity wrap.
module dram_pool
  import sunrise_pkg::*;
#(
  parameter int N_BANKS    = 8,
  parameter int WORD_W     = 256,
  parameter int BANK_DEPTH = 131072,
  parameter int ROW_WORDS  = 8,
  parameter int N_REPAIR   = 4,
  parameter int T_RC       = 4,
  parameter int RL         = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // access port
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [WORD_W-1:0] req_wdata,
  input  logic [TAG_W-1:0]  req_tag,
  output logic              rsp_valid,
  output logic [WORD_W-1:0] rsp_data,
  output logic [TAG_W-1:0]  rsp_tag,
  // repair table load
  input  logic              rep_we,
  input  logic [1:0]        rep_slot,
  input  logic [2:0]        rep_bank,
  input  logic [20:0]       rep_row,
  // observation
  output logic              stall,
  output logic              repair_hit
);
  localparam int BB  = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;
  localparam int LAW = $clog2(BANK_DEPTH);                 // local word address bits
  localparam int CW  = $clog2(ROW_WORDS);                  // column bits
  localparam int RW  = LAW - CW;                           // row bits
  localparam int SW  = (N_REPAIR > 1) ? $clog2(N_REPAIR) : 1; // repair slot bits
  localparam int AAW = $clog2(BANK_DEPTH + N_REPAIR * ROW_WORDS);

  typedef struct packed {
    logic          valid;
    logic [2:0]    bank;
    logic [20:0]   row;
  } rep_t;

  rep_t rep_tab [N_REPAIR];

  logic [BB-1:0]  bank_sel;
  logic [LAW-1:0] local_addr;
  logic [RW-1:0]  row;
  logic [CW-1:0]  col;
  logic [AAW-1:0] arr_addr;
  logic           hit;
  logic [N_BANKS-1:0] busy, rvalid;
  logic [WORD_W-1:0]  rdata [N_BANKS];
  logic [RL-1:0]      tvalid;
  logic [TAG_W-1:0]   tpipe [RL];

  assign bank_sel   = (N_BANKS > 1) ? req_addr[BB-1:0] : '0;
  assign local_addr = (N_BANKS > 1) ? req_addr[BB +: LAW] : req_addr[LAW-1:0];
  assign row        = local_addr[LAW-1:CW];
  assign col        = local_addr[CW-1:0];

  // Repair lookup: a listed (array,row) goes to the spare row of its slot.
  always_comb begin
    hit      = 1'b0;
    arr_addr = AAW'(local_addr);
    for (int i = 0; i < N_REPAIR; i++) begin
      if (rep_tab[i].valid && rep_tab[i].bank == 3'(bank_sel) && rep_tab[i].row == 21'(row)) begin
        hit      = 1'b1;
        arr_addr = AAW'(BANK_DEPTH + i * ROW_WORDS) + AAW'(col);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_REPAIR; i++) rep_tab[i] <= '0;
    end else if (rep_we && 32'(rep_slot) < N_REPAIR) begin
      rep_tab[SW'(rep_slot)] <= '{valid: 1'b1, bank: rep_bank, row: rep_row};
    end
  end

  assign req_ready  = !busy[bank_sel];
  assign stall      = req_valid && !req_ready;
  assign repair_hit = req_valid && req_ready && hit;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    dram_array #(
      .WORD_W(WORD_W), .DEPTH(BANK_DEPTH), .ROW_WORDS(ROW_WORDS),
      .SPARE_ROWS(N_REPAIR), .T_RC(T_RC), .RL(RL)
    ) u_arr (
      .clk, .rst_n,
      .req_valid(req_valid && bank_sel == BB'(b)),
      .req_we,
      .req_addr (arr_addr),
      .req_wdata,
      .busy     (busy[b]),
      .rvalid   (rvalid[b]),
      .rdata    (rdata[b])
    );
  end

  // Tag pipeline matched to the array read latency.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tvalid <= '0;
    else tvalid <= {tvalid[RL-2:0], req_valid && req_ready && !req_we};
  end
  always_ff @(posedge clk) begin
    tpipe[0] <= req_tag;
    for (int i = 1; i < RL; i++) tpipe[i] <= tpipe[i-1];
  end

  always_comb begin
    rsp_data = '0;
    for (int b = 0; b < N_BANKS; b++) if (rvalid[b]) rsp_data = rdata[b];
  end
  assign rsp_valid = tvalid[RL-1];
  assign rsp_tag   = tpipe[RL-1];

  // Only one array is addressed per cycle, so at most one answers.
  a_one_rsp: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rvalid));
  a_rsp_sync: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid == (|rvalid));
endmodule
