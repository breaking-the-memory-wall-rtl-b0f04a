// dram_array: behavioural model of one DRAM array on the memory wafer.
//
// This stands for a DRAM macro bonded face to face under its logic unit;
// the real part is a DRAM-process circuit, so this file is a behavioural
// model (it is nevertheless written as synthesizable array logic). It
// holds DEPTH data words plus SPARE_ROWS spare rows of ROW_WORDS words each,
// used by the PHY's row repair.
//
// Timing: a request is accepted when busy is low. After acceptance the
// array stays busy for T_RC-1 further cycles (row cycle). A read returns
// its word RL cycles after acceptance with rvalid high for one cycle.
// Writes complete at acceptance. Latency and row-cycle values are this
// design's assumptions; the paper only says DRAM is much slower than SRAM.
module dram_array #(
  parameter int WORD_W     = 256,
  parameter int DEPTH      = 131072,
  parameter int ROW_WORDS  = 8,
  parameter int SPARE_ROWS = 4,
  parameter int T_RC       = 4,
  parameter int RL         = 3,
  localparam int TOTAL     = DEPTH + SPARE_ROWS * ROW_WORDS,
  localparam int AW        = $clog2(TOTAL)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  logic              req_we,
  input  logic [AW-1:0]     req_addr,
  input  logic [WORD_W-1:0] req_wdata,
  output logic              busy,
  output logic              rvalid,
  output logic [WORD_W-1:0] rdata
);
  logic [WORD_W-1:0] mem [TOTAL];
  logic [$clog2(T_RC+1)-1:0] rc_cnt;
  logic [RL-1:0]             vpipe;
  logic [WORD_W-1:0]         dpipe [RL];

  wire accept = req_valid && !busy;

  assign busy = (rc_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rc_cnt <= '0;
    else if (accept) rc_cnt <= ($clog2(T_RC+1))'(T_RC - 1);
    else if (busy) rc_cnt <= rc_cnt - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (accept && req_we) mem[req_addr] <= req_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else vpipe <= {vpipe[RL-2:0], accept && !req_we};
  end

  always_ff @(posedge clk) begin
    dpipe[0] <= mem[req_addr];
    for (int i = 1; i < RL; i++) dpipe[i] <= dpipe[i-1];
  end

  assign rvalid = vpipe[RL-1];
  assign rdata  = dpipe[RL-1];

  initial assert (RL >= 2 && T_RC >= 1) else $error("dram_array: RL must be >= 2 and T_RC >= 1");
endmodule
