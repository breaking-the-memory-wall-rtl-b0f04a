// dsu: data serving unit.
//
// A DSU keeps feature data and layer results in its own DRAM pool and
// serves them to the VPU pool. It has two users. The serve engine, started
// by the UCE, reads srv_count feature vectors at srv_base, srv_base +
// srv_stride, ... (one input chunk of each batch item) and puts each on
// the broadcast output with its batch index, as fast as the arrays allow.
// The access port carries DMA traffic and result write-back. While serving,
// the access port is held off. srv_busy stays high from srv_start until the
// last served vector has left the arrays. The paper gives the DSU's role
// (store features, send them to the VPUs, receive results); this engine is
// the simplest design that does it.
module dsu
  import sunrise_pkg::*;
#(
  parameter int N_BANKS    = 4,
  parameter int WORD_W     = 256,
  parameter int BANK_DEPTH = 131072,
  parameter int ROW_WORDS  = 8,
  parameter int N_REPAIR   = 4,
  parameter int T_RC       = 4,
  parameter int RL         = 3,
  parameter int MAX_B      = 8,
  localparam int BW        = (MAX_B > 1) ? $clog2(MAX_B) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // access port (DMA, write-back)
  input  logic              a_valid,
  output logic              a_ready,
  input  logic              a_we,
  input  logic [ADDR_W-1:0] a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic              a_rsp_valid,
  output logic [WORD_W-1:0] a_rsp_data,
  // serve engine
  input  logic              srv_start,
  input  logic [ADDR_W-1:0] srv_base,
  input  logic [ADDR_W-1:0] srv_stride,
  input  logic [BW:0]       srv_count,
  input  logic              srv_first,
  output logic              srv_busy,
  // feature broadcast
  output logic              bc_valid,
  output logic [BW-1:0]     bc_b,
  output logic              bc_first,
  output logic [WORD_W-1:0] bc_data,
  // repair table load
  input  logic              rep_we,
  input  logic [1:0]        rep_slot,
  input  logic [2:0]        rep_bank,
  input  logic [20:0]       rep_row,
  output logic              stall,
  output logic              repair_hit
);
  logic              active, first_q;
  logic [BW:0]       issued, count_q;
  logic [ADDR_W-1:0] addr_q, stride_q;
  logic [BW+1:0]     outstanding;

  logic              p_valid, p_ready, p_we;
  logic [ADDR_W-1:0] p_addr;
  logic [WORD_W-1:0] p_wdata;
  logic [TAG_W-1:0]  p_tag, r_tag;
  logic              r_valid;
  logic [WORD_W-1:0] r_data;

  wire srv_req = active && (issued != count_q);
  wire srv_acc = srv_req && p_ready;
  wire srv_rsp = r_valid && r_tag[TAG_W-1];

  always_comb begin
    if (active) begin
      p_valid = srv_req; p_we = 1'b0; p_addr = addr_q; p_wdata = '0;
      p_tag   = TAG_W'({1'b1, first_q, (TAG_W-2)'(issued)});
    end else begin
      p_valid = a_valid; p_we = a_we; p_addr = a_addr; p_wdata = a_wdata;
      p_tag   = '0;
    end
  end
  assign a_ready = !active && p_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; first_q <= 1'b0; issued <= '0; count_q <= '0;
      addr_q <= '0; stride_q <= '0; outstanding <= '0;
    end else begin
      if (srv_start && !active) begin
        active <= 1'b1; first_q <= srv_first; issued <= '0; count_q <= srv_count;
        addr_q <= srv_base; stride_q <= srv_stride;
      end else if (active) begin
        if (srv_acc) begin
          issued <= issued + 1'b1;
          addr_q <= addr_q + stride_q;
        end
        if (!srv_req && outstanding == '0) active <= 1'b0;
      end
      outstanding <= outstanding + (BW+2)'(srv_acc) - (BW+2)'(srv_rsp);
    end
  end
  assign srv_busy = active;

  dram_pool #(
    .N_BANKS(N_BANKS), .WORD_W(WORD_W), .BANK_DEPTH(BANK_DEPTH), .ROW_WORDS(ROW_WORDS),
    .N_REPAIR(N_REPAIR), .T_RC(T_RC), .RL(RL)
  ) u_pool (
    .clk, .rst_n,
    .req_valid(p_valid), .req_ready(p_ready), .req_we(p_we), .req_addr(p_addr),
    .req_wdata(p_wdata), .req_tag(p_tag),
    .rsp_valid(r_valid), .rsp_data(r_data), .rsp_tag(r_tag),
    .rep_we, .rep_slot, .rep_bank, .rep_row,
    .stall, .repair_hit
  );

  assign bc_valid    = srv_rsp;
  assign bc_b        = r_tag[BW-1:0];
  assign bc_first    = r_tag[TAG_W-2];
  assign bc_data     = r_data;
  assign a_rsp_valid = r_valid && !r_tag[TAG_W-1];
  assign a_rsp_data  = r_data;

  initial assert (BW + 2 <= TAG_W) else $error("dsu: MAX_B too large for TAG_W");
endmodule
