// uce: Unified Control Engine.
//
// The UCE is the single place that drives data movement on the chip. It
// holds the configuration registers written over the control bus and runs
// one operation at a time:
//
//  * DMA in / DMA out: moves DMA_LEN words between the high-speed port and
//    DRAM of any unit (DSUs are units 0..N_DSU-1, VPUs follow), starting at
//    DMA_ADDR. DMA out keeps one read in flight.
//  * Layer: a fully connected layer over the whole VPU pool in weight-
//    stationary order. For each input chunk k (KCH chunks of VEC inputs):
//    every VPU loads its OC x VEC weight tile from its own DRAM at
//    WBASE + k*OC (the same address in all VPUs, issued in lock step), then
//    the source DSU serves chunk k of every batch item (address
//    FBASE + b*KCH + k) onto the broadcast bus. After the last chunk the
//    results are written back, per batch item b, VPU j and word w, to the
//    destination DSU at OBASE + b*N_VPU*OC/VEC + j*OC/VEC + w. A layer's
//    output therefore has exactly the layout the next layer reads as input
//    with KCH = N_VPU*OC/VEC.
//
// The data-path multiplexer control is the choice of serving DSU
// (SRC_DSU), receiving DSU (DST_DSU) and the VPU whose results go out; the
// function selector is FUNC (output function and shift) forwarded to the
// VPUs. The paper lists DMA, data-path multiplexer control and a function
// selector as the UCE's parts and says it controls all data flow; the
// register map, the order of a layer and one-operation-at-a-time are this
// design's choices. Operations are ignored until DRAM repair has finished
// (init_done) and while one is running. STALLS counts cycles any request
// of the UCE waited for a busy DRAM array.
module uce
  import sunrise_pkg::*;
#(
  parameter int N_VPU = 16,
  parameter int N_DSU = 4,
  parameter int VEC   = 32,
  parameter int OC    = 64,
  parameter int MAX_B = 8,
  localparam int WORD_W = VEC * DATA_W,
  localparam int NW     = OC / VEC,
  localparam int BW     = (MAX_B > 1) ? $clog2(MAX_B) : 1,
  localparam int RWW    = (NW > 1) ? $clog2(NW) : 1,
  localparam int JW     = (N_VPU > 1) ? $clog2(N_VPU) : 1,
  localparam int DW     = (N_DSU > 1) ? $clog2(N_DSU) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init_done,
  output logic              busy,
  // control bus slave
  input  bus_req_t          s_acc,
  output logic [REG_DW-1:0] s_rdata,
  // high-speed port words
  input  logic              win_valid,
  output logic              win_ready,
  input  logic [WORD_W-1:0] win_data,
  output logic              wout_valid,
  input  logic              wout_ready,
  output logic [WORD_W-1:0] wout_data,
  // DSU access ports (address and data shared, valid per DSU)
  output logic [N_DSU-1:0]  d_valid,
  input  logic [N_DSU-1:0]  d_ready,
  output logic              d_we,
  output logic [ADDR_W-1:0] d_addr,
  output logic [WORD_W-1:0] d_wdata,
  input  logic [N_DSU-1:0]  d_rsp_valid,
  input  logic [WORD_W-1:0] d_rsp_data [N_DSU],
  // DSU serve engines
  output logic [N_DSU-1:0]  d_srv_start,
  output logic [ADDR_W-1:0] srv_base,
  output logic [ADDR_W-1:0] srv_stride,
  output logic [BW:0]       srv_count,
  output logic              srv_first,
  input  logic [N_DSU-1:0]  d_srv_busy,
  // DSU broadcast in, selected one out to the VPU pool
  input  logic [N_DSU-1:0]  d_bc_valid,
  input  logic [BW-1:0]     d_bc_b [N_DSU],
  input  logic [N_DSU-1:0]  d_bc_first,
  input  logic [WORD_W-1:0] d_bc_data [N_DSU],
  output logic              f_valid,
  output logic [BW-1:0]     f_b,
  output logic              f_first,
  output logic [WORD_W-1:0] f_data,
  // VPU DRAM ports (address, data, tag shared)
  output logic [N_VPU-1:0]  v_valid,
  input  logic [N_VPU-1:0]  v_ready,
  output logic              v_we,
  output logic [ADDR_W-1:0] v_addr,
  output logic [WORD_W-1:0] v_wdata,
  output logic [TAG_W-1:0]  v_tag,
  input  logic [N_VPU-1:0]  v_rsp_valid,
  input  logic [TAG_W-1:0]  v_rsp_tag0,
  input  logic [WORD_W-1:0] v_rsp_data [N_VPU],
  // VPU result read-out and function selector
  output logic [BW-1:0]     rd_b,
  output logic [RWW-1:0]    rd_w,
  input  logic [WORD_W-1:0] v_rd_data [N_VPU],
  output func_e             func_sel,
  output logic [4:0]        shift
);
  typedef enum logic [3:0] {
    S_IDLE, S_LW_ISSUE, S_LW_WAIT, S_FEED_START, S_FEED_WAIT, S_WB, S_DONE,
    S_DIN, S_DOUT_REQ, S_DOUT_WAIT, S_DOUT_SEND
  } state_e;
  state_e state;

  // configuration registers
  logic [DW-1:0]     src_dsu, dst_dsu;
  logic [ADDR_W-1:0] fbase, wbase, obase, dma_addr;
  logic [15:0]       kch, dma_len;
  logic [BW:0]       batch;
  logic [4:0]        dma_unit;
  logic [31:0]       stalls, layers;

  // sequencing counters
  logic [15:0]       k, cnt;
  logic [$clog2(OC):0] r, rcv;
  logic [BW:0]       b;
  logic [JW-1:0]     j;
  logic [RWW-1:0]    w;
  logic [WORD_W-1:0] obuf;

  wire dma_to_vpu  = (dma_unit >= 5'(N_DSU));
  wire [4:0] vsel5 = dma_unit - 5'(N_DSU);
  wire [JW-1:0] vsel = vsel5[JW-1:0];
  wire [DW-1:0] dsel = dma_unit[DW-1:0];

  wire all_v_ready = &v_ready;
  wire dma_ready   = dma_to_vpu ? v_ready[vsel] : d_ready[dsel];
  wire dma_rsp     = dma_to_vpu ? v_rsp_valid[vsel] : d_rsp_valid[dsel];
  wire [WORD_W-1:0] dma_rdata = dma_to_vpu ? v_rsp_data[vsel] : d_rsp_data[dsel];

  // register write and read
  wire ctrl_wr = s_acc.wr && s_acc.addr == REG_CTRL;
  wire can_go  = (state == S_IDLE) && init_done;

  always_comb begin
    unique case (s_acc.addr)
      REG_STATUS:   s_rdata = {30'd0, init_done, busy};
      REG_SRC_DSU:  s_rdata = 32'(src_dsu);
      REG_DST_DSU:  s_rdata = 32'(dst_dsu);
      REG_FBASE:    s_rdata = 32'(fbase);
      REG_WBASE:    s_rdata = 32'(wbase);
      REG_OBASE:    s_rdata = 32'(obase);
      REG_KCH:      s_rdata = 32'(kch);
      REG_BATCH:    s_rdata = 32'(batch);
      REG_FUNC:     s_rdata = {19'd0, shift, 6'd0, func_sel};
      REG_DMA_UNIT: s_rdata = 32'(dma_unit);
      REG_DMA_ADDR: s_rdata = 32'(dma_addr);
      REG_DMA_LEN:  s_rdata = 32'(dma_len);
      REG_STALLS:   s_rdata = stalls;
      REG_LAYERS:   s_rdata = layers;
      default:      s_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_dsu <= '0; dst_dsu <= '0; fbase <= '0; wbase <= '0; obase <= '0;
      kch <= 16'd1; batch <= (BW+1)'(1); func_sel <= FN_PASS; shift <= '0;
      dma_unit <= '0; dma_addr <= '0; dma_len <= '0;
    end else if (s_acc.wr && state == S_IDLE) begin
      unique case (s_acc.addr)
        REG_SRC_DSU:  src_dsu  <= s_acc.wdata[DW-1:0];
        REG_DST_DSU:  dst_dsu  <= s_acc.wdata[DW-1:0];
        REG_FBASE:    fbase    <= s_acc.wdata[ADDR_W-1:0];
        REG_WBASE:    wbase    <= s_acc.wdata[ADDR_W-1:0];
        REG_OBASE:    obase    <= s_acc.wdata[ADDR_W-1:0];
        REG_KCH:      kch      <= s_acc.wdata[15:0];
        REG_BATCH:    batch    <= s_acc.wdata[BW:0];
        REG_FUNC: begin
          func_sel <= func_e'(s_acc.wdata[1:0]);
          shift    <= s_acc.wdata[12:8];
        end
        REG_DMA_UNIT: dma_unit <= s_acc.wdata[4:0];
        REG_DMA_ADDR: dma_addr <= s_acc.wdata[ADDR_W-1:0];
        REG_DMA_LEN:  dma_len  <= s_acc.wdata[15:0];
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- datapath
  assign busy = (state != S_IDLE);

  // broadcast multiplexer: the serving DSU drives the VPU pool
  assign f_valid = d_bc_valid[src_dsu];
  assign f_b     = d_bc_b[src_dsu];
  assign f_first = d_bc_first[src_dsu];
  assign f_data  = d_bc_data[src_dsu];

  assign srv_base   = fbase + ADDR_W'(k);
  assign srv_stride = ADDR_W'(kch);
  assign srv_count  = batch;
  assign srv_first  = (k == '0);

  assign rd_b = b[BW-1:0];
  assign rd_w = w;

  wire [ADDR_W-1:0] wb_addr = obase + ADDR_W'(b) * ADDR_W'(N_VPU * NW) + ADDR_W'(j) * ADDR_W'(NW) + ADDR_W'(w);

  always_comb begin
    d_valid = '0; d_we = 1'b0; d_addr = '0; d_wdata = '0; d_srv_start = '0;
    v_valid = '0; v_we = 1'b0; v_addr = '0; v_wdata = '0; v_tag = '0;
    win_ready = 1'b0; wout_valid = 1'b0; wout_data = obuf;
    unique case (state)
      S_LW_ISSUE: begin
        v_valid = all_v_ready ? '1 : '0;
        v_addr  = wbase + ADDR_W'(k) * ADDR_W'(OC) + ADDR_W'(r);
        v_tag   = TAG_W'({1'b1, (TAG_W-1)'(r)});
      end
      S_FEED_START: d_srv_start[src_dsu] = 1'b1;
      S_WB: begin
        d_valid[dst_dsu] = 1'b1;
        d_we    = 1'b1;
        d_addr  = wb_addr;
        d_wdata = v_rd_data[j];
      end
      S_DIN: begin
        if (dma_to_vpu) v_valid[vsel] = win_valid; else d_valid[dsel] = win_valid;
        v_we = 1'b1; d_we = 1'b1;
        v_addr = dma_addr + ADDR_W'(cnt); d_addr = v_addr;
        v_wdata = win_data; d_wdata = win_data;
        win_ready = dma_ready;
      end
      S_DOUT_REQ: begin
        if (dma_to_vpu) v_valid[vsel] = 1'b1; else d_valid[dsel] = 1'b1;
        v_addr = dma_addr + ADDR_W'(cnt); d_addr = v_addr;
      end
      S_DOUT_SEND: wout_valid = 1'b1;
      default: ;
    endcase
  end

  wire lw_acc  = (state == S_LW_ISSUE) && all_v_ready;
  wire wb_acc  = (state == S_WB) && d_ready[dst_dsu];
  wire lw_rsp  = v_rsp_valid[0] && v_rsp_tag0[TAG_W-1];
  wire waiting = ((state == S_LW_ISSUE) && !all_v_ready) ||
                 ((state == S_WB) && !d_ready[dst_dsu]) ||
                 ((state == S_DIN) && win_valid && !dma_ready) ||
                 ((state == S_DOUT_REQ) && !dma_ready);

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; k <= '0; cnt <= '0; r <= '0; rcv <= '0;
      b <= '0; j <= '0; w <= '0; obuf <= '0; stalls <= '0; layers <= '0;
    end else begin
      if (waiting) stalls <= stalls + 1'b1;
      if (lw_rsp) rcv <= rcv + 1'b1;
      unique case (state)
        S_IDLE: if (ctrl_wr && can_go) begin
          k <= '0; cnt <= '0; r <= '0; rcv <= '0; b <= '0; j <= '0; w <= '0;
          if (s_acc.wdata[0] && kch != '0 && batch != '0 && batch <= (BW+1)'(MAX_B))
            state <= S_LW_ISSUE;
          else if (s_acc.wdata[1] && dma_len != '0) state <= S_DIN;
          else if (s_acc.wdata[2] && dma_len != '0) state <= S_DOUT_REQ;
        end
        S_LW_ISSUE: if (lw_acc) begin
          r <= r + 1'b1;
          if (r == ($clog2(OC)+1)'(OC - 1)) state <= S_LW_WAIT;
        end
        S_LW_WAIT: if (rcv == ($clog2(OC)+1)'(OC) && !lw_rsp) begin
          rcv <= '0; r <= '0;
          state <= S_FEED_START;
        end
        S_FEED_START: state <= S_FEED_WAIT;
        S_FEED_WAIT: if (!d_srv_busy[src_dsu]) begin
          if (k == kch - 1'b1) state <= S_WB;
          else begin
            k <= k + 1'b1;
            state <= S_LW_ISSUE;
          end
        end
        S_WB: if (wb_acc) begin
          w <= w + 1'b1;
          if (w == RWW'(NW - 1)) begin
            w <= '0;
            j <= j + 1'b1;
            if (j == JW'(N_VPU - 1)) begin
              j <= '0;
              b <= b + 1'b1;
              if (b == batch - 1'b1) state <= S_DONE;
            end
          end
        end
        S_DONE: begin
          layers <= layers + 1'b1;
          state  <= S_IDLE;
        end
        S_DIN: if (win_valid && dma_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == dma_len - 1'b1) state <= S_IDLE;
        end
        S_DOUT_REQ: if (dma_ready) state <= S_DOUT_WAIT;
        S_DOUT_WAIT: if (dma_rsp) begin
          obuf  <= dma_rdata;
          state <= S_DOUT_SEND;
        end
        S_DOUT_SEND: if (wout_ready) begin
          cnt <= cnt + 1'b1;
          state <= (cnt == dma_len - 1'b1) ? S_IDLE : S_DOUT_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (OC % VEC == 0 && OC <= (1 << (TAG_W-1))) else $error("uce: bad OC");
  // All VPU DRAM PHYs see identical traffic during weight loads, so they answer together.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LW_WAIT || state == S_LW_ISSUE) |-> (v_rsp_valid == '0 || v_rsp_valid == '1));
endmodule
