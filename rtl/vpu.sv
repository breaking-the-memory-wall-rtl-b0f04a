// vpu: vector processing unit with a stationary weight tile.
//
// The VPU keeps one weight tile of OC output channels by VEC inputs in
// registers. The tile is loaded row by row (one output channel, VEC
// weights per DRAM word) from the VPU's own DRAM. Feature vectors of VEC
// elements are broadcast to every VPU; for each one the VPU computes OC dot
// products of length VEC at once (OC*VEC multiply-accumulates per cycle)
// and adds them into the partial sum of that batch item. Partial sums stay
// in the VPU: f_first starts a fresh sum (first input chunk), otherwise the
// products accumulate. This follows the paper's weight-stationary, broadcast
// dataflow with intermediate data kept local; the tile shape, precision and
// batch depth MAX_B are this design's choices.
//
// Read-out applies the selected output function (the UCE's function
// selector): arithmetic right shift by `shift`, optional ReLU, saturation
// to 8 bits. rd_data returns VEC results of batch item rd_b, channels
// rd_w*VEC .. rd_w*VEC+VEC-1, combinationally.
//
// Timing: a weight row is written the cycle after w_valid; a feature's sums
// are updated the cycle after f_valid. A tile must not be reloaded while
// features of the previous tile are still arriving (the UCE orders this).
module vpu
  import sunrise_pkg::*;
#(
  parameter int VEC   = 32,
  parameter int OC    = 64,
  parameter int MAX_B = 8,
  localparam int RWW  = (OC/VEC > 1) ? $clog2(OC/VEC) : 1,
  localparam int BW   = (MAX_B > 1) ? $clog2(MAX_B) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // weight tile load
  input  logic                   w_valid,
  input  logic [$clog2(OC)-1:0]  w_row,
  input  logic [VEC*DATA_W-1:0]  w_data,
  // broadcast features
  input  logic                   f_valid,
  input  logic [BW-1:0]          f_b,
  input  logic                   f_first,
  input  logic [VEC*DATA_W-1:0]  f_data,
  // result read-out
  input  func_e                  func_sel,
  input  logic [4:0]             shift,
  input  logic [BW-1:0]          rd_b,
  input  logic [RWW-1:0]         rd_w,
  output logic [VEC*DATA_W-1:0]  rd_data
);
  logic signed [DATA_W-1:0] wt  [OC][VEC];
  logic signed [ACC_W-1:0]  acc [MAX_B][OC];
  logic signed [ACC_W-1:0]  dot [OC];

  always_ff @(posedge clk) begin
    if (w_valid)
      for (int i = 0; i < VEC; i++) wt[w_row][i] <= w_data[i*DATA_W +: DATA_W];
  end

  always_comb begin
    for (int o = 0; o < OC; o++) begin
      dot[o] = '0;
      for (int i = 0; i < VEC; i++)
        dot[o] += ACC_W'(wt[o][i] * $signed(f_data[i*DATA_W +: DATA_W]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < MAX_B; b++)
        for (int o = 0; o < OC; o++) acc[b][o] <= '0;
    end else if (f_valid) begin
      for (int o = 0; o < OC; o++)
        acc[f_b][o] <= (f_first ? '0 : acc[f_b][o]) + dot[o];
    end
  end

  // Output function: shift, optional ReLU, saturate to DATA_W bits.
  always_comb begin
    logic signed [ACC_W-1:0] v;
    for (int i = 0; i < VEC; i++) begin
      v = acc[rd_b][rd_w*VEC + i] >>> shift;
      if (func_sel == FN_RELU && v < 0) v = '0;
      if (v > 127)       rd_data[i*DATA_W +: DATA_W] = 8'sd127;
      else if (v < -128) rd_data[i*DATA_W +: DATA_W] = -8'sd128;
      else               rd_data[i*DATA_W +: DATA_W] = v[DATA_W-1:0];
    end
  end

  initial assert (OC % VEC == 0) else $error("vpu: OC must be a multiple of VEC");
endmodule
