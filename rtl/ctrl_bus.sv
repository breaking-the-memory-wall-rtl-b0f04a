// ctrl_bus: the chip's central control bus.
//
// Two masters share single-cycle register accesses to the UCE: the SPI
// host interface (master 0) and the on-chip processor (master 1). A master
// holds req with its access until gnt; the granted access reaches the
// slave in the same cycle and read data returns combinationally with gnt.
// Master 0 has fixed priority, so host commands cannot be locked out by
// firmware. The paper shows a shared bus joining interface, processor, NVM
// and the unit pools (its Fig. 7) without a protocol; this one is this
// design's choice.
module ctrl_bus
  import sunrise_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        m_req,
  input  bus_req_t          m_acc [2],
  output logic [1:0]        m_gnt,
  output logic [REG_DW-1:0] m_rdata,
  output bus_req_t          s_acc,
  input  logic [REG_DW-1:0] s_rdata
);
  always_comb begin
    m_gnt = 2'b00;
    s_acc = '0;
    if (m_req[0]) begin
      m_gnt = 2'b01; s_acc = m_acc[0];
    end else if (m_req[1]) begin
      m_gnt = 2'b10; s_acc = m_acc[1];
    end
  end
  assign m_rdata = s_rdata;

  a_gnt_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(m_gnt));
  a_gnt_req:    assert property (@(posedge clk) disable iff (!rst_n) (m_gnt & ~m_req) == 2'b00);
endmodule
