// spi_slave: host command interface (SPI mode 0) onto the control bus.
//
// A frame is 40 SCLK cycles inside one low period of CS_N: a command byte
// {write, x, register[5:0]} followed by 32 data bits, all MSB first. For a
// write the slave issues the register write after the last bit; for a read
// it reads the register right after the command byte and shifts the value
// out on MISO during the 32 data bits (MISO changes after falling SCLK
// edges, the host samples on rising edges). SCLK, CS_N and MOSI are
// synchronised into the core clock with two flip-flops, so SCLK must be at
// most one eighth of the core clock. The paper names a standard SPI command
// interface; framing and register mapping are this design's choices.
module spi_slave
  import sunrise_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sclk,
  input  logic              cs_n,
  input  logic              mosi,
  output logic              miso,
  // control-bus master
  output logic              req,
  output bus_req_t          acc,
  input  logic              gnt,
  input  logic [REG_DW-1:0] rdata
);
  logic [2:0] sclk_s, cs_s, mosi_s;
  logic [5:0] bit_cnt;
  logic [7:0] cmd;
  logic [31:0] sh_in, sh_out;
  logic pend_rd, pend_wr;

  wire rise   = !cs_s[2] && sclk_s[1] && !sclk_s[2];
  wire fall   = !cs_s[2] && !sclk_s[1] && sclk_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[1:0], mosi};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt <= '0; cmd <= '0; sh_in <= '0; sh_out <= '0;
      pend_rd <= 1'b0; pend_wr <= 1'b0;
    end else begin
      if (cs_s[2]) begin
        bit_cnt <= '0;
      end else if (rise) begin
        bit_cnt <= bit_cnt + 1'b1;
        if (bit_cnt < 6'd8) begin
          cmd <= {cmd[6:0], mosi_s[2]};
          if (bit_cnt == 6'd7 && !cmd[6]) pend_rd <= 1'b1;   // cmd[6] becomes the write flag
        end else begin
          sh_in <= {sh_in[30:0], mosi_s[2]};
          if (bit_cnt == 6'd39 && cmd[7]) pend_wr <= 1'b1;
        end
      end else if (fall && bit_cnt >= 6'd9) begin
        sh_out <= {sh_out[30:0], 1'b0};
      end
      if (gnt) begin
        if (pend_rd) sh_out <= rdata;
        pend_rd <= 1'b0;
        pend_wr <= 1'b0;
      end
    end
  end

  assign req       = pend_rd || pend_wr;
  assign acc.wr    = pend_wr;
  assign acc.rd    = pend_rd;
  assign acc.addr  = cmd[REG_AW-1:0];
  assign acc.wdata = sh_in;
  assign miso      = (bit_cnt >= 6'd8) ? sh_out[31] : 1'b0;
endmodule
