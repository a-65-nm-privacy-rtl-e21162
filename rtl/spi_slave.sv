// spi_slave: host access to the encoder over SPI.
//
// The paper's chip is programmed and orchestrated through SPI; the protocol
// below is this design's own. SPI mode 0 (sample on the rising SCLK edge,
// change on the falling edge), MSB first, one 40-bit frame per access while
// CS_N is low:
//
//     [39:32] command   bit 7 = 1 write, 0 read; other bits ignored
//     [31:16] address   register map in cie_pkg
//     [15:0]  data      write data, or the read data returned on MISO
//
// SCLK, CS_N and MOSI are synchronised into the clk domain with two flops and
// their edges detected there, so SCLK must run at clk/8 or slower. A read is
// issued on the register bus right after the 24th bit; the response must
// arrive within two clk cycles (the control logic needs at most two) and is
// shifted out over the following 16 SCLK falling edges. A write is issued
// after the 40th bit. `bus_req.req` is a one-cycle pulse.
module spi_slave
  import cie_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     sclk,
  input  logic     cs_n,
  input  logic     mosi,
  output logic     miso,
  output bus_req_t bus_req,
  input  bus_rsp_t bus_rsp
);
  logic [1:0] sclk_sync, cs_sync, mosi_sync;
  logic       sclk_d;
  logic [5:0] bit_cnt;
  logic [39:0] rx;
  logic [15:0] tx;
  logic        is_read;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_sync <= '0;
      cs_sync   <= '1;
      mosi_sync <= '0;
      sclk_d    <= 1'b0;
    end else begin
      sclk_sync <= {sclk_sync[0], sclk};
      cs_sync   <= {cs_sync[0], cs_n};
      mosi_sync <= {mosi_sync[0], mosi};
      sclk_d    <= sclk_sync[1];
    end
  end

  wire active = !cs_sync[1];
  wire rise   = active &&  sclk_sync[1] && !sclk_d;
  wire fall   = active && !sclk_sync[1] &&  sclk_d;
  wire [39:0] rx_next = {rx[38:0], mosi_sync[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt <= '0;
      rx      <= '0;
      tx      <= '0;
      miso    <= 1'b0;
      is_read <= 1'b0;
      bus_req <= '0;
    end else begin
      bus_req.req <= 1'b0;
      if (!active) begin
        bit_cnt <= '0;
        is_read <= 1'b0;
      end else begin
        if (rise && bit_cnt < 6'd40) begin
          rx      <= rx_next;
          bit_cnt <= bit_cnt + 1'b1;
          if (bit_cnt == 6'd23) begin
            is_read         <= !rx_next[23];
            if (!rx_next[23]) begin
              bus_req.req   <= 1'b1;
              bus_req.we    <= 1'b0;
              bus_req.addr  <= rx_next[15:0];
              bus_req.wdata <= '0;
            end
          end
          if (bit_cnt == 6'd39 && rx_next[39]) begin
            bus_req.req   <= 1'b1;
            bus_req.we    <= 1'b1;
            bus_req.addr  <= rx_next[31:16];
            bus_req.wdata <= rx_next[15:0];
          end
        end
        if (fall && bit_cnt >= 6'd24 && is_read) begin
          miso <= tx[15];
          tx   <= {tx[14:0], 1'b0};
        end
      end
      if (bus_rsp.ack && is_read) tx <= bus_rsp.rdata;
    end
  end
endmodule
