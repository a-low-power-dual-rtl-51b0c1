// spi_slave: SPI port to the off-chip BLE module, with its command decoder.
//
// The BLE module is the SPI master (mode 0: SCLK idles low, data sampled on
// the rising edge, MSB first, CS_N active low). The slave runs on HCLK and
// oversamples SCLK, CS_N and MOSI through two-flop synchronisers, so SCLK
// must stay below about HCLK/5 (the paper runs SPI at 125 kbps against a
// 660 kHz HCLK, a ratio of 5.3). The next MISO bit is shifted out right
// after each detected rising edge, which leaves it a full SCLK period to
// settle before the master samples it.
//
// Each transfer (CS_N low) starts with a command byte (codes in imd_pkg):
//   WR_CM addr d15..d0   write a 128-bit crypto-memory word (cm_we pulse)
//   WR_CFG cfg           configuration byte (bit 0: skip second factor)
//   PUSH b b b ...       bytes into the In FIFO
//   POP  x x x ...       each byte clocked out pops the Out FIFO (0 if empty)
//   STATUS x             returns `status`
//   RECORD / HASH_INIT / HASH_BLOCK / HASH_READ   a host_cmd pulse
// The paper names only the SPI link and its speed; the mode, the command
// set and the oversampling are this design's choices.
module spi_slave
  import imd_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sclk,
  input  logic         cs_n,
  input  logic         mosi,
  output logic         miso,
  // In FIFO write
  output logic         in_wr,
  output logic [7:0]   in_wdata,
  // Out FIFO read
  output logic         out_rd,
  input  logic [7:0]   out_rdata,
  input  logic         out_empty,
  // crypto-memory configuration write
  output logic         cm_we,
  output logic [7:0]   cm_addr,
  output logic [127:0] cm_wdata,
  output logic [7:0]   cfg,
  output host_cmd_e    host_cmd,
  input  logic [7:0]   status
);
  logic [2:0] sclk_q, cs_q, mosi_q;
  logic       rise, cs_fall, active;
  logic [2:0] bit_q;
  logic [7:0] rx_q, tx_q, cmd_q;
  logic [4:0] idx_q;        // byte index after the command byte (saturating)
  logic       first_q;      // next byte is the command byte
  logic [7:0] rx_byte;
  logic       byte_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_q <= '0; cs_q <= '1; mosi_q <= '0;
    end else begin
      sclk_q <= {sclk_q[1:0], sclk};
      cs_q   <= {cs_q[1:0], cs_n};
      mosi_q <= {mosi_q[1:0], mosi};
    end
  end
  assign active    = !cs_q[1];
  assign rise      = active && sclk_q[1] && !sclk_q[2];
  assign cs_fall   = !cs_q[1] && cs_q[2];
  assign rx_byte   = {rx_q[6:0], mosi_q[1]};
  assign byte_done = rise && bit_q == 3'd7;
  assign miso      = tx_q[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_q <= '0; rx_q <= '0; tx_q <= '0; cmd_q <= '0; idx_q <= '0; first_q <= 1'b1;
      in_wr <= 1'b0; in_wdata <= '0; out_rd <= 1'b0; cm_we <= 1'b0; cm_addr <= '0;
      cm_wdata <= '0; cfg <= '0; host_cmd <= HC_NONE;
    end else begin
      in_wr <= 1'b0; out_rd <= 1'b0; cm_we <= 1'b0; host_cmd <= HC_NONE;
      if (!active || cs_fall) begin
        bit_q <= '0; first_q <= 1'b1; idx_q <= '0; tx_q <= '0;
      end else if (rise) begin
        rx_q  <= rx_byte;
        bit_q <= bit_q + 3'd1;
        tx_q  <= {tx_q[6:0], 1'b0};
        if (byte_done) begin
          first_q <= 1'b0;
          if (first_q) begin
            cmd_q <= rx_byte;
            idx_q <= '0;
            unique case (rx_byte)
              SPI_RECORD:     host_cmd <= HC_RECORD;
              SPI_HASH_INIT:  host_cmd <= HC_HASH_INIT;
              SPI_HASH_BLOCK: host_cmd <= HC_HASH_BLOCK;
              SPI_HASH_READ:  host_cmd <= HC_HASH_READ;
              default: ;
            endcase
          end else begin
            if (idx_q != 5'd31) idx_q <= idx_q + 5'd1;
            unique case (cmd_q)
              SPI_WR_CM: begin
                if (idx_q == 5'd0) cm_addr <= rx_byte;
                else if (idx_q <= 5'd16) cm_wdata <= {cm_wdata[119:0], rx_byte};
                if (idx_q == 5'd16) cm_we <= 1'b1;
              end
              SPI_WR_CFG: if (idx_q == 5'd0) cfg <= rx_byte;
              SPI_PUSH:   begin in_wr <= 1'b1; in_wdata <= rx_byte; end
              default: ;
            endcase
          end
          // byte to shift out next
          if ((first_q ? rx_byte : cmd_q) == SPI_POP) begin
            tx_q   <= out_empty ? 8'h00 : out_rdata;
            out_rd <= !out_empty;
          end else if (first_q && rx_byte == SPI_STATUS) begin
            tx_q <= status;
          end else begin
            tx_q <= 8'h00;
          end
        end
      end
    end
  end
endmodule
