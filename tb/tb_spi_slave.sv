// tb_spi_slave: an SPI master at HCLK/6 exercises every command: crypto-
// memory write, configuration, pushes into the In FIFO, pops from the Out
// FIFO (including popping an empty FIFO), status read and the host commands.
module tb_spi_slave;
  import imd_pkg::*;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0, miso;
  logic in_wr, out_rd, cm_we;
  logic [7:0] in_wdata, out_rdata, cm_addr, cfg, status;
  logic out_empty;
  logic [127:0] cm_wdata;
  host_cmd_e host_cmd;
  logic [7:0] outq [$], inq [$];
  host_cmd_e cmds [$];
  int cm_writes = 0;
  int checks = 0, failures = 0;

  spi_slave dut (.*);
  always #5 clk = ~clk;
  assign out_empty = outq.size() == 0;
  assign out_rdata = out_empty ? 8'h00 : outq[0];
  assign status = 8'hA5;
  always @(negedge clk) begin
    if (out_rd) void'(outq.pop_front());
    if (in_wr) inq.push_back(in_wdata);
    if (cm_we) cm_writes++;
    if (host_cmd != HC_NONE) cmds.push_back(host_cmd);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int HALF = 30;  // ns, SCLK = HCLK / 6
  task automatic xfer(input logic [7:0] tx [], output logic [7:0] rx []);
    rx = new[tx.size()];
    cs_n = 0; #(2 * HALF);
    foreach (tx[i]) begin
      for (int b = 7; b >= 0; b--) begin
        mosi = tx[i][b]; #HALF;
        sclk = 1; rx[i][b] = miso; #HALF;
        sclk = 0;
      end
    end
    #(2 * HALF); cs_n = 1; #(4 * HALF);
  endtask

  initial begin
    logic [7:0] tx [], rx [];
    logic [127:0] w = 128'h00112233445566778899aabbccddeeff;
    repeat (3) @(negedge clk); rst_n = 1; #100;
    tx = new[18]; tx[0] = SPI_WR_CM; tx[1] = 8'h05;
    for (int i = 0; i < 16; i++) tx[2+i] = w[127-8*i -: 8];
    xfer(tx, rx);
    check(cm_writes == 1 && cm_addr == 8'h05 && cm_wdata == w, "crypto memory write");
    xfer('{SPI_WR_CFG, 8'h01}, rx);
    check(cfg == 8'h01, "config byte");
    xfer('{SPI_PUSH, 8'h11, 8'h22, 8'h33, 8'hFE}, rx);
    check(inq.size() == 4 && inq[0] == 8'h11 && inq[3] == 8'hFE, "push bytes");
    outq = '{8'hDE, 8'hAD, 8'hBE};
    xfer('{SPI_POP, 8'h0, 8'h0, 8'h0, 8'h0}, rx);
    check(rx[1] == 8'hDE && rx[2] == 8'hAD && rx[3] == 8'hBE, "pop bytes");
    check(rx[4] == 8'h00 && outq.size() == 0, "pop of empty FIFO reads 0");
    xfer('{SPI_STATUS, 8'h0}, rx);
    check(rx[1] == 8'hA5, "status read");
    xfer('{SPI_RECORD}, rx);
    xfer('{SPI_HASH_INIT}, rx);
    xfer('{SPI_HASH_BLOCK}, rx);
    xfer('{SPI_HASH_READ}, rx);
    check(cmds.size() == 4 && cmds[0] == HC_RECORD && cmds[1] == HC_HASH_INIT
          && cmds[2] == HC_HASH_BLOCK && cmds[3] == HC_HASH_READ, "host commands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
