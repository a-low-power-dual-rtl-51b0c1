// sp_sram: single-port synchronous SRAM, used for the DTLS scratch pad and
// the crypto memory.
//
// The paper gives only the total on-chip SRAM (2.75 KB) and the two memory
// names. It is written here as an array with a registered read, as a memory
// compiler macro would behave: `rdata` shows the word at `addr` one edge
// after a read (`en` high, `we` low). A write (`en` and `we` high) stores
// `wdata` and leaves `rdata` unchanged. The contents are not reset.
module sp_sram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
