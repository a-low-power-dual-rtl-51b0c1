// sync_fifo: single-clock first-in first-out buffer, used for the In, Data
// and Out FIFOs between the SPI port, the DTLS-PSK engine and the
// authentication control FSM.
//
// The paper names the three FIFOs but gives neither their width nor depth;
// this design uses byte-wide FIFOs (the SPI transfers bytes) written as a
// register array. A write into a full FIFO and a read from an empty one are
// ignored; assertions flag them in simulation.
//
// Interface: `wr_en`/`wdata` push, `rd_en` pops; `rdata` shows the oldest
// entry (first-word fall-through), so a pop takes effect at the next edge.
// `count` is the number of stored entries.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 64   // power of two
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rdata,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp_q, rp_q;
  logic do_wr, do_rd;

  assign count = wp_q - rp_q;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rdata = mem[rp_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp_q[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0; rp_q <= '0;
    end else if (clear) begin
      wp_q <= '0; rp_q <= '0;
    end else begin
      if (do_wr) wp_q <= wp_q + 1'b1;
      if (do_rd) rp_q <= rp_q + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !clear));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty && !clear));
endmodule
