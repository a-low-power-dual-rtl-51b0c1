// tb_sync_fifo: random pushes and pops against a queue model, including
// filling the FIFO to full and draining it to empty.
module tb_sync_fifo;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, rd_en = 0;
  logic [7:0] wdata, rdata;
  logic full, empty;
  logic [4:0] count;
  int checks = 0, failures = 0;
  logic [7:0] model [$];

  sync_fifo #(.WIDTH(8), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit w, input bit r);
    @(negedge clk);
    wr_en = w && (model.size() < DEPTH);
    rd_en = r && (model.size() > 0);
    wdata = 8'($urandom);
    if (rd_en) begin
      checks++;
      if (rdata !== model[0]) begin failures++; $display("FAIL rdata %h exp %h", rdata, model[0]); end
    end
    @(posedge clk);
    if (rd_en) void'(model.pop_front());
    if (wr_en) model.push_back(wdata);
    #1;
    checks++;
    if (count !== 5'(model.size()) || full !== (model.size() == DEPTH) || empty !== (model.size() == 0)) begin
      failures++; $display("FAIL count %0d exp %0d", count, model.size());
    end
  endtask

  initial begin
    wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < DEPTH; i++) step(1, 0);
    checks++; if (!full) begin failures++; $display("FAIL not full"); end
    for (int i = 0; i < 2000; i++) step($urandom_range(0, 1), $urandom_range(0, 1));
    while (model.size() > 0) step(0, 1);
    checks++; if (!empty) begin failures++; $display("FAIL not empty"); end
    @(negedge clk); wr_en = 0; rd_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
