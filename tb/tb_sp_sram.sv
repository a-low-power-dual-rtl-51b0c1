// tb_sp_sram: writes random words to every address, reads them back in a
// different order, and checks the one-cycle read latency and that a write
// leaves the read data unchanged.
module tb_sp_sram;
  localparam int DEPTH = 32;
  logic clk = 0, en = 0, we = 0;
  logic [4:0] addr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [DEPTH];
  int checks = 0, failures = 0;

  sp_sram #(.WIDTH(128), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] held;
    addr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 5'(a);
      wdata = {$urandom, $urandom, $urandom, $urandom}; model[a] = wdata;
    end
    for (int n = 0; n < 200; n++) begin
      int a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); en = 1; we = 0; addr = 5'(a);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      if (n % 7 == 0) begin
        held = rdata;
        @(negedge clk); en = 1; we = 1; addr = 5'(a);
        wdata = ~model[a]; model[a] = wdata;
        @(negedge clk); en = 0; we = 0;
        checks++;
        if (rdata !== held) begin failures++; $display("FAIL write changed rdata"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
