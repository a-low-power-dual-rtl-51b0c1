// tb_dtls_psk_engine: drives the record engine through its FIFO ports with
// queue models. It checks a received record against a reference GCM
// (itself checked against GCM test case 2), rejection of a tampered record
// and of a replayed one, two sent records byte for byte (with the sequence
// number advancing), and SHA2-256 of "abc" through the hash operations.
module tb_dtls_psk_engine;
  import imd_pkg::*;
  import tb_ref_crypto::*;

  logic clk = 0, rst_n = 0;
  logic op_valid = 0, busy, done, ok;
  eng_op_e op = OP_NONE;
  logic cfg_we = 0;
  logic [4:0] cfg_addr = 0;
  logic [127:0] cfg_wdata = 0;
  logic [7:0] in_rdata, dat_rdata, dat_wdata, out_wdata;
  logic in_empty, in_rd, dat_empty, dat_rd, dat_wr, dat_full, out_wr, out_full;
  logic [7:0] inq [$], datq [$], outq [$];
  int checks = 0, failures = 0;

  dtls_psk_engine dut (.*);
  always #5 clk = ~clk;

  // The FIFOs are the design's own sync_fifo; the queues shadow what the
  // testbench pushed (inq) and collect what the engine wrote (datq, outq).
  logic tb_in_wr = 0, tb_dat_wr = 0, tb_dat_rd = 0, tb_out_rd = 0;
  logic [7:0] tb_in_wdata = 0, tb_dat_wdata = 0, out_rdata;
  logic in_full, out_empty;
  logic [6:0] in_count, dat_count, out_count;

  sync_fifo #(.DEPTH(64)) u_in  (.clk, .rst_n, .clear(1'b0), .wr_en(tb_in_wr), .wdata(tb_in_wdata),
                                 .rd_en(in_rd), .rdata(in_rdata), .full(in_full), .empty(in_empty), .count(in_count));
  sync_fifo #(.DEPTH(64)) u_dat (.clk, .rst_n, .clear(1'b0), .wr_en(dat_wr | tb_dat_wr),
                                 .wdata(dat_wr ? dat_wdata : tb_dat_wdata), .rd_en(dat_rd | tb_dat_rd),
                                 .rdata(dat_rdata), .full(dat_full), .empty(dat_empty), .count(dat_count));
  sync_fifo #(.DEPTH(64)) u_out (.clk, .rst_n, .clear(1'b0), .wr_en(out_wr), .wdata(out_wdata),
                                 .rd_en(tb_out_rd), .rdata(out_rdata), .full(out_full), .empty(out_empty), .count(out_count));

  // Moves the queues into / out of the FIFOs while the engine is idle.
  task automatic sync_queues();
    while (inq.size() > 0) begin
      @(negedge clk); tb_in_wr = 1; tb_in_wdata = inq.pop_front();
    end
    while (datq.size() > 0) begin
      @(negedge clk); tb_dat_wr = 1; tb_dat_wdata = datq.pop_front();
    end
    @(negedge clk); tb_in_wr = 0; tb_dat_wr = 0;
  endtask

  task automatic drain(input bit out_fifo);
    while (out_fifo ? !out_empty : !dat_empty) begin
      @(negedge clk);
      if (out_fifo) begin outq.push_back(out_rdata); tb_out_rd = 1; end
      else begin datq.push_back(dat_rdata); tb_dat_rd = 1; end
      @(negedge clk); tb_out_rd = 0; tb_dat_rd = 0;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cfg(input int a, input logic [127:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 5'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input eng_op_e o, output int cycles);
    sync_queues();
    cycles = 0;
    @(negedge clk); op = o; op_valid = 1;
    @(negedge clk); op_valid = 0;
    while (!done) begin @(negedge clk); cycles++; end
    drain(0);
    drain(1);
  endtask

  task automatic push_bytes(input logic [423:0] v, input int n);
    for (int i = 0; i < n; i++) inq.push_back(v[8*n-1-8*i -: 8]);
  endtask

  initial begin
    logic [127:0] kr, kt, ct, tag, pt;
    logic [31:0] sr, st;
    logic [423:0] rec;
    int cyc;
    // the reference against GCM test case 2
    {ct, tag} = ref_gcm('0, '0, '0, 0, '0);
    check(ct == 128'h0388dace60b6a392f328c2b971b2fe78 && tag == 128'hab6e47d42cec13bdf53a67b21257bddf,
          "reference GCM test case 2");
    kr = {$urandom, $urandom, $urandom, $urandom};
    kt = {$urandom, $urandom, $urandom, $urandom};
    sr = $urandom; st = $urandom;
    repeat (3) @(negedge clk); rst_n = 1;
    cfg(CM_RX_KEY, kr); cfg(CM_TX_KEY, kt);
    cfg(CM_RX_SALT, {sr, 96'h0}); cfg(CM_TX_SALT, {st, 96'h0});
    cfg(CM_TX_SEQ, {16'd1, 48'd0, 64'h0}); cfg(CM_RX_SEQ, 128'h0);

    // good record
    pt  = {MSG_COMMAND, 8'h07, 8'd25, 8'd3, 8'd3, 8'd1, 8'd4, 72'h0};
    rec = ref_record(kr, sr, {16'd1, 48'd5}, pt);
    push_bytes(rec, REC_BYTES);
    run(OP_RX_RECORD, cyc);
    $display("rx record: %0d cycles", cyc);
    check(ok, "good record accepted");
    check(datq.size() == 16, "16 plaintext bytes released");
    for (int i = 0; i < 16 && datq.size() > 0; i++) begin
      check(datq[0] == pt[127-8*i -: 8], "plaintext byte");
      void'(datq.pop_front());
    end
    check(cyc > 100 && cyc < 200, "rx latency in range");

    // tampered ciphertext bit
    rec = ref_record(kr, sr, {16'd1, 48'd6}, pt);
    rec[200] = ~rec[200];
    push_bytes(rec, REC_BYTES);
    run(OP_RX_RECORD, cyc);
    check(!ok, "tampered record rejected");
    check(datq.size() == 0, "nothing released for tampered record");
    check(in_empty, "tampered record consumed");

    // tampered tag
    rec = ref_record(kr, sr, {16'd1, 48'd6}, pt);
    rec[3] = ~rec[3];
    push_bytes(rec, REC_BYTES);
    run(OP_RX_RECORD, cyc);
    check(!ok, "bad tag rejected");

    // replay of the accepted record
    rec = ref_record(kr, sr, {16'd1, 48'd5}, pt);
    push_bytes(rec, REC_BYTES);
    run(OP_RX_RECORD, cyc);
    check(!ok, "replayed record rejected");

    // newer record accepted after a rejection
    rec = ref_record(kr, sr, {16'd1, 48'd9}, ~pt);
    push_bytes(rec, REC_BYTES);
    run(OP_RX_RECORD, cyc);
    check(ok, "newer record accepted");
    for (int i = 0; i < 16 && datq.size() > 0; i++) begin
      check(datq[0] == ~pt[127-8*i -: 8], "plaintext byte 2");
      void'(datq.pop_front());
    end

    // two transmitted records
    for (int n = 0; n < 2; n++) begin
      pt = {MSG_RESULT, 8'(n), 112'h0};
      for (int i = 0; i < 16; i++) datq.push_back(pt[127-8*i -: 8]);
      run(OP_TX_RECORD, cyc);
      rec = ref_record(kt, st, {16'd1, 48'(n)}, pt);
      check(ok && outq.size() == REC_BYTES, "tx record length");
      for (int i = 0; i < REC_BYTES && outq.size() > 0; i++) begin
        check(outq[0] == rec[423-8*i -: 8], $sformatf("tx record %0d byte %0d", n, i));
        void'(outq.pop_front());
      end
    end

    // SHA2-256("abc")
    run(OP_HASH_INIT, cyc);
    push_bytes({24'h616263, 8'h80, 224'h0}, 32);
    push_bytes({192'h0, 64'd24}, 32);
    run(OP_HASH_BLOCK, cyc);
    check(in_empty, "hash block consumed");
    run(OP_HASH_READ, cyc);
    begin
      logic [255:0] d = 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad;
      check(outq.size() == 32, "digest length");
      for (int i = 0; i < 32 && outq.size() > 0; i++) begin
        check(outq[0] == d[255-8*i -: 8], "digest byte");
        void'(outq.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
