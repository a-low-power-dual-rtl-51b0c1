// tb_auth_ctrl_fsm: the FSM against a scripted engine and second-factor
// unit. Sessions: both factors pass (Auth_OK, dose delivered, result record
// says pass); second factor fails (no Auth_OK, result says fail); second
// factor skipped by configuration; command record rejected (session ends
// at once, no result record); bad acknowledgement (no Auth_OK). Also checks
// the sleep handshake and that a hash command is passed to the engine.
module tb_auth_ctrl_fsm;
  import imd_pkg::*;
  logic clk = 0, rst_n = 0, wakeup = 0, sleep_req, skip_second = 0;
  host_cmd_e host_cmd = HC_NONE;
  logic eng_op_valid, eng_busy = 0, eng_done = 0, eng_ok = 0;
  eng_op_e eng_op;
  logic dat_rd, dat_empty, dat_wr, dat_full;
  logic [7:0] dat_rdata, dat_wdata;
  logic sf_start, sf_done = 0, sf_pass = 0;
  logic [3:0] sf_code_len;
  logic [MAX_DIGITS-1:0][DIGIT_W-1:0] sf_code;
  logic auth_ok;
  logic [7:0] cmd_out, dose_out;
  auth_state_e state;
  int checks = 0, failures = 0;

  // Data FIFO shared by the FSM and the scripted engine
  logic m_wr = 0, m_rd = 0;
  logic [7:0] m_wdata = 0;
  logic [6:0] dat_count;
  sync_fifo #(.DEPTH(64)) u_dat (.clk, .rst_n, .clear(1'b0), .wr_en(dat_wr | m_wr),
      .wdata(m_wr ? m_wdata : dat_wdata), .rd_en(dat_rd | m_rd), .rdata(dat_rdata),
      .full(dat_full), .empty(dat_empty), .count(dat_count));

  auth_ctrl_fsm dut (.*);
  always #5 clk = ~clk;

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

  // scripted engine
  logic [127:0] rx_plain;
  bit           rx_accept;
  logic [127:0] tx_plain;
  int           tx_count = 0, rx_count = 0, hash_count = 0;
  initial begin
    eng_op_e o;
    forever begin
      @(posedge clk);
      if (eng_op_valid) begin
        o = eng_op;
        #1 eng_busy = 1;
        repeat (5) @(negedge clk);
        if (o == OP_RX_RECORD) begin
          rx_count++;
          if (rx_accept)
            for (int i = 0; i < 16; i++) begin
              m_wr = 1; m_wdata = rx_plain[127-8*i -: 8]; @(negedge clk);
            end
          m_wr = 0;
          eng_ok = rx_accept;
        end else if (o == OP_TX_RECORD) begin
          tx_count++;
          for (int i = 0; i < 16; i++) begin
            tx_plain[127-8*i -: 8] = dat_rdata; m_rd = 1; @(negedge clk);
          end
          m_rd = 0;
          eng_ok = 1;
        end else begin
          hash_count++;
          eng_ok = 1;
        end
        eng_done = 1; @(negedge clk); eng_done = 0; eng_busy = 0;
      end
    end
  end

  // scripted second-factor unit
  bit sf_answer;
  int sf_count = 0;
  logic [3:0] seen_len;
  logic [MAX_DIGITS-1:0][DIGIT_W-1:0] seen_code;
  always @(posedge clk) if (sf_start) begin
    sf_count++; seen_len = sf_code_len; seen_code = sf_code;
    fork begin
      repeat (20) @(negedge clk);
      sf_pass = sf_answer; sf_done = 1; @(negedge clk); sf_done = 0;
    end join_none
  end

  task automatic cmd(input host_cmd_e c);
    @(negedge clk); host_cmd = c; @(negedge clk); host_cmd = HC_NONE;
  endtask

  task automatic wait_state(input auth_state_e s);
    int t = 0;
    while (state != s && t < 5000) begin @(negedge clk); t++; end
    check(state == s, $sformatf("reach state %0d", s));
  endtask

  // one session; returns after the FSM is asleep again
  task automatic session(input bit cmd_ok, input bit sf_ok, input bit ack_ok, input bit skip,
                         input bit exp_auth, input bit exp_tx, input bit exp_pass);
    int tx0 = tx_count, sf0 = sf_count;
    skip_second = skip; sf_answer = sf_ok;
    @(negedge clk); wakeup = 1;
    wait_state(S_FIRST);
    check(!auth_ok, "auth_ok cleared on wake");
    rx_plain = {MSG_COMMAND, 8'h07, 8'd42, 8'd3, 8'd3, 8'd1, 8'd4, 72'h0};
    rx_accept = cmd_ok;
    cmd(HC_HASH_INIT);
    repeat (15) @(negedge clk);
    cmd(HC_RECORD);
    if (cmd_ok) begin
      wait_state(S_WAIT_ACK);
      check(tx_count == tx0 + 1, "result record sent");
      check(tx_plain[127:120] == MSG_RESULT && tx_plain[112] == exp_pass && tx_plain[111:104] == 8'h07,
            "result plaintext");
      check(sf_count == sf0 + (skip ? 0 : 1), "second factor run unless skipped");
      if (!skip) check(seen_len == 3 && seen_code[0] == 3 && seen_code[1] == 1 && seen_code[2] == 4,
                       "code handed to second factor");
      rx_plain = {ack_ok ? MSG_ACK : 8'h00, 120'h0};
      rx_accept = 1;
      cmd(HC_RECORD);
    end
    wait_state(S_SLEEP);
    check(sleep_req, "sleep_req raised");
    check(tx_count == tx0 + (exp_tx ? 1 : 0), "result record count");
    repeat (4) @(negedge clk);
    check(auth_ok == exp_auth, $sformatf("auth_ok == %0d", exp_auth));
    if (exp_auth) check(cmd_out == 8'h07 && dose_out == 8'd42, "command and dose out");
    wakeup = 0;
    wait_state(S_ASLEEP);
    check(!sleep_req, "sleep_req released");
    check(auth_ok == exp_auth, "auth_ok held while asleep");
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    session(1, 1, 1, 0, 1, 1, 1);   // both factors pass
    session(1, 0, 1, 0, 0, 1, 0);   // wrong taps
    session(1, 0, 1, 1, 1, 1, 1);   // second factor skipped
    session(0, 1, 1, 0, 0, 0, 0);   // command record rejected
    session(1, 1, 0, 0, 0, 1, 1);   // bad acknowledgement
    check(hash_count == 5, "hash commands forwarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
