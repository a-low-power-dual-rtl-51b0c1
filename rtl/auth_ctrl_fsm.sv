// auth_ctrl_fsm: authentication control FSM, sequencing the dual-factor
// protocol after the implant has been woken by the tap pattern.
//
// Sequence (the protocol steps of the paper):
//   S_ASLEEP     wait for `wakeup`; clear Auth_OK.
//   S_FIRST      first factor: wait for the host's RECORD command, have the
//                DTLS-PSK engine verify and decrypt the command record. The
//                host may also use the SHA2-256 hash operations here.
//   S_LOAD_CMD   read the 16 plaintext bytes from the Data FIFO: command,
//                dose and the tap code (the one-time second-factor code).
//   S_SECOND     second factor: the tap-pattern unit checks the user's taps,
//                unless the configuration bit skips the second factor.
//   S_REPORT     put the result plaintext into the Data FIFO and have the
//                engine encrypt it into a record for the server.
//   S_WAIT_ACK   verify the server's acknowledgement record.
//   S_SLEEP      raise Auth_OK if both factors passed and the server
//                acknowledged; hold `sleep_req` until `wakeup` has fallen.
// A record that fails authentication ends the session (no retry), which
// also bounds the energy an attacker can make the implant spend. The paper
// gives the steps and the skip option; the states, the message layouts and
// the no-retry rule are this design's choices.
//
// Host commands from the SPI port are single-cycle pulses; one that arrives
// while the engine is busy waits in a one-entry register.
// Interface: `wakeup` comes from the LCLK domain and is synchronised here.
// Engine, FIFO and second-factor ports are single-cycle pulses / levels as
// documented in those modules. Auth_OK and cmd/dose hold their value until
// the next wake-up.
module auth_ctrl_fsm
  import imd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wakeup,
  output logic        sleep_req,
  input  host_cmd_e   host_cmd,
  input  logic        skip_second,
  // DTLS-PSK engine
  output logic        eng_op_valid,
  output eng_op_e     eng_op,
  input  logic        eng_busy,
  input  logic        eng_done,
  input  logic        eng_ok,
  // Data FIFO
  output logic        dat_rd,
  input  logic [7:0]  dat_rdata,
  input  logic        dat_empty,
  output logic        dat_wr,
  output logic [7:0]  dat_wdata,
  // second-factor unit
  output logic        sf_start,
  output logic [3:0]  sf_code_len,
  output logic [MAX_DIGITS-1:0][DIGIT_W-1:0] sf_code,
  input  logic        sf_done,
  input  logic        sf_pass,
  // results
  output logic        auth_ok,
  output logic [7:0]  cmd_out,
  output logic [7:0]  dose_out,
  output auth_state_e state
);
  logic [1:0]   wake_sync_q;
  logic         wake_s;
  auth_state_e  st_q;
  logic [127:0] msg_q;
  logic [4:0]   cnt_q;
  logic         pass_q;
  logic [7:0]   msg_cmd, msg_dose, msg_len;
  logic [127:0] result_msg;
  logic [7:0]   msg_dose_q;
  host_cmd_e    pend_q, hc;     // host command waiting to be served

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wake_sync_q <= '0;
    else        wake_sync_q <= {wake_sync_q[0], wakeup};
  end
  assign wake_s = wake_sync_q[1];

  assign msg_cmd    = msg_q[119:112];
  assign msg_dose   = msg_q[111:104];
  assign msg_len    = msg_q[103:96];
  assign result_msg = {MSG_RESULT, 7'h0, pass_q, cmd_out, 104'h0};
  assign state      = st_q;
  assign sleep_req  = (st_q == S_SLEEP);

  always_comb begin
    sf_code_len = msg_len[3:0];
    for (int k = 0; k < int'(MAX_DIGITS); k++) sf_code[k] = msg_q[87 - 8*k + DIGIT_W -: DIGIT_W];  // low nibble of byte 4+k
  end

  assign dat_rd    = (st_q == S_LOAD_CMD || st_q == S_ACK_CHECK) && !dat_empty && cnt_q < 5'd16;
  assign dat_wr    = (st_q == S_REPORT) && cnt_q < 5'd16;
  assign dat_wdata = result_msg[127 - 8*cnt_q[3:0] -: 8];
  assign sf_start  = (st_q == S_SECOND);

  // A host command that arrives while the engine is busy is kept until it
  // can be served; a newer command replaces an older waiting one.
  assign hc = (host_cmd != HC_NONE) ? host_cmd : pend_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   pend_q <= HC_NONE;
    else if (st_q == S_ASLEEP)                    pend_q <= HC_NONE;
    else if (eng_op_valid && st_q != S_REPORT)    pend_q <= HC_NONE;
    else                                          pend_q <= hc;
  end

  always_comb begin
    eng_op_valid = 1'b0;
    eng_op       = OP_NONE;
    if (!eng_busy) begin
      unique case (st_q)
        S_FIRST: unique case (hc)
          HC_RECORD:     begin eng_op_valid = 1'b1; eng_op = OP_RX_RECORD;  end
          HC_HASH_INIT:  begin eng_op_valid = 1'b1; eng_op = OP_HASH_INIT;  end
          HC_HASH_BLOCK: begin eng_op_valid = 1'b1; eng_op = OP_HASH_BLOCK; end
          HC_HASH_READ:  begin eng_op_valid = 1'b1; eng_op = OP_HASH_READ;  end
          default: ;
        endcase
        S_WAIT_ACK: if (hc == HC_RECORD) begin eng_op_valid = 1'b1; eng_op = OP_RX_RECORD; end
        S_REPORT:   if (cnt_q == 5'd16) begin eng_op_valid = 1'b1; eng_op = OP_TX_RECORD; end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_ASLEEP; msg_q <= '0; cnt_q <= '0; pass_q <= 1'b0;
      auth_ok <= 1'b0; cmd_out <= '0; dose_out <= '0;
    end else begin
      unique case (st_q)
        S_ASLEEP: if (wake_s) begin
          auth_ok <= 1'b0; pass_q <= 1'b0; cmd_out <= '0; dose_out <= '0;
          st_q <= S_FIRST;
        end
        S_FIRST: if (eng_op_valid) st_q <= (eng_op == OP_RX_RECORD) ? S_FIRST_WAIT : S_HASH_WAIT;
        S_HASH_WAIT: if (eng_done) st_q <= S_FIRST;
        S_FIRST_WAIT: if (eng_done) begin
          cnt_q <= '0;
          st_q  <= eng_ok ? S_LOAD_CMD : S_SLEEP;
        end
        S_LOAD_CMD: begin
          if (dat_rd) begin
            msg_q <= {msg_q[119:0], dat_rdata};
            cnt_q <= cnt_q + 5'd1;
          end else if (cnt_q == 5'd16) begin
            cnt_q <= '0;
            if (msg_q[127:120] != MSG_COMMAND) begin
              pass_q <= 1'b0; st_q <= S_REPORT;
            end else begin
              cmd_out <= msg_cmd;
              if (skip_second) begin pass_q <= 1'b1; st_q <= S_REPORT; end
              else st_q <= S_SECOND;
            end
          end
        end
        S_SECOND: st_q <= S_SECOND_WAIT;
        S_SECOND_WAIT: if (sf_done) begin pass_q <= sf_pass; st_q <= S_REPORT; end
        S_REPORT: begin
          if (cnt_q < 5'd16) cnt_q <= cnt_q + 5'd1;
          else if (eng_op_valid) st_q <= S_REPORT_WAIT;
        end
        S_REPORT_WAIT: if (eng_done) st_q <= S_WAIT_ACK;
        S_WAIT_ACK: if (eng_op_valid) st_q <= S_ACK_WAIT;
        S_ACK_WAIT: if (eng_done) begin
          cnt_q <= '0;
          st_q  <= eng_ok ? S_ACK_CHECK : S_SLEEP;
        end
        S_ACK_CHECK: begin
          if (dat_rd) begin
            msg_q <= {msg_q[119:0], dat_rdata};
            cnt_q <= cnt_q + 5'd1;
          end else if (cnt_q == 5'd16) begin
            if (pass_q && msg_q[127:120] == MSG_ACK) begin
              auth_ok  <= 1'b1;
              dose_out <= msg_dose_q;
            end
            st_q <= S_SLEEP;
          end
        end
        S_SLEEP: if (!wake_s) st_q <= S_ASLEEP;
        default: st_q <= S_ASLEEP;
      endcase
    end
  end

  // dose of the accepted command, kept while the ack record is read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) msg_dose_q <= '0;
    else if (st_q == S_LOAD_CMD && cnt_q == 5'd16 && !dat_rd) msg_dose_q <= msg_dose;
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) eng_op_valid |-> !eng_busy);
endmodule
