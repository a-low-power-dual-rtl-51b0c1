// dtls_psk_engine: first-factor authentication block. It holds the DTLS-PSK
// record state machine, the DTLS scratch pad, the crypto memory and the
// cryptographic accelerators (AES-128, the GHASH multiplier of AES-128-GCM
// and SHA2-256).
//
// What it does. After the DTLS-PSK handshake the server and the implant
// share session keys; every application record is then protected with
// AES-128-GCM. This engine performs the record protection of the command,
// result and acknowledgement records that carry the dual-factor protocol:
//   OP_RX_RECORD  pops a 53-byte DTLS 1.2 record from the In FIFO (13-byte
//                 header, 8-byte explicit nonce, 16 bytes of ciphertext,
//                 16-byte tag), decrypts it into the scratch pad, checks the
//                 tag, the header and that the sequence number is newer than
//                 the last accepted one (replay check). Only an accepted
//                 record's plaintext is released to the Data FIFO.
//   OP_TX_RECORD  pops 16 plaintext bytes from the Data FIFO, encrypts them
//                 with the client write key and the next sequence number and
//                 pushes the 53-byte record to the Out FIFO.
//   OP_HASH_INIT / OP_HASH_BLOCK / OP_HASH_READ give the host the SHA2-256
//                 core: one padded 64-byte block from the In FIFO per
//                 compression, 32 digest bytes to the Out FIFO.
// GCM follows NIST SP 800-38D with a 12-byte nonce: salt (4 bytes, from the
// crypto memory) || explicit nonce; H = E(K,0), tag = GHASH(A,C) ^ E(K,J0).
// The additional data is the DTLS 1.2 one: epoch||seq, type, version and
// plaintext length (13 bytes).
//
// What follows the paper and what does not. The paper gives the blocks (a
// DTLS-PSK state machine, scratch pad, crypto memory, SHA2-256 and AES-128
// GCM accelerators with full-datapath rounds) and the 2.75 KB SRAM total.
// The handshake itself (ClientHello ... Finished, PSK key derivation through
// the HMAC-SHA256 PRF) is not built: the session keys, salts and sequence
// numbers are written into the crypto memory through `cfg_*` (in the test
// chip an external microcontroller did the initial configuration). Record
// plaintexts are fixed at one AES block. Memory sizes, the record-level
// operations and their encoding are this design's choices.
//
// Interface: pulse `op_valid` with `op` while `busy` is low; `done` pulses at
// the end with `ok` (record accepted / operation completed). `cfg_we` writes
// a 128-bit crypto-memory word and is taken only while the engine is idle.
// Timing: an RX record takes about 53 (input) + 4 (key loads) + 3 x 11 (AES)
// + 3 x (128/GF_DIGIT + 1) (GHASH) + 20 cycles; a TX record about the same.
module dtls_psk_engine
  import imd_pkg::*;
#(
  parameter int unsigned SP_WORDS = 128,  // scratch pad, 128-bit words (2 KB)
  parameter int unsigned CM_WORDS = 32,   // crypto memory, 128-bit words (512 B)
  parameter int unsigned GF_DIGIT = 8     // GHASH bits per cycle
) (
  input  logic         clk,
  input  logic         rst_n,
  // operation request
  input  logic         op_valid,
  input  eng_op_e      op,
  output logic         busy,
  output logic         done,
  output logic         ok,
  // configuration write into the crypto memory
  input  logic         cfg_we,
  input  logic [$clog2(CM_WORDS)-1:0] cfg_addr,
  input  logic [127:0] cfg_wdata,
  // In FIFO (read side)
  input  logic [7:0]   in_rdata,
  input  logic         in_empty,
  output logic         in_rd,
  // Data FIFO (both sides; the control FSM uses it when the engine is idle)
  input  logic [7:0]   dat_rdata,
  input  logic         dat_empty,
  output logic         dat_rd,
  output logic         dat_wr,
  output logic [7:0]   dat_wdata,
  input  logic         dat_full,
  // Out FIFO (write side)
  output logic         out_wr,
  output logic [7:0]   out_wdata,
  input  logic         out_full
);
  localparam int unsigned CMA = $clog2(CM_WORDS);
  localparam int unsigned SPA = $clog2(SP_WORDS);
  localparam int unsigned REC_BITS = 8 * REC_BYTES;  // 424

  typedef enum logic [4:0] {
    E_IDLE, E_RX_IN, E_TX_IN, E_CM_RD, E_AES, E_AES_W, E_GF, E_GF_W,
    E_CHECK, E_SP_RD, E_SP_RD_W, E_TO_DATA, E_CM_WR, E_OUT, E_H_IN, E_H_W, E_H_OUT, E_DONE
  } est_e;

  est_e         st_q;
  logic         tx_q;            // current record is outgoing
  logic [8:0]   cnt_q;           // byte / step counter
  logic [REC_BITS-1:0] rec_q;    // record shift register (in and out)
  logic [127:0] key_q, pt_q, ct_q, h_q, ekj0_q, g_q;
  logic [31:0]  salt_q;
  logic [63:0]  seq_q;           // {epoch, seq} of this record
  logic [63:0]  nonce_q;         // explicit nonce of this record
  logic [63:0]  last_q;          // last accepted rx {epoch, seq}
  logic [1:0]   idx_q;           // AES / GHASH step
  logic         ok_q;
  logic [511:0] blk_q;
  logic [255:0] dig_q;

  // ---------------- memories ----------------
  logic         cm_en, cm_we, sp_en, sp_we;
  logic [CMA-1:0] cm_addr;
  logic [SPA-1:0] sp_addr;
  logic [127:0] cm_wdata, cm_rdata, sp_rdata;

  sp_sram #(.WIDTH(128), .DEPTH(CM_WORDS)) u_crypto_mem (
    .clk, .en(cm_en), .we(cm_we), .addr(cm_addr), .wdata(cm_wdata), .rdata(cm_rdata));
  sp_sram #(.WIDTH(128), .DEPTH(SP_WORDS)) u_scratch_pad (
    .clk, .en(sp_en), .we(sp_we), .addr(sp_addr), .wdata(pt_q), .rdata(sp_rdata));

  // ---------------- accelerators ----------------
  logic aes_start, aes_busy, aes_done, gf_start, gf_busy, gf_done;
  logic sha_init, sha_start, sha_busy, sha_done;
  logic [127:0] aes_in, aes_out, gf_x, gf_z;
  logic [255:0] sha_digest;
  logic [127:0] j0, aad_blk, len_blk;

  assign j0      = {salt_q, nonce_q, 32'd1};
  assign aad_blk = {seq_q, CT_APPDATA, DTLS_VERSION, 16'(PT_BYTES), 24'h0};
  assign len_blk = {64'(8 * 13), 64'(8 * PT_BYTES)};

  always_comb begin
    unique case (idx_q)
      2'd0:    aes_in = '0;
      2'd1:    aes_in = j0;
      default: aes_in = {j0[127:32], j0[31:0] + 32'd1};
    endcase
    unique case (idx_q)
      2'd0:    gf_x = aad_blk;
      2'd1:    gf_x = g_q ^ ct_q;
      default: gf_x = g_q ^ len_blk;
    endcase
  end

  aes128_enc u_aes (.clk, .rst_n, .start(aes_start), .key(key_q), .din(aes_in),
                    .busy(aes_busy), .done(aes_done), .dout(aes_out));
  gf128_mul #(.DIGIT(GF_DIGIT)) u_ghash (.clk, .rst_n, .start(gf_start), .x(gf_x), .y(h_q),
                    .busy(gf_busy), .done(gf_done), .z(gf_z));
  sha256_core u_sha (.clk, .rst_n, .init(sha_init), .start(sha_start), .block(blk_q),
                    .busy(sha_busy), .done(sha_done), .digest(sha_digest));

  // ---------------- combinational controls ----------------
  logic [127:0] tag_calc, rx_tag;
  logic [103:0] rx_hdr;
  logic         hdr_ok;
  assign tag_calc = g_q ^ ekj0_q;
  assign rx_hdr   = rec_q[REC_BITS-1 -: 104];
  assign rx_tag   = rec_q[127:0];
  assign hdr_ok   = rx_hdr[103:96] == CT_APPDATA && rx_hdr[95:80] == DTLS_VERSION
                 && rx_hdr[15:0] == REC_LENGTH && rx_hdr[79:16] > last_q;

  assign busy      = (st_q != E_IDLE);
  assign ok        = ok_q;
  assign in_rd     = (st_q == E_RX_IN || (st_q == E_H_IN && cnt_q < 9'd64)) && !in_empty;
  assign dat_rd    = (st_q == E_TX_IN) && !dat_empty;
  assign dat_wr    = (st_q == E_TO_DATA) && !dat_full;
  assign dat_wdata = pt_q[127 - 8*cnt_q[3:0] -: 8];
  assign out_wr    = (st_q == E_OUT || st_q == E_H_OUT) && !out_full;
  assign out_wdata = (st_q == E_H_OUT) ? dig_q[255:248] : rec_q[REC_BITS-1 -: 8];
  assign aes_start = (st_q == E_AES);
  assign gf_start  = (st_q == E_GF);
  assign sha_init  = (st_q == E_IDLE) && op_valid && op == OP_HASH_INIT;
  assign sha_start = (st_q == E_H_IN) && cnt_q == 9'd64;

  always_comb begin
    cm_en = 1'b0; cm_we = 1'b0; cm_addr = '0; cm_wdata = '0;
    sp_en = 1'b0; sp_we = 1'b0; sp_addr = '0;
    unique case (st_q)
      E_IDLE: if (cfg_we) begin
        cm_en = 1'b1; cm_we = 1'b1; cm_addr = cfg_addr; cm_wdata = cfg_wdata;
      end
      E_CM_RD: if (cnt_q < 9'd3) begin
        cm_en = 1'b1;
        unique case (cnt_q[1:0])
          2'd0:    cm_addr = CMA'(tx_q ? CM_TX_KEY  : CM_RX_KEY);
          2'd1:    cm_addr = CMA'(tx_q ? CM_TX_SALT : CM_RX_SALT);
          default: cm_addr = CMA'(tx_q ? CM_TX_SEQ  : CM_RX_SEQ);
        endcase
      end
      E_CHECK: if (!tx_q) begin sp_en = 1'b1; sp_we = 1'b1; end
      E_SP_RD: sp_en = 1'b1;
      E_CM_WR: begin
        cm_en = 1'b1; cm_we = 1'b1;
        cm_addr  = CMA'(tx_q ? CM_TX_SEQ : CM_RX_SEQ);
        cm_wdata = {tx_q ? seq_q + 64'd1 : seq_q, 64'h0};
      end
      default: ;
    endcase
  end

  // ---------------- state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= E_IDLE; tx_q <= 1'b0; cnt_q <= '0; rec_q <= '0;
      key_q <= '0; pt_q <= '0; ct_q <= '0; h_q <= '0; ekj0_q <= '0; g_q <= '0;
      salt_q <= '0; seq_q <= '0; nonce_q <= '0; last_q <= '0; idx_q <= '0; ok_q <= 1'b0;
      blk_q <= '0; dig_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        E_IDLE: if (op_valid) begin
          cnt_q <= '0;
          unique case (op)
            OP_RX_RECORD:  begin tx_q <= 1'b0; pt_q <= '0; st_q <= E_RX_IN; end
            OP_TX_RECORD:  begin tx_q <= 1'b1; st_q <= E_TX_IN; end
            OP_HASH_INIT:  begin ok_q <= 1'b1; st_q <= E_DONE; end
            OP_HASH_BLOCK: st_q <= E_H_IN;
            OP_HASH_READ:  begin dig_q <= sha_digest; st_q <= E_H_OUT; end
            default:       ;
          endcase
        end
        E_RX_IN: if (!in_empty) begin
          rec_q <= {rec_q[REC_BITS-9:0], in_rdata};
          cnt_q <= cnt_q + 9'd1;
          if (cnt_q == 9'(REC_BYTES - 1)) begin cnt_q <= '0; st_q <= E_CM_RD; end
        end
        E_TX_IN: if (!dat_empty) begin
          pt_q  <= {pt_q[119:0], dat_rdata};
          cnt_q <= cnt_q + 9'd1;
          if (cnt_q == 9'(PT_BYTES - 1)) begin cnt_q <= '0; st_q <= E_CM_RD; end
        end
        E_CM_RD: begin
          cnt_q <= cnt_q + 9'd1;
          unique case (cnt_q)
            9'd1: key_q  <= cm_rdata;
            9'd2: salt_q <= cm_rdata[127:96];
            9'd3: begin
              if (tx_q) begin
                seq_q   <= cm_rdata[127:64];
                nonce_q <= cm_rdata[127:64];                 // explicit nonce = seq
              end else begin
                nonce_q <= rec_q[REC_BITS-105 -: 64];         // record explicit nonce
                last_q <= cm_rdata[127:64];
                seq_q  <= rec_q[REC_BITS-25 -: 64];         // record epoch||seq
                ct_q   <= rec_q[255:128];
              end
              idx_q <= '0;
              st_q  <= E_AES;
            end
            default: ;
          endcase
        end
        E_AES: st_q <= E_AES_W;
        E_AES_W: if (aes_done) begin
          unique case (idx_q)
            2'd0: h_q    <= aes_out;
            2'd1: ekj0_q <= aes_out;
            default: if (tx_q) ct_q <= pt_q ^ aes_out; else pt_q <= ct_q ^ aes_out;
          endcase
          if (idx_q == 2'd2) begin idx_q <= '0; st_q <= E_GF; end
          else begin idx_q <= idx_q + 2'd1; st_q <= E_AES; end
        end
        E_GF: st_q <= E_GF_W;
        E_GF_W: if (gf_done) begin
          g_q <= gf_z;
          if (idx_q == 2'd2) st_q <= E_CHECK;
          else begin idx_q <= idx_q + 2'd1; st_q <= E_GF; end
        end
        E_CHECK: begin
          if (tx_q) begin
            rec_q <= {CT_APPDATA, DTLS_VERSION, seq_q, REC_LENGTH, seq_q, ct_q, tag_calc};
            ok_q  <= 1'b1;
            st_q  <= E_CM_WR;
          end else begin
            // plaintext written to the scratch pad this cycle
            ok_q <= hdr_ok && (tag_calc == rx_tag);
            st_q <= (hdr_ok && (tag_calc == rx_tag)) ? E_CM_WR : E_DONE;
          end
        end
        E_CM_WR: begin
          cnt_q <= '0;
          st_q  <= tx_q ? E_OUT : E_SP_RD;
        end
        E_SP_RD: begin pt_q <= '0; ct_q <= '0; st_q <= E_SP_RD_W; end
        E_SP_RD_W: begin pt_q <= sp_rdata; cnt_q <= '0; st_q <= E_TO_DATA; end
        E_TO_DATA: if (!dat_full) begin
          cnt_q <= cnt_q + 9'd1;
          if (cnt_q == 9'(PT_BYTES - 1)) st_q <= E_DONE;
        end
        E_OUT: if (!out_full) begin
          rec_q <= {rec_q[REC_BITS-9:0], 8'h00};
          cnt_q <= cnt_q + 9'd1;
          if (cnt_q == 9'(REC_BYTES - 1)) st_q <= E_DONE;
        end
        E_H_IN: begin
          if (cnt_q == 9'd64) begin
            st_q <= E_H_W;
          end else if (!in_empty) begin
            blk_q <= {blk_q[503:0], in_rdata};
            cnt_q <= cnt_q + 9'd1;
          end
        end
        E_H_W: if (sha_done) begin ok_q <= 1'b1; st_q <= E_DONE; end
        E_H_OUT: if (!out_full) begin
          dig_q <= {dig_q[247:0], 8'h00};
          cnt_q <= cnt_q + 9'd1;
          if (cnt_q == 9'd31) begin ok_q <= 1'b1; st_q <= E_DONE; end
        end
        E_DONE: begin done <= 1'b1; st_q <= E_IDLE; end
        default: st_q <= E_IDLE;
      endcase
    end
  end

  a_op_when_idle: assert property (@(posedge clk) disable iff (!rst_n) op_valid |-> !busy);
  a_cfg_when_idle: assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> !busy);
endmodule
