// imd_pkg: types and constants shared by the authentication unit.
//
// The DTLS record format follows DTLS 1.2 with an AES-128-GCM cipher suite
// (13-byte record header, 8-byte explicit nonce, ciphertext, 16-byte tag).
// The paper names the cipher suite (DTLS-PSK with AES-128-GCM and SHA2-256);
// the fixed 16-byte plaintext size, the plaintext layouts of the command,
// result and acknowledgement records, the SPI command codes and the
// crypto-memory map are this design's own choices.
package imd_pkg;

  // ---------------- DTLS record layer --------------------------------------
  localparam int unsigned REC_HDR_BYTES = 13;  // type, version, epoch, seq, length
  localparam int unsigned NONCE_BYTES   = 8;   // GCM explicit nonce
  localparam int unsigned PT_BYTES      = 16;  // one AES block of plaintext
  localparam int unsigned TAG_BYTES     = 16;
  localparam int unsigned REC_BYTES     = REC_HDR_BYTES + NONCE_BYTES + PT_BYTES + TAG_BYTES; // 53
  localparam logic [7:0]  CT_APPDATA    = 8'd23;     // application_data content type
  localparam logic [15:0] DTLS_VERSION  = 16'hFEFD;  // DTLS 1.2
  localparam logic [15:0] REC_LENGTH    = 16'(NONCE_BYTES + PT_BYTES + TAG_BYTES); // 40

  // ---------------- Plaintext layouts (16 bytes, byte 0 first) -------------
  // Command record (server -> IMD):  [0]=MSG_COMMAND [1]=command [2]=dose
  //                                  [3]=number of code digits [4..]=digits
  // Result record  (IMD -> server):  [0]=MSG_RESULT [1]=1 pass / 0 fail [2]=command
  // Ack record     (server -> IMD):  [0]=MSG_ACK
  localparam logic [7:0] MSG_COMMAND = 8'h43;  // 'C'
  localparam logic [7:0] MSG_RESULT  = 8'h52;  // 'R'
  localparam logic [7:0] MSG_ACK     = 8'h41;  // 'A'
  localparam int unsigned MAX_DIGITS = 8;      // tap-code digits carried by a command
  localparam int unsigned DIGIT_W    = 4;      // taps per digit: 1..15

  // ---------------- Crypto memory map (128-bit words) ----------------------
  localparam int unsigned CM_RX_KEY  = 0;  // server_write_key
  localparam int unsigned CM_TX_KEY  = 1;  // client_write_key
  localparam int unsigned CM_RX_SALT = 2;  // server_write_IV in [127:96]
  localparam int unsigned CM_TX_SALT = 3;  // client_write_IV in [127:96]
  localparam int unsigned CM_TX_SEQ  = 4;  // {epoch,seq} of the next sent record in [127:64]
  localparam int unsigned CM_RX_SEQ  = 5;  // {epoch,seq} of the last accepted record in [127:64]

  // ---------------- Engine operations --------------------------------------
  typedef enum logic [2:0] {
    OP_NONE       = 3'd0,
    OP_RX_RECORD  = 3'd1,  // In FIFO record -> verify/decrypt -> Data FIFO
    OP_TX_RECORD  = 3'd2,  // Data FIFO plaintext -> encrypt -> Out FIFO record
    OP_HASH_INIT  = 3'd3,  // load SHA2-256 initial hash value
    OP_HASH_BLOCK = 3'd4,  // 64 bytes from In FIFO -> one compression
    OP_HASH_READ  = 3'd5   // 32 digest bytes -> Out FIFO
  } eng_op_e;

  // ---------------- SPI commands (first byte of a transfer) ----------------
  localparam logic [7:0] SPI_WR_CM    = 8'h01;  // addr, 16 bytes MSB first -> crypto memory
  localparam logic [7:0] SPI_WR_CFG   = 8'h02;  // 1 byte: bit0 = skip second factor
  localparam logic [7:0] SPI_PUSH     = 8'h10;  // following bytes -> In FIFO
  localparam logic [7:0] SPI_POP      = 8'h20;  // following bytes <- Out FIFO (0 when empty)
  localparam logic [7:0] SPI_STATUS   = 8'h30;  // next byte <- status
  localparam logic [7:0] SPI_RECORD   = 8'h40;  // process the record in the In FIFO
  localparam logic [7:0] SPI_HASH_INIT  = 8'h41;
  localparam logic [7:0] SPI_HASH_BLOCK = 8'h42;
  localparam logic [7:0] SPI_HASH_READ  = 8'h43;

  typedef enum logic [2:0] {
    HC_NONE = 3'd0, HC_RECORD = 3'd1, HC_HASH_INIT = 3'd2, HC_HASH_BLOCK = 3'd3, HC_HASH_READ = 3'd4
  } host_cmd_e;

  // ---------------- Authentication control FSM ------------------------------
  typedef enum logic [3:0] {
    S_ASLEEP, S_FIRST, S_FIRST_WAIT, S_LOAD_CMD, S_SECOND, S_SECOND_WAIT,
    S_REPORT, S_REPORT_WAIT, S_WAIT_ACK, S_ACK_WAIT, S_ACK_CHECK, S_SLEEP, S_HASH_WAIT
  } auth_state_e;

endpackage
