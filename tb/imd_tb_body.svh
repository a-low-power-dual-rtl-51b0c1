// imd_tb_body.svh: body shared by the two end-to-end testbenches of
// imd_security_chip. The including module defines LCLK_HZ_TB (the LCLK
// frequency the chip runs at), instantiates the chip as `dut` and calls
// run_sessions(). The testbench plays three parties: the user (FSR
// resistance: taps), the BLE module (SPI master at 125 kbps) and the server
// (building protected records with the reference GCM and checking the
// implant's result record byte for byte).

  import imd_pkg::*;
  import tb_ref_crypto::*;

  logic        rst_n = 0;
  logic [31:0] r_fsr_ohm = 32'd100000;
  logic        spi_sclk = 0, spi_cs_n = 1, spi_mosi = 0;
  logic        spi_miso, auth_ok, wakeup;
  logic [7:0]  cmd_out, dose_out;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_wake = 0, n_wake_rejected = 0, n_rx_ok = 0, n_rx_rejected = 0, n_sf_pass = 0;
  int n_sf_fail = 0, n_skip = 0, n_hash = 0, n_auth_ok = 0, n_sleep = 0;

  localparam real TICK_NS = 1.0e9 / LCLK_HZ_TB;
  localparam real SPI_HALF_NS = 4000.0;   // 125 kbps

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- user: taps ----------------
  task automatic tap_group(input int n);
    for (int i = 0; i < n; i++) begin
      r_fsr_ohm = 32'd300;    #(5.0 * TICK_NS);   // pressed (below 2 kOhm)
      r_fsr_ohm = 32'd100000; #(6.0 * TICK_NS);   // released
    end
    #(24.0 * TICK_NS);                            // group gap
  endtask

  // ---------------- BLE module: SPI master ----------------
  task automatic spi_xfer(input logic [7:0] tx [], output logic [7:0] rx []);
    rx = new[tx.size()];
    spi_cs_n = 0; #(SPI_HALF_NS);
    foreach (tx[i]) begin
      for (int b = 7; b >= 0; b--) begin
        spi_mosi = tx[i][b]; #(SPI_HALF_NS);
        spi_sclk = 1; rx[i][b] = spi_miso; #(SPI_HALF_NS);
        spi_sclk = 0;
      end
    end
    #(SPI_HALF_NS); spi_cs_n = 1; #(2.0 * SPI_HALF_NS);
  endtask

  task automatic spi_cmd(input logic [7:0] c);
    logic [7:0] rx [];
    spi_xfer('{c}, rx);
  endtask

  task automatic spi_write_cm(input int addr, input logic [127:0] w);
    logic [7:0] tx [], rx [];
    tx = new[18]; tx[0] = SPI_WR_CM; tx[1] = 8'(addr);
    for (int i = 0; i < 16; i++) tx[2+i] = w[127-8*i -: 8];
    spi_xfer(tx, rx);
  endtask

  task automatic spi_push(input logic [423:0] v, input int n);
    logic [7:0] tx [], rx [];
    tx = new[n + 1]; tx[0] = SPI_PUSH;
    for (int i = 0; i < n; i++) tx[1+i] = v[8*n-1-8*i -: 8];
    spi_xfer(tx, rx);
  endtask

  task automatic spi_pop(input int n, output logic [423:0] v);
    logic [7:0] tx [], rx [];
    tx = new[n + 1]; tx[0] = SPI_POP;
    for (int i = 1; i <= n; i++) tx[i] = 8'h00;
    spi_xfer(tx, rx);
    v = '0;
    for (int i = 0; i < n; i++) v = {v[415:0], rx[1+i]};
  endtask

  task automatic spi_status(output logic [7:0] s);
    logic [7:0] rx [];
    spi_xfer('{SPI_STATUS, 8'h00}, rx);
    s = rx[1];
  endtask

  // waits until the Out FIFO holds data (status bit 6), or gives up
  task automatic wait_out(input real max_ns, output bit got);
    logic [7:0] s;
    realtime t0 = $realtime;
    got = 0;
    while (!got && ($realtime - t0) < max_ns) begin
      spi_status(s);
      got = s[6];
      if (!got) #(2.0 * TICK_NS);
    end
  endtask

  task automatic wait_level(input bit lvl, input real max_ns, output bit got);
    realtime t0 = $realtime;
    while (wakeup !== lvl && ($realtime - t0) < max_ns) #(TICK_NS);
    got = (wakeup === lvl);
  endtask

  // ---------------- server keys ----------------
  logic [127:0] k_srv, k_imd;
  logic [31:0]  s_srv, s_imd;

  task automatic configure(input bit skip);
    logic [7:0] rx [];
    spi_write_cm(CM_RX_KEY, k_srv);
    spi_write_cm(CM_TX_KEY, k_imd);
    spi_write_cm(CM_RX_SALT, {s_srv, 96'h0});
    spi_write_cm(CM_TX_SALT, {s_imd, 96'h0});
    spi_write_cm(CM_TX_SEQ, {16'd1, 48'd0, 64'h0});
    spi_write_cm(CM_RX_SEQ, 128'h0);
    spi_xfer('{SPI_WR_CFG, {7'h0, skip}}, rx);
  endtask

  // One session. code digits, taps actually tapped, options.
  task automatic session(input bit skip, input bit tamper, input bit wrong_taps, input bit do_hash);
    bit got, exp_pass, exp_auth;
    logic [127:0] pt;
    logic [423:0] rec, exp_rec;
    int cmd_byte = $urandom_range(1, 200), dose = $urandom_range(1, 250);

    tap_group(4);
    wait_level(1, 10.0 * TICK_NS, got);
    check(got, "4 taps wake the implant");
    if (!got) return;
    n_wake++;
    configure(skip);

    if (do_hash) begin
      spi_cmd(SPI_HASH_INIT);
      spi_push({24'h616263, 8'h80, 224'h0}, 32);   // padded block "abc", first half
      spi_push({192'h0, 64'd24}, 32);              // second half: length 24 bits
      spi_cmd(SPI_HASH_BLOCK);
      spi_cmd(SPI_HASH_READ);
      wait_out(40.0 * TICK_NS, got);
      spi_pop(32, rec);
      check(rec[255:0] == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
            "SHA2-256 of abc through SPI");
      n_hash++;
    end

    // server -> implant: command record carrying the one-time tap code (3,1,4)
    pt  = {MSG_COMMAND, 8'(cmd_byte), 8'(dose), 8'd3, 8'd3, 8'd1, 8'd4, 72'h0};
    rec = ref_record(k_srv, s_srv, {16'd1, 48'd1}, pt);
    if (tamper) rec[300] = ~rec[300];
    spi_push(rec, REC_BYTES);
    spi_cmd(SPI_RECORD);

    if (tamper) begin
      wait_level(0, 40.0 * TICK_NS, got);
      check(got, "tampered record ends the session");
      check(!auth_ok, "no Auth_OK after tampered record");
      n_rx_rejected++;
      n_sleep += got;
      #(30.0 * TICK_NS);
      return;
    end

    if (!skip) begin
      #(4.0 * TICK_NS);
      tap_group(3);
      tap_group(wrong_taps ? 2 : 1);
      if (!wrong_taps) tap_group(4);
    end
    exp_pass = skip || !wrong_taps;
    wait_out(400.0 * TICK_NS, got);
    check(got, "result record sent");
    n_rx_ok++;
    spi_pop(REC_BYTES, rec);
    exp_rec = ref_record(k_imd, s_imd, {16'd1, 48'd0}, {MSG_RESULT, 7'h0, exp_pass, 8'(cmd_byte), 104'h0});
    check(rec == exp_rec, "result record matches the server's expectation");
    if (skip) n_skip++;
    else if (exp_pass) n_sf_pass++;
    else n_sf_fail++;

    // server acknowledges
    rec = ref_record(k_srv, s_srv, {16'd1, 48'd2}, {MSG_ACK, 120'h0});
    spi_push(rec, REC_BYTES);
    spi_cmd(SPI_RECORD);
    wait_level(0, 40.0 * TICK_NS, got);
    check(got, "implant goes back to sleep");
    n_sleep += got;
    exp_auth = exp_pass;
    check(auth_ok == exp_auth, $sformatf("Auth_OK == %0d", exp_auth));
    if (exp_auth) begin
      check(cmd_out == 8'(cmd_byte) && dose_out == 8'(dose), "command and dose delivered");
      n_auth_ok++;
    end
    #(30.0 * TICK_NS);
  endtask

  task automatic run_sessions(input bit full);
    bit got;
    k_srv = {$urandom, $urandom, $urandom, $urandom};
    k_imd = {$urandom, $urandom, $urandom, $urandom};
    s_srv = $urandom; s_imd = $urandom;
    #(3.0 * TICK_NS); rst_n = 1; #(3.0 * TICK_NS);
    if (!full) begin
      // a 3-tap attempt must not wake the implant (energy-drain protection)
      tap_group(3);
      wait_level(1, 20.0 * TICK_NS, got);
      check(!got, "3 taps do not wake");
      if (!got) n_wake_rejected++;
      session(0, 0, 0, 1);   // both factors pass, hash used during first factor
      session(0, 0, 1, 0);   // wrong tap code
      session(1, 0, 0, 0);   // second factor skipped
      session(0, 1, 0, 0);   // tampered command record
      session(0, 0, 0, 0);   // passes again after a failure
      check(n_wake_rejected > 0, "mechanism: rejected wake-up");
      check(n_rx_rejected > 0, "mechanism: record rejected");
      check(n_sf_fail > 0, "mechanism: second factor failure");
      check(n_skip > 0, "mechanism: second factor skipped");
      check(n_hash > 0, "mechanism: hash operation");
    end else begin
      session(0, 0, 0, 0);
    end
    check(n_wake > 0, "mechanism: wake-up");
    check(n_rx_ok > 0, "mechanism: record accepted");
    check(n_sf_pass > 0, "mechanism: second factor pass");
    check(n_auth_ok > 0, "mechanism: Auth_OK");
    check(n_sleep > 0, "mechanism: return to sleep");
    $display("mechanisms: wake=%0d wake_rejected=%0d rx_ok=%0d rx_rejected=%0d sf_pass=%0d sf_fail=%0d skip=%0d hash=%0d auth_ok=%0d sleep=%0d",
             n_wake, n_wake_rejected, n_rx_ok, n_rx_rejected, n_sf_pass, n_sf_fail, n_skip, n_hash, n_auth_ok, n_sleep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
