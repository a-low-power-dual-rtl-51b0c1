// imd_security_chip: top level of the implantable security chip.
//
// Two domains. The always-on wake-up domain (supply VDI from the on-chip
// reference) holds the low-frequency oscillator (LCLK, 20.15 Hz), the touch
// detector and the wake-up logic; it only counts taps. When the user taps
// the wake-up pattern, `wakeup` starts the 660 kHz oscillator and with it
// the authentication unit (supply VDC): SPI port to the BLE module, In /
// Data / Out FIFOs, the DTLS-PSK record engine with its memories and AES,
// GHASH and SHA2-256 accelerators, the second-factor tap checker and the
// authentication control FSM. When the session ends the FSM requests sleep,
// `wakeup` falls and HCLK stops once the request is withdrawn; Auth_OK holds
// its value for the target application (e.g. a drug-delivery unit).
//
// The block structure and the signals LCLK, TOUCH, HCLK, SPI and Auth_OK
// follow the paper's architecture figures. The oscillators and the touch
// detector are behavioural models (delays), so this top simulates but only
// its digital blocks synthesize; the on-chip voltage reference has no logic
// function and is not modelled. The FSR is represented by its resistance in
// ohms on `r_fsr_ohm`. The command and dose outputs, the FIFO depths, the
// split of the 2.75 KB SRAM (2 KB scratch pad, 512 B crypto memory, 256 B of
// FIFOs) and the reset are this design's choices. `rst_n` is the power-on
// reset of both domains. Bytes the host pushes into a full In FIFO are
// dropped. HCLK runs while `rst_n` is low, so both domains see clock edges
// during reset.
module imd_security_chip
  import imd_pkg::*;
#(
  parameter real         LCLK_HZ       = 20.15,
  parameter real         HCLK_HZ       = 660.0e3,
  parameter int unsigned WAKE_TAPS     = 4,
  parameter int unsigned GAP_TICKS     = 16,
  parameter int unsigned TIMEOUT_TICKS = 1200,
  parameter int unsigned IN_DEPTH      = 128,
  parameter int unsigned DATA_DEPTH    = 64,
  parameter int unsigned OUT_DEPTH     = 64,
  parameter int unsigned SP_WORDS      = 128,
  parameter int unsigned CM_WORDS      = 32,
  parameter int unsigned GF_DIGIT      = 8
) (
  input  logic        rst_n,
  input  logic [31:0] r_fsr_ohm,     // touch input: FSR resistance
  input  logic        spi_sclk,
  input  logic        spi_cs_n,
  input  logic        spi_mosi,
  output logic        spi_miso,
  output logic        auth_ok,
  output logic        wakeup,
  output logic [7:0]  cmd_out,
  output logic [7:0]  dose_out
);
  // ---------------- always-on wake-up domain ----------------
  logic lclk, cka, ckb, ckc, ckd, touch, touch_b, sleep_req, hclk;

  osc_lf #(.LCLK_HZ(LCLK_HZ)) u_osc_lf (.cka, .ckb, .ckc, .ckd, .lclk);
  touch_detector u_touch (.clk(lclk), .r_fsr_ohm, .touch, .touch_b);
  wakeup_logic #(.WAKE_TAPS(WAKE_TAPS), .GAP_TICKS(GAP_TICKS)) u_wakeup (
    .lclk, .rst_n, .touch, .sleep_req, .wakeup);

  // HCLK also runs during reset so that the authentication unit is reset
  osc_hf #(.HCLK_HZ(HCLK_HZ)) u_osc_hf (.en(wakeup || sleep_req || !rst_n), .hclk);

  // ---------------- authentication unit (HCLK) ----------------
  localparam int unsigned CMA = $clog2(CM_WORDS);

  logic        in_wr, in_rd, in_full, in_empty;
  logic [7:0]  in_wdata, in_rdata;
  logic        out_wr, out_rd, out_full, out_empty;
  logic [7:0]  out_wdata, out_rdata;
  logic        dat_full, dat_empty;
  logic [7:0]  dat_rdata;
  logic        e_dat_rd, e_dat_wr, f_dat_rd, f_dat_wr;
  logic [7:0]  e_dat_wdata, f_dat_wdata;
  logic [$clog2(IN_DEPTH):0]   in_count;
  logic [$clog2(DATA_DEPTH):0] dat_count;
  logic [$clog2(OUT_DEPTH):0]  out_count;

  logic        cm_we;
  logic [7:0]  cm_addr, cfg, status;
  logic [127:0] cm_wdata;
  host_cmd_e   host_cmd;

  logic        eng_op_valid, eng_busy, eng_done, eng_ok;
  eng_op_e     eng_op;
  logic        sf_start, sf_busy, sf_done, sf_pass;
  logic [3:0]  sf_code_len, sf_taps;
  logic [MAX_DIGITS-1:0][DIGIT_W-1:0] sf_code;
  auth_state_e state;

  assign status = {auth_ok, !out_empty, cfg[0], eng_busy, state};

  spi_slave u_spi (
    .clk(hclk), .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .in_wr, .in_wdata, .out_rd, .out_rdata, .out_empty,
    .cm_we, .cm_addr, .cm_wdata, .cfg, .host_cmd, .status);

  sync_fifo #(.WIDTH(8), .DEPTH(IN_DEPTH)) u_in_fifo (
    .clk(hclk), .rst_n, .clear(1'b0), .wr_en(in_wr && !in_full), .wdata(in_wdata), .rd_en(in_rd),
    .rdata(in_rdata), .full(in_full), .empty(in_empty), .count(in_count));
  sync_fifo #(.WIDTH(8), .DEPTH(DATA_DEPTH)) u_data_fifo (
    .clk(hclk), .rst_n, .clear(1'b0), .wr_en(e_dat_wr || f_dat_wr),
    .wdata(e_dat_wr ? e_dat_wdata : f_dat_wdata), .rd_en(e_dat_rd || f_dat_rd),
    .rdata(dat_rdata), .full(dat_full), .empty(dat_empty), .count(dat_count));
  sync_fifo #(.WIDTH(8), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk(hclk), .rst_n, .clear(1'b0), .wr_en(out_wr), .wdata(out_wdata), .rd_en(out_rd),
    .rdata(out_rdata), .full(out_full), .empty(out_empty), .count(out_count));

  dtls_psk_engine #(.SP_WORDS(SP_WORDS), .CM_WORDS(CM_WORDS), .GF_DIGIT(GF_DIGIT)) u_engine (
    .clk(hclk), .rst_n, .op_valid(eng_op_valid), .op(eng_op), .busy(eng_busy), .done(eng_done),
    .ok(eng_ok), .cfg_we(cm_we && !eng_busy), .cfg_addr(cm_addr[CMA-1:0]), .cfg_wdata(cm_wdata),
    .in_rdata, .in_empty, .in_rd,
    .dat_rdata, .dat_empty, .dat_rd(e_dat_rd), .dat_wr(e_dat_wr), .dat_wdata(e_dat_wdata), .dat_full,
    .out_wr, .out_wdata, .out_full);

  second_factor_auth #(.GAP_TICKS(GAP_TICKS), .TIMEOUT_TICKS(TIMEOUT_TICKS)) u_second (
    .clk(hclk), .rst_n, .lclk, .touch, .start(sf_start), .code_len(sf_code_len), .code(sf_code),
    .busy(sf_busy), .done(sf_done), .pass(sf_pass), .taps_in_group(sf_taps));

  auth_ctrl_fsm u_ctrl (
    .clk(hclk), .rst_n, .wakeup, .sleep_req, .host_cmd, .skip_second(cfg[0]),
    .eng_op_valid, .eng_op, .eng_busy, .eng_done, .eng_ok,
    .dat_rd(f_dat_rd), .dat_rdata, .dat_empty, .dat_wr(f_dat_wr), .dat_wdata(f_dat_wdata),
    .sf_start, .sf_code_len, .sf_code, .sf_done, .sf_pass,
    .auth_ok, .cmd_out, .dose_out, .state);
endmodule
