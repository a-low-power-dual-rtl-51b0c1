# Dual-factor authentication unit for an implantable device

An implant that accepts commands over Bluetooth via a phone can be driven by a
compromised phone. This design adds a second, human factor: after the server
authenticates the implant over a DTLS-PSK channel (AES-128-GCM records), the
server sends a one-time tap code such as (3,1,4) to both the user and the
implant, and the implant only raises `Auth_OK` when the user taps that code
on the skin above it. Taps also wake the implant (4 taps), so a phone cannot
wake it and drain its battery.

## Structure
- Always-on domain (LCLK about 20 Hz): `osc_lf` and `touch_detector` are
  behavioural models of analog circuits. `wakeup_logic` counts taps with
  `tap_counter`.
- Authentication unit (HCLK 660 kHz, runs only while awake, `osc_hf` model):
  `spi_slave` (BLE link, commands in `imd_pkg`), three `sync_fifo`s,
  `dtls_psk_engine` (scratch pad and crypto memory `sp_sram`, `aes128_enc`,
  `gf128_mul`, `sha256_core`), `second_factor_auth` and `auth_ctrl_fsm`.
- Top: `imd_security_chip`.

## Protocol seen from the host
Wake with 4 taps; write keys, salts and sequence numbers into the crypto
memory (`WR_CM`); push the 53-byte command record and send `RECORD`; the user
taps the code; pop the 53-byte result record; push the acknowledgement
record. The chip then raises `Auth_OK` (if both factors passed) and sleeps.
A record that fails GCM, header or replay checks ends the session.

## Departures and limits
- The DTLS-PSK handshake and PSK key derivation are not built; session keys
  are loaded through SPI. Record plaintexts are one AES block.
- Tap grouping (a 16-tick low gap), the timeout, message layouts, SPI
  commands, FIFO depths and the SRAM split are this design's choices.
- Oscillators and touch detector are models with delays; only the digital
  blocks synthesize.

## Simulation
`verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/imd_pkg.sv tb/tb_ref_crypto.sv tb/tb_imd_security_chip.sv --top-module tb_imd_security_chip`
(fast LCLK, five sessions); `tb_imd_full` runs one session at the default
clocks. Each block has its own `tb_<module>` testbench.
