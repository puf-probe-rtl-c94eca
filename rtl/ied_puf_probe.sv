// ied_puf_probe: digital core of the IED PUF probe, an instrument that
// authenticates an intelligent electronic device (IED) of a substation from
// physical variations of its parts, and that first proves its own identity
// to the central computer system (CCS).
//
// Blocks and data flow:
//   CCS serial link   uart_rx / uart_tx  <->  probe_ctrl (protocol sequencer)
//   probe identity    adc_puf_stats  (mu, sigma of the MCU's own ADC)
//                     nonce_rng      (N_k)  ->  md5_core (H_k' = MD5(N_k))
//   IED signature     diode_scan     (drives the shared mux selector S3..S0,
//                                     ADC handshake, 12 diode voltages)
//                     diode_sig_gen  (132-bit pairwise comparison signature)
//                     reg_sig_encoder(22-bit V_RG1..3 / T_P signature)
//                     response_builder (R_k for a challenge C_k)
// Outside this core and brought out as ports: the analogue front end (current
// source, the two 16:1 analogue multiplexers, op-amp follower, 15 Hz filter
// and the 16-bit delta-sigma ADC, seen through `mux_*` and `adc_*`), the
// MCU's on-chip ADC (`mcu_adc_*`), the IED's own serial interface that
// reports its regulator voltages and clock period (`ied_*`, already decoded
// to numbers), and the display (`ccs_authenticated`, `ied_verdict_*`).
// Defaults: 50 MHz clock, 115200 baud, 100 ms filter settling, 10,000 MCU-ADC
// samples per Phase I. The blocks and the protocol follow the paper's Fig. 2
// and Fig. 3; the partitioning into hardware blocks, the clock, the baud
// rate and the byte protocol are this design's own.
module ied_puf_probe
  import probe_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT   = 434,
  parameter int unsigned SETTLE_CYCLES  = 5_000_000,
  parameter int unsigned N_STAT_SAMPLES = 10_000,
  parameter int unsigned VRG1_NOM_10MV  = 330,
  parameter int unsigned VRG2_NOM_10MV  = 500,
  parameter int unsigned VRG3_NOM_10MV  = 1500,
  parameter int unsigned TP_NOM_FS      = 20_000_000
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // serial terminal to the CCS
  input  logic                    ccs_rxd,
  output logic                    ccs_txd,
  // analogue multiplexers MUX1 / MUX2 (shared selector) and diode ADC
  output logic [3:0]              mux_sel,
  output logic                    mux_en,
  output logic                    adc_start,
  input  logic                    adc_done,
  input  logic [ADC_W-1:0]        adc_data,
  // MCU on-chip ADC, differential mode
  input  logic                    mcu_adc_valid,
  input  logic signed [MCU_ADC_W-1:0] mcu_adc_sample,
  // values read from the IED's serial interface
  input  logic [15:0]             ied_vrg1_10mv,
  input  logic [15:0]             ied_vrg2_10mv,
  input  logic [15:0]             ied_vrg3_10mv,
  input  logic [31:0]             ied_tp_fs,
  // status for the display
  output logic                    ccs_authenticated,
  output logic                    ied_verdict_valid,
  output logic                    ied_authentic,
  output logic                    ccs_frame_err
);
  logic [7:0] rx_data, tx_data;
  logic rx_valid, tx_valid, tx_ready;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rxd(ccs_rxd), .data(rx_data), .valid(rx_valid), .frame_err(ccs_frame_err));
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .data(tx_data), .valid(tx_valid), .ready(tx_ready), .txd(ccs_txd));

  logic [NONCE_W-1:0] nonce;
  logic nonce_take;
  nonce_rng u_rng (
    .clk, .rst_n, .take(nonce_take),
    .entropy_in(NONCE_W'(unsigned'(mcu_adc_sample))), .nonce(nonce));

  logic stats_start, stats_done, stats_busy, stats_valid;
  logic signed [STAT_W-1:0] mu_q8;
  logic        [STAT_W-1:0] sigma_q8;
  adc_puf_stats #(.N_SAMPLES(N_STAT_SAMPLES)) u_stats (
    .clk, .rst_n, .start(stats_start), .sample_valid(mcu_adc_valid), .sample(mcu_adc_sample),
    .busy(stats_busy), .done(stats_done), .valid(stats_valid), .mu_q8, .sigma_q8);

  logic md5_start, md5_done, md5_busy;
  logic [511:0] md5_block;
  logic [HASH_W-1:0] md5_digest;
  md5_core u_md5 (
    .clk, .rst_n, .start(md5_start), .block(md5_block),
    .busy(md5_busy), .done(md5_done), .digest(md5_digest));

  logic scan_start, scan_done, scan_busy;
  logic signed [N_DIODES-1:0][ADC_W-1:0] volts;
  diode_scan #(.SETTLE_CYCLES(SETTLE_CYCLES)) u_scan (
    .clk, .rst_n, .start(scan_start), .busy(scan_busy), .done(scan_done),
    .mux_sel, .mux_en, .adc_start, .adc_done, .adc_data, .volts);

  logic sig_start, sig_done, sig_busy;
  logic [SIG_BITS-1:0] diode_sig;
  diode_sig_gen u_sig (
    .clk, .rst_n, .start(sig_start), .volts, .busy(sig_busy), .done(sig_done), .sig(diode_sig));

  logic [REG_BITS-1:0] reg_sig;
  reg_sig_encoder #(
    .VRG1_NOM_10MV(VRG1_NOM_10MV), .VRG2_NOM_10MV(VRG2_NOM_10MV),
    .VRG3_NOM_10MV(VRG3_NOM_10MV), .TP_NOM_FS(TP_NOM_FS)
  ) u_reg (
    .clk, .rst_n, .vrg1_10mv(ied_vrg1_10mv), .vrg2_10mv(ied_vrg2_10mv),
    .vrg3_10mv(ied_vrg3_10mv), .tp_fs(ied_tp_fs), .sig(reg_sig));

  logic rb_start, rb_done, rb_error, rb_busy;
  logic [3:0] rb_count;
  logic [N_DIODES-1:0][3:0] rb_ports;
  logic [RESP_BITS-1:0] rb_resp;
  logic [7:0] rb_nbits;
  response_builder u_rb (
    .clk, .rst_n, .start(rb_start), .count(rb_count), .ports(rb_ports),
    .diode_sig, .reg_sig, .busy(rb_busy), .done(rb_done), .error(rb_error),
    .resp(rb_resp), .nbits(rb_nbits));

  probe_ctrl u_ctrl (
    .clk, .rst_n,
    .rx_data, .rx_valid, .tx_data, .tx_valid, .tx_ready,
    .nonce, .nonce_take,
    .stats_start, .stats_done, .mu_q8, .sigma_q8,
    .md5_start, .md5_block, .md5_done, .md5_digest,
    .scan_start, .scan_done, .sig_start, .sig_done,
    .rb_start, .rb_count, .rb_ports, .rb_done, .rb_error, .rb_resp, .rb_nbits,
    .ccs_authenticated, .ied_verdict_valid, .ied_authentic);

  // the controller starts one worker at a time and only when it is idle
  property p_no_restart(start, busy);
    @(posedge clk) disable iff (!rst_n) start |-> !busy;
  endproperty
  a_md5_idle:   assert property (p_no_restart(md5_start,  md5_busy));
  a_scan_idle:  assert property (p_no_restart(scan_start, scan_busy));
  a_sig_idle:   assert property (p_no_restart(sig_start,  sig_busy));
  a_rb_idle:    assert property (p_no_restart(rb_start,   rb_busy));
  a_stats_idle: assert property (p_no_restart(stats_start, stats_busy));
endmodule
