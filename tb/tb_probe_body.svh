// tb_probe_body.svh: end-to-end scenario for ied_puf_probe, shared by the
// reduced-size and the full-size testbench. The including module defines
// CPB (clocks per serial bit), SETTLE (filter settle clocks) and NSTAT (MCU-ADC
// samples per Phase I) to match the parameters of its `dut` instance.
//
// The testbench plays the CCS on the serial line, the analogue front end
// (probe_frontend_model) and the MCU's ADC, and the IED's serial values. It
// walks through: ping; a challenge before authentication (refused); Phase I
// with a wrong hash (denied, challenge still refused); Phase I with the right
// hash (ACK) followed by a random challenge, whose response is checked bit for
// bit against a model built from the diode codes and the paper's 22-bit
// encoding; the verdict; a full 1..12 challenge giving the whole 154-bit
// signature; a second IED; a malformed challenge; an unknown command. mu and
// sigma are checked against an exact model of the samples the probe took, and
// H_k' against an independent MD5 model. Each mechanism is counted and a
// mechanism that never happened counts as a failure.

  logic clk = 0, rst_n = 0;
  logic ccs_rxd = 1, ccs_txd;
  logic [3:0] mux_sel;
  logic mux_en, adc_start, adc_done;
  logic [15:0] adc_data;
  logic mcu_adc_valid = 0;
  logic signed [11:0] mcu_adc_sample = 0;
  logic [15:0] ied_vrg1_10mv, ied_vrg2_10mv, ied_vrg3_10mv;
  logic [31:0] ied_tp_fs;
  logic ccs_authenticated, ied_verdict_valid, ied_authentic, ccs_frame_err;
  logic signed [11:0][15:0] diode_code;
  int conversions, settle_violations;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_ping = 0, n_p1_ok = 0, n_p1_denied = 0, n_refused = 0, n_response = 0,
      n_full = 0, n_verdict = 0, n_bad_challenge = 0, n_bad_cmd = 0, n_second_ied = 0;

  localparam longint WATCHDOG = 64'd8 * 12 * (64'(SETTLE) + 64) + 64'd3000 * 10 * CPB
                                + 64'd8 * NSTAT + 64'd200_000;

  probe_frontend_model #(.CONV_CYCLES(9), .MIN_SETTLE(SETTLE)) afe (
    .clk, .mux_sel, .mux_en, .adc_start, .diode_code, .adc_done, .adc_data,
    .conversions, .settle_violations);

  always #5 clk = ~clk;

  // MCU ADC: a new differential reading every other clock
  always @(posedge clk) begin
    mcu_adc_valid  <= ~mcu_adc_valid;
    mcu_adc_sample <= ($urandom_range(2) == 0) ? 12'(int'($urandom_range(16)) - 18)
                                               : 12'(int'($urandom_range(20)) - 6);
  end

  // samples taken by the statistics block in the current Phase I
  longint st_s = 0, st_q = 0;
  int     st_n = 0;
  always @(posedge clk) begin
    if (dut.u_stats.start) begin st_s = 0; st_q = 0; st_n = 0; end
    else if (dut.u_stats.busy && int'(dut.u_stats.count) < NSTAT && mcu_adc_valid) begin
      st_s += longint'(mcu_adc_sample);
      st_q += longint'(mcu_adc_sample) * longint'(mcu_adc_sample);
      st_n++;
    end
  end

  initial begin
    repeat (int'(WATCHDOG)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input logic [7:0] b);
    ccs_rxd = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin ccs_rxd = b[i]; repeat (CPB) @(negedge clk); end
    ccs_rxd = 1; repeat (CPB) @(negedge clk);
  endtask

  task automatic recv(output logic [7:0] b);
    longint waited = 0;
    while (ccs_txd) begin
      @(negedge clk);
      waited++;
      if (waited > WATCHDOG) begin b = 8'hFF; return; end
    end
    repeat (CPB / 2) @(negedge clk);
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(negedge clk); b[i] = ccs_txd; end
    repeat (CPB) @(negedge clk);   // middle of the stop bit
  endtask

  function automatic longint isqrt(input longint x);
    longint r;
    r = longint'($floor($sqrt(real'(x))));
    while (r * r > x) r--;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  function automatic logic [4:0] vfield(input int nom, input int meas);
    int d, m;
    d = nom - meas; m = (d < 0) ? -d : d;
    if (m > 15) m = 15;
    return {d < 0, 4'(m)};
  endfunction
  function automatic logic [6:0] tfield(input int nom, input int meas);
    int d, m;
    d = nom - meas; m = (d < 0) ? -d : d;
    if (m > 63) m = 63;
    return {d < 0, 6'(m)};
  endfunction

  // Phase I; returns 1 when the probe acknowledged
  task automatic phase1(input bit corrupt);
    logic [7:0] b, r [11];
    logic [31:0] nk;
    logic [127:0] h;
    longint a, emu, esig;
    logic signed [23:0] mu;
    logic [23:0] sg;
    send(CMD_AUTH_REQ);
    for (int i = 0; i < 11; i++) recv(r[i]);
    check(r[0] == RSP_PHASE1, "phase I reply code");
    mu = {r[1], r[2], r[3]};
    sg = {r[4], r[5], r[6]};
    nk = {r[7], r[8], r[9], r[10]};
    check(st_n == NSTAT, $sformatf("stats took %0d samples", st_n));
    a    = (st_s < 0) ? -st_s : st_s;
    emu  = (a * 256) / longint'(NSTAT); if (st_s < 0) emu = -emu;
    esig = isqrt((longint'(NSTAT) * st_q - st_s * st_s) * 65536) / longint'(NSTAT);
    check(longint'(mu) == emu && longint'(sg) == esig,
          $sformatf("mu/sigma %0d/%0d exp %0d/%0d", mu, sg, emu, esig));
    h = md5_nonce(nk);
    if (corrupt) h[5] = ~h[5];
    send(CMD_HASH);
    for (int i = 0; i < 16; i++) send(h[127 - 8*i -: 8]);
    recv(b);
    if (corrupt) begin
      check(b == RSP_NAK && !ccs_authenticated, "wrong hash denied");
      if (b == RSP_NAK) n_p1_denied++;
    end else begin
      check(b == RSP_ACK && ccs_authenticated, "right hash accepted");
      if (b == RSP_ACK) n_p1_ok++;
    end
  endtask

  // send a challenge; expect_resp = 0 means a NAK is expected
  task automatic challenge(input int k, input int p [12], input bit expect_resp, output bit got_resp);
    logic [7:0] b, nb;
    logic [159:0] rk, exp;
    logic [131:0] s;
    logic [21:0] rs;
    int v [12];
    int pos;
    send(CMD_CHALLENGE);
    send(8'(k));
    if (k >= 1 && k <= 12) for (int i = 0; i < k; i++) send(8'(p[i]));
    recv(b);
    got_resp = (b == RSP_RESPONSE);
    if (!expect_resp) begin
      check(b == RSP_NAK, "challenge refused with NAK");
      return;
    end
    check(got_resp, "response code");
    recv(nb);
    for (int i = 0; i < 20; i++) recv(rk[159 - 8*i -: 8]);
    for (int i = 0; i < 12; i++) v[i] = int'(diode_code[i]);
    s  = diode_sig(v);
    rs = {vfield(330, int'(ied_vrg1_10mv)), vfield(500, int'(ied_vrg2_10mv)),
          vfield(1500, int'(ied_vrg3_10mv)), tfield(20_000_000, int'(ied_tp_fs))};
    exp = '0; pos = 159;
    for (int i = 0; i < k; i++)
      for (int j = 0; j < 11; j++) begin exp[pos] = s[131 - 11*(p[i]-1) - j]; pos--; end
    for (int j = 21; j >= 0; j--) begin exp[pos] = rs[j]; pos--; end
    check(nb == 8'(11*k + 22), $sformatf("bit count %0d", nb));
    check(rk == exp, $sformatf("R_k\n got %040h\n exp %040h", rk, exp));
    check(!ccs_authenticated, "authentication used up by the challenge");
    if (k == 12) begin
      bit inorder = 1;
      for (int i = 0; i < 12; i++) if (p[i] != i + 1) inorder = 0;
      if (inorder) begin
        check(rk[159 -: 154] == {s, rs}, "full 154-bit signature");
        n_full++;
      end
    end
    n_response++;
  endtask

  task automatic set_ied(input int which);
    // diode voltages in ADS1115 codes (62.5 uV per LSB at +-2.048 V)
    real t1 [12] = '{500.8, 516.8, 513.4, 514.2, 511.5, 514.1, 514.3, 502.0, 516.1, 517.6, 515.1, 514.4};
    if (which == 1) begin
      for (int i = 0; i < 12; i++) diode_code[i] = 16'(int'(t1[i] * 16.0));
      ied_vrg1_10mv = 326; ied_vrg2_10mv = 495; ied_vrg3_10mv = 1485; ied_tp_fs = 19_999_945;
    end else begin
      for (int i = 0; i < 12; i++) diode_code[i] = 16'(int'($urandom_range(520 * 16, 495 * 16)));
      ied_vrg1_10mv = 329; ied_vrg2_10mv = 499; ied_vrg3_10mv = 1486; ied_tp_fs = 20_000_063;
    end
  endtask

  initial begin
    logic [7:0] b;
    int p [12];
    bit got;
    set_ied(1);
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);

    send(CMD_PING); recv(b);
    check(b == RSP_PING, "ping"); if (b == RSP_PING) n_ping++;

    for (int i = 0; i < 12; i++) p[i] = i + 1;
    challenge(4, p, 0, got);           // not yet authenticated
    if (!got) n_refused++;

    phase1(1);                         // wrong hash
    challenge(3, p, 0, got);
    if (!got) n_refused++;

    phase1(0);
    for (int i = 0; i < 12; i++) p[i] = int'($urandom_range(12, 1));
    challenge(8, p, 1, got);

    send(CMD_VERDICT); send(8'd1); recv(b);
    check(b == RSP_ACK && ied_verdict_valid && ied_authentic, "verdict latched");
    if (b == RSP_ACK) n_verdict++;

    phase1(0);
    for (int i = 0; i < 12; i++) p[i] = i + 1;
    challenge(12, p, 1, got);

    set_ied(2);
    phase1(0);
    for (int i = 0; i < 12; i++) p[i] = 12 - i;
    challenge(12, p, 1, got);
    if (got) n_second_ied++;
    check(ied_vrg1_10mv == 329, "second IED applied");

    phase1(0);
    p[1] = 13;
    challenge(5, p, 0, got);           // port out of range
    if (!got) n_bad_challenge++;

    send(8'h33); recv(b);
    check(b == RSP_NAK, "unknown command"); if (b == RSP_NAK) n_bad_cmd++;

    check(settle_violations == 0, "ADC read only after the filter settled");
    check(!ccs_frame_err, "no framing errors");

    check(n_ping > 0, "mechanism: ping");
    check(n_p1_ok > 0, "mechanism: Phase I accepted");
    check(n_p1_denied > 0, "mechanism: Phase I denied on hash mismatch");
    check(n_refused > 0, "mechanism: challenge refused without authentication");
    check(n_response > 0, "mechanism: Phase II response");
    check(n_full > 0, "mechanism: full 154-bit signature");
    check(n_verdict > 0, "mechanism: verdict");
    check(n_second_ied > 0, "mechanism: second IED");
    check(n_bad_challenge > 0, "mechanism: malformed challenge");
    check(n_bad_cmd > 0, "mechanism: unknown command");
    $display("mechanisms: ping=%0d p1_ok=%0d p1_denied=%0d refused=%0d responses=%0d full=%0d verdict=%0d second_ied=%0d bad_challenge=%0d bad_cmd=%0d conversions=%0d",
             n_ping, n_p1_ok, n_p1_denied, n_refused, n_response, n_full, n_verdict, n_second_ied,
             n_bad_challenge, n_bad_cmd, conversions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
