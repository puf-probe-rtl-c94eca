// probe_ctrl: the probe side of the two-way authentication between the
// central computer system (CCS) and the IED PUF probe.
//
// It reads command bytes from the CCS serial link and sequences the other
// blocks:
//   PING                 -> answers RSP_PING.
//   AUTH_REQ (Phase I)   -> draws a nonce N_k, measures mu and sigma of the
//                           MCU-ADC PUF, hashes N_k with MD5 (H_k'), and sends
//                           RSP_PHASE1, mu(3 bytes), sigma(3), N_k(4), MSB first.
//   HASH + 16 bytes H_k  -> compares H_k with H_k'. On a match the CCS is
//                           authenticated and ACK is sent, else NAK.
//   CHALLENGE K p1..pK   -> (Phase II, only after a successful Phase I) sweeps
//                           the twelve diodes, forms the 132-bit signature,
//                           builds R_k from the challenged ports and the 22-bit
//                           V_RG/T_P signature, and sends RSP_RESPONSE, the bit
//                           count and 20 bytes of R_k, MSB first. Without
//                           authentication, or for a malformed challenge, NAK.
//   VERDICT + 1 byte     -> the CCS's acknowledgement of the IED check (1 =
//                           authentic); latched on `ied_verdict_*`, ACK sent.
//   anything else        -> NAK.
// The order of the exchange (request; mu, sigma, N_k; H_k; challenge;
// response; acknowledgement) follows the paper's Fig. 3. The byte codes, the
// MD5 message (the four bytes of N_k, most significant first), the choice that
// one Phase I admits one challenge, and that a fresh mu/sigma is measured on
// every request are this design's own.
// Interface: byte streams with a one-cycle `rx_valid` and a valid/ready
// transmit port; start/done pulses towards the worker blocks. `md5_block` is
// the whole padded 512-bit MD5 block; only its 32 nonce bits vary, and the
// padding byte and the length field are constants that fold away in the
// MD5 core.
module probe_ctrl
  import probe_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  // serial link to the CCS
  input  logic [7:0]                   rx_data,
  input  logic                         rx_valid,
  output logic [7:0]                   tx_data,
  output logic                         tx_valid,
  input  logic                         tx_ready,
  // nonce source
  input  logic [NONCE_W-1:0]           nonce,
  output logic                         nonce_take,
  // MCU-ADC PUF statistics
  output logic                         stats_start,
  input  logic                         stats_done,
  input  logic signed [STAT_W-1:0]     mu_q8,
  input  logic        [STAT_W-1:0]     sigma_q8,
  // MD5
  output logic                         md5_start,
  output logic [511:0]                 md5_block,
  input  logic                         md5_done,
  input  logic [HASH_W-1:0]            md5_digest,
  // diode sweep and signature
  output logic                         scan_start,
  input  logic                         scan_done,
  output logic                         sig_start,
  input  logic                         sig_done,
  // response builder
  output logic                         rb_start,
  output logic [3:0]                   rb_count,
  output logic [N_DIODES-1:0][3:0]     rb_ports,
  input  logic                         rb_done,
  input  logic                         rb_error,
  input  logic [RESP_BITS-1:0]         rb_resp,
  input  logic [7:0]                   rb_nbits,
  // status
  output logic                         ccs_authenticated,
  output logic                         ied_verdict_valid,
  output logic                         ied_authentic
);
  typedef enum logic [3:0] {
    S_IDLE, S_P1_WORK, S_RX_HASH, S_RX_COUNT, S_RX_PORTS,
    S_SCAN, S_SIG, S_BUILD, S_RX_VERDICT, S_SEND
  } state_t;
  state_t state;

  localparam int TXMAX = 2 + RESP_BYTES;   // longest reply: RSP_RESPONSE, nbits, R_k
  logic [7:0] txbuf [TXMAX];
  logic [4:0] tx_len, tx_idx;
  logic [4:0] rx_cnt;
  logic [HASH_W-1:0] hk, hk_local;
  logic [NONCE_W-1:0] nk;
  logic phase1_pending, stats_ok, md5_ok;

  assign tx_data  = txbuf[tx_idx];
  assign tx_valid = (state == S_SEND) && (tx_idx < tx_len);

  function automatic logic [511:0] md5_pad(input logic [31:0] n);
    logic [511:0] b;
    b = '0;
    b[31:0]      = {n[7:0], n[15:8], n[23:16], n[31:24]};  // bytes n[31:24], n[23:16], ...
    b[63:32]     = 32'h0000_0080;                          // padding byte 0x80
    b[14*32 +: 32] = 32'd32;                               // message length in bits
    return b;
  endfunction

  assign md5_block = md5_pad(nk);

  // R_k left aligned in whole bytes, zero filled at the end
  logic [8*RESP_BYTES-1:0] resp_padded;
  assign resp_padded = {rb_resp, (8*RESP_BYTES-RESP_BITS)'(0)};

  // send a single reply byte
  task automatic reply1(input logic [7:0] b);
    txbuf[0] <= b;
    tx_len   <= 5'd1;
    tx_idx   <= '0;
    state    <= S_SEND;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int i = 0; i < TXMAX; i++) txbuf[i] <= '0;
      tx_len <= '0; tx_idx <= '0; rx_cnt <= '0;
      hk <= '0; hk_local <= '0; nk <= '0;
      phase1_pending <= 1'b0; stats_ok <= 1'b0; md5_ok <= 1'b0;
      nonce_take <= 1'b0; stats_start <= 1'b0; md5_start <= 1'b0;
      scan_start <= 1'b0; sig_start <= 1'b0; rb_start <= 1'b0;
      rb_count <= '0; rb_ports <= '0;
      ccs_authenticated <= 1'b0; ied_verdict_valid <= 1'b0; ied_authentic <= 1'b0;
    end else begin
      nonce_take <= 1'b0; stats_start <= 1'b0; md5_start <= 1'b0;
      scan_start <= 1'b0; sig_start <= 1'b0; rb_start <= 1'b0;
      unique case (state)
        S_IDLE: if (rx_valid) begin
          unique case (rx_data)
            CMD_PING: reply1(RSP_PING);
            CMD_AUTH_REQ: begin
              ccs_authenticated <= 1'b0;
              phase1_pending    <= 1'b0;
              nk          <= nonce;
              nonce_take  <= 1'b1;
              stats_start <= 1'b1;
              md5_start   <= 1'b1;      // md5_block follows nk next cycle; core latches then
              stats_ok    <= 1'b0;
              md5_ok      <= 1'b0;
              state       <= S_P1_WORK;
            end
            CMD_HASH: begin
              rx_cnt <= '0;
              state  <= S_RX_HASH;
            end
            CMD_CHALLENGE: state <= S_RX_COUNT;
            CMD_VERDICT:   state <= S_RX_VERDICT;
            default:       reply1(RSP_NAK);
          endcase
        end
        S_P1_WORK: begin
          if (stats_done) stats_ok <= 1'b1;
          if (md5_done) begin
            md5_ok   <= 1'b1;
            hk_local <= md5_digest;
          end
          if ((stats_ok || stats_done) && (md5_ok || md5_done)) begin
            txbuf[0]  <= RSP_PHASE1;
            txbuf[1]  <= mu_q8[23:16];  txbuf[2]  <= mu_q8[15:8];  txbuf[3]  <= mu_q8[7:0];
            txbuf[4]  <= sigma_q8[23:16]; txbuf[5] <= sigma_q8[15:8]; txbuf[6] <= sigma_q8[7:0];
            txbuf[7]  <= nk[31:24]; txbuf[8] <= nk[23:16]; txbuf[9] <= nk[15:8]; txbuf[10] <= nk[7:0];
            tx_len    <= 5'd11;
            tx_idx    <= '0;
            phase1_pending <= 1'b1;
            state     <= S_SEND;
          end
        end
        S_RX_HASH: if (rx_valid) begin
          hk     <= {hk[HASH_W-9:0], rx_data};
          rx_cnt <= rx_cnt + 1'b1;
          if (rx_cnt == 5'd15) begin
            if (phase1_pending && ({hk[HASH_W-9:0], rx_data} == hk_local)) begin
              ccs_authenticated <= 1'b1;
              reply1(RSP_ACK);
            end else begin
              reply1(RSP_NAK);
            end
            phase1_pending <= 1'b0;
          end
        end
        S_RX_COUNT: if (rx_valid) begin
          if (rx_data == 8'd0 || rx_data > 8'(N_DIODES)) begin
            reply1(RSP_NAK);
          end else begin
            rb_count <= rx_data[3:0];
            rx_cnt   <= '0;
            state    <= S_RX_PORTS;
          end
        end
        S_RX_PORTS: if (rx_valid) begin
          rb_ports[rx_cnt[3:0]] <= (rx_data > 8'd15) ? 4'd0 : rx_data[3:0];  // 0 is rejected later
          rx_cnt <= rx_cnt + 1'b1;
          if (rx_cnt[3:0] == rb_count - 1'b1) begin
            if (ccs_authenticated) begin
              scan_start <= 1'b1;
              state      <= S_SCAN;
            end else begin
              reply1(RSP_NAK);
            end
          end
        end
        S_SCAN:  if (scan_done) begin sig_start <= 1'b1; state <= S_SIG;   end
        S_SIG:   if (sig_done)  begin rb_start  <= 1'b1; state <= S_BUILD; end
        S_BUILD: if (rb_done) begin
          ccs_authenticated <= 1'b0;          // one challenge per Phase I
          if (rb_error) begin
            reply1(RSP_NAK);
          end else begin
            txbuf[0] <= RSP_RESPONSE;
            txbuf[1] <= rb_nbits;
            for (int i = 0; i < RESP_BYTES; i++)
              txbuf[2+i] <= resp_padded[8*RESP_BYTES-1 - 8*i -: 8];
            tx_len   <= 5'(TXMAX);
            tx_idx   <= '0;
            state    <= S_SEND;
          end
        end
        S_RX_VERDICT: if (rx_valid) begin
          ied_verdict_valid <= 1'b1;
          ied_authentic     <= (rx_data == 8'd1);
          reply1(RSP_ACK);
        end
        S_SEND: begin
          if (tx_valid && tx_ready) tx_idx <= tx_idx + 1'b1;
          else if (tx_idx == tx_len) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
