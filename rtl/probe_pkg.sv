// probe_pkg: sizes and command codes shared by the IED PUF probe modules.
//
// The probe measures twelve protection diodes of an IED (N_DIODES), forms a
// 12 x 11 = 132-bit diode signature and a 22-bit signature from three
// regulator voltages and the oscillator period, giving a 154-bit full
// signature. These numbers follow the paper. The byte codes of the serial
// protocol towards the central computer system (CCS) are this design's own:
// the paper describes the exchange but not its encoding.
package probe_pkg;
  localparam int N_DIODES   = 12;                       // diodes / output ports measured
  localparam int SIG_BITS   = N_DIODES * (N_DIODES-1);  // 132-bit diode signature
  localparam int ROW_BITS   = N_DIODES - 1;             // 11 comparisons per diode
  localparam int REG_BITS   = 22;                       // V_RG1..3 + T_P signature
  localparam int RESP_BITS  = SIG_BITS + REG_BITS;      // 154-bit full response
  localparam int RESP_BYTES = (RESP_BITS + 7) / 8;      // 20 bytes on the wire
  localparam int ADC_W      = 16;                       // diode ADC code width
  localparam int MCU_ADC_W  = 12;                       // on-chip ADC of the MCU
  localparam int STAT_W     = 24;                       // mu / sigma, Q.8 fixed point
  localparam int NONCE_W    = 32;                       // N_k
  localparam int HASH_W     = 128;                      // MD5 digest

  // Host (CCS) to probe command bytes
  localparam logic [7:0] CMD_PING      = 8'h50;  // 'P'  ping, answered with RSP_PING
  localparam logic [7:0] CMD_AUTH_REQ  = 8'hA1;  // Phase I initial authentication request
  localparam logic [7:0] CMD_HASH      = 8'hA2;  // followed by 16 bytes of H_k
  localparam logic [7:0] CMD_CHALLENGE = 8'hB1;  // followed by count K and K port numbers
  localparam logic [7:0] CMD_VERDICT   = 8'hC1;  // followed by 1 byte: 1 = IED authentic

  // Probe to host reply bytes
  localparam logic [7:0] RSP_PING      = 8'h70;  // 'p'
  localparam logic [7:0] RSP_PHASE1    = 8'hA1;  // followed by mu(3) sigma(3) N_k(4)
  localparam logic [7:0] RSP_ACK       = 8'h06;
  localparam logic [7:0] RSP_NAK       = 8'h15;
  localparam logic [7:0] RSP_RESPONSE  = 8'hB1;  // followed by bit count and 20 bytes of R_k
endpackage
