// reg_sig_encoder: forms the 22-bit signature from the IED's three internal
// regulator voltages (nominal 3.3 V, 5 V, 15 V) and its oscillator period
// (nominal 20 ns).
//
// Each value is turned into its deviation from nominal, delta = nominal -
// measured, and written in sign-magnitude form: a sign bit (1 = negative)
// followed by the magnitude in binary. The voltages are taken in units of
// 10 mV (the resolution at which the IED reports them, 3.26 V -> 326), which
// is what "dropping the trailing zero" of the millivolt deviation does in the
// paper (40 mV -> 4). The period is taken in femtoseconds. The fields are
// concatenated V_RG1, V_RG2, V_RG3, T_P, MSB first:
//     sig[21:17] V_RG1 (1+4)  sig[16:12] V_RG2 (1+4)
//     sig[11:7]  V_RG3 (1+4)  sig[6:0]   T_P   (1+6)
// The field widths and the sign convention are read off the paper's two
// examples: IED-1 (3.26, 4.95, 14.85 V, 19.999945 ns) gives
// 0010000101011110110111 and IED-2 (3.29, 4.99, 14.86 V, 20.000063 ns) gives
// 0000100001011101111111. A magnitude too large for its field saturates to
// all ones (this design's choice; the paper does not discuss it).
// Purely combinational apart from the output register: `sig` follows the
// inputs one clock later.
module reg_sig_encoder #(
  parameter int unsigned VRG1_NOM_10MV = 330,        // 3.3 V
  parameter int unsigned VRG2_NOM_10MV = 500,        // 5 V
  parameter int unsigned VRG3_NOM_10MV = 1500,       // 15 V
  parameter int unsigned TP_NOM_FS     = 20_000_000, // 20 ns
  parameter int unsigned VMAG_W        = 4,
  parameter int unsigned TMAG_W        = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] vrg1_10mv,   // measured, 10 mV units
  input  logic [15:0] vrg2_10mv,
  input  logic [15:0] vrg3_10mv,
  input  logic [31:0] tp_fs,       // measured period, fs
  output logic [3*(VMAG_W+1)+TMAG_W:0] sig
);
  function automatic logic [VMAG_W:0] enc_v(input logic [15:0] meas, input int unsigned nom);
    logic signed [17:0] delta;
    logic        [17:0] mag;
    delta = 18'(signed'(nom)) - $signed({2'b00, meas});
    mag   = delta[17] ? 18'(-delta) : 18'(delta);
    if (mag > 18'((1 << VMAG_W) - 1)) mag = 18'((1 << VMAG_W) - 1);
    return {delta[17], mag[VMAG_W-1:0]};
  endfunction

  function automatic logic [TMAG_W:0] enc_t(input logic [31:0] meas, input int unsigned nom);
    logic signed [33:0] delta;
    logic        [33:0] mag;
    delta = 34'(signed'({1'b0, nom})) - $signed({2'b00, meas});
    mag   = delta[33] ? 34'(-delta) : 34'(delta);
    if (mag > 34'((1 << TMAG_W) - 1)) mag = 34'((1 << TMAG_W) - 1);
    return {delta[33], mag[TMAG_W-1:0]};
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sig <= '0;
    else        sig <= {enc_v(vrg1_10mv, VRG1_NOM_10MV),
                        enc_v(vrg2_10mv, VRG2_NOM_10MV),
                        enc_v(vrg3_10mv, VRG3_NOM_10MV),
                        enc_t(tp_fs, TP_NOM_FS)};
endmodule
