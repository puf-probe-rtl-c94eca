// diode_sig_gen: forms the 132-bit diode signature from the twelve measured
// diode cut-in voltages.
//
// Following the paper's procedure, each diode D_i is compared in turn with the
// other eleven diodes D_j (j ascending, j != i), and each comparison yields
// one bit: 1 when V_Di > V_Dj, 0 when V_Di <= V_Dj. The bits are laid out in
// that order, most significant first: sig[SIG_BITS-1] is D0 vs D1, the first
// 11 bits are D0's row, the next 11 bits D1's row, and so on (12 x 11 = 132
// bits). In the probe the voltages are ADC codes, so the comparison is a signed
// comparison of codes; this replaces the analogue comparator of the paper's
// first circuit (Fig. 1) with the ADC-based working circuit (Fig. 2).
// One comparator is used once per clock, as in the paper's successive
// comparisons: after `start` the signature is complete and `done` pulses
// N*(N-1) + 1 = 133 clocks later. `volts` must stay stable while `busy`.
module diode_sig_gen
  import probe_pkg::*;
#(
  parameter int unsigned N = N_DIODES,
  parameter int unsigned W = ADC_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic signed [N-1:0][W-1:0]   volts,
  output logic                         busy,
  output logic                         done,
  output logic [N*(N-1)-1:0]           sig
);
  localparam int unsigned NB = N * (N - 1);

  logic [$clog2(N)-1:0]    i;      // diode under test
  logic [$clog2(N)-1:0]    k;      // 0..N-2, index among the others
  logic [$clog2(NB+1)-1:0] pos;    // bits still to produce
  logic [$clog2(N)-1:0]    j;
  logic                    bit_val;

  always_comb begin
    j       = (k < i) ? k : k + 1'b1;
    bit_val = $signed(volts[i]) > $signed(volts[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i <= '0; k <= '0; pos <= '0;
      busy <= 1'b0; done <= 1'b0; sig <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          i <= '0; k <= '0; pos <= ($clog2(NB+1))'(NB);
          busy <= 1'b1;
        end
      end else if (pos == 0) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        sig <= {sig[NB-2:0], bit_val};   // first bit ends up as the MSB
        pos <= pos - 1'b1;
        if (k == ($clog2(N))'(N-2)) begin
          k <= '0;
          i <= i + 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end
endmodule
