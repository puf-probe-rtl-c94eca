// adc_puf_stats: the probe's own PUF. Estimates the mean (mu) and standard
// deviation (sigma) of readings of the MCU's on-chip 12-bit ADC taken in
// differential mode with its inputs shorted; the pair identifies the probe
// to the CCS in Phase I.
//
// After `start`, N_SAMPLES signed readings offered with `sample_valid` are
// accumulated into a sum S and a sum of squares Q. Then, with N = N_SAMPLES,
//     mu    = S / N                     (truncated toward zero)
//     sigma = sqrt(N*Q - S^2) / N       (population deviation, truncated)
// both returned in Q.8 fixed point (value * 256), e.g. mu = -1.866,
// sigma = 14.048 come out as -477 and 3596. The division uses a serial
// restoring divider (udiv_seq) and the square root a serial digit-by-digit
// method, so the result follows the last sample by about 130 clocks; `done`
// pulses and `valid` stays high until the next `start`.
// The sample count of 10,000 and the use of mu and sigma follow the paper;
// the fixed-point format, the population formula and the arithmetic are this
// design's choices.
module adc_puf_stats
  import probe_pkg::*;
#(
  parameter int unsigned N_SAMPLES = 10_000,
  parameter int unsigned W         = MCU_ADC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      sample_valid,
  input  logic signed [W-1:0]       sample,
  output logic                      busy,
  output logic                      done,
  output logic                      valid,
  output logic signed [STAT_W-1:0]  mu_q8,
  output logic        [STAT_W-1:0]  sigma_q8
);
  localparam int unsigned DW = 40;
  localparam int unsigned VW = 16;
  localparam int unsigned RW = 80;   // radicand width (even)

  typedef enum logic [2:0] {S_IDLE, S_ACC, S_DIV_MU, S_SQRT, S_DIV_SIG, S_DONE} state_t;
  state_t state;

  logic signed [31:0] sum;
  logic        [47:0] sumsq;
  logic [$clog2(N_SAMPLES+1)-1:0] count;
  logic        mu_neg;

  // square root registers
  logic [RW-1:0] op, res, one;

  // shared divider
  logic          div_start, div_done;
  logic [DW-1:0] div_a, div_q;
  logic [VW-1:0] div_rem;

  udiv_seq #(.DW(DW), .VW(VW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(VW'(N_SAMPLES)),
    .done(div_done), .quotient(div_q), .remainder(div_rem)
  );

  logic [31:0] sum_abs;
  logic [63:0] var_n2;    // N*Q - S^2 = N^2 * variance
  logic signed [W*2-1:0] sq;
  assign sum_abs = sum[31] ? 32'(-sum) : 32'(sum);
  assign var_n2  = 64'(N_SAMPLES) * 64'(sumsq) - 64'(sum_abs) * 64'(sum_abs);
  assign sq      = sample * sample;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sum <= '0; sumsq <= '0; count <= '0; mu_neg <= 1'b0;
      op <= '0; res <= '0; one <= '0;
      div_start <= 1'b0; div_a <= '0;
      busy <= 1'b0; done <= 1'b0; valid <= 1'b0; mu_q8 <= '0; sigma_q8 <= '0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          sum <= '0; sumsq <= '0; count <= '0;
          busy <= 1'b1; valid <= 1'b0;
          state <= S_ACC;
        end
        S_ACC: if (count == ($clog2(N_SAMPLES+1))'(N_SAMPLES)) begin
          mu_neg    <= sum[31];
          div_a     <= DW'(sum_abs) << 8;
          div_start <= 1'b1;
          state     <= S_DIV_MU;
        end else if (sample_valid) begin
          sum   <= sum + 32'(sample);
          sumsq <= sumsq + 48'(unsigned'(sq));
          count <= count + 1'b1;
        end
        S_DIV_MU: if (div_done) begin
          mu_q8 <= mu_neg ? -STAT_W'(div_q) : STAT_W'(div_q);
          op    <= RW'(var_n2) << 16;
          res   <= '0;
          one   <= RW'(1) << (RW - 2);
          state <= S_SQRT;
        end
        S_SQRT: if (one == 0) begin
          div_a     <= DW'(res);
          div_start <= 1'b1;
          state     <= S_DIV_SIG;
        end else begin
          if (op >= res + one) begin
            op  <= op - (res + one);
            res <= (res >> 1) + one;
          end else begin
            res <= res >> 1;
          end
          one <= one >> 2;
        end
        S_DIV_SIG: if (div_done) begin
          sigma_q8 <= STAT_W'(div_q);
          state    <= S_DONE;
        end
        S_DONE: begin
          busy  <= 1'b0;
          valid <= 1'b1;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
