// udiv_seq: unsigned restoring divider, one quotient bit per clock.
//
// `start` loads dividend and divisor; `done` pulses DW + 1 clocks later with
// quotient = floor(dividend / divisor) and the remainder. A zero divisor gives
// an all-ones quotient. Used by adc_puf_stats for the mean and the standard
// deviation of the MCU-ADC samples.
module udiv_seq #(
  parameter int unsigned DW = 40,   // dividend / quotient width
  parameter int unsigned VW = 16    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] dividend,
  input  logic [VW-1:0] divisor,
  output logic          done,
  output logic [DW-1:0] quotient,
  output logic [VW-1:0] remainder
);
  logic [VW:0]  rem;
  logic [DW-1:0] q;
  logic [VW-1:0] dv;
  logic [$clog2(DW+1)-1:0] n;
  logic busy;
  logic [VW:0] trial;

  assign trial = {rem[VW-1:0], q[DW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; q <= '0; dv <= '0; n <= '0; busy <= 1'b0; done <= 1'b0;
      quotient <= '0; remainder <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          rem  <= '0;
          q    <= dividend;
          dv   <= divisor;
          n    <= ($clog2(DW+1))'(DW);
          busy <= 1'b1;
        end
      end else if (n == 0) begin
        quotient  <= q;
        remainder <= rem[VW-1:0];
        busy      <= 1'b0;
        done      <= 1'b1;
      end else begin
        // shift the next dividend bit into the partial remainder
        if (trial >= {1'b0, dv}) begin
          rem <= trial - {1'b0, dv};
          q   <= {q[DW-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[DW-2:0], 1'b0};
        end
        n <= n - 1'b1;
      end
    end
  end
endmodule
