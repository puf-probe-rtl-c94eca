// response_builder: assembles the Phase II response R_k to a CCS challenge C_k.
//
// A challenge is a list of K port numbers (1..12, K = 1..12, repeats allowed),
// port n meaning diode D_(n-1). For each challenged port, in challenge order,
// the builder appends that diode's 11-bit row of the 132-bit diode signature
// (its comparisons with the other eleven diodes), then appends the 22-bit
// regulator-voltage / clock-period signature. The result is left aligned in
// `resp` (first bit at resp[RESP_BITS-1]); `nbits` = 11*K + 22 bits are
// meaningful and the rest are zero, so K = 12 ports in the order 1..12 gives
// back the full 154-bit signature. The paper says only that the probe
// "generates a bit-stream specific to the challenged ports and combines it
// with the T_P and V_RG signatures"; using per-diode rows is this design's
// reading of that.
// Timing: one row per clock; `done` pulses K + 1 clocks after `start`. A count
// of 0 or above 12, or a port number outside 1..12, ends the operation with
// `error` set instead of a response.
module response_builder
  import probe_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [3:0]                    count,        // K
  input  logic [N_DIODES-1:0][3:0]      ports,        // ports[0] is the first challenged port
  input  logic [SIG_BITS-1:0]           diode_sig,
  input  logic [REG_BITS-1:0]           reg_sig,
  output logic                          busy,
  output logic                          done,
  output logic                          error,
  output logic [RESP_BITS-1:0]          resp,
  output logic [7:0]                    nbits
);
  logic [3:0] idx;
  logic [3:0] port;
  logic [ROW_BITS-1:0] row;
  logic [7:0] wpos;       // next free bit, counted from the MSB

  always_comb begin
    port = ports[idx];
    row  = diode_sig[SIG_BITS-1 - ROW_BITS*(int'(port) - 1) -: ROW_BITS];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; wpos <= '0; busy <= 1'b0; done <= 1'b0; error <= 1'b0;
      resp <= '0; nbits <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          resp  <= '0;
          idx   <= '0;
          wpos  <= '0;
          nbits <= '0;
          error <= 1'b0;
          if (count == 0 || count > 4'(N_DIODES)) begin
            error <= 1'b1;
            done  <= 1'b1;
          end else begin
            busy <= 1'b1;
          end
        end
      end else if (idx == count) begin
        resp[RESP_BITS-1 - int'(wpos) -: REG_BITS] <= reg_sig;
        nbits <= wpos + 8'(REG_BITS);
        busy  <= 1'b0;
        done  <= 1'b1;
      end else if (port == 0 || port > 4'(N_DIODES)) begin
        error <= 1'b1;
        busy  <= 1'b0;
        done  <= 1'b1;
      end else begin
        resp[RESP_BITS-1 - int'(wpos) -: ROW_BITS] <= row;
        wpos <= wpos + 8'(ROW_BITS);
        idx  <= idx + 1'b1;
      end
    end
  end
endmodule
