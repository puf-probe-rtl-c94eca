// md5_core: MD5 compression (RFC 1321) of one 512-bit block, used by the probe
// to compute H_k' = MD5(N_k) in Phase I of the two-way authentication.
//
// The caller supplies one already-padded block as sixteen 32-bit words
// M[0..15] in MD5's little-endian word order (block[32*i +: 32] = M[i]) and
// pulses `start`. The core runs one of the 64 MD5 steps per clock from the
// standard initial state, adds the initial state back, and raises `done` for
// one clock 65 cycles after `start`, with `digest` in the usual byte order
// (digest[127:120] is the first byte of the hex digest). A message of up to
// 55 bytes fits in one block, which covers the 4-byte nonce N_k.
// The paper names MD5 as the hash used by both the CCS and the probe; this
// iterative one-step-per-cycle structure is this design's choice.
// The round constants are K[i] = floor(|sin(i+1)| * 2^32), i = 0..63.
module md5_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [127:0] digest
);
  localparam logic [31:0] A0 = 32'h67452301, B0 = 32'hefcdab89,
                          C0 = 32'h98badcfe, D0 = 32'h10325476;

  logic [31:0] a, b, c, d;
  logic [6:0]  step;     // 0..63 while busy
  logic [511:0] m;

  function automatic logic [31:0] k_const(input logic [5:0] i);
    unique case (i)
      6'd0 : k_const = 32'hd76aa478;
      6'd1 : k_const = 32'he8c7b756;
      6'd2 : k_const = 32'h242070db;
      6'd3 : k_const = 32'hc1bdceee;
      6'd4 : k_const = 32'hf57c0faf;
      6'd5 : k_const = 32'h4787c62a;
      6'd6 : k_const = 32'ha8304613;
      6'd7 : k_const = 32'hfd469501;
      6'd8 : k_const = 32'h698098d8;
      6'd9 : k_const = 32'h8b44f7af;
      6'd10: k_const = 32'hffff5bb1;
      6'd11: k_const = 32'h895cd7be;
      6'd12: k_const = 32'h6b901122;
      6'd13: k_const = 32'hfd987193;
      6'd14: k_const = 32'ha679438e;
      6'd15: k_const = 32'h49b40821;
      6'd16: k_const = 32'hf61e2562;
      6'd17: k_const = 32'hc040b340;
      6'd18: k_const = 32'h265e5a51;
      6'd19: k_const = 32'he9b6c7aa;
      6'd20: k_const = 32'hd62f105d;
      6'd21: k_const = 32'h02441453;
      6'd22: k_const = 32'hd8a1e681;
      6'd23: k_const = 32'he7d3fbc8;
      6'd24: k_const = 32'h21e1cde6;
      6'd25: k_const = 32'hc33707d6;
      6'd26: k_const = 32'hf4d50d87;
      6'd27: k_const = 32'h455a14ed;
      6'd28: k_const = 32'ha9e3e905;
      6'd29: k_const = 32'hfcefa3f8;
      6'd30: k_const = 32'h676f02d9;
      6'd31: k_const = 32'h8d2a4c8a;
      6'd32: k_const = 32'hfffa3942;
      6'd33: k_const = 32'h8771f681;
      6'd34: k_const = 32'h6d9d6122;
      6'd35: k_const = 32'hfde5380c;
      6'd36: k_const = 32'ha4beea44;
      6'd37: k_const = 32'h4bdecfa9;
      6'd38: k_const = 32'hf6bb4b60;
      6'd39: k_const = 32'hbebfbc70;
      6'd40: k_const = 32'h289b7ec6;
      6'd41: k_const = 32'heaa127fa;
      6'd42: k_const = 32'hd4ef3085;
      6'd43: k_const = 32'h04881d05;
      6'd44: k_const = 32'hd9d4d039;
      6'd45: k_const = 32'he6db99e5;
      6'd46: k_const = 32'h1fa27cf8;
      6'd47: k_const = 32'hc4ac5665;
      6'd48: k_const = 32'hf4292244;
      6'd49: k_const = 32'h432aff97;
      6'd50: k_const = 32'hab9423a7;
      6'd51: k_const = 32'hfc93a039;
      6'd52: k_const = 32'h655b59c3;
      6'd53: k_const = 32'h8f0ccc92;
      6'd54: k_const = 32'hffeff47d;
      6'd55: k_const = 32'h85845dd1;
      6'd56: k_const = 32'h6fa87e4f;
      6'd57: k_const = 32'hfe2ce6e0;
      6'd58: k_const = 32'ha3014314;
      6'd59: k_const = 32'h4e0811a1;
      6'd60: k_const = 32'hf7537e82;
      6'd61: k_const = 32'hbd3af235;
      6'd62: k_const = 32'h2ad7d2bb;
      6'd63: k_const = 32'heb86d391;
      default: k_const = '0;
    endcase
  endfunction

  function automatic logic [4:0] shift_amt(input logic [5:0] i);
    unique case ({i[5:4], i[1:0]})
      4'b00_00: shift_amt = 5'd7;   4'b00_01: shift_amt = 5'd12;
      4'b00_10: shift_amt = 5'd17;  4'b00_11: shift_amt = 5'd22;
      4'b01_00: shift_amt = 5'd5;   4'b01_01: shift_amt = 5'd9;
      4'b01_10: shift_amt = 5'd14;  4'b01_11: shift_amt = 5'd20;
      4'b10_00: shift_amt = 5'd4;   4'b10_01: shift_amt = 5'd11;
      4'b10_10: shift_amt = 5'd16;  4'b10_11: shift_amt = 5'd23;
      4'b11_00: shift_amt = 5'd6;   4'b11_01: shift_amt = 5'd10;
      4'b11_10: shift_amt = 5'd15;  default:  shift_amt = 5'd21;
    endcase
  endfunction

  function automatic logic [31:0] bswap(input logic [31:0] w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

  logic [31:0] f, sum, rotated, mword;
  logic [3:0]  g;
  logic [5:0]  i;
  logic [4:0]  s;

  always_comb begin
    i = step[5:0];
    unique case (i[5:4])
      2'd0: begin f = (b & c) | (~b & d); g = i[3:0];              end
      2'd1: begin f = (d & b) | (~d & c); g = 4'(5*i + 1);         end
      2'd2: begin f = b ^ c ^ d;          g = 4'(3*i + 5);         end
      default: begin f = c ^ (b | ~d);    g = 4'(7*i);             end
    endcase
    mword   = m[32*g +: 32];
    sum     = f + a + k_const(i) + mword;
    s       = shift_amt(i);
    rotated = (sum << s) | (sum >> (6'd32 - 6'(s)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {a, b, c, d} <= {A0, B0, C0, D0};
      step   <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      m      <= '0;
      digest <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          {a, b, c, d} <= {A0, B0, C0, D0};
          m    <= block;
          step <= '0;
          busy <= 1'b1;
        end
      end else if (step == 7'd64) begin
        digest <= {bswap(a + A0), bswap(b + B0), bswap(c + C0), bswap(d + D0)};
        done   <= 1'b1;
        busy   <= 1'b0;
      end else begin
        a    <= d;
        d    <= c;
        c    <= b;
        b    <= b + rotated;
        step <= step + 1'b1;
      end
    end
  end
endmodule
