// int2fp -- column-parallel integer to IEEE-754 single conversion
// (the paper's Algorithm 1).
//
// Every lane converts one N-bit signed integer (N <= 25) to FP32 with the
// same step sequence, the way all bitlines of the C-SRAM would execute it
// together. After start the lanes run, one step per cycle:
//   PREP   split sign and magnitude (two's complement in, sign-magnitude
//          inside, as Algorithm 1 reads a_{n-1} as the sign)
//   SCAN   N-1 steps, i = N-2 .. 0: D |= a_i, c_i |= D
//          (C becomes all ones from the leading 1 downward)
//   COUNT  N-1 steps: Sum += c_i with a 5-bit ripple (popcount of C)
//   EXP    Sum + 126 is the biased exponent, r31 is the sign
//   SHIFT  N steps of shift-and-add: A := A * BitReverse(C + 1), which moves
//          the leading 1 of A to bit N-2
//   MANT   r[22 -: N-2] := a[N-3:0] (hidden 1 dropped)
// done pulses and fp is valid 3N+2 cycles after start. start is ignored
// while busy.
//
// Differences from the printed algorithm, all chosen here: the sum register
// is 8 bits wide and fills r[30:23] (the printed 5-bit Sum and r[27:23] cannot
// hold a biased exponent); the multiplier is BitReverse over N bits without
// the final << 1 (the printed form is one position off, or zero when the top
// magnitude bit is set); a zero input gives +0.0 (the algorithm has no zero
// case). The in-array cycle count 3n^2/2 + 39(n-1) of the paper counts
// bitline operations, which this word-per-lane sequencer does not model.
module int2fp #(
  parameter int unsigned LANES = 512,
  parameter int unsigned N     = 25
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [N-1:0]  a_in [LANES],
  output logic          busy,
  output logic          done,
  output logic [31:0]   fp [LANES]
);
  typedef enum logic [2:0] {P_IDLE, P_PREP, P_SCAN, P_COUNT, P_EXP, P_SHIFT, P_MANT} phase_e;

  phase_e      ph;
  logic [5:0]  i;
  logic [N-1:0] a_q [LANES];
  logic [N-1:0] a   [LANES];   // sign-magnitude operand
  logic [N-2:0] c   [LANES];
  logic         d   [LANES];
  logic [7:0]   s   [LANES];
  logic [N-1:0] m   [LANES];   // multiplier BitReverse(C+1)
  logic [N-1:0] p   [LANES];   // product
  logic         z   [LANES];   // zero input

  function automatic logic [N-1:0] bitrev(input logic [N-1:0] v);
    logic [N-1:0] r;
    for (int k = 0; k < N; k++) r[k] = v[N-1-k];
    return r;
  endfunction

  assign busy = (ph != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE; i <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (ph)
        P_IDLE:  if (start) ph <= P_PREP;
        P_PREP:  begin ph <= P_SCAN; i <= 6'(N - 2); end
        P_SCAN:  begin
          if (i == 6'd0) ph <= P_COUNT;
          else           i <= i - 6'd1;
        end
        P_COUNT: begin
          i <= i + 6'd1;
          if (i == 6'(N - 2)) ph <= P_EXP;
        end
        P_EXP:   begin ph <= P_SHIFT; i <= '0; end
        P_SHIFT: begin
          i <= i + 6'd1;
          if (i == 6'(N - 1)) ph <= P_MANT;
        end
        P_MANT:  begin ph <= P_IDLE; done <= 1'b1; end
        default: ph <= P_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (ph == P_IDLE && start)
      for (int l = 0; l < LANES; l++) a_q[l] <= a_in[l];
    for (int l = 0; l < LANES; l++) begin
      unique case (ph)
        P_PREP: begin
          logic [N-1:0] mag;
          mag   = a_q[l][N-1] ? (~a_q[l] + 1'b1) : a_q[l];
          a[l]  <= {a_q[l][N-1], mag[N-2:0]};
          z[l]  <= (mag == '0);
          c[l]  <= '0; d[l] <= 1'b0; s[l] <= '0; p[l] <= '0;
          fp[l] <= '0;
        end
        P_SCAN: begin
          logic dn;
          dn = d[l] | a[l][i];
          d[l] <= dn;
          c[l][i] <= c[l][i] | dn;
        end
        P_COUNT: begin
          logic carry, c1;
          logic [7:0] sn;
          sn = s[l];
          carry = c[l][i];
          for (int j = 0; j < 5; j++) begin
            c1 = sn[j] & carry; sn[j] = sn[j] ^ carry; carry = c1;
          end
          s[l] <= sn;
        end
        P_EXP: begin
          fp[l][31]    <= a[l][N-1];
          fp[l][30:23] <= s[l] + 8'd126;
          m[l]         <= bitrev({1'b0, c[l]} + 1'b1);
        end
        P_SHIFT: begin
          if (m[l][i]) p[l] <= p[l] + ({1'b0, a[l][N-2:0]} << i);
        end
        P_MANT: begin
          if (z[l]) fp[l] <= '0;
          else      fp[l][22 -: N-2] <= p[l][N-3:0];
        end
        default: ;
      endcase
    end
  end
endmodule
