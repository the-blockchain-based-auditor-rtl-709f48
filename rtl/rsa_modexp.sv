// rsa_modexp: RSA modular exponentiation, result = base^exp mod modulus.
//
// Left-to-right binary exponentiation over all KEY_W bits of the exponent,
// most significant first, three clocks per exponent bit: (0) square the
// running value, (1) multiply the square by the base, (2) keep the product if
// the exponent bit is 1, else the square. Both products come from one shared
// combinational modular multiplier ((a*b) mod modulus). Because every bit
// takes the same work the latency does not depend on the key.
// The paper gives RSA-1024 with one round per exponent bit (rounds 1..1024)
// and about 3048 clocks; the three-phase round, and so a latency of
// 3*KEY_W clocks (3072 for RSA-1024), is this design's. modulus must be above 1.
// Timing: start is sampled on a rising edge while idle; done is high for one
// clock, 3*KEY_W clocks after that edge, and result holds until the next start.
module rsa_modexp #(
  parameter int unsigned KEY_W = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [KEY_W-1:0] base,
  input  logic [KEY_W-1:0] exp,
  input  logic [KEY_W-1:0] modulus,
  output logic             busy,
  output logic             done,
  output logic [KEY_W-1:0] result
);
  localparam int unsigned CW = $clog2(KEY_W + 1);

  logic [KEY_W-1:0] b_q, e_q, n_q, sq_q, ml_q;
  logic [1:0]       phase;
  logic [CW-1:0]    bits_left;

  // shared modular multiplier
  logic [KEY_W-1:0]   mm_a, mm_b, mm_r;
  logic [2*KEY_W-1:0] mm_p;
  always_comb begin
    mm_a = (phase == 2'd0) ? result : sq_q;
    mm_b = (phase == 2'd0) ? result : b_q;
    mm_p = {{KEY_W{1'b0}}, mm_a} * {{KEY_W{1'b0}}, mm_b};
    mm_r = KEY_W'(mm_p % {{KEY_W{1'b0}}, n_q});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_q       <= '0;
      e_q       <= '0;
      n_q       <= '0;
      sq_q      <= '0;
      ml_q      <= '0;
      result    <= '0;
      phase     <= '0;
      bits_left <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          b_q       <= base;
          e_q       <= exp;
          n_q       <= modulus;
          result    <= KEY_W'(1);
          phase     <= 2'd0;
          bits_left <= CW'(KEY_W);
          busy      <= 1'b1;
        end
      end else begin
        case (phase)
          2'd0: begin
            sq_q  <= mm_r;
            phase <= 2'd1;
          end
          2'd1: begin
            ml_q  <= mm_r;
            phase <= 2'd2;
          end
          default: begin
            result    <= e_q[KEY_W-1] ? ml_q : sq_q;
            e_q       <= e_q << 1;
            phase     <= 2'd0;
            bits_left <= bits_left - 1'b1;
            if (bits_left == CW'(1)) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        endcase
      end
    end
  end
endmodule
