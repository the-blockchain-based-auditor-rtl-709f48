// keccak512: SHA3-512 of one 64-byte message, one Keccak-f[1600] round per clock.
//
// The message fills the first 64 bytes of the 72-byte SHA3-512 rate; the
// FIPS 202 padding (0x06 after the message, 0x80 in the last rate byte) fills
// the rest, so a single permutation of 24 rounds gives the digest. Byte i of
// msg and of digest is bits [8i+7:8i]; lane (x,y) of the state is bits
// [64(x+5y)+63 : 64(x+5y)], little-endian as in FIPS 202.
// The paper gives KECCAK with a 512-bit output and 24 clocks; the fixed
// message length and the single-block form are this design's choices.
// Timing: start is sampled on a rising edge (ignored while busy); the 24
// rounds run on the next 24 edges; done is high for the one clock that
// follows the last round, and digest holds its value until the next start.
module keccak512 #(
  parameter int unsigned ROUNDS = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] msg,
  output logic         busy,
  output logic         done,
  output logic [511:0] digest
);
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808a,
    64'h8000000080008000, 64'h000000000000808b, 64'h0000000080000001,
    64'h8000000080008081, 64'h8000000000008009, 64'h000000000000008a,
    64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000a,
    64'h000000008000808b, 64'h800000000000008b, 64'h8000000000008089,
    64'h8000000000008003, 64'h8000000000008002, 64'h8000000000000080,
    64'h000000000000800a, 64'h800000008000000a, 64'h8000000080008081,
    64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // rho rotation of lane x+5y
  localparam int unsigned ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14};

  function automatic logic [63:0] rotl(logic [63:0] v, int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic logic [1599:0] keccak_round(logic [1599:0] s, logic [63:0] rc);
    logic [63:0] a [25];
    logic [63:0] b [25];
    logic [63:0] c [5];
    logic [63:0] d [5];
    logic [1599:0] r;
    for (int i = 0; i < 25; i++) a[i] = s[64*i +: 64];
    // theta
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    // rho and pi: B[y][2x+3y] = rot(A[x][y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    a[0] = a[0] ^ rc;
    for (int i = 0; i < 25; i++) r[64*i +: 64] = a[i];
    return r;
  endfunction

  logic [1599:0] state;
  logic [4:0]    rnd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      rnd   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        state          <= '0;
        state[511:0]   <= msg;
        state[519:512] <= 8'h06;
        state[575:568] <= 8'h80;
        rnd            <= '0;
        busy           <= 1'b1;
      end else if (busy) begin
        state <= keccak_round(state, RC[rnd]);
        rnd   <= rnd + 1'b1;
        if (rnd == 5'(ROUNDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign digest = state[511:0];
endmodule
