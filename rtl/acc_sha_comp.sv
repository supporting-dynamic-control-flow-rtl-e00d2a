// acc_sha_comp -- SHA-Comp accelerator: the Keccak-f[1600] sponge of SHA-3.
//
// SHA-3 absorbs padded message blocks into a 1600-bit state (25 lanes of 64
// bits) and scrambles the state with the Keccak-f[1600] permutation: 24 rounds
// of the theta, rho, pi, chi and iota steps (FIPS 202). The paper's SHA-Comp
// computes this with two internal RAMs (GAM-memory, Res-memory), gamma, read,
// result and rho-buffer units on shared read/write buses; the bit-level
// organisation of those units is not given. This block implements the same
// function in the simplest form: the state in registers and one full round per
// clock. Padding is left to the microcode, as in the paper, where the loop over
// an arbitrary message length is the reason for dynamic control flow.
//
// Opcodes (own encoding; 0 = idle):
//   1 CLR   state <- 0, lane pointer <- 0
//   2 ABS   lane[ptr] ^= {in1, in0}; ptr++   (absorb one 64-bit lane)
//   3 PERM  run the 24 rounds; ptr <- 0
//   4 SQZ   out1:out0 <- lane[ptr]; ptr++    (squeeze one lane)
//   5 RSTP  ptr <- 0
// Lanes are numbered x + 5*y. ABS and SQZ stall the fabric while the
// permutation runs (24 clocks after PERM). cond = {0, busy}. Results appear one
// clock after the op.
module acc_sha_comp (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [3:0]  op,
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  output logic [31:0] out0,
  output logic [31:0] out1,
  output logic [1:0]  cond,
  output logic        stall,
  output logic        err
);

  localparam logic [3:0] K_CLR = 4'd1, K_ABS = 4'd2, K_PERM = 4'd3, K_SQZ = 4'd4, K_RSTP = 4'd5;

  // round constants of iota (FIPS 202)
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // rotation offsets of rho, indexed x + 5*y
  localparam int ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14};

  logic [63:0] st_q [25];
  logic [63:0] rnd  [25];
  logic [4:0]  ptr_q, round_q;
  logic        busy_q;
  logic [63:0] out_q;

  function automatic logic [63:0] rotl(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // one Keccak-f[1600] round on st_q
  always_comb begin
    logic [63:0] c [5];
    logic [63:0] d [5];
    logic [63:0] t [25];
    logic [63:0] b [25];
    for (int x = 0; x < 5; x++)
      c[x] = st_q[x] ^ st_q[x+5] ^ st_q[x+10] ^ st_q[x+15] ^ st_q[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++)
      t[i] = st_q[i] ^ d[i%5];
    // rho and pi: B[y, 2x+3y] = rot(A[x, y], r[x, y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(t[x + 5*y], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        rnd[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    rnd[0] = rnd[0] ^ RC[round_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 25; i++) st_q[i] <= '0;
      ptr_q   <= '0;
      round_q <= '0;
      busy_q  <= 1'b0;
      out_q   <= '0;
    end else if (busy_q) begin
      for (int i = 0; i < 25; i++) st_q[i] <= rnd[i];
      round_q <= round_q + 1'b1;
      if (round_q == 5'd23) busy_q <= 1'b0;
    end else if (en) begin
      unique case (op)
        K_CLR: begin
          for (int i = 0; i < 25; i++) st_q[i] <= '0;
          ptr_q <= '0;
        end
        K_ABS: begin
          st_q[ptr_q] <= st_q[ptr_q] ^ {in1, in0};
          ptr_q <= (ptr_q == 5'd24) ? 5'd0 : ptr_q + 1'b1;
        end
        K_PERM: begin
          busy_q  <= 1'b1;
          round_q <= '0;
          ptr_q   <= '0;
        end
        K_SQZ: begin
          out_q <= st_q[ptr_q];
          ptr_q <= (ptr_q == 5'd24) ? 5'd0 : ptr_q + 1'b1;
        end
        K_RSTP: ptr_q <= '0;
        default: ;
      endcase
    end
  end

  assign out0  = out_q[31:0];
  assign out1  = out_q[63:32];
  assign cond  = {1'b0, busy_q};
  assign stall = busy_q && (op == K_ABS || op == K_SQZ || op == K_PERM || op == K_CLR);
  assign err   = 1'b0;

endmodule
