// acc_sha_buff -- SHA-Buff accelerator: block-RAM buffer for SHA-3 message data.
//
// The paper describes SHA-Buff as "basically a RAM buffering needed data",
// streamed from memory into block RAMs so the hash unit is not starved, with its
// output fed directly to a SHA-Comp accelerator. This is a first-in first-out
// buffer of 64-bit words (one Keccak lane each) in a single memory with one
// write and one synchronous read port.
//
// Opcodes (own encoding; 0 = idle):
//   1 PUSH  write {in1, in0} (stalls the fabric while full)
//   2 POP   out1:out0 <- oldest word (stalls the fabric while empty)
//   3 CLR   empty the buffer
//   4 STAGE hold in0 as the low half of the next word
//   5 PUSHH write {in0, staged low half} (stalls while full)
// STAGE and PUSHH let a 32-bit memory stream fill 64-bit lanes, one stream
// word per VLIW.
// cond = {full, empty}. Timing: a popped word appears on the outputs one clock
// after the POP issues. DEPTH = 2048 words of 64 bits fills four 36-Kbit block
// RAMs (the paper lists 4 BRAMs for SHA-Buff); the word width and depth are
// own choices within that budget.
module acc_sha_buff #(
  parameter int unsigned DEPTH = 2048
) (
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

  localparam int unsigned AW = $clog2(DEPTH);
  localparam logic [3:0] B_PUSH = 4'd1, B_POP = 4'd2, B_CLR = 4'd3, B_STAGE = 4'd4, B_PUSHH = 4'd5;

  logic [63:0]   mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [AW:0]   cnt_q;
  logic [63:0]   rd_q;
  logic [31:0]   lo_q;
  logic          full, empty, do_push, do_pop, wr_ph;

  assign full    = (cnt_q == (AW+1)'(DEPTH));
  assign empty   = (cnt_q == '0);
  assign wr_ph   = (op == B_PUSH) || (op == B_PUSHH);
  assign do_push = en && wr_ph && !full;
  assign do_pop  = en && (op == B_POP) && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wp_q] <= (op == B_PUSHH) ? {in0, lo_q} : {in1, in0};
    if (en && op == B_STAGE) lo_q <= in0;
    if (do_pop)  rd_q <= mem[rp_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else if (en && op == B_CLR) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wp_q <= (wp_q == AW'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
      if (do_pop)  rp_q <= (rp_q == AW'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assign out0  = rd_q[31:0];
  assign out1  = rd_q[63:32];
  assign cond  = {full, empty};
  assign stall = (wr_ph && full) || ((op == B_POP) && empty);
  assign err   = 1'b0;

endmodule
