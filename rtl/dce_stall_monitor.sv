// dce_stall_monitor -- stall watchdog of the fabric execution controller.
//
// While an accelerator (or a missing memory word) holds the stall signal, the
// controller keeps the same VLIW and waits one clock at a time (paper, stall
// flow chart). This block counts the consecutive clocks in which the running
// VLIW is stalled and raises limit_hit in the clock where the VLIW is still
// stalled for the LIMIT-th time (paper: "In cases where a VLIW requires 512
// clocks or more due to a set stall signal, an abort and trap event will be
// triggered"; the threshold "can be adjusted", hence the parameter). The count
// restarts whenever stall drops or the controller is not running.
module dce_stall_monitor #(
  parameter int unsigned LIMIT = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic active,     // an SI is running
  input  logic stall,      // the current VLIW is held
  output logic limit_hit   // abort the SI and trap
);

  localparam int unsigned W = $clog2(LIMIT + 1);

  logic [W-1:0] cnt_q;

  assign limit_hit = active && stall && (cnt_q == W'(LIMIT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       cnt_q <= '0;
    else if (!active || !stall || limit_hit) cnt_q <= '0;
    else                              cnt_q <= cnt_q + 1'b1;
  end

endmodule
