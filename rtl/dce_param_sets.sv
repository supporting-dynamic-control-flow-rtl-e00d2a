// dce_param_sets -- the four jump parameter sets held by the fabric execution
// controller.
//
// Each set holds a jump destination and a 12-bit counter (paper: "there are four
// separate sets of parameters that are internally reserved by the controller";
// "Each of these parameter sets includes a counter spanning 12 bits"). A VLIW
// names a set with 2 bits. Sets are changed by the VLIW's parameter-set command
// when the VLIW issues (apply = 1):
//   PS_LOAD  destination <- dest_in, counter <- cnt_in
//   PS_INC   counter <- counter + 1 (wraps at 4095)
//   PS_DEC   counter <- counter - 1 (wraps at 0)
// The read port returns the destination of set rd_set and its counter as it
// will be after this cycle's command (a preview that does not depend on apply,
// which keeps the controller free of a combinational loop), so a VLIW can step
// a loop counter and test it in the same clock. The command encoding and this same-cycle view are
// this design's own choices; reset clears all sets.
module dce_param_sets
  import dce_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              apply,
  input  ps_cmd_e           cmd,
  input  logic [SET_W-1:0]  set,
  input  logic [ADDR_W-1:0] dest_in,
  input  logic [CNT_W-1:0]  cnt_in,
  input  logic [SET_W-1:0]  rd_set,
  output logic [ADDR_W-1:0] rd_dest,
  output logic [CNT_W-1:0]  rd_cnt
);

  localparam int unsigned NS = 1 << SET_W;

  logic [ADDR_W-1:0] dest_q [NS];
  logic [CNT_W-1:0]  cnt_q  [NS];
  logic [ADDR_W-1:0] dest_d [NS];
  logic [CNT_W-1:0]  cnt_d  [NS];

  always_comb begin
    for (int i = 0; i < int'(NS); i++) begin
      dest_d[i] = dest_q[i];
      cnt_d[i]  = cnt_q[i];
    end
    begin
      unique case (cmd)
        PS_LOAD: begin
          dest_d[set] = dest_in;
          cnt_d[set]  = cnt_in;
        end
        PS_INC:  cnt_d[set] = cnt_q[set] + 1'b1;
        PS_DEC:  cnt_d[set] = cnt_q[set] - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NS); i++) begin
        dest_q[i] <= '0;
        cnt_q[i]  <= '0;
      end
    end else if (apply) begin
      for (int i = 0; i < int'(NS); i++) begin
        dest_q[i] <= dest_d[i];
        cnt_q[i]  <= cnt_d[i];
      end
    end
  end

  assign rd_dest = dest_d[rd_set];
  assign rd_cnt  = cnt_d[rd_set];

endmodule
