// reconf_fabric -- the reconfigurable fabric: NSLOTS accelerator slots and the
// operand crossbar that feeds them.
//
// Each VLIW holds one sub-instruction per slot: an opcode and two operand
// sources. A source is output0 or output1 of any slot, CPU operand A or B (the
// SI's register operands), one word of the memory stream, or zero. The fabric
// routes the selected values to the slot inputs, passes the opcodes with the
// controller's issue strobe, and returns to the controller:
//   * stall   any slot asks to hold the VLIW, or a slot reads the memory stream
//             and no word is available (paper: "As long as the data is not
//             available, the stall is held and the same VLIW stalls");
//   * err     per slot, one clock after an op that failed;
//   * cond    per slot, the 2-bit condition signals for jumps;
//   * res     the value of the VLIW's result source, for the SI result.
// A memory-stream word is consumed (stream_pop) when a VLIW that reads it
// issues; all slots reading the stream in one VLIW see the same word. A VLIW
// with mem_wr sends the value of its result source out on the memory write
// stream (wr_valid with wr_data) when it issues, and stalls while wr_ready is
// low.
// Paper: five slots, accelerators on a shared fabric. Own choices: the
// crossbar, the source encoding (dce_pkg) and the read and write streams,
// which stand in for the memory side of the communication bus.
module reconf_fabric
  import dce_pkg::*;
#(
  parameter slot_cfg_t   SLOT_KIND = CFG_SWE,
  parameter int unsigned LINE_W    = 1024,
  parameter int unsigned BUF_D     = 2048
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  vliw_t                         vliw,
  input  logic                          issue,
  input  logic [DATA_W-1:0]             opa,
  input  logic [DATA_W-1:0]             opb,
  input  logic [DATA_W-1:0]             stream_data,
  input  logic                          stream_valid,
  output logic                          stream_pop,
  output logic [DATA_W-1:0]             wr_data,
  output logic                          wr_valid,
  input  logic                          wr_ready,
  output logic                          stall,
  output logic [NSLOTS-1:0]             err,
  output logic [NSLOTS-1:0][COND_W-1:0] cond,
  output logic [DATA_W-1:0]             res
);

  logic [NSLOTS-1:0][DATA_W-1:0] o0, o1, i0, i1;
  logic [NSLOTS-1:0]             slot_stall;
  logic                          need_stream;

  function automatic logic [DATA_W-1:0] pick(input logic [SRC_W-1:0] s,
                                             input logic [NSLOTS-1:0][DATA_W-1:0] a0,
                                             input logic [NSLOTS-1:0][DATA_W-1:0] a1,
                                             input logic [DATA_W-1:0] oa,
                                             input logic [DATA_W-1:0] ob,
                                             input logic [DATA_W-1:0] sd);
    if (int'(s) < int'(NSLOTS))   return a0[s];
    if (int'(s) < 2*int'(NSLOTS)) return a1[int'(s) - int'(NSLOTS)];
    if (s == SRC_OPA)             return oa;
    if (s == SRC_OPB)             return ob;
    if (s == SRC_STREAM)          return sd;
    return '0;
  endfunction

  always_comb begin
    need_stream = 1'b0;
    for (int k = 0; k < int'(NSLOTS); k++) begin
      i0[k] = pick(vliw.sub[k].src0, o0, o1, opa, opb, stream_data);
      i1[k] = pick(vliw.sub[k].src1, o0, o1, opa, opb, stream_data);
      if (vliw.sub[k].op != OP_NOP &&
          (vliw.sub[k].src0 == SRC_STREAM || vliw.sub[k].src1 == SRC_STREAM))
        need_stream = 1'b1;
    end
    res = pick(vliw.res_src, o0, o1, opa, opb, stream_data);
  end

  assign stall      = (|slot_stall) || (need_stream && !stream_valid) ||
                      (vliw.mem_wr && !wr_ready);
  assign stream_pop = issue && need_stream;
  assign wr_data    = res;
  assign wr_valid   = issue && vliw.mem_wr;

  for (genvar k = 0; k < int'(NSLOTS); k++) begin : g_slot
    rf_slot #(.KIND(SLOT_KIND[k]), .LINE_W(LINE_W), .BUF_D(BUF_D)) u_slot (
      .clk, .rst_n,
      .en   (issue),
      .op   (vliw.sub[k].op),
      .in0  (i0[k]),
      .in1  (i1[k]),
      .out0 (o0[k]),
      .out1 (o1[k]),
      .cond (cond[k]),
      .stall(slot_stall[k]),
      .err  (err[k])
    );
  end

endmodule
