// nmc_alu: near-bank op-and-store datapath for one 32-byte access.
//
// A T3 update does not carry the reduced value: it carries one partial copy, and
// the ALU next to the DRAM bank adds it to the value already stored. This module
// forms the value written back for one access: for OP_UPDATE, LANES element-wise
// FP16 sums of the stored word and the incoming word; for OP_STORE, the incoming
// word. The paper gives the function (op-and-store near the banks, FP16 data);
// the lane count (16 FP16 per 32-byte access) is this design's choice.
// Timing: combinational; nmc_dram uses it between its array read and write.
module nmc_alu
  import t3_pkg::*;
(
  input  mem_op_e            op,
  input  logic [DATA_W-1:0]  old_data,
  input  logic [DATA_W-1:0]  in_data,
  output logic [DATA_W-1:0]  new_data
);
  logic [DATA_W-1:0] sum;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp16_add u_add (
      .a (old_data[l*16 +: 16]),
      .b (in_data [l*16 +: 16]),
      .y (sum     [l*16 +: 16])
    );
  end

  assign new_data = (op == OP_UPDATE) ? sum : in_data;
endmodule
