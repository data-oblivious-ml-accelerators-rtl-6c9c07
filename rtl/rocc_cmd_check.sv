// rocc_cmd_check: refuses RoCC commands whose operands are blinded.
//
// A RoCC command brings funct7 and two 64-bit register values rs1/rs2, each
// with the 8-bit tag it had in the host's register file. The operands are
// used as memory addresses or as sub-function selectors, so using a blinded
// one would leak it through the access pattern or through what the
// accelerator does. If either tag is non-zero the command is consumed and
// dropped, and blinded_o pulses for one cycle; otherwise the command passes
// through to the router with its tags removed. Valid/ready handshake, no
// added latency (combinational). The rule is the paper's; dropping the
// command after consuming it is this design's choice.
module rocc_cmd_check
  import dolma_pkg::*;
(
  // from the host
  input  logic            in_valid_i,
  output logic            in_ready_o,
  input  logic [6:0]      in_funct_i,
  input  logic [XLEN-1:0] in_rs1_i,
  input  tag_t            in_rs1_tag_i,
  input  logic [XLEN-1:0] in_rs2_i,
  input  tag_t            in_rs2_tag_i,
  // to the router
  output logic            out_valid_o,
  input  logic            out_ready_i,
  output logic [6:0]      out_funct_o,
  output logic [XLEN-1:0] out_rs1_o,
  output logic [XLEN-1:0] out_rs2_o,
  // policy violation
  output logic            blinded_o
);

  logic blinded;
  assign blinded = (in_rs1_tag_i != '0) || (in_rs2_tag_i != '0);

  assign out_valid_o = in_valid_i && !blinded;
  assign in_ready_o  = blinded ? 1'b1 : out_ready_i;
  assign blinded_o   = in_valid_i && blinded;

  // a blinded operand never reaches the router
  assign out_funct_o = in_funct_i;
  assign out_rs1_o   = blinded ? '0 : in_rs1_i;
  assign out_rs2_o   = blinded ? '0 : in_rs2_i;

endmodule
