// tlb_fill_check: screens page-table entries on their way into the TLB.
//
// The TLB holds no tags, because a page-table entry must never be blinded:
// a blinded translation would make the accelerator's memory accesses depend
// on secret data. Each refill from the page-table walker arrives with the tag
// of the memory word it was read from. If that tag is non-zero the entry is
// replaced by zero (an invalid entry) and blinded_o pulses; otherwise it
// passes unchanged. Combinational, no added latency. Behaviour from the
// paper; the interface is this design's.
module tlb_fill_check
  import dolma_pkg::*;
(
  input  logic            ptw_valid_i,
  input  logic [XLEN-1:0] ptw_pte_i,
  input  tag_t            ptw_tag_i,
  output logic            tlb_valid_o,
  output logic [XLEN-1:0] tlb_pte_o,
  output logic            blinded_o
);

  logic blinded;
  assign blinded     = ptw_tag_i != '0;
  assign tlb_valid_o = ptw_valid_i;
  assign tlb_pte_o   = blinded ? '0 : ptw_pte_i;
  assign blinded_o   = ptw_valid_i && blinded;

endmodule
