// access_check: the permission and bounds check the CPU makes before every
// memory access, and the construction of the VBI address (Fig. 4, step 6).
//
// Given the CVT entry of the VB a virtual address points to, the access
// type and the offset, it reports a fault if the entry is invalid, if the
// entry's RWX bits do not allow the access (load needs R, store W,
// instruction fetch X), or if the offset is not smaller than the VB's size.
// Otherwise it forms the VBI address by joining the entry's VBUID and the
// offset. The checks and the concatenation are the paper's; the fault
// priority (index, then permission, then range) is this design's choice.
// Purely combinational.
module access_check
  import vbi_pkg::*;
(
  input  cvt_entry_t         entry,
  input  acc_e               acc,
  input  logic [VOFF_W-1:0]  offset,
  output fault_e             fault,
  output logic [VA_W-1:0]    vbi_addr
);
  logic [VA_W-1:0] size_mask;
  logic            perm_ok;
  logic            range_ok;

  always_comb begin
    size_mask = (64'd1 << offset_bits(entry.vbuid[VBUID_W-1 -: SIZEID_W])) - 64'd1;
    unique case (acc)
      ACC_LOAD:  perm_ok = entry.rwx[PERM_R];
      ACC_STORE: perm_ok = entry.rwx[PERM_W];
      ACC_FETCH: perm_ok = entry.rwx[PERM_X];
      default:   perm_ok = 1'b0;
    endcase
    range_ok = ((VA_W'(offset) & ~size_mask) == '0);
    if (!entry.valid)  fault = FAULT_INDEX;
    else if (!perm_ok) fault = FAULT_PERM;
    else if (!range_ok) fault = FAULT_RANGE;
    else               fault = FAULT_NONE;
    vbi_addr = {entry.vbuid, 12'd0} | (VA_W'(offset) & size_mask);
  end
endmodule
