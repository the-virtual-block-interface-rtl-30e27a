// mtl_tlb: the MTL's translation lookaside buffer, caching VBI-to-physical
// mappings (paper Sec. 4.2.3 and 5.2, Fig. 4 step 8).
//
// Fully associative, ENTRIES entries (64, the paper's L1 DTLB size in its
// simulated system). Each entry maps one naturally aligned region of one VB:
// either a 4 KB page (table-mapped VBs) or the whole VB (directly mapped
// VBs, which the paper notes need a single TLB entry). The region size is
// held per entry as a bit count, so both kinds live in one array; the paper
// instead speaks of several TLB types, one per mapping granularity, and this
// merged organisation is this design's simplification.
//
// Lookup is combinational on (VBUID, offset) and returns the physical
// address and whether the hit is a whole-VB (direct) mapping. Insertion
// replaces the entries round-robin at the next clock edge. `inval_vbuid`
// removes every entry of one VB (disable_vb).
module mtl_tlb
  import vbi_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [VBUID_W-1:0] lk_vbuid,
  input  logic [VA_W-1:0]    lk_offset,
  output logic               lk_hit,
  output logic               lk_direct,
  output logic [PA_W-1:0]    lk_pa,
  input  logic               ins_valid,
  input  logic [VBUID_W-1:0] ins_vbuid,
  input  logic [VA_W-1:0]    ins_offset,   // any offset inside the region
  input  logic [5:0]         ins_bits,     // log2 of the region size
  input  logic [PA_W-1:0]    ins_base,     // physical base of the region
  input  logic               inval_valid,
  input  logic [VBUID_W-1:0] inval_vbuid
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);

  typedef struct packed {
    logic               valid;
    logic [VBUID_W-1:0] vbuid;
    logic [VA_W-1:0]    region;   // offset with the low `bits` bits cleared
    logic [5:0]         bits;
    logic [PA_W-1:0]    base;
  } tlb_entry_t;

  tlb_entry_t       ent [ENTRIES];
  logic [IDX_W-1:0] victim;
  logic [IDX_W-1:0] hit_idx;

  always_comb begin
    logic [VA_W-1:0] m;
    lk_hit  = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      m = ~((64'd1 << ent[i].bits) - 64'd1);
      if (!lk_hit && ent[i].valid && ent[i].vbuid == lk_vbuid &&
          ((lk_offset & m) == ent[i].region)) begin
        lk_hit  = 1'b1;
        hit_idx = IDX_W'(i);
      end
    end
    m         = (64'd1 << ent[hit_idx].bits) - 64'd1;
    lk_pa     = ent[hit_idx].base + PA_W'(lk_offset & m);
    lk_direct = (ent[hit_idx].bits > 6'(PAGE_BITS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      victim <= '0;
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else begin
      if (inval_valid) begin
        for (int i = 0; i < ENTRIES; i++)
          if (ent[i].vbuid == inval_vbuid) ent[i].valid <= 1'b0;
      end else if (ins_valid) begin
        ent[victim].valid  <= 1'b1;
        ent[victim].vbuid  <= ins_vbuid;
        ent[victim].region <= ins_offset & ~((64'd1 << ins_bits) - 64'd1);
        ent[victim].bits   <= ins_bits;
        ent[victim].base   <= ins_base;
        victim             <= victim + IDX_W'(1);
      end
    end
  end
endmodule
