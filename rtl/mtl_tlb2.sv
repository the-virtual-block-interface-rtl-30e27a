// mtl_tlb2: second-level TLB of the MTL, behind the fully associative
// first level (mtl_tlb). It holds 4 KB page mappings of table-mapped VBs;
// whole-VB mappings of directly mapped VBs stay in the first level, where
// one entry covers the entire VB.
//
// Size and organisation follow the second-level data TLB of the simulated
// system the VBI proposal was evaluated with: 512 entries, 4-way set
// associative. Which bits index the sets, the replacement policy and the
// invalidation sweep are this design's choices:
//  * set = (page number XOR VBID) modulo the number of sets, so pages at
//    the same offset in different VBs do not all collide;
//  * a new entry goes to the first invalid way of its set, otherwise to the
//    way a per-set round-robin pointer names;
//  * `inval_start` removes every entry of one VB by visiting all sets, one
//    per cycle (`inval_busy` is high meanwhile); this is only needed on
//    disable_vb, which waits far longer for the frame allocator anyway.
//
// Interface and timing: the tag and data arrays are read synchronously, so
// a lookup presented with `lk_valid` in one cycle answers with `lk_hit` and
// `lk_pa` (frame base) in the next. Inserts write at the next clock edge.
// Lookups, inserts and the invalidation sweep must not overlap; the MTL
// issues one at a time.
module mtl_tlb2
  import vbi_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned WAYS    = 4,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SET_W  = $clog2(SETS),
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned VPN_W  = VOFF_W - PAGE_BITS,
  localparam int unsigned PFN_W  = PA_W - PAGE_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  // lookup: answer one cycle later
  input  logic               lk_valid,
  input  logic [VBUID_W-1:0] lk_vbuid,
  input  logic [VA_W-1:0]    lk_offset,
  output logic               lk_hit,
  output logic [PA_W-1:0]    lk_pa,        // physical base of the 4 KB frame
  // insert a 4 KB mapping
  input  logic               ins_valid,
  input  logic [VBUID_W-1:0] ins_vbuid,
  input  logic [VA_W-1:0]    ins_offset,
  input  logic [PA_W-1:0]    ins_pa,
  // remove every mapping of one VB
  input  logic               inval_start,
  input  logic [VBUID_W-1:0] inval_vbuid,
  output logic               inval_busy
);
  typedef struct packed {
    logic [VBUID_W-1:0] vbuid;
    logic [VPN_W-1:0]   vpn;
    logic [PFN_W-1:0]   pfn;
  } ent_t;

  ent_t              mem_q [WAYS][SETS];
  logic [WAYS-1:0]   vld   [SETS];
  logic [WAY_W-1:0]  rr    [SETS];
  ent_t              rd    [WAYS];
  logic [WAYS-1:0]   rd_vld;

  function automatic logic [SET_W-1:0] set_of(input logic [VBUID_W-1:0] u, input logic [VA_W-1:0] off);
    logic [VA_W-1:0] id;
    id = vbid_of(u);
    return SET_W'(off >> PAGE_BITS) ^ id[SET_W-1:0];
  endfunction

  function automatic logic [VPN_W-1:0] vpn_of(input logic [VA_W-1:0] off);
    return VPN_W'(off >> PAGE_BITS);
  endfunction

  // ---------------- lookup ----------------
  logic [VBUID_W-1:0] q_vbuid;
  logic [VPN_W-1:0]   q_vpn;
  logic [SET_W-1:0]   rd_set, sweep_set, q_set;
  logic               sweeping, sweep_cmp, q_lk;

  assign rd_set = sweeping ? sweep_set : set_of(lk_vbuid, lk_offset);

  always_ff @(posedge clk) begin
    for (int w = 0; w < WAYS; w++) rd[w] <= mem_q[w][rd_set];
  end

  always_comb begin
    lk_hit = 1'b0;
    lk_pa  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (q_lk && rd_vld[w] && rd[w].vbuid == q_vbuid && rd[w].vpn == q_vpn) begin
        lk_hit = 1'b1;
        lk_pa  = {rd[w].pfn, PAGE_BITS'(0)};
      end
    end
  end

  // ---------------- insert ----------------
  logic [SET_W-1:0] ins_set;
  logic [WAY_W-1:0] ins_way;
  assign ins_set = set_of(ins_vbuid, ins_offset);
  always_comb begin
    ins_way = rr[ins_set];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!vld[ins_set][w]) ins_way = WAY_W'(w);
  end

  always_ff @(posedge clk) begin
    if (ins_valid) mem_q[ins_way][ins_set] <= ent_t'{vbuid: ins_vbuid, vpn: vpn_of(ins_offset),
                                                     pfn: ins_pa[PA_W-1:PAGE_BITS]};
  end

  assign inval_busy = sweeping || sweep_cmp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin vld[s] <= '0; rr[s] <= '0; end
      rd_vld    <= '0;
      q_vbuid   <= '0;
      q_vpn     <= '0;
      q_set     <= '0;
      q_lk      <= 1'b0;
      sweeping  <= 1'b0;
      sweep_cmp <= 1'b0;
      sweep_set <= '0;
    end else begin
      rd_vld  <= vld[rd_set];
      q_vbuid <= sweeping ? inval_vbuid : lk_vbuid;
      q_vpn   <= vpn_of(lk_offset);
      q_set   <= rd_set;
      q_lk    <= lk_valid && !sweeping;
      if (ins_valid) begin
        vld[ins_set][ins_way] <= 1'b1;
        if (&vld[ins_set]) rr[ins_set] <= rr[ins_set] + 1'b1;
      end
      // invalidation sweep: read set s, compare in the next cycle
      if (inval_start && !inval_busy) begin
        sweeping  <= 1'b1;
        sweep_set <= '0;
      end else if (sweeping) begin
        sweep_set <= sweep_set + 1'b1;
        if (sweep_set == SET_W'(SETS - 1)) sweeping <= 1'b0;
      end
      sweep_cmp <= sweeping;
      if (sweep_cmp) begin
        for (int w = 0; w < WAYS; w++)
          if (rd_vld[w] && rd[w].vbuid == q_vbuid) vld[q_set][w] <= 1'b0;
      end
    end
  end
endmodule
