// vit_cache: on-chip cache of VB Info Table entries inside the MTL
// (paper Sec. 4.2.3 and 5.2, Fig. 4 step 7).
//
// Every VB has a 128-bit VIT entry in physical memory (enable bit,
// properties, reference count, translation-structure type and pointer).
// The MTL reads the entry of the VB an LLC miss belongs to before it
// translates, so recently used entries are kept here. The paper names the
// cache but gives no size or organisation: this one is direct-mapped with
// ENTRIES slots, indexed by the low VBID bits XOR the SizeID, tagged with
// the full VBUID. The MTL writes every entry change both here and to memory
// (write-through), so a slot never holds dirty data and can be dropped at
// any time. Lookup is combinational; writes and invalidations take effect
// at the next clock edge.
module vit_cache
  import vbi_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [VBUID_W-1:0] lk_vbuid,
  output logic               lk_hit,
  output vit_entry_t         lk_entry,
  input  logic               wr_valid,
  input  logic [VBUID_W-1:0] wr_vbuid,
  input  vit_entry_t         wr_entry,
  input  logic               inval_valid,
  input  logic [VBUID_W-1:0] inval_vbuid
);
  localparam int unsigned SET_W = $clog2(ENTRIES);

  logic [ENTRIES-1:0] vld;
  logic [VBUID_W-1:0] tag  [ENTRIES];
  vit_entry_t         data [ENTRIES];

  function automatic logic [SET_W-1:0] set_of(input logic [VBUID_W-1:0] u);
    logic [VA_W-1:0] id;
    id = vbid_of(u);
    return id[SET_W-1:0] ^ SET_W'(u[VBUID_W-1 -: SIZEID_W]);
  endfunction

  logic [SET_W-1:0] lk_set, wr_set, iv_set;
  assign lk_set   = set_of(lk_vbuid);
  assign wr_set   = set_of(wr_vbuid);
  assign iv_set   = set_of(inval_vbuid);
  assign lk_hit   = vld[lk_set] && (tag[lk_set] == lk_vbuid);
  assign lk_entry = data[lk_set];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
    end else begin
      if (inval_valid && tag[iv_set] == inval_vbuid) vld[iv_set] <= 1'b0;
      if (wr_valid) vld[wr_set] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      tag[wr_set]  <= wr_vbuid;
      data[wr_set] <= wr_entry;
    end
  end
endmodule
