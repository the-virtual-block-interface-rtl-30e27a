// cvt_cache: per-core direct-mapped cache of Client-VB Table entries
// (paper Sec. 4.3: 64 entries, direct-mapped, looked up with the CVT index).
//
// The low log2(ENTRIES) bits of the CVT index select a slot, the rest are
// kept as the tag. Lookup is combinational: hit and entry are valid in the
// cycle the index is presented. A fill writes one slot on the next clock
// edge. `inval` drops the slot holding one index (after attach or detach
// rewrites that CVT entry) and `flush` drops every slot (on a switch to
// another client, since the cache holds one client's CVT at a time). The
// size and organisation are the paper's; the fill/invalidate interface is
// this design's.
module cvt_cache
  import vbi_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookup
  input  logic [CVT_IDX_W-1:0] lk_index,
  output logic                 lk_hit,
  output cvt_entry_t           lk_entry,
  // fill
  input  logic                 fill_valid,
  input  logic [CVT_IDX_W-1:0] fill_index,
  input  cvt_entry_t           fill_entry,
  // invalidation
  input  logic                 inval_valid,
  input  logic [CVT_IDX_W-1:0] inval_index,
  input  logic                 flush
);
  localparam int unsigned SET_W = $clog2(ENTRIES);
  localparam int unsigned TAG_W = CVT_IDX_W - SET_W;

  logic [ENTRIES-1:0] vld;
  logic [TAG_W-1:0]   tag [ENTRIES];
  cvt_entry_t         data [ENTRIES];

  logic [SET_W-1:0] lk_set;
  assign lk_set   = lk_index[SET_W-1:0];
  assign lk_hit   = vld[lk_set] && (tag[lk_set] == lk_index[CVT_IDX_W-1:SET_W]);
  assign lk_entry = data[lk_set];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
    end else if (flush) begin
      vld <= '0;
    end else begin
      if (fill_valid) vld[fill_index[SET_W-1:0]] <= 1'b1;
      if (inval_valid && tag[inval_index[SET_W-1:0]] == inval_index[CVT_IDX_W-1:SET_W])
        vld[inval_index[SET_W-1:0]] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag[fill_index[SET_W-1:0]]  <= fill_index[CVT_IDX_W-1:SET_W];
      data[fill_index[SET_W-1:0]] <= fill_entry;
    end
  end
endmodule
