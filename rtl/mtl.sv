// mtl: the Memory Translation Layer, the memory-controller part of VBI that
// owns physical memory allocation and VBI-to-physical translation
// (paper Sec. 3.3, 4.2, 4.5, 5; Fig. 4 steps 1c, 2b, 7, 8, 9).
//
// Two request streams arrive:
//  * management commands: enable_vb (mark a VB's VIT entry enabled, store
//    its property bitvector, reference count 0), disable_vb (free all the
//    VB's physical memory, drop its TLB entries, clear the VIT entry), and
//    reference-count increment/decrement issued by attach/detach;
//  * LLC misses (line reads) and dirty LLC writebacks (line writes), both
//    carrying a VBI address, since the on-chip caches are addressed with
//    VBI addresses and translation is needed only below the LLC.
//
// For an LLC request the MTL reads the VB's VIT entry (VIT cache, else
// memory) and looks the address up in its TLBs: a 64-entry fully
// associative first level holding 4 KB and whole-VB mappings, and, for
// table-mapped VBs, a 512-entry 4-way second level of 4 KB mappings (the
// sizes of the data TLBs of the system VBI was evaluated in). On a miss in
// both it has the translation walker walk (or, for a writeback, build) the
// VB's translation structure, and fills both levels. Delayed allocation (paper Sec. 5.1): a read of a region that
// has no physical memory yet is answered with a zero line without any
// memory access, and a writeback to such a region allocates a 4 KB frame
// first. Early reservation (Sec. 5.3) and the static choice of translation
// structure (Sec. 5.2) are done by the walker and the frame allocator.
//
// The VITs live in physical memory, one per size class, at `vit_base[SizeID]`,
// indexed by VBID, 16 bytes per entry; entries beyond VIT_ENTRIES per class
// are refused. VIT updates are written through to memory.
//
// The paper envisions the MTL as software on a small programmable core in
// the memory controller; this block instead implements its functions as a
// fixed state machine. Not implemented: clone_vb (copy-on-write), promote_vb,
// swapping to a backing store and memory-mapped files (OS interrupt), lazy
// cache cleanup after disable_vb, hotness-based placement.
//
// Timing: one request at a time. A first-level TLB hit to a table-mapped VB
// costs the VIT lookup and one memory access; a second-level hit adds two
// cycles; other paths add the walker's time.
module mtl
  import vbi_pkg::*;
#(
  parameter int unsigned NUM_FRAMES        = 4096,
  parameter int unsigned RESERVED_FRAMES   = 128,
  parameter int unsigned VIT_ENTRIES       = 1024,
  parameter int unsigned VIT_CACHE_ENTRIES = 32,
  parameter int unsigned TLB_ENTRIES       = 64,
  parameter int unsigned TLB2_ENTRIES      = 512,
  parameter int unsigned TLB2_WAYS         = 4,
  parameter bit          EARLY_RESERVE     = 1'b1,
  localparam int unsigned FRAME_W          = $clog2(NUM_FRAMES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [PA_W-1:0]     vit_base [NUM_CLASSES],
  // management commands
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  mtl_op_e             cmd_op,
  input  logic [VBUID_W-1:0]  cmd_vbuid,
  input  logic [PROPS_W-1:0]  cmd_props,
  output logic                cmd_done,
  output logic                cmd_err,
  output logic [REFCNT_W-1:0] cmd_refcnt,
  // LLC misses and writebacks
  input  logic                llc_req_valid,
  output logic                llc_req_ready,
  input  logic                llc_req_we,
  input  logic [VA_W-1:0]     llc_req_addr,
  input  logic [LINE_W-1:0]   llc_req_wdata,
  output logic                llc_rsp_valid,
  output logic [LINE_W-1:0]   llc_rsp_rdata,
  output logic                llc_rsp_err,
  output logic                llc_rsp_zero,   // zero line returned, no memory access
  // physical memory port
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output mem_req_t            mem_req,
  input  logic                mem_rsp_valid,
  input  logic [LINE_W-1:0]   mem_rsp_rdata,
  // statistics
  output logic [31:0]         stat_tlb_hits,
  output logic [31:0]         stat_tlb_misses,
  output logic [31:0]         stat_tlb2_hits,
  output logic [31:0]         stat_vit_misses,
  output logic [31:0]         stat_zero_lines,
  output logic [31:0]         stat_direct_vbs,
  output logic [31:0]         stat_table_reads,
  output logic [FRAME_W:0]    free_frames
);
  typedef enum logic [4:0] {
    S_IDLE, S_VIT, S_VIT_RD, S_VIT_RW, S_DISPATCH, S_FREE, S_FREE_W, S_FREE_L2,
    S_L2, S_L2_W, S_WALK, S_WALK_W, S_VIT_WR, S_VIT_WW, S_MEM, S_MEM_W, S_DONE
  } state_e;
  state_e state;

  logic                r_is_cmd, r_we, r_err, r_zero, r_to_mem;
  mtl_op_e             r_op;
  logic [VBUID_W-1:0]  r_vb;
  logic [PROPS_W-1:0]  r_props;
  logic [VA_W-1:0]     r_off;
  logic [LINE_W-1:0]   r_wdata, r_rdata;
  logic [PA_W-1:0]     r_vit_addr, r_pa;
  vit_entry_t          r_ent;

  logic [2:0] r_sid;
  assign r_sid = r_vb[VBUID_W-1 -: SIZEID_W];

  // ---------------- VIT cache ----------------
  logic       vc_hit, vc_wr;
  vit_entry_t vc_entry;
  assign vc_wr = (state == S_VIT_RW && mem_rsp_valid) || (state == S_VIT_WR);

  vit_cache #(.ENTRIES(VIT_CACHE_ENTRIES)) u_vit_cache (
    .clk, .rst_n,
    .lk_vbuid(r_vb), .lk_hit(vc_hit), .lk_entry(vc_entry),
    .wr_valid(vc_wr), .wr_vbuid(r_vb),
    .wr_entry((state == S_VIT_WR) ? r_ent
              : vit_entry_t'(mem_rsp_rdata[128*int'(r_vit_addr[5:4]) +: 128])),
    .inval_valid(1'b0), .inval_vbuid(r_vb)
  );

  // ---------------- TLB ----------------
  logic            tlb_hit, tlb_direct, tlb_ins, tlb_inval;
  logic [PA_W-1:0] tlb_pa;
  logic [5:0]      tlb_ins_bits;
  logic [PA_W-1:0] tlb_ins_base;

  mtl_tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .lk_vbuid(r_vb), .lk_offset(r_off), .lk_hit(tlb_hit), .lk_direct(tlb_direct), .lk_pa(tlb_pa),
    .ins_valid(tlb_ins), .ins_vbuid(r_vb), .ins_offset(r_off),
    .ins_bits(tlb_ins_bits), .ins_base(tlb_ins_base),
    .inval_valid(tlb_inval), .inval_vbuid(r_vb)
  );

  // ---------------- walker + allocator ----------------
  logic               wk_start, wk_done, wk_present, wk_err, wk_new;
  ttype_e             wk_ttype, wk_new_tt;
  logic [PA_W-1:0]    wk_root, wk_frame, wk_new_root;
  logic               wk_fa_valid, wk_mem_valid;
  fa_op_e             wk_fa_op;
  logic [FRAME_W-1:0] wk_fa_frame;
  logic [5:0]         wk_fa_log2n;
  mem_req_t           wk_mem_req;

  logic               fa_valid, fa_ready, fa_done, fa_ok;
  fa_op_e             fa_op;
  logic [FRAME_W-1:0] fa_frame;

  assign wk_start = (state == S_WALK);
  assign wk_ttype = r_ent.ttype;
  assign wk_root  = PA_W'(r_ent.ptr);

  translation_walker #(.NUM_FRAMES(NUM_FRAMES), .EARLY_RESERVE(EARLY_RESERVE)) u_walker (
    .clk, .rst_n,
    .start(wk_start), .alloc(r_we), .vbuid(r_vb), .ttype(wk_ttype), .root(wk_root), .offset(r_off),
    .done(wk_done), .present(wk_present), .err(wk_err), .frame_pa(wk_frame),
    .new_valid(wk_new), .new_ttype(wk_new_tt), .new_root(wk_new_root),
    .fa_valid(wk_fa_valid), .fa_ready, .fa_op(wk_fa_op), .fa_frame(wk_fa_frame),
    .fa_log2n(wk_fa_log2n), .fa_done, .fa_ok, .fa_rframe(fa_frame),
    .mem_req_valid(wk_mem_valid), .mem_req_ready, .mem_req(wk_mem_req),
    .mem_rsp_valid, .mem_rsp_rdata, .stat_table_reads
  );

  logic walk_owns;
  assign walk_owns = (state == S_WALK) || (state == S_WALK_W);
  assign fa_valid  = walk_owns ? wk_fa_valid : (state == S_FREE);
  assign fa_op     = walk_owns ? wk_fa_op : FA_FREE_VB;

  frame_allocator #(.NUM_FRAMES(NUM_FRAMES), .RESERVED_FRAMES(RESERVED_FRAMES)) u_alloc (
    .clk, .rst_n,
    .req_valid(fa_valid), .req_ready(fa_ready), .req_op(fa_op), .req_vbuid(r_vb),
    .req_frame(wk_fa_frame), .req_log2n(wk_fa_log2n),
    .done(fa_done), .ok(fa_ok), .frame(fa_frame), .free_frames
  );

  // ---------------- second-level TLB (4 KB mappings) ----------------
  logic            l2_hit, l2_ins, l2_busy;
  logic [PA_W-1:0] l2_pa;

  mtl_tlb2 #(.ENTRIES(TLB2_ENTRIES), .WAYS(TLB2_WAYS)) u_tlb2 (
    .clk, .rst_n,
    .lk_valid(state == S_L2), .lk_vbuid(r_vb), .lk_offset(r_off), .lk_hit(l2_hit), .lk_pa(l2_pa),
    .ins_valid(l2_ins), .ins_vbuid(r_vb), .ins_offset(r_off), .ins_pa(wk_frame),
    .inval_start(state == S_FREE && fa_ready), .inval_vbuid(r_vb), .inval_busy(l2_busy)
  );

  // ---------------- memory port ----------------
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    if (walk_owns) begin
      mem_req_valid = wk_mem_valid;
      mem_req       = wk_mem_req;
    end else if (state == S_VIT_RD) begin
      mem_req_valid = 1'b1;
      mem_req.addr  = r_vit_addr;
    end else if (state == S_VIT_WR) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = r_vit_addr;
      mem_req.wdata = LINE_W'(r_ent) << (128 * int'(r_vit_addr[5:4]));
      mem_req.wstrb = LINE_BYTES'(16'hFFFF) << (16 * int'(r_vit_addr[5:4]));
    end else if (state == S_MEM) begin
      mem_req_valid = 1'b1;
      mem_req.we    = r_we;
      mem_req.addr  = r_pa;
      mem_req.wdata = r_wdata;
      mem_req.wstrb = r_we ? '1 : '0;
    end
  end

  assign cmd_ready     = (state == S_IDLE);
  assign llc_req_ready = (state == S_IDLE) && !cmd_valid;

  always_comb begin
    tlb_ins      = 1'b0;
    l2_ins       = 1'b0;
    tlb_ins_bits = 6'(PAGE_BITS);
    tlb_ins_base = wk_frame;
    if (state == S_L2_W && l2_hit) begin
      tlb_ins      = 1'b1;            // refill the first level from the second
      tlb_ins_base = l2_pa;
    end else if (state == S_WALK_W && wk_done && wk_present && !wk_err) begin
      tlb_ins = 1'b1;
      if ((wk_new ? wk_new_tt : r_ent.ttype) == TT_DIRECT) begin
        tlb_ins_bits = 6'(offset_bits(r_sid));
        tlb_ins_base = wk_new ? wk_new_root : PA_W'(r_ent.ptr);
      end else begin
        l2_ins = 1'b1;
      end
    end
  end
  assign tlb_inval = (state == S_FREE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r_is_cmd <= 1'b0; r_we <= 1'b0; r_err <= 1'b0; r_zero <= 1'b0; r_to_mem <= 1'b0;
      r_op <= MTL_ENABLE; r_vb <= '0; r_props <= '0; r_off <= '0;
      r_wdata <= '0; r_rdata <= '0; r_vit_addr <= '0; r_pa <= '0; r_ent <= '0;
      cmd_done <= 1'b0; cmd_err <= 1'b0; cmd_refcnt <= '0;
      llc_rsp_valid <= 1'b0; llc_rsp_rdata <= '0; llc_rsp_err <= 1'b0; llc_rsp_zero <= 1'b0;
      stat_tlb_hits <= '0; stat_tlb_misses <= '0; stat_tlb2_hits <= '0; stat_vit_misses <= '0;
      stat_zero_lines <= '0; stat_direct_vbs <= '0;
    end else begin
      cmd_done      <= 1'b0;
      llc_rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          r_err  <= 1'b0;
          r_zero <= 1'b0;
          if (cmd_valid) begin
            r_is_cmd   <= 1'b1;
            r_op       <= cmd_op;
            r_vb       <= cmd_vbuid;
            r_props    <= cmd_props;
            r_we       <= 1'b0;
            r_off      <= '0;
            r_vit_addr <= vit_base[cmd_vbuid[VBUID_W-1 -: SIZEID_W]]
                          + PA_W'(vbid_of(cmd_vbuid)) * PA_W'(16);
            state      <= S_VIT;
          end else if (llc_req_valid) begin
            r_is_cmd   <= 1'b0;
            r_vb       <= vbuid_of(llc_req_addr);
            r_off      <= vb_offset(llc_req_addr) & ~VA_W'(LINE_BYTES - 1);
            r_we       <= llc_req_we;
            r_wdata    <= llc_req_wdata;
            r_vit_addr <= vit_base[llc_req_addr[63:61]]
                          + PA_W'(vbid_of(vbuid_of(llc_req_addr))) * PA_W'(16);
            state      <= S_VIT;
          end
        end
        S_VIT: begin
          if (vbid_of(r_vb) >= VA_W'(VIT_ENTRIES)) begin
            r_err <= 1'b1;
            state <= S_DONE;
          end else if (vc_hit) begin
            r_ent <= vc_entry;
            state <= S_DISPATCH;
          end else begin
            stat_vit_misses <= stat_vit_misses + 32'd1;
            state <= S_VIT_RD;
          end
        end
        S_VIT_RD: if (mem_req_ready) state <= S_VIT_RW;
        S_VIT_RW: if (mem_rsp_valid) begin
          r_ent <= vit_entry_t'(mem_rsp_rdata[128*int'(r_vit_addr[5:4]) +: 128]);
          state <= S_DISPATCH;
        end
        S_DISPATCH: begin
          r_to_mem <= 1'b0;
          if (r_is_cmd) begin
            unique case (r_op)
              MTL_ENABLE: begin
                if (r_ent.enable) begin
                  r_err <= 1'b1; state <= S_DONE;
                end else begin
                  r_ent        <= '0;
                  r_ent.enable <= 1'b1;
                  r_ent.props  <= r_props;
                  r_ent.ttype  <= TT_NONE;
                  state        <= S_VIT_WR;
                end
              end
              MTL_DISABLE: begin
                if (!r_ent.enable) begin
                  r_err <= 1'b1; state <= S_DONE;
                end else begin
                  state <= S_FREE;
                end
              end
              MTL_REF_INC: begin
                if (!r_ent.enable || &r_ent.refcnt) begin
                  r_err <= 1'b1; state <= S_DONE;
                end else begin
                  r_ent.refcnt <= r_ent.refcnt + 1'b1;
                  state        <= S_VIT_WR;
                end
              end
              default: begin // MTL_REF_DEC
                if (!r_ent.enable || r_ent.refcnt == '0) begin
                  r_err <= 1'b1; state <= S_DONE;
                end else begin
                  r_ent.refcnt <= r_ent.refcnt - 1'b1;
                  state        <= S_VIT_WR;
                end
              end
            endcase
          end else if (!r_ent.enable) begin
            r_err <= 1'b1;
            state <= S_DONE;
          end else if (tlb_hit && !tlb_direct) begin
            stat_tlb_hits <= stat_tlb_hits + 32'd1;
            r_pa  <= tlb_pa;
            state <= S_MEM;
          end else begin
            // TLB miss, or a hit on a directly mapped VB whose 4 KB region
            // may not be allocated yet: the walker checks / allocates
            if (tlb_hit) begin
              stat_tlb_hits <= stat_tlb_hits + 32'd1;
              state         <= S_WALK;
            end else begin
              stat_tlb_misses <= stat_tlb_misses + 32'd1;
              state           <= (r_ent.ttype == TT_SINGLE || r_ent.ttype == TT_MULTI) ? S_L2 : S_WALK;
            end
          end
        end
        S_L2: state <= S_L2_W;
        S_L2_W: begin
          if (l2_hit) begin
            stat_tlb2_hits <= stat_tlb2_hits + 32'd1;
            r_pa  <= l2_pa + PA_W'(r_off[PAGE_BITS-1:0]);
            state <= S_MEM;
          end else begin
            state <= S_WALK;
          end
        end
        S_FREE: if (fa_ready) state <= S_FREE_W;
        S_FREE_W: if (fa_done) state <= S_FREE_L2;
        S_FREE_L2: if (!l2_busy) begin
          r_ent <= '0;
          state <= S_VIT_WR;
        end
        S_WALK: state <= S_WALK_W;
        S_WALK_W: if (wk_done) begin
          if (wk_new) begin
            r_ent.ttype <= wk_new_tt;
            r_ent.ptr   <= 64'(wk_new_root);
            if (wk_new_tt == TT_DIRECT && offset_bits(r_sid) > PAGE_BITS)
              stat_direct_vbs <= stat_direct_vbs + 32'd1;
          end
          if (wk_err) begin
            r_err <= 1'b1;
            state <= wk_new ? S_VIT_WR : S_DONE;
          end else if (!wk_present) begin
            r_zero <= 1'b1;          // delayed allocation: zero line
            state  <= S_DONE;
          end else begin
            r_pa     <= wk_frame + PA_W'(r_off[PAGE_BITS-1:0]);
            r_to_mem <= 1'b1;
            state    <= wk_new ? S_VIT_WR : S_MEM;
          end
        end
        S_VIT_WR: if (mem_req_ready) state <= S_VIT_WW;
        S_VIT_WW: if (mem_rsp_valid) state <= r_to_mem ? S_MEM : S_DONE;
        S_MEM: if (mem_req_ready) state <= S_MEM_W;
        S_MEM_W: if (mem_rsp_valid) begin
          r_rdata <= r_we ? '0 : mem_rsp_rdata;
          state   <= S_DONE;
        end
        S_DONE: begin
          if (r_is_cmd) begin
            cmd_done   <= 1'b1;
            cmd_err    <= r_err;
            cmd_refcnt <= r_ent.refcnt;
          end else begin
            llc_rsp_valid <= 1'b1;
            llc_rsp_err   <= r_err;
            llc_rsp_zero  <= r_zero;
            llc_rsp_rdata <= (r_zero || r_err) ? '0 : r_rdata;
            if (r_zero) stat_zero_lines <= stat_zero_lines + 32'd1;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
