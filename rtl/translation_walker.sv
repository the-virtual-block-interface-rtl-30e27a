// translation_walker: finds, and on a dirty writeback creates, the
// VBI-to-physical mapping of one 4 KB region of a VB (paper Sec. 4.2.3,
// 4.5.2, 5.1-5.3, Fig. 4 step 9).
//
// It handles the paper's three kinds of translation structure:
//   TT_DIRECT  the VB lies in one contiguous physical run starting at `root`;
//              the region's frame is root + offset, and the allocator is
//              asked whether that frame has been allocated to the VB yet.
//   TT_SINGLE  one table of 64-bit entries, one per 4 KB region (used for
//              128 KB and 4 MB VBs, as in the paper's evaluated policy).
//   TT_MULTI   a radix table with 9 index bits per level and as many levels
//              as 4 KB mapping needs (2 to 4); the top level takes the bits
//              left over.
// With `alloc` clear the walk only reads: a region without memory reports
// `present` = 0, and the MTL returns a zero line (delayed allocation). With
// `alloc` set (dirty writeback) every missing table and the data frame are
// allocated, zero-filled and linked in, one 4 KB frame at a time.
//
// A VB without any structure yet (TT_NONE) gets one on its first
// allocation. If EARLY_RESERVE is set the walker first tries to reserve a
// run of physical memory as large as the whole VB; on success the VB
// becomes TT_DIRECT (early reservation). Otherwise the static policy picks
// direct (4 KB VBs), single-level (128 KB, 4 MB) or multi-level tables.
// The new type and root leave on `new_ttype`/`new_root` for the VIT.
//
// If no run of the whole VB's size is free, the walker reserves one aligned
// block of the largest smaller size class (4 MB, then 128 KB) that is free,
// as the paper's sparse early reservation does; the VB is then mapped by
// the static policy's tables, and the frame allocator hands out the
// reserved block's frames to this VB first. Only this first block is
// reserved; later allocations beyond it take unreserved frames.
//
// Choices of this design, not the paper's: the table entry format (pte_t),
// 9 index bits per level, the 8 KB (two-frame) single-level table of a
// 4 MB VB being taken from a reserved aligned pair of frames, and reserving
// a single smaller block rather than one per region as the VB grows.
//
// Timing: one memory round trip per table level read; an allocation adds
// the allocator's latency, 64 line writes to zero the frame and one write
// of the table entry. `done` pulses once per `start`.
module translation_walker
  import vbi_pkg::*;
#(
  parameter int unsigned NUM_FRAMES    = 4096,
  parameter bit          EARLY_RESERVE = 1'b1,
  localparam int unsigned FRAME_W      = $clog2(NUM_FRAMES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               alloc,
  input  logic [VBUID_W-1:0] vbuid,
  input  ttype_e             ttype,
  input  logic [PA_W-1:0]    root,
  input  logic [VA_W-1:0]    offset,     // offset inside the VB
  output logic               done,
  output logic               present,
  output logic               err,        // out of physical memory
  output logic [PA_W-1:0]    frame_pa,   // physical base of the 4 KB frame
  output logic               new_valid,  // type/root changed (with done)
  output ttype_e             new_ttype,
  output logic [PA_W-1:0]    new_root,
  // frame allocator
  output logic               fa_valid,
  input  logic               fa_ready,
  output fa_op_e             fa_op,
  output logic [FRAME_W-1:0] fa_frame,
  output logic [5:0]         fa_log2n,
  input  logic               fa_done,
  input  logic               fa_ok,
  input  logic [FRAME_W-1:0] fa_rframe,
  // physical memory port
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output mem_req_t           mem_req,
  input  logic               mem_rsp_valid,
  input  logic [LINE_W-1:0]  mem_rsp_rdata,
  output logic [31:0]        stat_table_reads
);
  typedef enum logic [3:0] {
    S_IDLE, S_FIRST, S_DQUERY, S_DQ_W, S_READ, S_READ_W,
    S_FA, S_FA_W, S_ZERO, S_ZERO_W, S_LINK, S_LINK_W, S_NEXT, S_FIN
  } state_e;
  state_e state;

  // what the pending allocation is for
  typedef enum logic [2:0] {P_RESV_VB, P_ROOT_RESV, P_ROOT_AT, P_TABLE, P_DATA, P_DIRECT} purpose_e;
  purpose_e pur;

  logic               r_alloc;
  ttype_e             r_tt;
  logic [PA_W-1:0]    r_table;   // table being read, or base of a direct VB
  logic [VA_W-1:0]    r_off;
  logic [2:0]         sid;
  logic [2:0]         lvl;       // current level, 0 = leaf
  logic [PA_W-1:0]    pte_addr;
  logic [PA_W-1:0]    zaddr, zend;
  logic [PA_W-1:0]    new_page;
  logic [FRAME_W-1:0] at_frame;
  logic               root_pending;
  logic [1:0]         root_left;
  logic [2:0]         rk;        // size class of the reservation being tried

  pte_t rd_pte;
  assign rd_pte = pte_t'(word_of_line(mem_rsp_rdata, pte_addr[5:3]));

  function automatic logic [2:0] levels(input ttype_e t, input logic [2:0] s);
    int unsigned n;
    n = 5 * int'(s);
    if (t == TT_SINGLE) return 3'd1;
    return 3'((n + LEVEL_BITS - 1) / LEVEL_BITS);
  endfunction

  function automatic logic [VA_W-1:0] index_at(input logic [VA_W-1:0] off, input logic [2:0] l,
                                               input logic top);
    logic [VA_W-1:0] v;
    v = off >> (PAGE_BITS + LEVEL_BITS * int'(l));
    return top ? v : (v & VA_W'((1 << LEVEL_BITS) - 1));
  endfunction

  function automatic logic [PA_W-1:0] frame_base(input logic [FRAME_W-1:0] f);
    return PA_W'(f) << PAGE_BITS;
  endfunction

  logic [2:0] nlev;
  assign nlev = levels(r_tt, sid);

  assign fa_valid = (state == S_FA) || (state == S_DQUERY);
  always_comb begin
    fa_op    = FA_ALLOC;
    fa_frame = at_frame;
    fa_log2n = '0;
    if (state == S_DQUERY) fa_op = FA_QUERY;
    else unique case (pur)
      P_RESV_VB:   begin fa_op = FA_RESERVE; fa_log2n = 6'(5 * int'(rk)); end
      P_ROOT_RESV: begin fa_op = FA_RESERVE; fa_log2n = 6'd1; end
      P_ROOT_AT, P_DIRECT: fa_op = FA_ALLOC_AT;
      default:     fa_op = FA_ALLOC;
    endcase
  end

  assign mem_req_valid = (state == S_READ) || (state == S_ZERO) || (state == S_LINK);
  always_comb begin
    mem_req    = '0;
    unique case (state)
      S_READ: mem_req.addr = pte_addr;
      S_ZERO: begin
        mem_req.we    = 1'b1;
        mem_req.addr  = zaddr;
        mem_req.wstrb = '1;
      end
      S_LINK: begin
        mem_req.we    = 1'b1;
        mem_req.addr  = pte_addr;
        mem_req.wdata = word_in_line(64'({new_page[PA_W-1:PAGE_BITS], 11'd0, 1'b1}), pte_addr[5:3]);
        mem_req.wstrb = word_strb(pte_addr[5:3]);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pur <= P_DATA;
      r_alloc <= 1'b0; r_tt <= TT_NONE; r_table <= '0; r_off <= '0;
      sid <= '0; lvl <= '0; pte_addr <= '0; zaddr <= '0; zend <= '0;
      new_page <= '0; at_frame <= '0; root_pending <= 1'b0; root_left <= '0; rk <= '0;
      done <= 1'b0; present <= 1'b0; err <= 1'b0; frame_pa <= '0;
      new_valid <= 1'b0; new_ttype <= TT_NONE; new_root <= '0;
      stat_table_reads <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          r_alloc   <= alloc;
          r_tt      <= ttype;
          r_table   <= root;
          r_off     <= offset;
          sid       <= vbuid[VBUID_W-1 -: SIZEID_W];
          rk        <= vbuid[VBUID_W-1 -: SIZEID_W];
          new_valid <= 1'b0;
          new_ttype <= ttype;
          new_root  <= root;
          err       <= 1'b0;
          present   <= 1'b0;
          state     <= S_FIRST;
        end
        S_FIRST: begin
          if (r_tt == TT_DIRECT) begin
            at_frame <= FRAME_W'((r_table >> PAGE_BITS) + PA_W'(r_off >> PAGE_BITS));
            state    <= S_DQUERY;
          end else if (r_tt == TT_NONE) begin
            if (!r_alloc) begin
              state <= S_FIN;              // nothing allocated: absent
            end else if (EARLY_RESERVE || sid == 3'd0) begin
              pur   <= P_RESV_VB;
              state <= S_FA;
            end else begin
              r_tt  <= (sid <= 3'd2) ? TT_SINGLE : TT_MULTI;
              state <= S_FIRST;
              root_pending <= 1'b1;
            end
          end else if (root_pending) begin
            // allocate the root table: 8 KB for a 4 MB single-level table
            pur   <= (r_tt == TT_SINGLE && sid == 3'd2) ? P_ROOT_RESV : P_TABLE;
            state <= S_FA;
          end else begin
            lvl      <= nlev - 3'd1;
            pte_addr <= r_table + PA_W'(index_at(r_off, nlev - 3'd1, 1'b1)) * PA_W'(8);
            state    <= S_READ;
          end
        end
        S_DQUERY: if (fa_ready) state <= S_DQ_W;
        S_DQ_W: begin
          // owned: present; otherwise allocate it in place if writing
          if (fa_done) begin
            if (fa_ok) begin
              present  <= 1'b1;
              frame_pa <= frame_base(at_frame);
              state    <= S_FIN;
            end else if (!r_alloc) begin
              state <= S_FIN;
            end else begin
              pur   <= P_DIRECT;
              state <= S_FA;
            end
          end
        end
        S_FA: if (fa_ready) state <= S_FA_W;
        S_FA_W: if (fa_done) begin
          if (!fa_ok) begin
            if (pur == P_RESV_VB && rk > 3'd1) begin
              // no run of this size class: try the next smaller one
              rk    <= rk - 3'd1;
              state <= S_FA;
            end else if (pur == P_RESV_VB) begin
              // nothing reservable: static policy
              if (sid == 3'd0) begin
                r_tt <= TT_DIRECT; pur <= P_DATA; state <= S_FA;     // one frame
              end else begin
                r_tt <= (sid <= 3'd2) ? TT_SINGLE : TT_MULTI;
                root_pending <= 1'b1;
                state <= S_FIRST;
              end
            end else begin
              err   <= 1'b1;
              state <= S_FIN;
            end
          end else begin
            unique case (pur)
              P_RESV_VB: begin
                if (rk == sid) begin
                  // the whole VB is reserved: directly mapped
                  r_tt      <= TT_DIRECT;
                  r_table   <= frame_base(fa_rframe);
                  new_valid <= 1'b1;
                  new_ttype <= TT_DIRECT;
                  new_root  <= frame_base(fa_rframe);
                end else begin
                  // a smaller block is reserved: tables map the VB, and
                  // its frames come from the block first
                  r_tt         <= (sid <= 3'd2) ? TT_SINGLE : TT_MULTI;
                  root_pending <= 1'b1;
                end
                state <= S_FIRST;
              end
              P_ROOT_RESV: begin
                at_frame  <= fa_rframe;
                root_left <= 2'd2;
                new_page  <= frame_base(fa_rframe);
                pur       <= P_ROOT_AT;
                state     <= S_FA;
              end
              P_ROOT_AT: begin
                at_frame  <= at_frame + 1'b1;
                root_left <= root_left - 2'd1;
                if (root_left == 2'd1) begin
                  zaddr <= new_page;
                  zend  <= new_page + PA_W'(2 << PAGE_BITS);
                  state <= S_ZERO;
                end else begin
                  state <= S_FA;
                end
              end
              P_DIRECT: begin
                new_page <= frame_base(at_frame);
                zaddr    <= frame_base(at_frame);
                zend     <= frame_base(at_frame) + PA_W'(1 << PAGE_BITS);
                state    <= S_ZERO;
              end
              default: begin  // P_TABLE, P_DATA: one frame
                new_page <= frame_base(fa_rframe);
                zaddr    <= frame_base(fa_rframe);
                zend     <= frame_base(fa_rframe) + PA_W'(1 << PAGE_BITS);
                state    <= S_ZERO;
              end
            endcase
          end
        end
        S_ZERO: if (mem_req_ready) state <= S_ZERO_W;
        S_ZERO_W: if (mem_rsp_valid) begin
          if (zaddr + PA_W'(LINE_BYTES) == zend) begin
            if (root_pending) begin
              // new root table
              root_pending <= 1'b0;
              r_table      <= new_page;
              new_valid    <= 1'b1;
              new_ttype    <= r_tt;
              new_root     <= new_page;
              state        <= S_FIRST;
            end else if (pur == P_DIRECT || (pur == P_DATA && r_tt == TT_DIRECT)) begin
              if (pur == P_DATA) begin   // 4 KB VB without reservation
                new_valid <= 1'b1;
                new_ttype <= TT_DIRECT;
                new_root  <= new_page;
              end
              present  <= 1'b1;
              frame_pa <= new_page;
              state    <= S_FIN;
            end else begin
              state <= S_LINK;
            end
          end else begin
            zaddr <= zaddr + PA_W'(LINE_BYTES);
            state <= S_ZERO;
          end
        end
        S_LINK: if (mem_req_ready) state <= S_LINK_W;
        S_LINK_W: if (mem_rsp_valid) begin
          if (lvl == 3'd0) begin
            present  <= 1'b1;
            frame_pa <= new_page;
            state    <= S_FIN;
          end else begin
            r_table <= new_page;
            state   <= S_NEXT;
          end
        end
        S_READ: if (mem_req_ready) state <= S_READ_W;
        S_READ_W: if (mem_rsp_valid) begin
          stat_table_reads <= stat_table_reads + 32'd1;
          if (rd_pte.valid) begin
            if (lvl == 3'd0) begin
              present  <= 1'b1;
              frame_pa <= PA_W'({rd_pte.frame, 12'd0});
              state    <= S_FIN;
            end else begin
              r_table <= PA_W'({rd_pte.frame, 12'd0});
              state   <= S_NEXT;
            end
          end else if (!r_alloc) begin
            state <= S_FIN;
          end else begin
            pur   <= (lvl == 3'd0) ? P_DATA : P_TABLE;
            state <= S_FA;
          end
        end
        S_NEXT: begin
          lvl      <= lvl - 3'd1;
          pte_addr <= r_table + PA_W'(index_at(r_off, lvl - 3'd1, 1'b0)) * PA_W'(8);
          state    <= S_READ;
        end
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
