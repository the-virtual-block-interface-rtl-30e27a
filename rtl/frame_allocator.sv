// frame_allocator: physical memory allocation for the MTL, at the paper's
// 4 KB granularity, with early reservation (paper Sec. 4.5.2, 5.1, 5.3).
//
// Physical memory is NUM_FRAMES frames of 4 KB. For every frame the
// allocator keeps: allocated, reserved, and the VBUID owning it. Frames
// below RESERVED_FRAMES hold the system tables (VITs, CVTs, client table)
// and are never handed out. Operations:
//
//   ALLOC(vb)         give vb one frame, chosen with the paper's three-level
//                     priority: (1) a free frame reserved for vb, (2) an
//                     unreserved free frame, (3) a free frame reserved for
//                     another VB. Lowest frame number first within a level.
//   RESERVE(vb, k)    early reservation: find a naturally aligned run of
//                     2^k free, unreserved frames and reserve all of it for
//                     vb (allocating none). Returns the first frame.
//   ALLOC_AT(vb, f)   allocate frame f for vb if it is free and either
//                     unreserved or reserved for vb (used to fill in a
//                     directly mapped VB inside its reserved run).
//   QUERY(vb, f)      ok = frame f is allocated to vb.
//   FREE_VB(vb)       release every frame allocated or reserved for vb
//                     (disable_vb).
//
// The paper manages free and reserved regions with the buddy algorithm.
// This block gives the same placement (aligned power-of-two runs) by a
// sequential scan of the frame table instead of buddy free lists, which is
// the simplest hardware that does it; it is this design's choice. Timing:
// ALLOC, FREE_VB and RESERVE scan one frame per cycle (up to NUM_FRAMES
// cycles; RESERVE then spends 2^k cycles marking); ALLOC_AT and QUERY take
// one cycle. After reset the table is initialised, one frame per cycle;
// req_ready is low until then. `done` pulses with `ok` and `frame`.
module frame_allocator
  import vbi_pkg::*;
#(
  parameter int unsigned NUM_FRAMES      = 4096,
  parameter int unsigned RESERVED_FRAMES = 128,
  localparam int unsigned FRAME_W        = $clog2(NUM_FRAMES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  output logic                  req_ready,
  input  fa_op_e                req_op,
  input  logic [VBUID_W-1:0]    req_vbuid,
  input  logic [FRAME_W-1:0]    req_frame,
  input  logic [5:0]            req_log2n,
  output logic                  done,
  output logic                  ok,
  output logic [FRAME_W-1:0]    frame,
  output logic [FRAME_W:0]      free_frames
);

  typedef struct packed {
    logic               alloc;
    logic               resv;
    logic [VBUID_W-1:0] owner;
  } fstate_t;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_ALLOC, S_RESV, S_MARK, S_FREE} state_e;
  state_e state;

  fstate_t            tbl [NUM_FRAMES];
  logic [FRAME_W:0]   i;          // scan position (one extra bit for the end)
  logic [FRAME_W-1:0] mark_end;
  logic [VBUID_W-1:0] r_vb;
  logic [5:0]         r_k;
  logic               f2, f3, run_ok;
  logic [FRAME_W-1:0] c2, c3;

  fstate_t cur;
  assign cur       = tbl[i[FRAME_W-1:0]];
  assign req_ready = (state == S_IDLE);

  logic cur_free, is_first, is_last;
  logic [FRAME_W:0] blk;
  always_comb begin
    cur_free = !cur.alloc;
    blk      = (FRAME_W+1)'(1) << r_k;
    is_first = ((i & (blk - 1'b1)) == '0);
    is_last  = ((i & (blk - 1'b1)) == (blk - 1'b1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_INIT;
      i           <= '0;
      mark_end    <= '0;
      r_vb        <= '0;
      r_k         <= '0;
      f2 <= 1'b0; f3 <= 1'b0; run_ok <= 1'b0;
      c2 <= '0; c3 <= '0;
      done        <= 1'b0;
      ok          <= 1'b0;
      frame       <= '0;
      free_frames <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_INIT: begin
          tbl[i[FRAME_W-1:0]] <= (i < (FRAME_W+1)'(RESERVED_FRAMES))
                                 ? fstate_t'{alloc: 1'b1, resv: 1'b0, owner: '1} : '0;
          if (i == (FRAME_W+1)'(NUM_FRAMES - 1)) begin
            i           <= '0;
            free_frames <= (FRAME_W+1)'(NUM_FRAMES - RESERVED_FRAMES);
            state       <= S_IDLE;
          end else begin
            i <= i + 1'b1;
          end
        end
        S_IDLE: if (req_valid) begin
          r_vb <= req_vbuid;
          r_k  <= req_log2n;
          f2 <= 1'b0; f3 <= 1'b0;
          i    <= '0;
          unique case (req_op)
            FA_ALLOC: state <= S_ALLOC;
            FA_RESERVE: begin
              if (req_log2n > 6'(FRAME_W)) begin
                done <= 1'b1; ok <= 1'b0;
              end else begin
                run_ok <= 1'b1;
                state  <= S_RESV;
              end
            end
            FA_FREE_VB: state <= S_FREE;
            FA_ALLOC_AT: begin
              done  <= 1'b1;
              frame <= req_frame;
              if (!tbl[req_frame].alloc &&
                  (!tbl[req_frame].resv || tbl[req_frame].owner == req_vbuid)) begin
                ok <= 1'b1;
                tbl[req_frame] <= fstate_t'{alloc: 1'b1, resv: 1'b0, owner: req_vbuid};
                free_frames <= free_frames - 1'b1;
              end else begin
                ok <= 1'b0;
              end
            end
            FA_QUERY: begin
              done  <= 1'b1;
              frame <= req_frame;
              ok    <= tbl[req_frame].alloc && tbl[req_frame].owner == req_vbuid;
            end
            default: begin
              done <= 1'b1; ok <= 1'b0;
            end
          endcase
        end
        S_ALLOC: begin
          // three-level priority; level 1 ends the scan at once
          if (i == (FRAME_W+1)'(NUM_FRAMES) || (cur_free && cur.resv && cur.owner == r_vb)) begin
            logic            got;
            logic [FRAME_W-1:0] pick;
            got  = 1'b1;
            if (i != (FRAME_W+1)'(NUM_FRAMES)) pick = i[FRAME_W-1:0];
            else if (f2)                       pick = c2;
            else if (f3)                       pick = c3;
            else begin pick = '0; got = 1'b0; end
            done  <= 1'b1;
            ok    <= got;
            frame <= pick;
            if (got) begin
              tbl[pick]   <= fstate_t'{alloc: 1'b1, resv: 1'b0, owner: r_vb};
              free_frames <= free_frames - 1'b1;
            end
            state <= S_IDLE;
          end else begin
            if (cur_free && !cur.resv && !f2) begin f2 <= 1'b1; c2 <= i[FRAME_W-1:0]; end
            if (cur_free &&  cur.resv && !f3) begin f3 <= 1'b1; c3 <= i[FRAME_W-1:0]; end
            i <= i + 1'b1;
          end
        end
        S_RESV: begin
          if (i == (FRAME_W+1)'(NUM_FRAMES)) begin
            done  <= 1'b1;
            ok    <= 1'b0;
            state <= S_IDLE;
          end else begin
            logic run_now;
            run_now = (is_first ? 1'b1 : run_ok) && cur_free && !cur.resv;
            if (is_last && run_now) begin
              frame    <= FRAME_W'(i + 1'b1 - blk);
              mark_end <= i[FRAME_W-1:0];
              i        <= i + 1'b1 - blk;
              state    <= S_MARK;
            end else begin
              run_ok <= run_now;
              i      <= i + 1'b1;
            end
          end
        end
        S_MARK: begin
          tbl[i[FRAME_W-1:0]] <= fstate_t'{alloc: 1'b0, resv: 1'b1, owner: r_vb};
          if (i[FRAME_W-1:0] == mark_end) begin
            done  <= 1'b1;
            ok    <= 1'b1;
            state <= S_IDLE;
          end else begin
            i <= i + 1'b1;
          end
        end
        S_FREE: begin
          if (i == (FRAME_W+1)'(NUM_FRAMES)) begin
            done  <= 1'b1;
            ok    <= 1'b1;
            state <= S_IDLE;
          end else begin
            if (cur.owner == r_vb && (cur.alloc || cur.resv)) begin
              tbl[i[FRAME_W-1:0]] <= '0;
              if (cur.alloc) free_frames <= free_frames + 1'b1;
            end
            i <= i + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
