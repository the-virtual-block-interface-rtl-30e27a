// cvt_manager: executes the attach and detach instructions the OS uses to
// control which clients may access which VBs (paper Sec. 4.1.2, Fig. 4
// steps 2a-2b).
//
//   attach CID, VBUID, RWX : put {valid, RWX, VBUID} into client CID's CVT,
//                            in the first invalid entry or, if none, at the
//                            end of the CVT; return the entry's index and
//                            increment the VB's reference count in the MTL.
//   detach CID, VBUID      : clear the valid bit of the entry naming VBUID
//                            and decrement the VB's reference count.
//
// Both behaviours are the paper's. The CVT lives in physical memory; the
// client descriptor (16 bytes per client at `client_tbl_base`: CVT base,
// then {capacity, size}) is this design's layout, shared with cvt_unit.
// The reference count change goes to the MTL as a REF_INC/REF_DEC command;
// attach fails (and changes nothing) if the MTL refuses, e.g. because the
// VB is not enabled, or if the CVT is full. The new reference count is
// returned so the OS can issue disable_vb when it reaches zero.
//
// Timing: the CVT is scanned one entry per memory round trip, so an
// instruction takes (entries scanned + 3 or 4) memory round trips plus the
// MTL command. `done` pulses for one cycle with `err`, `index`, `refcnt`.
module cvt_manager
  import vbi_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PA_W-1:0]      client_tbl_base,
  // instruction
  input  logic                 op_valid,
  output logic                 op_ready,
  input  logic                 op_attach,     // 1 = attach, 0 = detach
  input  logic [CID_W-1:0]     op_cid,
  input  logic [VBUID_W-1:0]   op_vbuid,
  input  logic [2:0]           op_rwx,
  output logic                 done,
  output logic                 err,
  output logic [CVT_IDX_W-1:0] index,
  output logic [REFCNT_W-1:0]  refcnt,
  // MTL reference-count command
  output logic                 mtl_valid,
  input  logic                 mtl_ready,
  output mtl_op_e              mtl_op,
  output logic [VBUID_W-1:0]   mtl_vbuid,
  input  logic                 mtl_done,
  input  logic                 mtl_err,
  input  logic [REFCNT_W-1:0]  mtl_refcnt,
  // notifications to the CPU side
  output logic                 upd_valid,
  output logic [CID_W-1:0]     upd_cid,
  output logic [31:0]          upd_size,
  output logic                 inval_valid,
  output logic [CID_W-1:0]     inval_cid,
  output logic [CVT_IDX_W-1:0] inval_index,
  // physical memory port
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_rsp_valid,
  input  logic [LINE_W-1:0]    mem_rsp_rdata
);
  typedef enum logic [3:0] {
    S_IDLE, S_DESC, S_DESC_W, S_SCAN, S_SCAN_W, S_MTL, S_MTL_W,
    S_WENT, S_WENT_W, S_WDESC, S_WDESC_W, S_DONE
  } state_e;
  state_e state;

  logic                 r_attach;
  logic [CID_W-1:0]     r_cid;
  logic [VBUID_W-1:0]   r_vbuid;
  logic [2:0]           r_rwx;
  logic [PA_W-1:0]      desc_addr, cvt_base, r_addr;
  logic [31:0]          cvt_size, cvt_cap, idx;
  logic                 r_append, r_err;
  cvt_entry_t           rd_entry, wr_entry;

  assign op_ready  = (state == S_IDLE);
  assign rd_entry  = cvt_entry_t'(word_of_line(mem_rsp_rdata, r_addr[5:3]));
  assign mtl_valid = (state == S_MTL);
  assign mtl_op    = r_attach ? MTL_REF_INC : MTL_REF_DEC;
  assign mtl_vbuid = r_vbuid;

  always_comb begin
    wr_entry       = '0;
    wr_entry.valid = r_attach;
    wr_entry.rwx   = r_rwx;
    wr_entry.vbuid = r_vbuid;
  end

  assign mem_req_valid = (state == S_DESC) || (state == S_SCAN) ||
                         (state == S_WENT) || (state == S_WDESC);
  always_comb begin
    mem_req.addr  = r_addr;
    mem_req.we    = (state == S_WENT) || (state == S_WDESC);
    mem_req.wdata = '0;
    mem_req.wstrb = '0;
    if (state == S_WENT) begin
      mem_req.wdata = word_in_line(64'(wr_entry), r_addr[5:3]);
      mem_req.wstrb = word_strb(r_addr[5:3]);
    end else if (state == S_WDESC) begin
      mem_req.wdata = word_in_line({cvt_cap, cvt_size + 32'd1}, r_addr[5:3]);
      mem_req.wstrb = word_strb(r_addr[5:3]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r_attach <= 1'b0; r_cid <= '0; r_vbuid <= '0; r_rwx <= '0;
      desc_addr <= '0; cvt_base <= '0; r_addr <= '0;
      cvt_size <= '0; cvt_cap <= '0; idx <= '0;
      r_append <= 1'b0; r_err <= 1'b0;
      done <= 1'b0; err <= 1'b0; index <= '0; refcnt <= '0;
      upd_valid <= 1'b0; upd_cid <= '0; upd_size <= '0;
      inval_valid <= 1'b0; inval_cid <= '0; inval_index <= '0;
    end else begin
      done        <= 1'b0;
      upd_valid   <= 1'b0;
      inval_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (op_valid) begin
          r_attach  <= op_attach;
          r_cid     <= op_cid;
          r_vbuid   <= op_vbuid;
          r_rwx     <= op_rwx;
          r_err     <= 1'b0;
          r_append  <= 1'b0;
          refcnt    <= '0;
          desc_addr <= client_tbl_base + PA_W'(op_cid) * PA_W'(16);
          r_addr    <= client_tbl_base + PA_W'(op_cid) * PA_W'(16);
          state     <= S_DESC;
        end
        S_DESC: if (mem_req_ready) state <= S_DESC_W;
        S_DESC_W: if (mem_rsp_valid) begin
          cvt_base <= PA_W'(word_of_line(mem_rsp_rdata, r_addr[5:3]));
          cvt_size <= word_of_line(mem_rsp_rdata, r_addr[5:3] + 3'd1)[31:0];
          cvt_cap  <= word_of_line(mem_rsp_rdata, r_addr[5:3] + 3'd1)[63:32];
          idx      <= '0;
          r_addr   <= PA_W'(word_of_line(mem_rsp_rdata, r_addr[5:3]));
          state    <= S_SCAN;
        end
        S_SCAN: begin
          if (idx >= cvt_size) begin
            // nothing found in the used part of the CVT
            if (r_attach && cvt_size < cvt_cap && cvt_size < (32'd1 << CVT_IDX_W)) begin
              r_append <= 1'b1;
              r_addr   <= cvt_base + PA_W'(cvt_size) * PA_W'(8);
              state    <= S_MTL;
            end else begin
              r_err <= 1'b1;
              state <= S_DONE;
            end
          end else if (mem_req_ready) begin
            state <= S_SCAN_W;
          end
        end
        S_SCAN_W: if (mem_rsp_valid) begin
          if (r_attach ? !rd_entry.valid
                       : (rd_entry.valid && rd_entry.vbuid == r_vbuid)) begin
            state <= r_attach ? S_MTL : S_WENT;
          end else begin
            idx    <= idx + 32'd1;
            r_addr <= r_addr + PA_W'(8);
            state  <= S_SCAN;
          end
        end
        S_MTL: if (mtl_ready) state <= S_MTL_W;
        S_MTL_W: if (mtl_done) begin
          refcnt <= mtl_refcnt;
          if (mtl_err) begin
            r_err <= 1'b1;
            state <= S_DONE;
          end else begin
            state <= r_attach ? S_WENT : S_DONE;
          end
        end
        S_WENT: if (mem_req_ready) state <= S_WENT_W;
        S_WENT_W: if (mem_rsp_valid) begin
          inval_valid <= 1'b1;
          inval_cid   <= r_cid;
          inval_index <= CVT_IDX_W'(r_append ? cvt_size : idx);
          if (r_attach && r_append) begin
            r_addr <= desc_addr + PA_W'(8);
            state  <= S_WDESC;
          end else begin
            state <= r_attach ? S_DONE : S_MTL;
          end
        end
        S_WDESC: if (mem_req_ready) state <= S_WDESC_W;
        S_WDESC_W: if (mem_rsp_valid) begin
          upd_valid <= 1'b1;
          upd_cid   <= r_cid;
          upd_size  <= cvt_size + 32'd1;
          state     <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          err   <= r_err;
          index <= CVT_IDX_W'(r_append ? cvt_size : idx);
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
