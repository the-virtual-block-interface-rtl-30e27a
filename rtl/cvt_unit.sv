// cvt_unit: CPU-side front end of every memory access under VBI
// (paper Sec. 4.2.2-4.2.3, Fig. 4 steps 4-6).
//
// A program names data with a two-part virtual address {CVT index, offset}.
// For each access this unit (1) checks that the index lies inside the
// running client's CVT, (2) looks the index up in the direct-mapped CVT
// cache, fetching the 64-bit CVT entry from physical memory on a miss,
// (3) checks permission and bounds and (4) returns the VBI address that the
// on-chip caches are then accessed with. The order of these steps is the
// paper's.
//
// The processor keeps, for every client, where its CVT lies and how large it
// is in a table in physical memory (paper Sec. 4.1.2). Here that table is at
// `client_tbl_base`, 16 bytes per client: word 0 = CVT base address, word 1 =
// {capacity[31:0], size[31:0]}; this layout is this design's choice.
// `sw_valid` switches the core to another client: the descriptor is read and
// the CVT cache flushed. `upd_*` and `inval_*` come from the CVT manager when
// attach/detach change the running client's CVT.
//
// Timing: one access at a time. A CVT cache hit (or an index fault) answers
// one cycle after the request is taken; a miss adds one memory round trip.
module cvt_unit
  import vbi_pkg::*;
#(
  parameter int unsigned CACHE_ENTRIES = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PA_W-1:0]      client_tbl_base,
  // client switch
  input  logic                 sw_valid,
  input  logic [CID_W-1:0]     sw_cid,
  output logic [CID_W-1:0]     cur_cid,
  // CVT changes made by attach/detach
  input  logic                 upd_valid,
  input  logic [CID_W-1:0]     upd_cid,
  input  logic [31:0]          upd_size,
  input  logic                 inval_valid,
  input  logic [CID_W-1:0]     inval_cid,
  input  logic [CVT_IDX_W-1:0] inval_index,
  // memory access request from the core
  input  logic                 req_valid,
  output logic                 req_ready,
  input  acc_e                 req_acc,
  input  logic [VA_W-1:0]      req_va,      // {CVT index, offset}
  output logic                 rsp_valid,
  output fault_e               rsp_fault,
  output logic [VA_W-1:0]      rsp_vbi_addr,
  // physical memory port (CVT and client-table reads)
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_rsp_valid,
  input  logic [LINE_W-1:0]    mem_rsp_rdata,
  // statistics
  output logic [31:0]          stat_hits,
  output logic [31:0]          stat_misses
);
  typedef enum logic [2:0] {S_IDLE, S_SW_REQ, S_SW_WAIT, S_MISS_REQ, S_MISS_WAIT, S_CHECK} state_e;
  state_e state;

  logic [PA_W-1:0]      cvt_base;
  logic [31:0]          cvt_size;
  logic [CVT_IDX_W-1:0] r_index;
  logic [VOFF_W-1:0]    r_off;
  acc_e                 r_acc;
  logic [PA_W-1:0]      r_addr;
  cvt_entry_t           r_entry;

  // CVT cache
  logic       lk_hit, fill_valid;
  cvt_entry_t lk_entry, fill_entry;
  logic [CVT_IDX_W-1:0] lk_index;
  logic       flush, inval_here;

  assign lk_index   = (state == S_IDLE) ? req_va[VA_W-1 -: CVT_IDX_W] : r_index;
  assign inval_here = inval_valid && (inval_cid == cur_cid);

  cvt_cache #(.ENTRIES(CACHE_ENTRIES)) u_cache (
    .clk, .rst_n,
    .lk_index, .lk_hit, .lk_entry,
    .fill_valid, .fill_index(r_index), .fill_entry,
    .inval_valid(inval_here), .inval_index, .flush
  );

  // checker
  cvt_entry_t      ck_entry;
  acc_e            ck_acc;
  logic [VOFF_W-1:0] ck_off;
  fault_e          ck_fault;
  logic [VA_W-1:0] ck_addr;

  assign ck_entry = (state == S_IDLE) ? lk_entry : r_entry;
  assign ck_acc   = (state == S_IDLE) ? req_acc : r_acc;
  assign ck_off   = (state == S_IDLE) ? req_va[VOFF_W-1:0] : r_off;

  access_check u_check (.entry(ck_entry), .acc(ck_acc), .offset(ck_off),
                        .fault(ck_fault), .vbi_addr(ck_addr));

  assign req_ready     = (state == S_IDLE) && !sw_valid;
  assign mem_req_valid = (state == S_SW_REQ) || (state == S_MISS_REQ);
  assign mem_req.we    = 1'b0;
  assign mem_req.addr  = r_addr;
  assign mem_req.wdata = '0;
  assign mem_req.wstrb = '0;
  assign fill_entry    = cvt_entry_t'(word_of_line(mem_rsp_rdata, r_addr[5:3]));
  assign fill_valid    = (state == S_MISS_WAIT) && mem_rsp_valid;
  assign flush         = (state == S_SW_WAIT) && mem_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cvt_base     <= '0;
      cvt_size     <= '0;
      cur_cid      <= '0;
      r_index      <= '0;
      r_off        <= '0;
      r_acc        <= ACC_LOAD;
      r_addr       <= '0;
      r_entry      <= '0;
      rsp_valid    <= 1'b0;
      rsp_fault    <= FAULT_NONE;
      rsp_vbi_addr <= '0;
      stat_hits    <= '0;
      stat_misses  <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (upd_valid && upd_cid == cur_cid) cvt_size <= upd_size;
      unique case (state)
        S_IDLE: begin
          if (sw_valid) begin
            cur_cid <= sw_cid;
            r_addr  <= client_tbl_base + PA_W'(sw_cid) * PA_W'(16);
            state   <= S_SW_REQ;
          end else if (req_valid) begin
            r_index <= req_va[VA_W-1 -: CVT_IDX_W];
            r_off   <= req_va[VOFF_W-1:0];
            r_acc   <= req_acc;
            if (32'(req_va[VA_W-1 -: CVT_IDX_W]) >= cvt_size) begin
              rsp_valid    <= 1'b1;
              rsp_fault    <= FAULT_INDEX;
              rsp_vbi_addr <= '0;
            end else if (lk_hit) begin
              stat_hits    <= stat_hits + 32'd1;
              rsp_valid    <= 1'b1;
              rsp_fault    <= ck_fault;
              rsp_vbi_addr <= (ck_fault == FAULT_NONE) ? ck_addr : '0;
            end else begin
              stat_misses <= stat_misses + 32'd1;
              r_addr      <= cvt_base + PA_W'(req_va[VA_W-1 -: CVT_IDX_W]) * PA_W'(8);
              state       <= S_MISS_REQ;
            end
          end
        end
        S_SW_REQ:  if (mem_req_ready) state <= S_SW_WAIT;
        S_SW_WAIT: if (mem_rsp_valid) begin
          cvt_base <= PA_W'(word_of_line(mem_rsp_rdata, r_addr[5:3]));
          cvt_size <= word_of_line(mem_rsp_rdata, r_addr[5:3] + 3'd1)[31:0];
          state    <= S_IDLE;
        end
        S_MISS_REQ:  if (mem_req_ready) state <= S_MISS_WAIT;
        S_MISS_WAIT: if (mem_rsp_valid) begin
          r_entry <= fill_entry;
          state   <= S_CHECK;
        end
        S_CHECK: begin
          rsp_valid    <= 1'b1;
          rsp_fault    <= ck_fault;
          rsp_vbi_addr <= (ck_fault == FAULT_NONE) ? ck_addr : '0;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
