// vbi_top: the Virtual Block Interface hardware of one core and its memory
// controller (paper Fig. 4): the CPU-side CVT unit (CVT range check, CVT
// cache, permission check, VBI address generation), the CVT manager that
// executes attach/detach, and the Memory Translation Layer (VIT cache, two TLB levels,
// translation walker, frame allocator), sharing one physical memory port.
//
// Ports, grouped by what lies outside this block:
//  * boot configuration: where the client table and the eight VITs are;
//  * OS instruction port: enable_vb, disable_vb, attach, detach, and a
//    client switch (the core is tagged with the running client's ID). One
//    instruction at a time; `os_done` pulses with its result;
//  * core access port: a {CVT index, offset} virtual address and an access
//    type in, a fault code or the VBI address out. The on-chip caches
//    (L1/L2/LLC) are not part of this block: the VBI address leaves here
//    and their misses and dirty writebacks come back on the LLC port;
//  * LLC port: line reads and writebacks by VBI address, answered by the MTL;
//  * physical memory port: 64-byte lines, request/response.
// Statistics counters come out for observation.
//
// The split into these blocks follows Fig. 4 of the paper; the sequencing
// of OS instructions and the shared memory port are this design's.
module vbi_top
  import vbi_pkg::*;
#(
  parameter int unsigned NUM_FRAMES        = 4096,
  parameter int unsigned RESERVED_FRAMES   = 128,
  parameter int unsigned VIT_ENTRIES       = 1024,
  parameter int unsigned VIT_CACHE_ENTRIES = 32,
  parameter int unsigned TLB_ENTRIES       = 64,
  parameter int unsigned TLB2_ENTRIES      = 512,
  parameter int unsigned TLB2_WAYS         = 4,
  parameter int unsigned CVT_CACHE_ENTRIES = 64,
  parameter bit          EARLY_RESERVE     = 1'b1,
  localparam int unsigned FRAME_W          = $clog2(NUM_FRAMES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // boot configuration
  input  logic [PA_W-1:0]      client_tbl_base,
  input  logic [PA_W-1:0]      vit_base [NUM_CLASSES],
  // OS instructions
  input  logic                 os_valid,
  output logic                 os_ready,
  input  os_op_e               os_op,
  input  logic [CID_W-1:0]     os_cid,
  input  logic [VBUID_W-1:0]   os_vbuid,
  input  logic [2:0]           os_rwx,
  input  logic [PROPS_W-1:0]   os_props,
  output logic                 os_done,
  output logic                 os_err,
  output logic [CVT_IDX_W-1:0] os_index,
  output logic [REFCNT_W-1:0]  os_refcnt,
  // core memory accesses
  input  logic                 cpu_req_valid,
  output logic                 cpu_req_ready,
  input  acc_e                 cpu_req_acc,
  input  logic [VA_W-1:0]      cpu_req_va,
  output logic                 cpu_rsp_valid,
  output fault_e               cpu_rsp_fault,
  output logic [VA_W-1:0]      cpu_rsp_vbi_addr,
  // LLC misses and writebacks
  input  logic                 llc_req_valid,
  output logic                 llc_req_ready,
  input  logic                 llc_req_we,
  input  logic [VA_W-1:0]      llc_req_addr,
  input  logic [LINE_W-1:0]    llc_req_wdata,
  output logic                 llc_rsp_valid,
  output logic [LINE_W-1:0]    llc_rsp_rdata,
  output logic                 llc_rsp_err,
  output logic                 llc_rsp_zero,
  // physical memory
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_rsp_valid,
  input  logic [LINE_W-1:0]    mem_rsp_rdata,
  // statistics
  output logic [31:0]          stat_cvt_hits,
  output logic [31:0]          stat_cvt_misses,
  output logic [31:0]          stat_tlb_hits,
  output logic [31:0]          stat_tlb_misses,
  output logic [31:0]          stat_tlb2_hits,
  output logic [31:0]          stat_vit_misses,
  output logic [31:0]          stat_zero_lines,
  output logic [31:0]          stat_direct_vbs,
  output logic [31:0]          stat_table_reads,
  output logic [FRAME_W:0]     free_frames
);
  // ---------------- memory port sharing ----------------
  localparam int unsigned M_CVT = 0, M_MGR = 1, M_MTL = 2;
  logic              m_req_valid [3];
  logic              m_req_ready [3];
  mem_req_t          m_req       [3];
  logic              m_rsp_valid [3];
  logic [LINE_W-1:0] m_rsp_rdata;

  mem_arbiter #(.N(3)) u_arb (
    .clk, .rst_n, .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_rdata
  );

  // ---------------- OS instruction sequencing ----------------
  typedef enum logic [2:0] {T_IDLE, T_MTL, T_MTL_W, T_MGR, T_MGR_W, T_SW, T_SW_W} tstate_e;
  tstate_e tstate;

  logic                 mgr_valid, mgr_ready, mgr_done, mgr_err;
  logic [CVT_IDX_W-1:0] mgr_index;
  logic [REFCNT_W-1:0]  mgr_refcnt;
  logic                 mgr_mtl_valid;
  mtl_op_e              mgr_mtl_op;
  logic [VBUID_W-1:0]   mgr_mtl_vbuid;
  logic                 upd_valid, inval_valid;
  logic [CID_W-1:0]     upd_cid, inval_cid, cur_cid;
  logic [31:0]          upd_size;
  logic [CVT_IDX_W-1:0] inval_index;

  logic                 cmd_valid, cmd_ready, cmd_done, cmd_err;
  mtl_op_e              cmd_op;
  logic [VBUID_W-1:0]   cmd_vbuid;
  logic [REFCNT_W-1:0]  cmd_refcnt;

  os_op_e               r_op;
  logic [CID_W-1:0]     r_cid;
  logic [VBUID_W-1:0]   r_vbuid;
  logic [2:0]           r_rwx;
  logic [PROPS_W-1:0]   r_props;
  logic                 sw_valid, unit_ready;

  assign os_ready  = (tstate == T_IDLE);
  assign mgr_valid = (tstate == T_MGR);
  assign sw_valid  = (tstate == T_SW);

  // the MTL command port is the OS's for enable/disable, the manager's otherwise
  always_comb begin
    if (tstate == T_MTL) begin
      cmd_valid = 1'b1;
      cmd_op    = (r_op == OS_ENABLE_VB) ? MTL_ENABLE : MTL_DISABLE;
      cmd_vbuid = r_vbuid;
    end else begin
      cmd_valid = mgr_mtl_valid;
      cmd_op    = mgr_mtl_op;
      cmd_vbuid = mgr_mtl_vbuid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate <= T_IDLE;
      r_op <= OS_ENABLE_VB; r_cid <= '0; r_vbuid <= '0; r_rwx <= '0; r_props <= '0;
      os_done <= 1'b0; os_err <= 1'b0; os_index <= '0; os_refcnt <= '0;
    end else begin
      os_done <= 1'b0;
      unique case (tstate)
        T_IDLE: if (os_valid) begin
          r_op <= os_op; r_cid <= os_cid; r_vbuid <= os_vbuid; r_rwx <= os_rwx; r_props <= os_props;
          unique case (os_op)
            OS_ENABLE_VB, OS_DISABLE_VB: tstate <= T_MTL;
            OS_ATTACH, OS_DETACH:        tstate <= T_MGR;
            OS_SET_CLIENT:               tstate <= T_SW;
            default: begin os_done <= 1'b1; os_err <= 1'b1; end
          endcase
        end
        T_MTL:   if (cmd_ready) tstate <= T_MTL_W;
        T_MTL_W: if (cmd_done) begin
          os_done <= 1'b1; os_err <= cmd_err; os_index <= '0; os_refcnt <= cmd_refcnt;
          tstate  <= T_IDLE;
        end
        T_MGR:   if (mgr_ready) tstate <= T_MGR_W;
        T_MGR_W: if (mgr_done) begin
          os_done <= 1'b1; os_err <= mgr_err; os_index <= mgr_index; os_refcnt <= mgr_refcnt;
          tstate  <= T_IDLE;
        end
        T_SW:    tstate <= T_SW_W;
        T_SW_W:  if (unit_ready) begin
          os_done <= 1'b1; os_err <= 1'b0; os_index <= '0; os_refcnt <= '0;
          tstate  <= T_IDLE;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // ---------------- CPU side ----------------
  logic cpu_ready_i;
  assign unit_ready    = cpu_ready_i;
  assign cpu_req_ready = cpu_ready_i && (tstate != T_SW) && (tstate != T_SW_W);

  cvt_unit #(.CACHE_ENTRIES(CVT_CACHE_ENTRIES)) u_cvt_unit (
    .clk, .rst_n, .client_tbl_base,
    .sw_valid, .sw_cid(r_cid), .cur_cid,
    .upd_valid, .upd_cid, .upd_size, .inval_valid, .inval_cid, .inval_index,
    .req_valid(cpu_req_valid && cpu_req_ready), .req_ready(cpu_ready_i),
    .req_acc(cpu_req_acc), .req_va(cpu_req_va),
    .rsp_valid(cpu_rsp_valid), .rsp_fault(cpu_rsp_fault), .rsp_vbi_addr(cpu_rsp_vbi_addr),
    .mem_req_valid(m_req_valid[M_CVT]), .mem_req_ready(m_req_ready[M_CVT]), .mem_req(m_req[M_CVT]),
    .mem_rsp_valid(m_rsp_valid[M_CVT]), .mem_rsp_rdata(m_rsp_rdata),
    .stat_hits(stat_cvt_hits), .stat_misses(stat_cvt_misses)
  );

  cvt_manager u_cvt_mgr (
    .clk, .rst_n, .client_tbl_base,
    .op_valid(mgr_valid), .op_ready(mgr_ready), .op_attach(r_op == OS_ATTACH),
    .op_cid(r_cid), .op_vbuid(r_vbuid), .op_rwx(r_rwx),
    .done(mgr_done), .err(mgr_err), .index(mgr_index), .refcnt(mgr_refcnt),
    .mtl_valid(mgr_mtl_valid), .mtl_ready(cmd_ready), .mtl_op(mgr_mtl_op), .mtl_vbuid(mgr_mtl_vbuid),
    .mtl_done(cmd_done), .mtl_err(cmd_err), .mtl_refcnt(cmd_refcnt),
    .upd_valid, .upd_cid, .upd_size, .inval_valid, .inval_cid, .inval_index,
    .mem_req_valid(m_req_valid[M_MGR]), .mem_req_ready(m_req_ready[M_MGR]), .mem_req(m_req[M_MGR]),
    .mem_rsp_valid(m_rsp_valid[M_MGR]), .mem_rsp_rdata(m_rsp_rdata)
  );

  // ---------------- Memory Translation Layer ----------------
  mtl #(
    .NUM_FRAMES(NUM_FRAMES), .RESERVED_FRAMES(RESERVED_FRAMES), .VIT_ENTRIES(VIT_ENTRIES),
    .VIT_CACHE_ENTRIES(VIT_CACHE_ENTRIES), .TLB_ENTRIES(TLB_ENTRIES),
    .TLB2_ENTRIES(TLB2_ENTRIES), .TLB2_WAYS(TLB2_WAYS), .EARLY_RESERVE(EARLY_RESERVE)
  ) u_mtl (
    .clk, .rst_n, .vit_base,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_vbuid, .cmd_props(r_props),
    .cmd_done, .cmd_err, .cmd_refcnt,
    .llc_req_valid, .llc_req_ready, .llc_req_we, .llc_req_addr, .llc_req_wdata,
    .llc_rsp_valid, .llc_rsp_rdata, .llc_rsp_err, .llc_rsp_zero,
    .mem_req_valid(m_req_valid[M_MTL]), .mem_req_ready(m_req_ready[M_MTL]), .mem_req(m_req[M_MTL]),
    .mem_rsp_valid(m_rsp_valid[M_MTL]), .mem_rsp_rdata(m_rsp_rdata),
    .stat_tlb_hits, .stat_tlb_misses, .stat_tlb2_hits, .stat_vit_misses, .stat_zero_lines,
    .stat_direct_vbs, .stat_table_reads, .free_frames
  );
endmodule
