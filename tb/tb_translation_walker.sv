// tb_translation_walker: drives the walker together with a frame allocator
// (256 frames) and a behavioural memory. Covers every translation-structure
// path: a 4 KB VB (one frame, direct), a 128 KB VB (early reservation of a
// 32-frame aligned run, direct), a 4 MB VB (too large to reserve here:
// single-level 8 KB table, with a 128 KB block reserved for its frames), a
// 4 GB VB (three-level table, also with a reserved 128 KB block). For each it
// checks that a read before any write finds nothing, that a write allocates
// a zero-filled frame, that the table entries in memory (followed by the
// testbench's own index arithmetic) lead to the returned frame, and that a
// later read finds the same frame with the expected number of table reads.
module tb_translation_walker;
  import vbi_pkg::*;
  localparam int NF = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, alloc, done, present, err, new_valid;
  logic [VBUID_W-1:0] vbuid;
  ttype_e ttype, new_ttype;
  logic [PA_W-1:0] root, frame_pa, new_root;
  logic [VA_W-1:0] offset;
  logic fa_valid, fa_ready, fa_done, fa_ok;
  fa_op_e fa_op;
  logic [7:0] fa_frame, fa_rframe;
  logic [5:0] fa_log2n;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  logic [LINE_W-1:0] mem_rsp_rdata;
  logic [31:0] stat_table_reads, n_reads, n_writes;
  logic [8:0] free_frames;
  int checks = 0, failures = 0;

  translation_walker #(.NUM_FRAMES(NF), .EARLY_RESERVE(1'b1)) dut (
    .clk, .rst_n, .start, .alloc, .vbuid, .ttype, .root, .offset,
    .done, .present, .err, .frame_pa, .new_valid, .new_ttype, .new_root,
    .fa_valid, .fa_ready, .fa_op, .fa_frame, .fa_log2n, .fa_done, .fa_ok, .fa_rframe,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_rdata, .stat_table_reads);

  frame_allocator #(.NUM_FRAMES(NF), .RESERVED_FRAMES(8)) u_fa (
    .clk, .rst_n, .req_valid(fa_valid), .req_ready(fa_ready), .req_op(fa_op),
    .req_vbuid(vbuid), .req_frame(fa_frame), .req_log2n(fa_log2n),
    .done(fa_done), .ok(fa_ok), .frame(fa_rframe), .free_frames);

  mem_model #(.LINES(NF * 64), .LATENCY(2)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata), .n_reads, .n_writes);

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(input string what, input bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // per-VB state kept by the testbench (what the VIT would hold)
  ttype_e      vt [4];
  logic [31:0] vr [4];

  function automatic logic [51:0] mkvb(input int sid, input int id);
    logic [63:0] a;
    a = 64'(id) << (12 + 5 * sid);
    a[63:61] = 3'(sid);
    return a[63:12];
  endfunction

  // every frame of the 32-frame aligned block holding frame f is
  // allocated to or reserved for VB u
  function automatic bit block_owned(input int f, input logic [51:0] u);
    for (int i = f & ~31; i < (f & ~31) + 32; i++)
      if (!((u_fa.tbl[i].alloc || u_fa.tbl[i].resv) && u_fa.tbl[i].owner == u)) return 0;
    return 1;
  endfunction

  task automatic walk(input int k, input int sid, input logic [63:0] off, input bit wr);
    @(negedge clk);
    vbuid = mkvb(sid, 1); ttype = vt[k]; root = vr[k]; offset = off; alloc = wr; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    if (new_valid) begin vt[k] = new_ttype; vr[k] = new_root; end
  endtask

  // the testbench's own walk of the tables in memory
  function automatic logic [31:0] ref_lookup(input int sid, input ttype_e t, input logic [31:0] r,
                                             input logic [63:0] off);
    int n, L;
    logic [31:0] tbl;
    logic [63:0] pte;
    if (t == TT_DIRECT) return r + 32'((off >> 12) << 12);
    n = 5 * sid;
    L = (t == TT_SINGLE) ? 1 : (n + 8) / 9;
    tbl = r;
    for (int l = L - 1; l >= 0; l--) begin
      logic [63:0] idx;
      idx = off >> (12 + 9 * l);
      if (l != L - 1) idx = idx & 511;
      pte = u_mem.mem_read_word(tbl + 32'(idx) * 8);
      if (!pte[0]) return 32'hFFFF_FFFF;
      tbl = {pte[31:12], 12'd0};
    end
    return tbl;
  endfunction

  initial begin
    int sids [4] = '{0, 1, 2, 4};
    start = 0; alloc = 0; vbuid = '0; ttype = TT_NONE; root = '0; offset = '0;
    for (int k = 0; k < 4; k++) begin vt[k] = TT_NONE; vr[k] = '0; end
    // fill all allocatable memory with garbage so that zero-fill shows
    for (int a = 8 * 4096; a < NF * 4096; a += 8) u_mem.mem_write_word(32'(a), 64'hDEAD_BEEF_0BAD_F00D);
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (NF + 4) @(posedge clk);
    for (int k = 0; k < 4; k++) begin
      int sid;
      logic [63:0] off1, off2;
      logic [31:0] f1, tr0;
      sid  = sids[k];
      off1 = ((64'd1 << (12 + 5 * sid)) - 1) & 64'h0000_0000_7654_3FC0;
      off2 = ((64'd1 << (12 + 5 * sid)) - 1) & 64'h0000_0000_3456_7000;
      walk(k, sid, off1, 0);
      expect_($sformatf("sid %0d: read before any write finds nothing", sid), done && !present && !err);
      walk(k, sid, off1, 1);
      expect_($sformatf("sid %0d: write allocates", sid), present && !err);
      f1 = frame_pa;
      expect_($sformatf("sid %0d: structure type", sid),
              vt[k] == ((sid <= 1) ? TT_DIRECT : (sid == 2) ? TT_SINGLE : TT_MULTI));
      expect_($sformatf("sid %0d: tables lead to the frame", sid), ref_lookup(sid, vt[k], vr[k], off1) == f1);
      expect_($sformatf("sid %0d: frame zero-filled", sid),
              u_mem.mem_read_word(f1) == 0 && u_mem.mem_read_word(f1 + 4088) == 0);
      if (vt[k] == TT_DIRECT && sid == 1)
        expect_("128 KB VB: reserved run is aligned", (vr[k] % (32 * 4096)) == 0);
      tr0 = stat_table_reads;
      walk(k, sid, off1, 0);
      expect_($sformatf("sid %0d: later read finds the frame", sid), present && frame_pa == f1);
      expect_($sformatf("sid %0d: table reads per walk", sid),
              stat_table_reads - tr0 == ((vt[k] == TT_DIRECT) ? 0 : (vt[k] == TT_SINGLE) ? 1 : 3));
      if (sid > 0) begin
        walk(k, sid, off2, 0);
        expect_($sformatf("sid %0d: other region still empty", sid), !present);
        walk(k, sid, off2, 1);
        expect_($sformatf("sid %0d: second region allocated", sid), present && frame_pa != f1 &&
                ref_lookup(sid, vt[k], vr[k], off2) == frame_pa);
        if (sid >= 2)
          expect_($sformatf("sid %0d: VB too large to reserve whole gets a reserved 128 KB block", sid),
                  block_owned(f1 >> 12, mkvb(sid, 1)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
