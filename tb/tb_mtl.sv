// tb_mtl: the Memory Translation Layer on its own, with a behavioural
// memory. Checks enable_vb / disable_vb / reference counting against the
// VIT entries in memory, delayed allocation (a zero line without memory
// access before the first writeback), writeback then read-back of data for
// a directly mapped (early-reserved) VB and a multi-level-table VB, TLB
// hits on repeated accesses and their latency, refusal of accesses to
// disabled VBs, and that disable_vb returns every frame.
module tb_mtl;
  import vbi_pkg::*;
  localparam int NF = 512, RES = 64, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PA_W-1:0] vit_base [NUM_CLASSES];
  logic cmd_valid, cmd_ready, cmd_done, cmd_err;
  mtl_op_e cmd_op;
  logic [VBUID_W-1:0] cmd_vbuid;
  logic [PROPS_W-1:0] cmd_props;
  logic [REFCNT_W-1:0] cmd_refcnt;
  logic llc_req_valid, llc_req_ready, llc_req_we, llc_rsp_valid, llc_rsp_err, llc_rsp_zero;
  logic [VA_W-1:0] llc_req_addr;
  logic [LINE_W-1:0] llc_req_wdata, llc_rsp_rdata;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  logic [LINE_W-1:0] mem_rsp_rdata;
  logic [31:0] stat_tlb_hits, stat_tlb_misses, stat_tlb2_hits, stat_vit_misses, stat_zero_lines, stat_direct_vbs,
               stat_table_reads, n_reads, n_writes;
  logic [9:0] free_frames;
  int checks = 0, failures = 0;

  mtl #(.NUM_FRAMES(NF), .RESERVED_FRAMES(RES), .VIT_ENTRIES(256)) dut (.*);

  mem_model #(.LINES(NF * 64), .LATENCY(LAT)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata), .n_reads, .n_writes);

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(input string what, input bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] mkva(input int sid, input int id, input logic [63:0] off);
    logic [63:0] a;
    a = (64'(id) << (12 + 5 * sid)) | off;
    a[63:61] = 3'(sid);
    return a;
  endfunction

  task automatic cmd(input mtl_op_e op, input logic [63:0] va, input logic [15:0] props,
                     output bit e, output int rc);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_vbuid = va[63:12]; cmd_props = props;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
    e = cmd_err; rc = int'(cmd_refcnt);
  endtask

  task automatic llc(input bit we, input logic [63:0] a, input logic [LINE_W-1:0] d,
                     output logic [LINE_W-1:0] q, output bit e, output bit z, output int cyc);
    @(negedge clk);
    llc_req_valid = 1; llc_req_we = we; llc_req_addr = a; llc_req_wdata = d;
    while (!llc_req_ready) @(negedge clk);
    @(negedge clk); llc_req_valid = 0;
    cyc = 1;
    while (!llc_rsp_valid) begin @(negedge clk); cyc++; end
    q = llc_rsp_rdata; e = llc_rsp_err; z = llc_rsp_zero;
  endtask

  function automatic logic [63:0] vit_word(input int sid, input int id, input int w);
    return u_mem.mem_read_word(vit_base[sid] + 32'(id) * 16 + 32'(w) * 8);
  endfunction

  initial begin
    bit e, z; int rc, cyc, ff0, r0, w0, h0;
    logic [LINE_W-1:0] q, d1, d2;
    logic [63:0] A, B, C;
    for (int s = 0; s < 8; s++) vit_base[s] = 32'h1_0000 + 32'(s) * 32'h1000;
    cmd_valid = 0; cmd_op = MTL_ENABLE; cmd_vbuid = '0; cmd_props = '0;
    llc_req_valid = 0; llc_req_we = 0; llc_req_addr = '0; llc_req_wdata = '0;
    for (int i = 0; i < LINE_BYTES / 4; i++) begin d1[32*i +: 32] = $urandom; d2[32*i +: 32] = $urandom; end
    A = mkva(1, 3, 0);        // 128 KB VB: early reservation -> direct
    B = mkva(4, 5, 0);        // 4 GB VB: multi-level table
    C = mkva(2, 7, 0);        // 4 MB VB, never enabled
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (NF + 4) @(posedge clk);
    ff0 = int'(free_frames);

    llc(0, C | 64'h40, '0, q, e, z, cyc);
    expect_("access to a VB that is not enabled is refused", e);
    cmd(MTL_ENABLE, A, 16'h00A5, e, rc);
    expect_("enable_vb", !e);
    expect_("VIT entry: enabled, props, refcnt 0, no structure",
            vit_word(1, 3, 0)[0] == 1 && vit_word(1, 3, 0)[31:16] == 16'h00A5 &&
            vit_word(1, 3, 0)[47:32] == 0 && vit_word(1, 3, 0)[2:1] == 2'(TT_NONE));
    cmd(MTL_ENABLE, A, 16'h00A5, e, rc);
    expect_("second enable_vb of the same VB is refused", e);
    cmd(MTL_REF_INC, A, 0, e, rc);
    cmd(MTL_REF_INC, A, 0, e, rc);
    expect_("refcount 2", !e && rc == 2);
    cmd(MTL_REF_DEC, A, 0, e, rc);
    expect_("refcount 1 and in memory", !e && rc == 1 && vit_word(1, 3, 0)[47:32] == 1);
    cmd(MTL_REF_INC, C, 0, e, rc);
    expect_("refcount of a disabled VB refused", e);

    // delayed allocation
    r0 = int'(n_reads); w0 = int'(n_writes);
    llc(0, A | 64'h1_2340, '0, q, e, z, cyc);
    expect_("first read: zero line", !e && z && q == '0);
    expect_("zero line needs no memory access beyond the VIT", int'(n_writes) == w0 && int'(n_reads) - r0 <= 1);
    expect_("no frame allocated by a read", int'(free_frames) == ff0);
    llc(1, A | 64'h1_2340, d1, q, e, z, cyc);
    expect_("writeback accepted", !e);
    expect_("early reservation made the VB direct", vit_word(1, 3, 0)[2:1] == 2'(TT_DIRECT) && stat_direct_vbs == 1);
    expect_("one frame allocated", int'(free_frames) == ff0 - 1);
    expect_("data in memory at reserved run + offset",
            u_mem.mem_read_word(32'(vit_word(1, 3, 1)) + 32'h1_2340) == d1[63:0]);
    llc(0, A | 64'h1_2340, '0, q, e, z, cyc);
    expect_("read back", !e && !z && q == d1);
    llc(0, A | 64'h1_2380, '0, q, e, z, cyc);
    expect_("rest of the frame reads zero", !e && q == '0);
    llc(0, A | 64'h0_5000, '0, q, e, z, cyc);
    expect_("other 4 KB region of the direct VB: zero line", !e && z);

    // multi-level VB
    cmd(MTL_ENABLE, B, 16'h0001, e, rc);
    h0 = int'(stat_tlb_misses);
    llc(1, B | 64'h8765_4300, d2, q, e, z, cyc);
    expect_("writeback to 4 GB VB", !e);
    expect_("4 GB VB does not fit a reservation here: multi-level", vit_word(4, 5, 0)[2:1] == 2'(TT_MULTI));
    expect_("TLB miss counted", int'(stat_tlb_misses) == h0 + 1);
    h0 = int'(stat_tlb_hits);
    llc(0, B | 64'h8765_4300, '0, q, e, z, cyc);
    expect_("read back through the TLB", !e && q == d2 && int'(stat_tlb_hits) == h0 + 1);
    expect_("TLB-hit read latency", cyc <= LAT + 8);
    llc(0, B | 64'h8765_5300, '0, q, e, z, cyc);
    expect_("neighbouring page not allocated: zero line", z);
    expect_("zero lines counted", stat_zero_lines == 3);

    // more pages than the first-level TLB holds: the second level serves them
    for (int k = 0; k < 80; k++) begin
      logic [LINE_W-1:0] dk;
      dk = {16{32'(k) ^ 32'hA5A5_0000}};
      llc(1, B | (64'(k) << 21) | (64'(k) << 12), dk, q, e, z, cyc);
    end
    h0 = int'(stat_tlb2_hits);
    begin
      int bad = 0;
      for (int k = 0; k < 80; k++) begin
        llc(0, B | (64'(k) << 21) | (64'(k) << 12), '0, q, e, z, cyc);
        if (e || q != {16{32'(k) ^ 32'hA5A5_0000}}) bad++;
      end
      expect_("80 pages read back", bad == 0);
    end
    expect_("second-level TLB hits", int'(stat_tlb2_hits) > h0 + 10);

    // disable returns everything
    cmd(MTL_DISABLE, A, 0, e, rc);
    expect_("disable_vb", !e && vit_word(1, 3, 0)[0] == 0);
    llc(0, A | 64'h1_2340, '0, q, e, z, cyc);
    expect_("disabled VB refused", e);
    cmd(MTL_DISABLE, B, 0, e, rc);
    expect_("all frames free again", int'(free_frames) == ff0);
    cmd(MTL_ENABLE, A, 0, e, rc);
    llc(0, A | 64'h1_2340, '0, q, e, z, cyc);
    expect_("re-enabled VB starts empty", !e && z);
    cmd(MTL_DISABLE, C, 0, e, rc);
    expect_("disable of a disabled VB refused", e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
