// tb_cvt_unit: the CPU-side VBI front end (client switch, CVT cache, CVT
// fetch from memory, permission and bounds checks) with a behavioural memory
// holding two clients' CVTs. Checks every fault kind, the VBI address
// produced, hit/miss counting and latency, that a client switch flushes the
// CVT cache, and that invalidations and CVT size updates from attach/detach
// take effect.
module tb_cvt_unit;
  import vbi_pkg::*;
  localparam int LAT = 3;
  localparam logic [PA_W-1:0] CTB = 32'h0000_1000;   // client table
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PA_W-1:0] client_tbl_base;
  logic sw_valid, upd_valid, inval_valid, req_valid, req_ready, rsp_valid;
  logic [CID_W-1:0] sw_cid, cur_cid, upd_cid, inval_cid;
  logic [31:0] upd_size;
  logic [CVT_IDX_W-1:0] inval_index;
  acc_e req_acc;
  logic [VA_W-1:0] req_va, rsp_vbi_addr;
  fault_e rsp_fault;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  logic [LINE_W-1:0] mem_rsp_rdata;
  logic [31:0] stat_hits, stat_misses, n_reads, n_writes;
  int checks = 0, failures = 0;

  cvt_unit dut (.*);
  mem_model #(.LINES(4096), .LATENCY(LAT)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata), .n_reads, .n_writes);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(input string what, input bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // reference copy of the CVTs: client c, index i
  logic [63:0] ref_cvt [2][100];
  int          ref_size [2];

  function automatic logic [PA_W-1:0] cvt_base(input int c);
    return 32'h0001_0000 + 32'(c) * 32'h1000;
  endfunction

  task automatic switch_to(input int c);
    @(negedge clk);
    sw_valid = 1; sw_cid = CID_W'(c);
    @(negedge clk); sw_valid = 0;
    while (!req_ready) @(negedge clk);
  endtask

  task automatic access(input acc_e acc, input int index, input logic [47:0] off,
                        output fault_e f, output logic [63:0] a, output int cyc);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_acc = acc; req_va = {16'(index), off};
    @(negedge clk); req_valid = 0; cyc = 1;
    while (!rsp_valid) begin @(negedge clk); cyc++; end
    f = rsp_fault; a = rsp_vbi_addr;
  endtask

  function automatic fault_e model(input int c, input int index, input acc_e acc,
                                   input logic [47:0] off, output logic [63:0] a);
    cvt_entry_t e;
    logic [63:0] sz;
    a = '0;
    if (index >= ref_size[c]) return FAULT_INDEX;
    e = cvt_entry_t'(ref_cvt[c][index]);
    if (!e.valid) return FAULT_INDEX;
    if ((acc == ACC_LOAD && !e.rwx[PERM_R]) || (acc == ACC_STORE && !e.rwx[PERM_W]) ||
        (acc == ACC_FETCH && !e.rwx[PERM_X])) return FAULT_PERM;
    sz = 64'd1 << offset_bits(e.vbuid[51:49]);
    if (64'(off) >= sz) return FAULT_RANGE;
    a = {e.vbuid, 12'd0} | 64'(off);
    return FAULT_NONE;
  endfunction

  initial begin
    fault_e f, fm; logic [63:0] a, am; int cyc, h0, m0, idx, c;
    acc_e acc; logic [47:0] off; int nf [4];
    cvt_entry_t e;
    client_tbl_base = CTB;
    sw_valid = 0; sw_cid = 0; upd_valid = 0; upd_cid = 0; upd_size = 0;
    inval_valid = 0; inval_cid = 0; inval_index = 0;
    req_valid = 0; req_acc = ACC_LOAD; req_va = 0;
    for (int k = 0; k < 4; k++) nf[k] = 0;
    ref_size[0] = 90; ref_size[1] = 20;
    for (int cc = 0; cc < 2; cc++) begin
      u_mem.mem_write_word(CTB + 32'(cc + 3) * 16, 64'(cvt_base(cc)));
      u_mem.mem_write_word(CTB + 32'(cc + 3) * 16 + 8, {32'd100, 32'(ref_size[cc])});
      for (int i = 0; i < 100; i++) begin
        e = '0;
        e.valid = ($urandom % 8) != 0;
        e.rwx = 3'($urandom);
        e.vbuid = {3'($urandom), 49'({$urandom, $urandom})};
        e.vbuid = vbuid_of({e.vbuid, 12'd0});
        ref_cvt[cc][i] = 64'(e);
        u_mem.mem_write_word(cvt_base(cc) + 32'(i) * 8, 64'(e));
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (80) @(posedge clk);   // cache clear sweep

    switch_to(3);
    expect_("current client after switch", cur_cid == 3);
    // first access to index 5 misses, second hits
    h0 = int'(stat_hits); m0 = int'(stat_misses);
    access(ACC_LOAD, 5, 48'h10, f, a, cyc);
    expect_("miss counted", int'(stat_misses) == m0 + 1);
    expect_("miss latency includes a memory round trip", cyc > LAT);
    fm = model(0, 5, ACC_LOAD, 48'h10, am);
    expect_("miss result", f == fm && (f != FAULT_NONE || a == am));
    access(ACC_LOAD, 5, 48'h10, f, a, cyc);
    expect_("hit counted", int'(stat_hits) == h0 + 1);
    expect_("hit answers one cycle after the request", cyc == 1);

    // random accesses against the model
    for (int n = 0; n < 3000; n++) begin
      c = (n < 1500) ? 0 : 1;
      if (n == 1500) switch_to(4);
      idx = int'($urandom % 110);
      acc = acc_e'($urandom % 3);
      if (idx < 100) begin
        e = cvt_entry_t'(ref_cvt[c][idx]);
        off = ($urandom % 4 == 0) ? 48'({$urandom, $urandom}) :
              48'(64'($urandom) & ((64'd1 << offset_bits(e.vbuid[51:49])) - 1));
      end else off = 48'($urandom);
      access(acc, idx, off, f, a, cyc);
      fm = model(c, idx, acc, off, am);
      nf[int'(fm)]++;
      expect_("random access", f == fm && (f != FAULT_NONE || a == am));
    end
    for (int k = 0; k < 4; k++) expect_("each outcome seen", nf[k] > 10);

    // switch back: cached entries of client 4 must not be used for client 3
    switch_to(3);
    for (int i = 0; i < 20; i++) begin
      access(ACC_LOAD, i, 48'h0, f, a, cyc);
      fm = model(0, i, ACC_LOAD, 48'h0, am);
      expect_("after switch back", f == fm && (f != FAULT_NONE || a == am));
    end
    // invalidation: change entry 7 in memory, send an invalidation
    e = cvt_entry_t'(ref_cvt[0][7]); e.valid = 1; e.rwx = 3'b111;
    e.vbuid = {3'd2, 49'h0_0000_0ABC_0000} ;
    e.vbuid = vbuid_of({e.vbuid, 12'd0});
    ref_cvt[0][7] = 64'(e);
    u_mem.mem_write_word(cvt_base(0) + 7 * 8, 64'(e));
    access(ACC_LOAD, 7, 48'h0, f, a, cyc);   // cached copy may be stale: fine
    @(negedge clk); inval_valid = 1; inval_cid = 3; inval_index = 7;
    @(negedge clk); inval_valid = 0;
    access(ACC_LOAD, 7, 48'h123, f, a, cyc);
    expect_("invalidated entry refetched", f == FAULT_NONE && a == ({e.vbuid, 12'd0} | 64'h123));
    // invalidation for another client must not matter; size update grows the CVT
    access(ACC_LOAD, 95, 48'h0, f, a, cyc);
    expect_("index beyond size", f == FAULT_INDEX);
    @(negedge clk); upd_valid = 1; upd_cid = 3; upd_size = 100;
    @(negedge clk); upd_valid = 0;
    ref_size[0] = 100;
    access(ACC_LOAD, 95, 48'h0, f, a, cyc);
    fm = model(0, 95, ACC_LOAD, 48'h0, am);
    expect_("size update", f == fm && (f != FAULT_NONE || a == am));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
