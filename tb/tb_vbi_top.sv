// tb_vbi_top: end-to-end test of the whole VBI hardware at its default
// sizes (4096 frames of 4 KB, 64-entry CVT cache, 64-entry first-level TLB,
// 512-entry 4-way second-level TLB, 32-entry VIT cache), with a behavioural
// memory behind it.
//
// The testbench plays three outside parts: the OS (enable_vb, attach,
// detach, disable_vb, client switches), the core (loads, stores and
// instruction fetches by {CVT index, offset}) and the cache hierarchy, here
// reduced to nothing: every load reads its line through the LLC port and
// every store reads the line, changes one word and writes it back, so each
// access reaches the MTL. A reference model keeps every client's CVT and the
// contents of every VB by VBI address and predicts each fault and each
// value read.
//
// Scenario: three clients, eight VBs of five size classes (one shared by
// two clients, one never enabled), a long run of random accesses with
// client switches and extra attach/detach in between, then every VB is
// detached and disabled when its reference count reaches zero, after which
// every frame must be free again. Each mechanism is counted and a mechanism
// that never happened counts as a failure.
module tb_vbi_top;
  import vbi_pkg::*;
  localparam int NCLI = 3, NVB = 8, CAP = 16, LAT = 4;
  localparam logic [PA_W-1:0] CTB = 32'h0000_1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PA_W-1:0] client_tbl_base;
  logic [PA_W-1:0] vit_base [NUM_CLASSES];
  logic os_valid, os_ready, os_done, os_err;
  os_op_e os_op;
  logic [CID_W-1:0] os_cid;
  logic [VBUID_W-1:0] os_vbuid;
  logic [2:0] os_rwx;
  logic [PROPS_W-1:0] os_props;
  logic [CVT_IDX_W-1:0] os_index;
  logic [REFCNT_W-1:0] os_refcnt;
  logic cpu_req_valid, cpu_req_ready, cpu_rsp_valid;
  acc_e cpu_req_acc;
  logic [VA_W-1:0] cpu_req_va, cpu_rsp_vbi_addr;
  fault_e cpu_rsp_fault;
  logic llc_req_valid, llc_req_ready, llc_req_we, llc_rsp_valid, llc_rsp_err, llc_rsp_zero;
  logic [VA_W-1:0] llc_req_addr;
  logic [LINE_W-1:0] llc_req_wdata, llc_rsp_rdata;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  logic [LINE_W-1:0] mem_rsp_rdata;
  logic [31:0] stat_cvt_hits, stat_cvt_misses, stat_tlb_hits, stat_tlb_misses, stat_tlb2_hits, stat_vit_misses,
               stat_zero_lines, stat_direct_vbs, stat_table_reads, n_reads, n_writes;
  logic [12:0] free_frames;
  int checks = 0, failures = 0;

  vbi_top dut (.*);
  mem_model #(.LINES(4096 * 64), .LATENCY(LAT)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata), .n_reads, .n_writes);

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(input string what, input bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- reference model ----------------
  logic [VBUID_W-1:0] vbs [NVB];
  bit                 vb_en [NVB];
  int                 vb_rc [NVB];
  int                 cvt_vb [NCLI][CAP];     // -1 = invalid entry
  logic [2:0]         cvt_rwx [NCLI][CAP];
  int                 cvt_size [NCLI];
  logic [63:0]        data [logic [63:0]];    // VBI word address -> value
  int                 cur;

  // mechanism counters
  int n_fault [4];
  int n_zero_line, n_shared_read, n_switch, n_attach, n_detach, n_attach_refused,
      n_enable, n_disable, n_data_match;

  function automatic logic [VBUID_W-1:0] mkvb(input int sid, input int id);
    logic [63:0] a;
    a = 64'(id) << offset_bits(3'(sid));
    a[63:61] = 3'(sid);
    return a[63:12];
  endfunction

  // ---------------- OS / core / LLC drivers ----------------
  task automatic os(input os_op_e op, input int cid, input logic [VBUID_W-1:0] u,
                    input logic [2:0] rwx, output bit e, output int idx, output int rc);
    @(negedge clk);
    while (!os_ready) @(negedge clk);
    os_valid = 1; os_op = op; os_cid = CID_W'(cid); os_vbuid = u; os_rwx = rwx; os_props = 16'h1;
    @(negedge clk); os_valid = 0;
    while (!os_done) @(negedge clk);
    e = os_err; idx = int'(os_index); rc = int'(os_refcnt);
  endtask

  task automatic llc(input bit we, input logic [63:0] a, input logic [LINE_W-1:0] d,
                     output logic [LINE_W-1:0] q, output bit e, output bit z);
    @(negedge clk);
    llc_req_valid = 1; llc_req_we = we; llc_req_addr = a; llc_req_wdata = d;
    while (!llc_req_ready) @(negedge clk);
    @(negedge clk); llc_req_valid = 0;
    while (!llc_rsp_valid) @(negedge clk);
    q = llc_rsp_rdata; e = llc_rsp_err; z = llc_rsp_zero;
  endtask

  task automatic core(input acc_e acc, input int idx, input logic [47:0] off,
                      output fault_e f, output logic [63:0] a);
    @(negedge clk);
    while (!cpu_req_ready) @(negedge clk);
    cpu_req_valid = 1; cpu_req_acc = acc; cpu_req_va = {16'(idx), off};
    @(negedge clk); cpu_req_valid = 0;
    while (!cpu_rsp_valid) @(negedge clk);
    f = cpu_rsp_fault; a = cpu_rsp_vbi_addr;
  endtask

  task automatic do_attach(input int c, input int v, input logic [2:0] rwx);
    bit e; int idx, rc, exp_idx;
    exp_idx = -1;
    for (int k = cvt_size[c] - 1; k >= 0; k--) if (cvt_vb[c][k] < 0) exp_idx = k;
    if (exp_idx < 0 && cvt_size[c] < CAP) exp_idx = cvt_size[c];
    os(OS_ATTACH, c, vbs[v], rwx, e, idx, rc);
    if (!vb_en[v] || exp_idx < 0) begin
      expect_("attach refused", e);
      n_attach_refused++;
    end else begin
      vb_rc[v]++;
      expect_("attach index and refcount", !e && idx == exp_idx && rc == vb_rc[v]);
      cvt_vb[c][idx] = v; cvt_rwx[c][idx] = rwx;
      if (idx == cvt_size[c]) cvt_size[c]++;
      n_attach++;
    end
  endtask

  task automatic do_detach(input int c, input int v);
    bit e; int idx, rc, exp_idx;
    exp_idx = -1;
    for (int k = cvt_size[c] - 1; k >= 0; k--) if (cvt_vb[c][k] == v) exp_idx = k;
    os(OS_DETACH, c, vbs[v], 0, e, idx, rc);
    if (exp_idx < 0) expect_("detach of unattached VB refused", e);
    else begin
      vb_rc[v]--;
      expect_("detach index and refcount", !e && idx == exp_idx && rc == vb_rc[v]);
      cvt_vb[c][exp_idx] = -1;
      n_detach++;
      if (rc == 0) begin
        os(OS_DISABLE_VB, 0, vbs[v], 0, e, idx, rc);
        expect_("disable_vb at refcount zero", !e);
        vb_en[v] = 0; n_disable++;
        foreach (data[k]) if (vbuid_of(k) == vbs[v]) data.delete(k);
      end
    end
  endtask

  task automatic switch_to(input int c);
    bit e; int idx, rc;
    os(OS_SET_CLIENT, c, '0, 0, e, idx, rc);
    expect_("client switch", !e);
    cur = c; n_switch++;
  endtask

  // one core access, checked against the model, and its line traffic
  task automatic access(input acc_e acc, input int idx, input logic [47:0] off);
    fault_e f, fm; logic [63:0] a, am, wa, w;
    logic [LINE_W-1:0] q; bit e, z;
    int v; logic [2:0] rwx;
    core(acc, idx, off, f, a);
    fm = FAULT_NONE; am = '0;
    if (idx >= cvt_size[cur] || cvt_vb[cur][idx] < 0) fm = FAULT_INDEX;
    else begin
      v = cvt_vb[cur][idx]; rwx = cvt_rwx[cur][idx];
      if ((acc == ACC_LOAD && !rwx[PERM_R]) || (acc == ACC_STORE && !rwx[PERM_W]) ||
          (acc == ACC_FETCH && !rwx[PERM_X])) fm = FAULT_PERM;
      else if (64'(off) >= (64'd1 << offset_bits(vbs[v][51:49]))) fm = FAULT_RANGE;
      else am = {vbs[v], 12'd0} | 64'(off);
    end
    n_fault[int'(fm)]++;
    expect_("fault code", f == fm);
    if (fm != FAULT_NONE) return;
    expect_("VBI address", a == am);
    wa = {a[63:3], 3'b000};
    llc(0, {a[63:6], 6'd0}, '0, q, e, z);
    expect_("LLC read accepted", !e);
    if (z) n_zero_line++;
    for (int k = 0; k < 8; k++) begin
      logic [63:0] ka; ka = {a[63:6], 3'(k), 3'd0};
      expect_("line contents", q[64*k +: 64] == (data.exists(ka) ? data[ka] : 64'd0));
    end
    if (data.exists(wa)) begin
      n_data_match++;
      // was this word last written by another client? (shared VB)
      if (vbuid_of(wa) == vbs[0] && acc != ACC_STORE) n_shared_read++;
    end
    if (acc == ACC_STORE) begin
      w = {$urandom, $urandom};
      q[64*int'(a[5:3]) +: 64] = w;
      llc(1, {a[63:6], 6'd0}, q, q, e, z);
      expect_("writeback accepted", !e);
      data[wa] = w;
    end
  endtask

  initial begin
    bit e; int idx, rc, ff0, c, v, slot;
    logic [47:0] off;
    client_tbl_base = CTB;
    for (int s = 0; s < 8; s++) vit_base[s] = 32'h0001_0000 + 32'(s) * 32'h4000;
    os_valid = 0; os_op = OS_ENABLE_VB; os_cid = 0; os_vbuid = 0; os_rwx = 0; os_props = 0;
    cpu_req_valid = 0; cpu_req_acc = ACC_LOAD; cpu_req_va = 0;
    llc_req_valid = 0; llc_req_we = 0; llc_req_addr = 0; llc_req_wdata = 0;
    for (int k = 0; k < 4; k++) n_fault[k] = 0;
    n_zero_line = 0; n_shared_read = 0; n_switch = 0; n_attach = 0; n_detach = 0;
    n_attach_refused = 0; n_enable = 0; n_disable = 0; n_data_match = 0;
    // client descriptors: CVTs at 0x40000 + cid * 0x1000, empty
    for (int k = 0; k < NCLI; k++) begin
      u_mem.mem_write_word(CTB + 32'(k) * 16, 64'(32'h0004_0000 + 32'(k) * 32'h1000));
      u_mem.mem_write_word(CTB + 32'(k) * 16 + 8, {32'(CAP), 32'd0});
      cvt_size[k] = 0;
      for (int j = 0; j < CAP; j++) cvt_vb[k][j] = -1;
    end
    // VB 0: 128 KB, shared by clients 0 and 1
    vbs[0] = mkvb(1, 9);   vbs[1] = mkvb(0, 17);  vbs[2] = mkvb(2, 3);
    vbs[3] = mkvb(3, 1);   vbs[4] = mkvb(4, 2);   vbs[5] = mkvb(5, 6);
    vbs[6] = mkvb(1, 40);  vbs[7] = mkvb(2, 77);  // VB 7 is never enabled
    for (int k = 0; k < NVB; k++) begin vb_en[k] = 0; vb_rc[k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (4200) @(posedge clk);
    ff0 = int'(free_frames);
    expect_("free frames after reset", ff0 == 4096 - 128);

    for (int k = 0; k < NVB - 1; k++) begin
      os(OS_ENABLE_VB, 0, vbs[k], 0, e, idx, rc);
      expect_("enable_vb", !e);
      vb_en[k] = 1; n_enable++;
    end
    os(OS_ENABLE_VB, 0, vbs[2], 0, e, idx, rc);
    expect_("second enable_vb refused", e);
    // client 0: VBs 0..5, client 1: VB 0 (read only) and 6, client 2: VB 3, 4
    do_attach(0, 0, 3'b110); do_attach(0, 1, 3'b101); do_attach(0, 2, 3'b110);
    do_attach(0, 3, 3'b110); do_attach(0, 4, 3'b110); do_attach(0, 5, 3'b111);
    do_attach(0, 7, 3'b110);                          // not enabled: refused
    do_attach(1, 0, 3'b100); do_attach(1, 6, 3'b111);
    do_attach(2, 3, 3'b110); do_attach(2, 4, 3'b010);
    switch_to(0);

    for (int n = 0; n < 4000; n++) begin
      int r; acc_e acc;
      r = int'($urandom % 100);
      if (r < 2) begin
        switch_to(int'($urandom % NCLI));
      end else if (r < 3) begin
        c = int'($urandom % NCLI); v = int'($urandom % NVB);
        if ($urandom % 2 && vb_en[v]) do_attach(c, v, 3'($urandom));
        else if (v != 0 || c == 2) do_detach(c, v);
      end else begin
        idx = ($urandom % 6 == 0 || cvt_size[cur] == 0) ? int'($urandom % (CAP + 2))
                                                      : int'($urandom % 32'(cvt_size[cur]));
        acc = acc_e'($urandom % 3);
        if (idx < CAP && cvt_vb[cur][idx] >= 0) begin
          v = cvt_vb[cur][idx];
          // a few hot pages per VB, a few lines per page
          slot = int'($urandom % 24);
          off = 48'((64'(slot) * 64'h2_3000 + 64'($urandom % 8) * 64) &
                    ((64'd1 << offset_bits(vbs[v][51:49])) - 1));
          if ($urandom % 20 == 0) off = 48'(64'd1 << offset_bits(vbs[v][51:49])) + 48'($urandom % 4096);
        end else off = 48'($urandom % 4096);
        access(acc, idx, off);
      end
    end

    // teardown: detach everything, disable at refcount zero
    for (int k = 0; k < NCLI; k++)
      for (int j = 0; j < CAP; j++)
        if (cvt_vb[k][j] >= 0) do_detach(k, cvt_vb[k][j]);
    for (int k = 0; k < NVB; k++)
      if (vb_en[k]) begin
        os(OS_DISABLE_VB, 0, vbs[k], 0, e, idx, rc);
        expect_("disable_vb of an enabled, unattached VB", !e);
        vb_en[k] = 0; n_disable++;
      end
    expect_("every frame free again", int'(free_frames) == ff0);
    os(OS_DISABLE_VB, 0, vbs[7], 0, e, idx, rc);
    expect_("disable of a VB never enabled refused", e);
    switch_to(0);
    access(ACC_LOAD, 0, 48'h0);

    $display("mechanisms: cvt_hit=%0d cvt_miss=%0d fault_index=%0d fault_perm=%0d fault_range=%0d",
             stat_cvt_hits, stat_cvt_misses, n_fault[1], n_fault[2], n_fault[3]);
    $display("  zero_line=%0d data_match=%0d shared_read=%0d tlb_hit=%0d tlb_miss=%0d tlb2_hit=%0d vit_miss=%0d",
             n_zero_line, n_data_match, n_shared_read, stat_tlb_hits, stat_tlb_misses, stat_tlb2_hits,
             stat_vit_misses);
    $display("  direct_vbs=%0d table_reads=%0d switch=%0d attach=%0d refused=%0d detach=%0d enable=%0d disable=%0d",
             stat_direct_vbs, stat_table_reads, n_switch, n_attach, n_attach_refused, n_detach,
             n_enable, n_disable);
    expect_("mechanism: CVT cache hit", stat_cvt_hits > 0);
    expect_("mechanism: CVT cache miss", stat_cvt_misses > 0);
    expect_("mechanism: index fault", n_fault[1] > 0);
    expect_("mechanism: permission fault", n_fault[2] > 0);
    expect_("mechanism: range fault", n_fault[3] > 0);
    expect_("mechanism: zero line (delayed allocation)", n_zero_line > 0 && stat_zero_lines > 0);
    expect_("mechanism: data read back", n_data_match > 0);
    expect_("mechanism: read of shared VB", n_shared_read > 0);
    expect_("mechanism: TLB hit", stat_tlb_hits > 0);
    expect_("mechanism: TLB miss", stat_tlb_misses > 0);
    expect_("mechanism: second-level TLB hit", stat_tlb2_hits > 0);
    expect_("mechanism: VIT cache miss", stat_vit_misses > 0);
    expect_("mechanism: direct mapping by early reservation", stat_direct_vbs > 0);
    expect_("mechanism: table walk", stat_table_reads > 0);
    expect_("mechanism: client switch", n_switch > 1);
    expect_("mechanism: attach / refused attach / detach", n_attach > 0 && n_attach_refused > 0 && n_detach > 0);
    expect_("mechanism: enable / disable", n_enable > 0 && n_disable > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
