// tb_cvt_manager: the attach/detach instruction engine with a behavioural
// memory holding a client's descriptor and CVT, and a small reference-count
// responder standing in for the MTL (VBs whose VBUID has bit 0 set are
// "not enabled" and refused). Checks that attach fills the first invalid
// entry, appends when there is none (and grows the CVT size in the
// descriptor), fails on a full CVT or a refused VB without changing
// memory, that detach clears the matching entry and fails when there is
// none, the reference counts returned, and the invalidate/update pulses.
module tb_cvt_manager;
  import vbi_pkg::*;
  localparam logic [PA_W-1:0] CTB = 32'h0000_0400, CVTB = 32'h0000_2000;
  localparam int CID = 2, CAP = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PA_W-1:0] client_tbl_base;
  logic op_valid, op_ready, op_attach, done, err;
  logic [CID_W-1:0] op_cid, upd_cid, inval_cid;
  logic [VBUID_W-1:0] op_vbuid, mtl_vbuid;
  logic [2:0] op_rwx;
  logic [CVT_IDX_W-1:0] index, inval_index;
  logic [REFCNT_W-1:0] refcnt, mtl_refcnt;
  logic mtl_valid, mtl_ready, mtl_done, mtl_err, upd_valid, inval_valid;
  mtl_op_e mtl_op;
  logic [31:0] upd_size;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  logic [LINE_W-1:0] mem_rsp_rdata;
  logic [31:0] n_reads, n_writes;
  int checks = 0, failures = 0;

  cvt_manager dut (.*);
  mem_model #(.LINES(1024), .LATENCY(2)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata), .n_reads, .n_writes);

  // reference-count responder
  int rc [logic [VBUID_W-1:0]];
  assign mtl_ready = 1'b1;
  always @(posedge clk) begin
    mtl_done <= 1'b0;
    if (mtl_valid) begin
      mtl_done <= 1'b1;
      if (mtl_vbuid[0]) begin
        mtl_err <= 1'b1; mtl_refcnt <= '0;
      end else begin
        if (!rc.exists(mtl_vbuid)) rc[mtl_vbuid] = 0;
        if (mtl_op == MTL_REF_INC) rc[mtl_vbuid] = rc[mtl_vbuid] + 1;
        else rc[mtl_vbuid] = rc[mtl_vbuid] - 1;
        mtl_err <= 1'b0; mtl_refcnt <= REFCNT_W'(rc[mtl_vbuid]);
      end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_(input string what, input bit c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int n_inval = 0, n_upd = 0;
  logic [CVT_IDX_W-1:0] last_inval;
  logic [31:0] last_upd;
  always @(posedge clk) begin
    if (inval_valid) begin n_inval++; last_inval = inval_index; end
    if (upd_valid) begin n_upd++; last_upd = upd_size; end
  end

  task automatic op(input bit att, input logic [VBUID_W-1:0] u, input logic [2:0] rwx,
                    output bit e, output int i, output int r);
    @(negedge clk);
    while (!op_ready) @(negedge clk);
    op_valid = 1; op_attach = att; op_cid = CID_W'(CID); op_vbuid = u; op_rwx = rwx;
    @(negedge clk); op_valid = 0;
    while (!done) @(negedge clk);
    e = err; i = int'(index); r = int'(refcnt);
  endtask

  function automatic logic [63:0] ent(input int i);
    return u_mem.mem_read_word(CVTB + 32'(i) * 8);
  endfunction
  function automatic int cvt_size();
    return int'(u_mem.mem_read_word(CTB + CID * 16 + 8) & 64'hFFFF_FFFF);
  endfunction

  function automatic logic [VBUID_W-1:0] vb(input int k);
    return VBUID_W'({3'd1, 49'(k) << 5});   // 128 KB class, bit 0 clear
  endfunction

  initial begin
    bit e; int i, r, ni, nu;
    cvt_entry_t x;
    mtl_done = 0; mtl_err = 0; mtl_refcnt = 0;
    client_tbl_base = CTB;
    op_valid = 0; op_attach = 0; op_cid = 0; op_vbuid = 0; op_rwx = 0;
    // CVT of 4 used entries: 0 valid, 1 invalid, 2 valid, 3 invalid
    u_mem.mem_write_word(CTB + CID * 16, 64'(CVTB));
    u_mem.mem_write_word(CTB + CID * 16 + 8, {32'(CAP), 32'd4});
    u_mem.mem_write_word(CVTB + 0, {1'b1, 3'b100, 8'd0, vb(100)});
    u_mem.mem_write_word(CVTB + 16, {1'b1, 3'b100, 8'd0, vb(101)});
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    ni = n_inval;
    op(1, vb(1), 3'b110, e, i, r);
    x = cvt_entry_t'(ent(1));
    expect_("attach fills first invalid entry", !e && i == 1 && r == 1);
    expect_("entry written", x.valid && x.rwx == 3'b110 && x.vbuid == vb(1));
    expect_("invalidate pulse for the entry", n_inval == ni + 1 && last_inval == 1);
    op(1, vb(1), 3'b100, e, i, r);
    expect_("second attach of the same VB: next slot, refcount 2", !e && i == 3 && r == 2);
    nu = n_upd;
    op(1, vb(2), 3'b111, e, i, r);
    expect_("append at the end", !e && i == 4 && cvt_size() == 5 && ent(4)[51:0] == vb(2));
    expect_("size update pulse", n_upd == nu + 1 && last_upd == 5);
    op(1, vb(3) | 1, 3'b111, e, i, r);
    expect_("attach of a VB the MTL refuses fails", e && cvt_size() == 5 && ent(5) == 0);
    for (int k = 5; k < CAP; k++) begin
      op(1, vb(10 + k), 3'b100, e, i, r);
      expect_("fill up", !e && i == k);
    end
    op(1, vb(50), 3'b100, e, i, r);
    expect_("attach to a full CVT fails", e && cvt_size() == CAP);
    expect_("refused attach left no reference", !rc.exists(vb(50)));

    op(0, vb(1), 0, e, i, r);
    expect_("detach finds the first matching entry", !e && i == 1 && r == 1 && !ent(1)[63]);
    expect_("other copy untouched", ent(3)[63]);
    op(0, vb(1), 0, e, i, r);
    expect_("detach second copy", !e && i == 3 && r == 0);
    op(0, vb(1), 0, e, i, r);
    expect_("detach of a VB not attached fails", e);
    op(1, vb(60), 3'b101, e, i, r);
    expect_("freed slot reused", !e && i == 1 && cvt_size() == CAP);
    // random attach / detach against a model
    begin
      logic [VBUID_W-1:0] m [CAP];
      bit mv [CAP];
      for (int k = 0; k < CAP; k++) begin
        x = cvt_entry_t'(ent(k)); m[k] = x.vbuid; mv[k] = x.valid;
      end
      for (int n = 0; n < 200; n++) begin
        logic [VBUID_W-1:0] u; int exp_i; bit att;
        u = vb(int'($urandom % 6) + 200);
        att = $urandom % 2;
        exp_i = -1;
        for (int k = CAP - 1; k >= 0; k--)
          if (att ? !mv[k] : (mv[k] && m[k] == u)) exp_i = k;
        op(att, u, 3'b100, e, i, r);
        expect_("random op", (exp_i < 0) ? e : (!e && i == exp_i && r == rc[u]));
        if (exp_i >= 0) begin mv[exp_i] = att; m[exp_i] = u; end
      end
      for (int k = 0; k < CAP; k++) begin
        x = cvt_entry_t'(ent(k));
        expect_("memory matches model", x.valid == mv[k] && (!mv[k] || x.vbuid == m[k]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
