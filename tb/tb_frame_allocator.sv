// tb_frame_allocator: exercises every allocator operation on a 256-frame
// memory and checks results against a reference frame table: three-level
// ALLOC priority, aligned RESERVE runs, ALLOC_AT inside and outside a
// reservation, QUERY, FREE_VB, exhaustion, and the free-frame count. Also
// checks that ALLOC takes no more than one cycle per frame.
module tb_frame_allocator;
  import vbi_pkg::*;
  localparam int N = 256, RES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, done, ok;
  fa_op_e req_op;
  logic [VBUID_W-1:0] req_vbuid;
  logic [7:0] req_frame, frame;
  logic [5:0] req_log2n;
  logic [8:0] free_frames;
  int checks = 0, failures = 0;

  frame_allocator #(.NUM_FRAMES(N), .RESERVED_FRAMES(RES)) dut (.*);

  // reference table
  bit               ra [N];
  bit               rr [N];
  logic [51:0]      ro [N];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic op(input fa_op_e o, input logic [51:0] vb, input int f, input int k,
                    output bit rok, output int rf, output int cycles);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_op = o; req_vbuid = vb; req_frame = 8'(f); req_log2n = 6'(k);
    @(negedge clk);
    req_valid = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    rok = ok; rf = int'(frame);
  endtask

  task automatic expect_(input string what, input bit c);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic int ref_free();
    int c = 0;
    for (int i = 0; i < N; i++) if (!ra[i]) c++;
    return c;
  endfunction

  // reference choice for ALLOC
  function automatic int ref_alloc(input logic [51:0] vb);
    for (int i = 0; i < N; i++) if (!ra[i] && rr[i] && ro[i] == vb) return i;
    for (int i = 0; i < N; i++) if (!ra[i] && !rr[i]) return i;
    for (int i = 0; i < N; i++) if (!ra[i] && rr[i]) return i;
    return -1;
  endfunction

  function automatic int ref_reserve(input int k);
    int b = 1 << k;
    for (int s = 0; s + b <= N; s += b) begin
      bit all = 1;
      for (int j = s; j < s + b; j++) if (ra[j] || rr[j]) all = 0;
      if (all) return s;
    end
    return -1;
  endfunction

  initial begin
    bit rok; int rf, cyc, e;
    logic [51:0] A, B, C;
    A = 52'h1; B = 52'h2; C = 52'h3;
    req_valid = 0; req_op = FA_ALLOC; req_vbuid = '0; req_frame = '0; req_log2n = '0;
    for (int i = 0; i < N; i++) begin ra[i] = (i < RES); rr[i] = 0; ro[i] = (i < RES) ? '1 : '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // plain allocation
    op(FA_ALLOC, A, 0, 0, rok, rf, cyc);
    expect_("first alloc is frame RES", rok && rf == RES);
    expect_("alloc takes at most N+2 cycles", cyc <= N + 2);
    ra[rf] = 1; ro[rf] = A;
    // reserve 16 frames for B (aligned)
    e = ref_reserve(4);
    op(FA_RESERVE, B, 0, 4, rok, rf, cyc);
    expect_("reserve 16 aligned", rok && rf == e && (rf % 16) == 0);
    for (int j = e; j < e + 16; j++) begin rr[j] = 1; ro[j] = B; end
    // B allocates: must come from its own reservation
    op(FA_ALLOC, B, 0, 0, rok, rf, cyc);
    expect_("priority 1: own reservation", rok && rf == ref_alloc(B) && rf >= e && rf < e + 16);
    ra[rf] = 1; rr[rf] = 0; ro[rf] = B;
    // A allocates: unreserved, not B's
    e = ref_alloc(A);
    op(FA_ALLOC, A, 0, 0, rok, rf, cyc);
    expect_("priority 2: unreserved", rok && rf == e);
    ra[rf] = 1; ro[rf] = A;
    // ALLOC_AT inside B's run by C must fail, by B must succeed
    op(FA_ALLOC_AT, C, 0, 0, rok, rf, cyc);
    expect_("alloc_at on a system frame fails", !rok);
    begin
      int t = -1;
      for (int i = 0; i < N; i++) if (t < 0 && !ra[i] && rr[i] && ro[i] == B) t = i;
      op(FA_ALLOC_AT, C, t, 0, rok, rf, cyc);
      expect_("alloc_at in another VB's reservation fails", !rok);
      op(FA_ALLOC_AT, B, t, 0, rok, rf, cyc);
      expect_("alloc_at in own reservation", rok && rf == t);
      ra[t] = 1; rr[t] = 0; ro[t] = B;
      op(FA_QUERY, B, t, 0, rok, rf, cyc);
      expect_("query own frame", rok);
      op(FA_QUERY, A, t, 0, rok, rf, cyc);
      expect_("query other's frame", !rok);
      expect_("query takes 1-2 cycles", cyc <= 2);
    end
    expect_("free count", int'(free_frames) == ref_free());
    // fill all unreserved frames with C, then C must steal B's reservation
    forever begin
      e = ref_alloc(C);
      if (e < 0 || rr[e]) break;
      op(FA_ALLOC, C, 0, 0, rok, rf, cyc);
      expect_("fill", rok && rf == e);
      ra[rf] = 1; ro[rf] = C;
    end
    e = ref_alloc(C);
    op(FA_ALLOC, C, 0, 0, rok, rf, cyc);
    expect_("priority 3: steal a reserved frame", rok && rf == e && e >= 0);
    if (e >= 0) begin ra[e] = 1; rr[e] = 0; ro[e] = C; end
    op(FA_RESERVE, A, 0, 1, rok, rf, cyc);
    expect_("reserve fails when memory is full", !rok);
    // exhaust
    while (ref_alloc(C) >= 0) begin
      e = ref_alloc(C);
      op(FA_ALLOC, C, 0, 0, rok, rf, cyc);
      ra[e] = 1; rr[e] = 0; ro[e] = C;
    end
    op(FA_ALLOC, A, 0, 0, rok, rf, cyc);
    expect_("out of memory", !rok);
    expect_("free count zero", free_frames == 0);
    // free C, then reserve a 64-frame run
    op(FA_FREE_VB, C, 0, 0, rok, rf, cyc);
    for (int i = 0; i < N; i++) if (ro[i] == C) begin ra[i] = 0; rr[i] = 0; ro[i] = '0; end
    expect_("free count after free_vb", int'(free_frames) == ref_free());
    e = ref_reserve(6);
    op(FA_RESERVE, A, 0, 6, rok, rf, cyc);
    expect_("reserve 64 after free", (e >= 0) == rok && (!rok || rf == e));
    op(FA_RESERVE, A, 0, 9, rok, rf, cyc);
    expect_("reserve larger than memory fails", !rok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
