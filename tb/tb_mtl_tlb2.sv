// tb_mtl_tlb2: the MTL's second-level TLB (512 entries, 4-way) against a
// reference model of the same organisation written from its description:
// set = (page number XOR VBID) mod 128, fill the first invalid way, else the
// way a per-set round-robin pointer names. Random inserts and lookups over
// a few VBs, with pages chosen so that sets overflow, check every hit, miss
// and returned frame; the lookup answer must come exactly one cycle after
// the request. A per-VB invalidation sweep must remove exactly that VB's
// entries and finish within the number of sets plus two cycles.
module tb_mtl_tlb2;
  import vbi_pkg::*;
  localparam int ENTRIES = 512, WAYS = 4, SETS = ENTRIES / WAYS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lk_valid, lk_hit, ins_valid, inval_start, inval_busy;
  logic [VBUID_W-1:0] lk_vbuid, ins_vbuid, inval_vbuid;
  logic [VA_W-1:0] lk_offset, ins_offset;
  logic [PA_W-1:0] lk_pa, ins_pa;
  int checks = 0, failures = 0;

  mtl_tlb2 dut (.*);

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

  // model
  bit                 m_v  [SETS][WAYS];
  logic [VBUID_W-1:0] m_u  [SETS][WAYS];
  logic [35:0]        m_p  [SETS][WAYS];
  logic [19:0]        m_f  [SETS][WAYS];
  int                 m_rr [SETS];

  logic [VBUID_W-1:0] vbs [4];

  function automatic int mset(input logic [VBUID_W-1:0] u, input logic [63:0] off);
    logic [63:0] a; int sid;
    sid = int'(u[51:49]);
    a = {u, 12'd0}; a[63:61] = 0;
    a = a >> (12 + 5 * sid);
    return int'(((off >> 12) ^ a) % SETS);
  endfunction

  task automatic lookup(input logic [VBUID_W-1:0] u, input logic [63:0] off);
    int s; bit hit; logic [19:0] f;
    s = mset(u, off); hit = 0; f = 0;
    for (int w = 0; w < WAYS; w++)
      if (m_v[s][w] && m_u[s][w] == u && m_p[s][w] == 36'(off >> 12)) begin hit = 1; f = m_f[s][w]; end
    @(negedge clk);
    lk_valid = 1; lk_vbuid = u; lk_offset = off;
    @(negedge clk);
    lk_valid = 0;
    expect_("hit/miss one cycle after the request", lk_hit == hit);
    if (hit) expect_("frame", lk_pa == {f, 12'd0});
  endtask

  task automatic insert(input logic [VBUID_W-1:0] u, input logic [63:0] off, input logic [19:0] f);
    int s, w;
    s = mset(u, off); w = -1;
    for (int k = WAYS - 1; k >= 0; k--) if (!m_v[s][k]) w = k;
    if (w < 0) begin w = m_rr[s]; m_rr[s] = (m_rr[s] + 1) % WAYS; end
    m_v[s][w] = 1; m_u[s][w] = u; m_p[s][w] = 36'(off >> 12); m_f[s][w] = f;
    @(negedge clk);
    ins_valid = 1; ins_vbuid = u; ins_offset = off; ins_pa = {f, 12'd0};
    @(negedge clk);
    ins_valid = 0;
  endtask

  function automatic logic [63:0] pick_off(input int v);
    // pages spread so that sets see more than four mappings
    return 64'(($urandom % 700) << 12) | 64'($urandom % 4096);
  endfunction

  initial begin
    int n_hit = 0, n_miss = 0, cyc;
    logic [VBUID_W-1:0] u; logic [63:0] off;
    lk_valid = 0; ins_valid = 0; inval_start = 0;
    lk_vbuid = 0; lk_offset = 0; ins_vbuid = 0; ins_offset = 0; ins_pa = 0; inval_vbuid = 0;
    for (int s = 0; s < SETS; s++) begin
      m_rr[s] = 0;
      for (int w = 0; w < WAYS; w++) begin m_v[s][w] = 0; m_u[s][w] = 0; m_p[s][w] = 0; m_f[s][w] = 0; end
    end
    vbs[0] = {3'd3, 49'(5) << 20};      // 128 MB VBs and larger
    vbs[1] = {3'd3, 49'(6) << 20};
    vbs[2] = {3'd4, 49'(1) << 25};
    vbs[3] = {3'd5, 49'(2) << 30};
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      u = vbs[$urandom % 4]; off = pick_off(0);
      if ($urandom % 2) insert(u, off, 20'($urandom));
      else begin
        lookup(u, off);
        if (lk_hit) n_hit++; else n_miss++;
      end
    end
    expect_("hits and misses both seen", n_hit > 50 && n_miss > 50);
    // invalidate VB 1
    @(negedge clk);
    inval_start = 1; inval_vbuid = vbs[1];
    @(negedge clk);
    inval_start = 0; cyc = 1;
    while (inval_busy) begin @(negedge clk); cyc++; end
    expect_("sweep time", cyc <= SETS + 2);
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++)
        if (m_u[s][w] == vbs[1]) m_v[s][w] = 0;
    // every model entry must now hit, none of VB 1
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++)
        if (m_v[s][w] || m_u[s][w] == vbs[1])
          lookup(m_u[s][w], {28'd0, m_p[s][w]} << 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
