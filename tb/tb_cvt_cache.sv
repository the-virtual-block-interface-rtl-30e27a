// tb_cvt_cache: fills, lookups, conflicting indices, invalidation and flush
// of the direct-mapped CVT cache, checked against a reference array of what
// each slot should hold.
module tb_cvt_cache;
  import vbi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [CVT_IDX_W-1:0] lk_index, fill_index, inval_index;
  logic lk_hit, fill_valid, inval_valid, flush;
  cvt_entry_t lk_entry, fill_entry;
  int checks = 0, failures = 0;

  cvt_cache #(.ENTRIES(64)) dut (.*);

  // reference: per slot, valid + full index + entry
  logic             ref_v [64];
  logic [15:0]      ref_i [64];
  cvt_entry_t       ref_e [64];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_lookup(input logic [15:0] idx);
    logic exp_hit;
    lk_index = idx;
    #1;
    exp_hit = ref_v[idx[5:0]] && ref_i[idx[5:0]] == idx;
    checks++;
    if (lk_hit !== exp_hit || (exp_hit && lk_entry !== ref_e[idx[5:0]])) begin
      failures++;
      if (failures < 10) $display("lookup %h: hit %b exp %b", idx, lk_hit, exp_hit);
    end
  endtask

  initial begin
    fill_valid = 0; inval_valid = 0; flush = 0; lk_index = 0; fill_index = 0; inval_index = 0;
    fill_entry = '0;
    for (int i = 0; i < 64; i++) ref_v[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int op;
      logic [15:0] idx;
      op  = $urandom_range(0, 9);
      idx = 16'($urandom_range(0, 255));   // few tags: many conflicts and hits
      @(negedge clk);
      if (op < 4) begin
        fill_valid = 1; fill_index = idx;
        fill_entry = cvt_entry_t'({$urandom, $urandom});
        @(posedge clk); #1;
        fill_valid = 0;
        ref_v[idx[5:0]] = 1; ref_i[idx[5:0]] = idx; ref_e[idx[5:0]] = fill_entry;
      end else if (op == 4) begin
        inval_valid = 1; inval_index = idx;
        @(posedge clk); #1;
        inval_valid = 0;
        if (ref_i[idx[5:0]] == idx) ref_v[idx[5:0]] = 0;
      end else if (op == 5 && $urandom_range(0, 20) == 0) begin
        flush = 1;
        @(posedge clk); #1;
        flush = 0;
        for (int i = 0; i < 64; i++) ref_v[i] = 0;
      end else begin
        check_lookup(idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
