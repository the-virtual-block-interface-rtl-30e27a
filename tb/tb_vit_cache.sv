// tb_vit_cache: writes, lookups and invalidations of VIT entries for VBs of
// every size class, checked against a reference map from VBUID to entry
// that also accounts for slot conflicts (a newer write evicts).
module tb_vit_cache;
  import vbi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [VBUID_W-1:0] lk_vbuid, wr_vbuid, inval_vbuid;
  logic lk_hit, wr_valid, inval_valid;
  vit_entry_t lk_entry, wr_entry;
  int checks = 0, failures = 0;

  vit_cache #(.ENTRIES(32)) dut (.*);

  // candidate VBs: 4 size classes x 24 VBIDs
  logic [VBUID_W-1:0] vbs [96];
  // reference: slot -> (valid, vbuid, entry); slot computed independently
  logic               rv [32];
  logic [VBUID_W-1:0] ru [32];
  vit_entry_t         re [32];

  function automatic int slot(input int sid, input int vbid);
    return (vbid ^ sid) & 31;
  endfunction
  int sid_of [96];
  int id_of  [96];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 96; k++) begin
      logic [63:0] a;
      sid_of[k] = (k / 24) * 2;          // classes 0, 2, 4, 6
      id_of[k]  = k % 24 + (k / 48) * 7;
      a = (64'(id_of[k]) << (12 + 5 * sid_of[k]));
      a[63:61] = 3'(sid_of[k]);
      vbs[k] = a[63:12];
    end
    for (int i = 0; i < 32; i++) rv[i] = 0;
    wr_valid = 0; inval_valid = 0; lk_vbuid = '0; wr_vbuid = '0; inval_vbuid = '0; wr_entry = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int k, s, op;
      k  = $urandom_range(0, 95);
      s  = slot(sid_of[k], id_of[k]);
      op = $urandom_range(0, 5);
      @(negedge clk);
      if (op < 2) begin
        wr_valid = 1; wr_vbuid = vbs[k];
        wr_entry = vit_entry_t'({$urandom, $urandom, $urandom, $urandom});
        @(posedge clk); #1; wr_valid = 0;
        rv[s] = 1; ru[s] = vbs[k]; re[s] = wr_entry;
      end else if (op == 2) begin
        inval_valid = 1; inval_vbuid = vbs[k];
        @(posedge clk); #1; inval_valid = 0;
        if (ru[s] == vbs[k]) rv[s] = 0;
      end else begin
        logic exp;
        lk_vbuid = vbs[k]; #1;
        exp = rv[s] && ru[s] == vbs[k];
        checks++;
        if (lk_hit !== exp || (exp && lk_entry !== re[s])) begin
          failures++;
          if (failures < 10) $display("lookup k=%0d hit %b exp %b", k, lk_hit, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
