// tb_mtl_tlb: inserts 4 KB mappings and whole-VB (direct) mappings, looks up
// offsets inside and outside them, evicts with more than 64 insertions and
// invalidates whole VBs. The reference keeps the 64 most recent insertions
// in order (round-robin replacement).
module tb_mtl_tlb;
  import vbi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [VBUID_W-1:0] lk_vbuid, ins_vbuid, inval_vbuid;
  logic [VA_W-1:0]    lk_offset, ins_offset;
  logic               lk_hit, lk_direct, ins_valid, inval_valid;
  logic [PA_W-1:0]    lk_pa, ins_base;
  logic [5:0]         ins_bits;
  int checks = 0, failures = 0;

  mtl_tlb #(.ENTRIES(64)) dut (.*);

  typedef struct {bit v; logic [51:0] vb; logic [63:0] reg_; int bits; logic [31:0] base;} ref_t;
  ref_t rf [64];
  int   vict = 0;

  function automatic logic [51:0] mkvb(input int sid, input int id);
    logic [63:0] a;
    a = 64'(id) << (12 + 5 * sid);
    a[63:61] = 3'(sid);
    return a[63:12];
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ins_valid = 0; inval_valid = 0; lk_vbuid = '0; lk_offset = '0; ins_vbuid = '0;
    ins_offset = '0; ins_bits = 6'd12; ins_base = '0; inval_vbuid = '0;
    for (int i = 0; i < 64; i++) rf[i].v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      int sid, id, op, ob;
      logic [51:0] vb;
      logic [63:0] off;
      sid = $urandom_range(1, 4);
      id  = $urandom_range(0, 3);
      ob  = 12 + 5 * sid;
      vb  = mkvb(sid, id);
      off = 64'($urandom_range(0, 31)) << 12 | 64'($urandom_range(0, 4095));
      off = off & ((64'd1 << ob) - 1);
      op  = $urandom_range(0, 9);
      @(negedge clk);
      if (op < 3) begin
        // insert only if not already covered
        bit covered;
        covered = 0;
        for (int i = 0; i < 64; i++)
          if (rf[i].v && rf[i].vb == vb && ((off >> rf[i].bits) << rf[i].bits) == rf[i].reg_) covered = 1;
        if (!covered) begin
          int b;
          b = (op == 0) ? ob : 12;
          ins_valid = 1; ins_vbuid = vb; ins_offset = off; ins_bits = 6'(b);
          ins_base  = 32'($urandom_range(0, 4095)) << b % 32;
          ins_base  = (b > 20) ? 32'h0040_0000 : {$urandom_range(0, 1023), 12'd0};
          @(posedge clk); #1; ins_valid = 0;
          rf[vict] = '{1, vb, (off >> b) << b, b, ins_base};
          vict = (vict + 1) % 64;
        end
      end else if (op == 3) begin
        inval_valid = 1; inval_vbuid = vb;
        @(posedge clk); #1; inval_valid = 0;
        for (int i = 0; i < 64; i++) if (rf[i].vb == vb) rf[i].v = 0;
      end else begin
        bit eh; logic [31:0] epa; bit ed;
        eh = 0; epa = '0; ed = 0;
        lk_vbuid = vb; lk_offset = off; #1;
        for (int i = 0; i < 64; i++)
          if (!eh && rf[i].v && rf[i].vb == vb && ((off >> rf[i].bits) << rf[i].bits) == rf[i].reg_) begin
            eh = 1; epa = rf[i].base + 32'(off & ((64'd1 << rf[i].bits) - 1)); ed = rf[i].bits > 12;
          end
        checks++;
        if (lk_hit !== eh || (eh && (lk_pa !== epa || lk_direct !== ed))) begin
          failures++;
          if (failures < 10) $display("lookup vb=%h off=%h hit %b/%b pa %h/%h", vb, off, lk_hit, eh, lk_pa, epa);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
