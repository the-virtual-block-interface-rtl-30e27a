// tb_access_check: random CVT entries, access types and offsets against a
// reference model of the permission check, the bounds check and the VBI
// address (VBUID bits above the offset, offset below).
module tb_access_check;
  import vbi_pkg::*;
  cvt_entry_t        entry;
  acc_e              acc;
  logic [VOFF_W-1:0] offset;
  fault_e            fault;
  logic [VA_W-1:0]   vbi_addr;
  int checks = 0, failures = 0;

  access_check dut (.entry, .acc, .offset, .fault, .vbi_addr);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int unsigned sid, ob;
      logic [63:0] base, exp_addr;
      logic        pok;
      fault_e      exp_f;
      sid  = $urandom_range(0, 7);
      ob   = 12 + 5 * sid;
      base = {$urandom, $urandom};
      base[63:61] = 3'(sid);
      base = (base >> ob) << ob;                 // VB start
      entry       = '0;
      entry.valid = ($urandom_range(0, 9) != 0);
      entry.rwx   = 3'($urandom);
      entry.vbuid = base[63:12];
      acc         = acc_e'($urandom_range(0, 2));
      // offsets inside and just outside the VB
      case ($urandom_range(0, 3))
        0: offset = VOFF_W'(({$urandom, $urandom}) & ((64'd1 << ob) - 1));
        1: offset = VOFF_W'((64'd1 << ob) - 1);
        2: offset = VOFF_W'(64'd1 << ob);
        default: offset = VOFF_W'({$urandom, $urandom});
      endcase
      #1;
      pok = (acc == ACC_LOAD) ? entry.rwx[2] : (acc == ACC_STORE) ? entry.rwx[1] : entry.rwx[0];
      if (!entry.valid)                                   exp_f = FAULT_INDEX;
      else if (!pok)                                      exp_f = FAULT_PERM;
      else if (ob < 48 && (64'(offset) >> ob) != 0)       exp_f = FAULT_RANGE;
      else                                                exp_f = FAULT_NONE;
      exp_addr = base + (64'(offset) & ((64'd1 << ob) - 1));
      checks++;
      if (fault !== exp_f) begin
        failures++;
        if (failures < 10) $display("fault mismatch sid=%0d off=%h acc=%0d got %0d exp %0d", sid, offset, acc, fault, exp_f);
      end
      if (exp_f == FAULT_NONE) begin
        checks++;
        if (vbi_addr !== exp_addr) begin
          failures++;
          if (failures < 10) $display("addr mismatch got %h exp %h", vbi_addr, exp_addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
