// vbi_pkg: types and constants shared by the Virtual Block Interface (VBI) blocks.
//
// The VBI address space is one 64-bit, system-wide address space cut into
// virtual blocks (VBs). The top three bits of a VBI address are the SizeID,
// which selects one of eight size classes (4 KB, 128 KB, 4 MB, 128 MB, 4 GB,
// 128 GB, 4 TB, 128 TB); the offset takes 12 + 5*SizeID bits and the VBID
// takes the bits in between. These numbers follow the paper.
//
// Design choices of this implementation (the paper leaves them open):
//  * A VBUID is held as the 52 upper bits [63:12] of the VB's first byte,
//    i.e. SizeID and VBID left-aligned, with zeros below the VBID for size
//    classes above 4 KB. Joining VBUID and offset is then an OR.
//  * A program's virtual address is {CVT index (16 bits), offset (48 bits)}.
//  * CVT entries are 64-bit words, VIT entries 128-bit, page-table entries
//    64-bit; their layouts are the structs below.
//  * Physical memory is reached through a 64-byte-line request/response port.
package vbi_pkg;

  localparam int unsigned VA_W        = 64;   // address bus width (paper: 64)
  localparam int unsigned SIZEID_W    = 3;    // paper: three bits, eight classes
  localparam int unsigned NUM_CLASSES = 8;
  localparam int unsigned VBUID_W     = 52;   // VBI address bits [63:12]
  localparam int unsigned CVT_IDX_W   = 16;   // virtual address: CVT index
  localparam int unsigned VOFF_W      = 48;   // virtual address: offset (>= 47 for 128 TB)
  localparam int unsigned CID_W       = 16;   // paper: 16-bit client IDs
  localparam int unsigned PROPS_W     = 16;   // property bitvector width
  localparam int unsigned REFCNT_W    = 16;
  localparam int unsigned PA_W        = 32;   // physical address width
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_W      = LINE_BYTES * 8;
  localparam int unsigned PAGE_BITS   = 12;   // 4 KB allocation granularity (paper)
  localparam int unsigned LEVEL_BITS  = 9;    // index bits per multi-level table level
  localparam int unsigned VM_ID_W     = 5;    // VM ID field after the SizeID (Fig. 5)

  // Offset width of a size class: 12, 17, 22, ... 47 bits.
  function automatic int unsigned offset_bits(input logic [SIZEID_W-1:0] sid);
    return PAGE_BITS + 5 * int'(sid);
  endfunction

  // RWX permission bits of a CVT entry.
  localparam int unsigned PERM_R = 2;
  localparam int unsigned PERM_W = 1;
  localparam int unsigned PERM_X = 0;

  typedef enum logic [1:0] {ACC_LOAD = 2'd0, ACC_STORE = 2'd1, ACC_FETCH = 2'd2} acc_e;

  typedef enum logic [1:0] {
    FAULT_NONE  = 2'd0,
    FAULT_INDEX = 2'd1,   // CVT index beyond the client's CVT, or entry invalid
    FAULT_PERM  = 2'd2,   // RWX does not allow the access
    FAULT_RANGE = 2'd3    // offset not smaller than the VB size
  } fault_e;

  // Client-VB Table entry (64 bits in memory).
  typedef struct packed {
    logic               valid;
    logic [2:0]         rwx;
    logic [7:0]         rsvd;
    logic [VBUID_W-1:0] vbuid;
  } cvt_entry_t;

  // Type of a VB's VBI-to-physical translation structure.
  typedef enum logic [1:0] {
    TT_NONE   = 2'd0,   // nothing allocated yet
    TT_DIRECT = 2'd1,   // VB mapped to one contiguous region, ptr = its base
    TT_SINGLE = 2'd2,   // one-level table of 4 KB entries, ptr = table
    TT_MULTI  = 2'd3    // radix table, 9 index bits per level, ptr = root
  } ttype_e;

  // VB Info Table entry (128 bits in memory: word 0 = control, word 1 = ptr).
  typedef struct packed {
    logic [63:0]         ptr;
    logic [15:0]         rsvd2;
    logic [REFCNT_W-1:0] refcnt;
    logic [PROPS_W-1:0]  props;
    logic [12:0]         rsvd;
    ttype_e              ttype;
    logic                enable;
  } vit_entry_t;

  // Translation-table entry: bit 0 valid, bits [63:12] physical frame base.
  typedef struct packed {
    logic [51:0] frame;
    logic [10:0] rsvd;
    logic        valid;
  } pte_t;

  // Line-granular physical memory port.
  typedef struct packed {
    logic                    we;
    logic [PA_W-1:0]         addr;    // byte address; low 6 bits ignored
    logic [LINE_W-1:0]       wdata;
    logic [LINE_BYTES-1:0]   wstrb;
  } mem_req_t;

  // MTL management commands (enable_vb, disable_vb, reference counting).
  typedef enum logic [1:0] {
    MTL_ENABLE  = 2'd0,
    MTL_DISABLE = 2'd1,
    MTL_REF_INC = 2'd2,
    MTL_REF_DEC = 2'd3
  } mtl_op_e;

  // Frame allocator operations.
  typedef enum logic [2:0] {
    FA_ALLOC    = 3'd0,
    FA_ALLOC_AT = 3'd1,
    FA_RESERVE  = 3'd2,
    FA_QUERY    = 3'd3,
    FA_FREE_VB  = 3'd4
  } fa_op_e;

  // OS-visible instructions handled at the top.
  typedef enum logic [2:0] {
    OS_ENABLE_VB  = 3'd0,
    OS_DISABLE_VB = 3'd1,
    OS_ATTACH     = 3'd2,
    OS_DETACH     = 3'd3,
    OS_SET_CLIENT = 3'd4
  } os_op_e;

  // VBUID of the VB holding a VBI address.
  function automatic logic [VBUID_W-1:0] vbuid_of(input logic [VA_W-1:0] a);
    logic [VA_W-1:0] m;
    m = ~((64'd1 << offset_bits(a[63:61])) - 64'd1);
    return VBUID_W'((a & m) >> PAGE_BITS);
  endfunction

  // Offset of a VBI address within its VB.
  function automatic logic [VA_W-1:0] vb_offset(input logic [VA_W-1:0] a);
    return a & ((64'd1 << offset_bits(a[63:61])) - 64'd1);
  endfunction

  // VBID (index into the size class's VIT) of a VBUID.
  function automatic logic [VA_W-1:0] vbid_of(input logic [VBUID_W-1:0] u);
    logic [VA_W-1:0] a;
    a = {u, 12'd0};
    a[63:61] = 3'd0;
    return a >> offset_bits(u[VBUID_W-1 -: SIZEID_W]);
  endfunction

  // Place a 64-bit word into a line at word slot `slot`.
  function automatic logic [LINE_W-1:0] word_in_line(input logic [63:0] w, input logic [2:0] slot);
    return LINE_W'(w) << (64 * int'(slot));
  endfunction

  function automatic logic [LINE_BYTES-1:0] word_strb(input logic [2:0] slot);
    return LINE_BYTES'(8'hFF) << (8 * int'(slot));
  endfunction

  function automatic logic [63:0] word_of_line(input logic [LINE_W-1:0] l, input logic [2:0] slot);
    return l[64*int'(slot) +: 64];
  endfunction

endpackage
