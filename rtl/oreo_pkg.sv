// oreo_pkg: widths and types shared by the Oreo address path.
//
// Oreo inserts a "masked" address space between virtual and physical
// memory. A virtual address that falls inside a randomization region has
// its protected ("oreo") bits cleared to give the masked address; every
// address-indexed structure (PC, branch predictor, TLB, page table, LSQ)
// sees only the masked address. The protected bits are compared against
// the correct value (stored in the page table and TLB) only when an
// instruction commits.
//
// Widths follow the paper's prototype: 64-bit virtual addresses, an 8-bit
// offset field per TLB/ROB/LSQ entry, two randomization regions (kernel and
// user), each described by a 64-bit start, a 64-bit end and a 64-bit vector
// naming the protected bits. The physical address width (46 bits) and the
// PTE layout are this design's own choices.
//
// Lint: not every module uses every constant here (LG_SHIFT, VPN_W,
// NREGIONS, PTE_OFF_LSB), so a module linted alone reports them unused.
package oreo_pkg;

  localparam int VA_W      = 64;  // virtual / masked address width
  localparam int PA_W      = 46;  // physical address width (assumed)
  localparam int PG_SHIFT  = 12;  // 4 KiB base pages
  localparam int LG_SHIFT  = 21;  // 2 MiB large pages
  localparam int OFFSET_W  = 8;   // protected-offset field width
  localparam int NREGIONS  = 2;   // randomization regions
  localparam int VPN_W     = VA_W - PG_SHIFT;
  localparam int PPN_W     = PA_W - PG_SHIFT;

  // Where the leaf PTE carries the offset field: bits [58:51].
  // The paper stores it in "unused bits" of leaf PTEs without naming them.
  localparam int PTE_OFF_LSB = 51;

  typedef logic [VA_W-1:0]     va_t;
  typedef logic [PA_W-1:0]     pa_t;
  typedef logic [OFFSET_W-1:0] oreo_off_t;
  typedef logic [PPN_W-1:0]    ppn_t;

  // One randomization region: [start, end_) and the protected-bit vector.
  typedef struct packed {
    va_t start;
    va_t end_;
    va_t mask;
  } region_t;

  // Kind of memory access, for the permission check on masked addresses.
  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } acc_e;

  // Page permissions kept with a translation.
  typedef struct packed {
    logic w;   // writable
    logic u;   // user accessible
    logic x;   // executable (not XD)
  } perm_t;

  // How an instruction chooses the PC of the next one (commit-side
  // replica of the fetch next-PC logic).
  typedef enum logic [1:0] {
    NPC_SEQ    = 2'd0,  // PC + size
    NPC_DIRECT = 2'd1,  // PC + imm when taken, PC + size otherwise
    NPC_INDIR  = 2'd2   // resolved target from execute
  } npc_e;

  // Exception causes reported at commit. OTHER covers every baseline
  // exception, which takes priority over the protected-bit check.
  typedef enum logic [1:0] {
    EXC_NONE     = 2'd0,
    EXC_OTHER    = 2'd1,
    EXC_PC_CHECK = 2'd2,
    EXC_LS_CHECK = 2'd3
  } exc_e;

  // Permission check applied to a masked-address translation.
  function automatic logic perm_fault(perm_t p, acc_e acc, logic user_mode);
    logic f;
    f = user_mode && !p.u;
    if (acc == ACC_WRITE && !p.w) f = 1'b1;
    if (acc == ACC_EXEC && !p.x)  f = 1'b1;
    return f;
  endfunction

endpackage
