// stockade_pkg: types and constants shared by the Stockade memory access control blocks.
//
// Stockade extends SGX so that an enclave can be a "bi-enclave": it is protected from the
// rest of the system as usual, and in addition it can reach nothing outside its own EPC
// memory. Shared EPC pages with one co-owner enclave give two enclaves a hardware protected
// channel. This package fixes the widths used by all blocks:
//   * an enclave ID (EID) is the physical page number of the enclave's SECS page. The 52-bit
//     width follows the paper's 52-bit co-owner field in the EPCM entry; 52 bits of page number
//     with 4 KiB pages give a 64-bit physical address (the 4 KiB page is x86's, not stated).
//   * virtual page numbers are 36 bits (48-bit x86-64 linear address, this design's choice).
// The EPCM entry layout below keeps the SGX fields the access check reads (valid, blocked,
// page type, owner, enclave VA) plus the Stockade co-owner field and a pending flag used
// between ESADD and ESACCEPT (the pending flag is this design's choice).
package stockade_pkg;

  localparam int unsigned PAGE_SHIFT = 12;            // 4 KiB pages
  localparam int unsigned PPN_W      = 52;            // physical page number / EID width
  localparam int unsigned VPN_W      = 36;            // 48-bit virtual address
  localparam int unsigned VA_W       = VPN_W + PAGE_SHIFT;
  localparam int unsigned PA_W       = PPN_W + PAGE_SHIFT;
  localparam int unsigned LINE_BYTES = 64;            // cache line written when zeroing a page
  localparam int unsigned LINES_PER_PAGE = (1 << PAGE_SHIFT) / LINE_BYTES;

  typedef logic [PPN_W-1:0] ppn_t;
  typedef logic [VPN_W-1:0] vpn_t;
  typedef logic [PPN_W-1:0] eid_t;   // an EID is the PPN of the enclave's SECS page

  // Kind of memory access asked for by the core.
  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } acc_t;

  // EPC page types used here (subset of SGX's PT_* values).
  typedef enum logic [1:0] {
    PT_SECS = 2'd0,
    PT_REG  = 2'd1,
    PT_TCS  = 2'd2
  } page_type_t;

  typedef struct packed {
    logic       valid;
    logic       blocked;
    page_type_t pt;
    eid_t       owner;          // SECS PPN of the owner enclave
    vpn_t       vpn;            // enclave virtual page this EPC page must be mapped at
    logic       share_pending;  // ESADD done, ESACCEPT not yet
    logic       coowner_valid;  // page is shared with coowner
    eid_t       coowner;        // Stockade: SECS PPN of the co-owner enclave (52 bits)
  } epcm_entry_t;

  // Outcome of the TLB miss check (Fig. 6 of the Stockade design).
  typedef enum logic [1:0] {
    VD_INSERT    = 2'd0,   // insert the translation as walked
    VD_INSERT_XD = 2'd1,   // insert with execute-disable set
    VD_ABORT     = 2'd2,   // insert a translation to the abort page
    VD_PAGEFAULT = 2'd3    // no translation, raise a page fault
  } verdict_t;

  // Which decision of the check produced the verdict, for tracing and testing.
  typedef enum logic [3:0] {
    WHY_OUT_OK        = 4'd0,   // non-enclave code, PA outside PRM
    WHY_OUT_PRM       = 4'd1,   // non-enclave code touching PRM
    WHY_NOT_EPC       = 4'd2,   // PA in PRM but not in EPC
    WHY_EPCM_INVALID  = 4'd3,   // EPCM entry not valid
    WHY_BLOCKED       = 4'd4,   // EPCM entry blocked
    WHY_NOT_OWNER     = 4'd5,   // neither owner nor co-owner
    WHY_VA_MISMATCH   = 4'd6,   // EPCM address differs from translated VA
    WHY_EPC_OK        = 4'd7,   // owner or co-owner, VA matches
    WHY_ELRANGE_NONEPC= 4'd8,   // ELRANGE VA mapped outside PRM
    WHY_BI_OUTSIDE    = 4'd9,   // bi-enclave touching outside memory (Stockade check 1)
    WHY_OUTSIDE_XD    = 4'd10   // plain enclave touching outside memory
  } why_t;

  // Enclave instructions handled in hardware here.
  typedef enum logic [2:0] {
    OP_EINIT    = 3'd0,
    OP_EENTER   = 3'd1,
    OP_ERESUME  = 3'd2,
    OP_EEXIT    = 3'd3,
    OP_AEX      = 3'd4,
    OP_ESADD    = 3'd5,
    OP_ESACCEPT = 3'd6
  } op_t;

  typedef enum logic [3:0] {
    ERR_NONE          = 4'd0,
    ERR_NOT_ENCLAVE   = 4'd1,   // instruction needs enclave mode
    ERR_IN_ENCLAVE    = 4'd2,   // instruction needs non-enclave mode
    ERR_BAD_SECS      = 4'd3,   // operand is not a valid SECS
    ERR_NOT_INIT      = 4'd4,   // enclave not initialised by EINIT
    ERR_ALREADY_INIT  = 4'd5,
    ERR_EEXIT_BI      = 4'd6,   // EEXIT aborted: current enclave is a bi-enclave
    ERR_BAD_PAGE      = 4'd7,   // page outside EPC, invalid or not a regular page
    ERR_NOT_OWNER     = 4'd8,   // ESADD by an enclave that does not own the page
    ERR_BUSY          = 4'd9,   // page blocked, already shared or share pending
    ERR_NOT_COOWNER   = 4'd10,  // ESACCEPT by an enclave that was not offered the page
    ERR_BAD_OP        = 4'd11
  } err_t;

  // SECS fields kept in hardware.
  typedef struct packed {
    logic  initialized;
    logic  bi_enclave;     // Stockade: 1-bit bi-enclave flag
    vpn_t  elrange_base;   // first page of ELRANGE
    vpn_t  elrange_pages;  // ELRANGE size in pages
  } secs_t;

endpackage
