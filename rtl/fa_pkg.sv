// fa_pkg: sizes, encodings and message formats shared by the FlashAbacus control logic.
//
// Geometry follows the prototype the design is sized for: four flash channels with four
// packages each (16 TLC packages, 32 GB), an 8 KB page, and a "page group" that stripes one
// page on both planes of one die on every channel (4 ch x 2 planes x 8 KB = 64 KB). That gives
// 32 GB / 64 KB = 524288 page groups, so a 19-bit group number and a 2 MB page table.
// Inside one channel a page group occupies one plane-pair page (16 KB) of one package; a package
// therefore holds 524288 / 4 = 131072 such pages.
//
// Own choices (the source description is silent on them): the unit of a flash-backbone address
// is one channel page (16 KB), the erase block holds 256 page groups, tags are 6 bits, the
// kernel descriptor holds up to 4 microblocks of up to 8 screens, and 24 kernels can be resident
// in the execution chain at once (the largest evaluated mix offloads 24 instances).
package fa_pkg;

  // ---------------- flash backbone geometry ----------------
  localparam int unsigned NUM_CH        = 4;        // flash channels
  localparam int unsigned PKGS_PER_CH   = 4;        // packages per channel
  localparam int unsigned PAGE_GROUPS   = 524288;   // 32 GB / 64 KB
  localparam int unsigned PAGES_PER_PKG = PAGE_GROUPS / PKGS_PER_CH; // plane-pair pages per package
  localparam int unsigned CH_PAGE_BYTES = 16384;    // 2 planes x 8 KB, one channel's share of a group
  localparam int unsigned GROUPS_PER_BLOCK = 256;   // page groups per erase block (own choice)
  localparam int unsigned META_GROUPS   = 2;        // first two pages of a block hold mapping metadata
  localparam int unsigned NUM_BLOCKS    = PAGE_GROUPS / GROUPS_PER_BLOCK;

  localparam int unsigned CH_W    = $clog2(NUM_CH);
  localparam int unsigned PKG_W   = $clog2(PKGS_PER_CH);
  localparam int unsigned PG_W    = $clog2(PAGE_GROUPS);
  localparam int unsigned PPAGE_W = $clog2(PAGES_PER_PKG);
  localparam int unsigned BLK_W   = $clog2(NUM_BLOCKS);
  localparam int unsigned FA_W    = PG_W + CH_W;    // flash-backbone address, in channel pages
  localparam int unsigned LEN_W   = FA_W;           // length of a data section, in channel pages
  localparam int unsigned DDR_W   = 30;             // byte address into the 1 GB DDR3L
  localparam int unsigned TAG_W   = 6;

  // ---------------- processors ----------------
  localparam int unsigned NUM_LWP     = 8;          // LWP0..7
  localparam int unsigned NUM_WORKERS = 6;          // minus Flashvisor and Storengine
  localparam int unsigned LWP_W       = $clog2(NUM_LWP);
  localparam int unsigned WK_W        = $clog2(NUM_WORKERS);

  // ---------------- kernels, microblocks, screens ----------------
  localparam int unsigned MAX_APPS    = 24;         // resident kernels in the execution chain
  localparam int unsigned MAX_MBLKS   = 4;          // microblocks per kernel (CORR has 4)
  localparam int unsigned MAX_SCREENS = 8;          // screens per microblock
  localparam int unsigned SLOT_W      = $clog2(MAX_APPS);
  localparam int unsigned MB_W        = $clog2(MAX_MBLKS);
  localparam int unsigned SC_W        = $clog2(MAX_SCREENS);
  localparam int unsigned KID_W       = 8;
  localparam int unsigned BOOT_W      = 32;

  // ---------------- flash requests ----------------
  typedef enum logic [1:0] {
    FOP_READ  = 2'd0,
    FOP_PROG  = 2'd1,
    FOP_ERASE = 2'd2
  } flash_op_e;

  typedef struct packed {
    logic [TAG_W-1:0]   tag;
    flash_op_e          op;
    logic [PKG_W-1:0]   pkg;
    logic [PPAGE_W-1:0] page;
    logic [DDR_W-1:0]   ddr_addr;   // DMA source/destination in DDR3L
  } flash_req_t;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             ok;
  } flash_cpl_t;

  // ---------------- kernel <-> Flashvisor messages ----------------
  typedef enum logic [1:0] {
    MSG_MAP_RD = 2'd0,   // map a data section to flash for reading (flash -> DDR3L)
    MSG_MAP_WR = 2'd1,   // map a data section to flash for writing (DDR3L -> flash)
    MSG_UNMAP  = 2'd2    // release the range lock of a mapped section
  } fv_kind_e;

  localparam int unsigned LOCK_ENTRIES = 32;
  localparam int unsigned LOCK_W       = $clog2(LOCK_ENTRIES);

  typedef struct packed {
    logic [LWP_W-1:0]  src;
    fv_kind_e          kind;
    logic [DDR_W-1:0]  ddr_ptr;
    logic [FA_W-1:0]   flash_addr;
    logic [LEN_W-1:0]  npages;
    logic [LOCK_W-1:0] lock_id;     // used by MSG_UNMAP
  } fv_msg_t;

  typedef enum logic [1:0] {
    RSP_DONE    = 2'd0,
    RSP_BLOCKED = 2'd1,   // range lock refused the mapping
    RSP_ERROR   = 2'd2    // lock table full or bad unmap
  } fv_status_e;

  typedef struct packed {
    logic [LWP_W-1:0]  dst;
    fv_status_e        status;
    logic [LOCK_W-1:0] lock_id;
  } fv_rsp_t;

  // ---------------- host kernel submission ----------------
  typedef struct packed {
    logic [KID_W-1:0]                    kid;
    logic [MB_W:0]                       n_mblks;    // 1..MAX_MBLKS
    logic [MAX_MBLKS-1:0][SC_W:0]        n_screens;  // 1..MAX_SCREENS per microblock
    logic [MAX_MBLKS-1:0][BOOT_W-1:0]    boot_addr;  // DDR3L address of each microblock's code
  } kernel_desc_t;

  // Argument word handed to a worker with its launch: which screen of which microblock.
  typedef struct packed {
    logic [SLOT_W-1:0] slot;
    logic [MB_W-1:0]   mblk;
    logic [SC_W-1:0]   screen;
  } screen_arg_t;

  // Screen status in the execution chain (Fig. "multi-app execution chain": LWP# and status).
  typedef enum logic [1:0] {
    SCR_WAIT = 2'd0,
    SCR_RUN  = 2'd1,
    SCR_DONE = 2'd2
  } scr_status_e;

  // Translate a physical page group to (package, page) inside its channel: divide by the
  // number of pages per package; the quotient is the package, the remainder the page.
  function automatic logic [PKG_W-1:0] ppg_pkg(input logic [PG_W-1:0] ppg);
    return PKG_W'(ppg / PG_W'(PAGES_PER_PKG));
  endfunction
  function automatic logic [PPAGE_W-1:0] ppg_page(input logic [PG_W-1:0] ppg);
    return PPAGE_W'(ppg % PG_W'(PAGES_PER_PKG));
  endfunction

endpackage
