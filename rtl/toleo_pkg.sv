// toleo_pkg: types and constants shared by the Toleo version-storage device and
// the host-side stealth-version caches.
//
// A 64-bit full version of a 64-byte cache block is split into a 37-bit upper
// version (UV, kept with the MACs in ordinary memory) and a 27-bit stealth
// version kept in the trusted device. Stealth versions of the 64 blocks of a
// 4 KB page are stored in the Trip format:
//   flat   : 2-bit type, 27-bit base, 64-bit vector (96-bit / 12-byte slot)
//   uneven : flat entry + one 56-byte block of 64 x 7-bit private offsets
//   full   : flat entry + 64 x 27-bit versions kept as four 56-byte blocks of
//            16 versions each (the same 56-byte block used by the host buffer)
// Field widths and sizes follow the paper. The bit placement inside the 96-bit
// slot, the type encoding and the request/response structures are this
// design's own choices.
package toleo_pkg;

  localparam int SV_W      = 27;   // stealth version width
  localparam int UV_W      = 37;   // upper version width
  localparam int BLKS      = 64;   // cache blocks per 4 KB page
  localparam int BLK_IDX_W = 6;
  localparam int OFF_W     = 7;    // uneven private offset width
  localparam int PTR_W     = 48;   // pointer held in the low bits of the bit vector
  localparam int PPN_W     = 48;   // page number width (Fig. 5: PPN 48b)
  localparam int VPN_W     = 36;   // virtual page number width (48-bit VA, 4 KB pages)
  localparam int XBLK_W    = 448;  // 56-byte uneven / overflow-buffer block
  localparam int VPB       = 16;   // full-format versions per 56-byte block
  localparam int FULL_NB   = 4;    // 56-byte blocks per full entry
  localparam int MAC_W     = 56;
  localparam int MACS_PER_BLK = 8;

  typedef enum logic [1:0] {
    FMT_FLAT   = 2'd0,
    FMT_UNEVEN = 2'd1,
    FMT_FULL   = 2'd2
  } fmt_e;

  typedef struct packed {
    logic [2:0]      rsvd;
    fmt_e            fmt;
    logic [SV_W-1:0] base;
    logic [63:0]     bv;
  } flat_entry_t;

  // Bit-vector fields once a page is uneven or full.
  localparam int BV_MAX_LSB = 57;  // bv[63:57] MAX offset
  localparam int BV_MIN_LSB = 50;  // bv[56:50] MIN offset

  typedef enum logic [1:0] {
    OP_READ   = 2'd0,
    OP_UPDATE = 2'd1,
    OP_RESET  = 2'd2
  } op_e;

  typedef enum logic [1:0] {
    ST_OK     = 2'd0,
    ST_REJECT = 2'd1   // device full: update refused until pages are downgraded
  } status_e;

  typedef enum logic [1:0] {
    ALLOC_NONE   = 2'd0,
    ALLOC_UNEVEN = 2'd1,
    ALLOC_FULL   = 2'd2
  } alloc_e;

  typedef struct packed {
    op_e                  op;
    logic [PPN_W-1:0]     page;
    logic [BLK_IDX_W-1:0] blk;
  } toleo_req_t;

  // Response: the stealth version of the block plus the page's flat entry and
  // the 56-byte block that holds the block's version (for host cache fills).
  typedef struct packed {
    status_e              status;
    logic                 uv_update;  // stealth reset happened: host bumps UV
    logic [SV_W-1:0]      sv;
    flat_entry_t          flat;
    logic [1:0]           xoff;       // which 56-byte block of a full entry
    logic [XBLK_W-1:0]    xblk;
  } toleo_rsp_t;

  typedef logic [FULL_NB-1:0][XBLK_W-1:0] ext_t;

  function automatic logic [OFF_W-1:0] unev_off(input logic [XBLK_W-1:0] b,
                                                input logic [BLK_IDX_W-1:0] i);
    return b[i*OFF_W +: OFF_W];
  endfunction

  function automatic logic [SV_W-1:0] full_ver(input logic [XBLK_W-1:0] b,
                                               input logic [3:0] i);
    return b[i*SV_W +: SV_W];
  endfunction

  // Stealth version of block i, given the flat entry and the 56-byte block
  // that holds the block's offset (uneven) or version (full, block i/16).
  function automatic logic [SV_W-1:0] trip_version(input flat_entry_t f,
                                                   input logic [XBLK_W-1:0] x,
                                                   input logic [BLK_IDX_W-1:0] i);
    case (f.fmt)
      FMT_UNEVEN: return f.base + SV_W'(unev_off(x, i));
      FMT_FULL:   return full_ver(x, i[3:0]);
      default:    return f.base + SV_W'(f.bv[i]);
    endcase
  endfunction

endpackage
