// stealth_ovf_buf: host-side stealth version overflow buffer.
//
// Caches the 56-byte extension blocks of pages whose Trip entry is uneven or
// full: an uneven entry takes one block, a full entry four (16 versions
// each). The tag is the virtual page number with a 2-bit list offset
// appended (VPN||off); for an uneven page the offset is 0, for a full page it
// is blk[5:4]. Given the page's flat entry (from the TLB extension, looked up
// in the same cycle) a hit yields the block's stealth version directly.
// Paper: 28 KB, 512 entries of 56 bytes, 16-way, LRU, tag VPN||2-bit offset.
// This design's choices: the set index is taken from the VPN bits only, so
// the four blocks of a full entry share a set and a whole page can be dropped
// in one cycle (inv_page_i), which the host does whenever a page's format
// changes.
// Timing: lookup is combinational; fill and invalidate act at the clock edge.
module stealth_ovf_buf
  import toleo_pkg::*;
#(
  parameter int ENTRIES = 512,
  parameter int WAYS    = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookup
  input  logic                 lookup_i,
  input  logic [VPN_W-1:0]     vpn_i,
  input  logic [BLK_IDX_W-1:0] blk_i,
  input  flat_entry_t          flat_i,
  output logic                 hit_o,
  output logic [SV_W-1:0]      version_o,
  // fill
  input  logic                 fill_i,
  input  logic [VPN_W-1:0]     fvpn_i,
  input  logic [1:0]           foff_i,
  input  logic [XBLK_W-1:0]    fblk_i,
  // drop every block of a page
  input  logic                 inv_page_i,
  input  logic [VPN_W-1:0]     ivpn_i
);

  localparam int KEY_W = VPN_W + 2;

  logic [1:0]        loff;
  logic [XBLK_W-1:0] rblk;
  logic              chit;

  assign loff = (flat_i.fmt == FMT_FULL) ? blk_i[5:4] : 2'd0;

  sa_lru_cache #(
    .SETS(ENTRIES / WAYS), .WAYS(WAYS), .KEY_W(KEY_W), .DATA_W(XBLK_W), .IDX_LSB(2)
  ) u_cache (
    .clk, .rst_n,
    .lookup_i (lookup_i && flat_i.fmt != FMT_FLAT),
    .lkey_i   ({vpn_i, loff}),
    .hit_o    (chit),
    .rdata_o  (rblk),
    .fill_i   (fill_i),
    .fkey_i   ({fvpn_i, foff_i}),
    .fdata_i  (fblk_i),
    .inv_i    (inv_page_i),
    .ikey_i   ({ivpn_i, 2'b00}),
    .imask_i  ({{VPN_W{1'b1}}, 2'b00})
  );

  assign hit_o     = chit && flat_i.fmt != FMT_FLAT;
  assign version_o = trip_version(flat_i, rblk, blk_i);

endmodule
