// tlb_stealth_ext: last-level TLB whose data array is widened by one
// 12-byte flat entry per translation.
//
// Fully associative, ENTRIES entries of {VPN tag, PPN (48b), flat entry}.
// A lookup by VPN returns the translation and, when flat_valid_o, the page's
// cached flat entry, so the stealth version of any block of a flat page is
// known without leaving the processor. fill_i writes a translation with its
// flat entry (over the matching entry if the VPN is present); upd_i rewrites
// only the flat entry of a present VPN (after an UPDATE response); inv_i
// drops the flat entry of a VPN, keeping the translation.
// Paper: 256 entries, fully associative, PPN 48b, flat entry 12 B; the
// extension leaves tag array and replacement policy unchanged. The paper does
// not name that policy; this design replaces the first invalid entry, else
// the entry named by a round-robin pointer.
// Timing: lookup is combinational; writes act at the clock edge.
module tlb_stealth_ext
  import toleo_pkg::*;
#(
  parameter int ENTRIES = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [VPN_W-1:0] vpn_i,
  output logic             hit_o,
  output logic [PPN_W-1:0] ppn_o,
  output logic             flat_valid_o,
  output flat_entry_t      flat_o,
  input  logic             fill_i,
  input  logic [VPN_W-1:0] fvpn_i,
  input  logic [PPN_W-1:0] fppn_i,
  input  flat_entry_t      fflat_i,
  input  logic             upd_i,
  input  logic             inv_i
);

  localparam int IW = $clog2(ENTRIES);

  logic [VPN_W-1:0] vpn_tag [ENTRIES];
  logic [PPN_W-1:0] ppn     [ENTRIES];
  flat_entry_t      flat    [ENTRIES];
  logic [ENTRIES-1:0] valid, fvalid;
  logic [IW-1:0]    rr;

  logic [IW-1:0] lidx, fidx, vidx;
  logic          fhit, vfound;

  always_comb begin
    hit_o = 1'b0;
    lidx  = '0;
    for (int e = 0; e < ENTRIES; e++)
      if (!hit_o && valid[e] && vpn_tag[e] == vpn_i) begin
        hit_o = 1'b1;
        lidx  = IW'(e);
      end
    fhit = 1'b0;
    fidx = '0;
    for (int e = 0; e < ENTRIES; e++)
      if (!fhit && valid[e] && vpn_tag[e] == fvpn_i) begin
        fhit = 1'b1;
        fidx = IW'(e);
      end
    vfound = 1'b0;
    vidx   = rr;
    for (int e = 0; e < ENTRIES; e++)
      if (!vfound && !valid[e]) begin
        vfound = 1'b1;
        vidx   = IW'(e);
      end
  end

  assign ppn_o        = ppn[lidx];
  assign flat_o       = flat[lidx];
  assign flat_valid_o = hit_o && fvalid[lidx];

  always_ff @(posedge clk) begin
    if (fill_i) begin
      vpn_tag[fhit ? fidx : vidx] <= fvpn_i;
      ppn[fhit ? fidx : vidx]     <= fppn_i;
      flat[fhit ? fidx : vidx]    <= fflat_i;
    end else if (upd_i && fhit) begin
      flat[fidx] <= fflat_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      fvalid <= '0;
      rr     <= '0;
    end else if (fill_i) begin
      valid[fhit ? fidx : vidx]  <= 1'b1;
      fvalid[fhit ? fidx : vidx] <= 1'b1;
      if (!fhit && !vfound) rr <= rr + 1'b1;
    end else if (upd_i && fhit) begin
      fvalid[fidx] <= 1'b1;
    end else if (inv_i && fhit) begin
      fvalid[fidx] <= 1'b0;
    end
  end

endmodule
