// tb_tlb_stealth_ext: the stealth extension of the L2 TLB on a small
// instance (8 entries) against a reference copy of the entry array.
// Checks that lookups return the page's frame and flat entry, that a fill of
// a present page overwrites it in place, that a new page takes the first free
// entry and then round-robin victims, that an update refreshes only the flat
// entry of a present page, and that an invalidate (OS downgrade) drops the
// flat entry but keeps the translation.
`timescale 1ns/1ps
module tb_tlb_stealth_ext;
  import toleo_pkg::*;

  localparam int E = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [VPN_W-1:0] vpn = '0, fvpn = '0;
  logic [PPN_W-1:0] ppn, fppn = '0;
  logic hit, fvalid, fill = 0, upd = 0, inv = 0;
  flat_entry_t flat, fflat = '0;

  tlb_stealth_ext #(.ENTRIES(E)) dut (
    .clk, .rst_n, .vpn_i(vpn), .hit_o(hit), .ppn_o(ppn), .flat_valid_o(fvalid), .flat_o(flat),
    .fill_i(fill), .fvpn_i(fvpn), .fppn_i(fppn), .fflat_i(fflat), .upd_i(upd), .inv_i(inv)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // reference
  bit               m_v [E], m_fv [E];
  logic [VPN_W-1:0] m_vpn [E];
  logic [PPN_W-1:0] m_ppn [E];
  flat_entry_t      m_flat [E];
  int               m_rr = 0;

  function automatic int find(input logic [VPN_W-1:0] v);
    for (int e = 0; e < E; e++) if (m_v[e] && m_vpn[e] == v) return e;
    return -1;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_evict = 0, n_inv = 0, n_upd = 0, n_hit = 0;
    for (int e = 0; e < E; e++) begin m_v[e] = 0; m_fv[e] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int k, e;
      k = $urandom_range(0, 9);
      fill = 0; upd = 0; inv = 0;
      vpn  = VPN_W'($urandom_range(0, 15));
      fvpn = VPN_W'($urandom_range(0, 15));
      fppn = PPN_W'({$urandom(), $urandom()});
      fflat = '{rsvd: '0, fmt: fmt_e'($urandom_range(0, 2)), base: SV_W'($urandom()), bv: {$urandom(), $urandom()}};
      if (k < 3) fill = 1; else if (k == 3) upd = 1; else if (k == 4) inv = 1;
      #1;
      e = find(vpn);
      check(hit == (e >= 0), $sformatf("hit vpn %0d", vpn));
      if (e >= 0) begin
        n_hit++;
        check(ppn == m_ppn[e], "frame number");
        check(fvalid == m_fv[e], "flat entry valid");
        if (m_fv[e]) check(flat == m_flat[e], "flat entry");
      end
      @(posedge clk);
      e = find(fvpn);
      if (fill) begin
        if (e < 0) begin
          for (int i = E - 1; i >= 0; i--) if (!m_v[i]) e = i;
          if (e < 0) begin e = m_rr; m_rr = (m_rr + 1) % E; n_evict++; end
        end
        m_v[e] = 1; m_fv[e] = 1; m_vpn[e] = fvpn; m_ppn[e] = fppn; m_flat[e] = fflat;
      end else if (upd && e >= 0) begin
        m_fv[e] = 1; m_flat[e] = fflat; n_upd++;
      end else if (inv && e >= 0) begin
        m_fv[e] = 0; n_inv++;
      end
      #1;
    end
    check(n_evict > 10 && n_inv > 10 && n_upd > 10 && n_hit > 100, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
