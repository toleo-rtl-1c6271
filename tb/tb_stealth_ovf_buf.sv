// tb_stealth_ovf_buf: the stealth version overflow buffer on a small
// instance (32 entries, 4 ways, 8 sets) against a least-recently-used
// reference model.
// Checks that a lookup of an uneven page hits on its single block and one of
// a full page hits on the block holding blk[5:4] of the page, that the
// returned version is base + 7-bit offset (uneven) or the 27-bit field
// (full), that flat pages never hit, that the least recently used entry of a
// set is replaced, and that a page invalidate drops all four of its blocks.
`timescale 1ns/1ps
module tb_stealth_ovf_buf;
  import toleo_pkg::*;

  localparam int ENT = 32, W = 4, S = ENT / W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lookup = 0, hit, fill = 0, inv = 0;
  logic [VPN_W-1:0] vpn = '0, fvpn = '0, ivpn = '0;
  logic [BLK_IDX_W-1:0] blk = '0;
  flat_entry_t fl = '0;
  logic [SV_W-1:0] ver;
  logic [1:0] foff = '0;
  logic [XBLK_W-1:0] fblk = '0;

  stealth_ovf_buf #(.ENTRIES(ENT), .WAYS(W)) dut (
    .clk, .rst_n, .lookup_i(lookup), .vpn_i(vpn), .blk_i(blk), .flat_i(fl), .hit_o(hit), .version_o(ver),
    .fill_i(fill), .fvpn_i(fvpn), .foff_i(foff), .fblk_i(fblk), .inv_page_i(inv), .ivpn_i(ivpn)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  typedef logic [VPN_W+1:0] key_t;
  key_t lru [S][$];                 // most recent first
  logic [XBLK_W-1:0] mdata [key_t];

  function automatic int setof(input key_t k); return int'(k[4:2]); endfunction
  function automatic int pos(input key_t k);
    int s = setof(k);
    foreach (lru[s][i]) if (lru[s][i] == k) return i;
    return -1;
  endfunction
  task automatic touch(input key_t k);
    int s = setof(k), i = pos(k);
    if (i >= 0) lru[s].delete(i);
    lru[s].push_front(k);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_hit = 0, n_evict = 0, n_inv = 0, n_full = 0, n_unev = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      int k;
      key_t key;
      k = $urandom_range(0, 9);
      lookup = 0; fill = 0; inv = 0;
      if (k < 5) begin
        lookup = 1;
        vpn = VPN_W'($urandom_range(0, 23));
        blk = BLK_IDX_W'($urandom());
        fl  = '{rsvd: '0, fmt: fmt_e'($urandom_range(0, 2)), base: SV_W'($urandom()), bv: {$urandom(), $urandom()}};
        key = {vpn, (fl.fmt == FMT_FULL) ? blk[5:4] : 2'd0};
        #1;
        if (fl.fmt == FMT_FLAT) check(!hit, "flat page never hits");
        else begin
          check(hit == (pos(key) >= 0), $sformatf("hit vpn %0d off %0d", vpn, key[1:0]));
          if (pos(key) >= 0) begin
            logic [SV_W-1:0] e;
            n_hit++;
            if (fl.fmt == FMT_UNEVEN) begin e = fl.base + SV_W'(mdata[key][blk*7 +: 7]); n_unev++; end
            else begin e = mdata[key][blk[3:0]*27 +: 27]; n_full++; end
            check(ver == e, $sformatf("version %h exp %h", ver, e));
            touch(key);
          end
        end
      end else if (k < 9) begin
        fill = 1;
        fvpn = VPN_W'($urandom_range(0, 23));
        foff = 2'($urandom());
        fblk = {14{$urandom()}};
        key = {fvpn, foff};
        if (pos(key) < 0 && lru[setof(key)].size() == W) begin
          mdata.delete(lru[setof(key)].pop_back());
          n_evict++;
        end
        touch(key);
        mdata[key] = fblk;
      end else begin
        inv = 1;
        ivpn = VPN_W'($urandom_range(0, 23));
        for (int o = 0; o < 4; o++) begin
          int i;
          key = {ivpn, 2'(o)};
          i = pos(key);
          if (i >= 0) begin lru[setof(key)].delete(i); mdata.delete(key); n_inv++; end
        end
      end
      @(posedge clk);
      #1;
    end
    check(n_hit > 100 && n_evict > 50 && n_inv > 20 && n_full > 20 && n_unev > 20, "all cases exercised");
    $display("hits=%0d evictions=%0d inv=%0d", n_hit, n_evict, n_inv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
