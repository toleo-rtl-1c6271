// tb_toleo_rack: end-to-end test of the rack on a small configuration
// (4 nodes, 64 device pages, 32 dynamic blocks, reset draw 1 in 256,
// 8-entry TLB extensions, 32-entry overflow buffers, 64-line MAC caches).
// The four nodes run concurrently on their own 16 pages each, and every
// response is checked against a reference model of plain per-block version
// numbers:
//   * READ returns the block's version; on-chip hits answer in 2 cycles;
//   * UPDATE returns previous + 1, or on a stealth reset (uv_update strobe
//     for that node's page) moves all blocks of the page to the new version;
//   * a refused UPDATE (device full) changes nothing; after OS RESETs free
//     the region the device holds no dynamic blocks;
//   * MAC-cache hits return the last MAC / upper version written.
// Each mechanism is counted and the test fails if one never happens:
// TLB/flat hit, overflow-buffer hit, device read, flat->uneven and
// uneven->full upgrade, normalisation, stealth reset, reject, OS reset,
// arbitration conflict between links, MAC hit, MAC eviction.
`timescale 1ns/1ps
module tb_toleo_rack;
  import toleo_pkg::*;

  localparam int NODES = 4, NP = 64, PB = 32, PGS = 16;
  localparam int PA_W = PPN_W + 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_done;
  logic [NODES-1:0] eng_valid = '0, eng_ready, rsp_valid, rsp_ready = '1, rsp_hit, rsp_rej, uv_upd, link_bad;
  op_e  [NODES-1:0] eng_op = '0;
  logic [NODES-1:0][VPN_W-1:0] eng_vpn = '0;
  logic [NODES-1:0][PPN_W-1:0] eng_ppn = '0, uv_ppn;
  logic [NODES-1:0][BLK_IDX_W-1:0] eng_blk = '0;
  logic [NODES-1:0][SV_W-1:0] rsp_sv;
  logic [NODES-1:0] mac_lookup = '0, mac_fill = '0, mac_wr = '0, mac_wr_uv = '0, mac_hit;
  logic [NODES-1:0][PA_W-1:0] mac_pa = '0;
  logic [NODES-1:0][MAC_W-1:0] mac, mac_wdata = '0;
  logic [NODES-1:0][UV_W-1:0] mac_uv, mac_uv_in = '0;
  logic [NODES-1:0][511:0] mac_fline = '0;
  logic [5:0] used;
  logic ev_upg, ev_norm, ev_sr, ev_rej;

  toleo_rack #(
    .NODES(NODES), .NUM_PAGES(NP), .POOL_BLKS(PB), .RESET_BITS(8),
    .TLB_ENTRIES(8), .OVB_ENTRIES(32), .MAC_LINES(64)
  ) dut (
    .clk, .rst_n, .init_done_o(init_done),
    .eng_valid_i(eng_valid), .eng_ready_o(eng_ready), .eng_op_i(eng_op), .eng_vpn_i(eng_vpn),
    .eng_ppn_i(eng_ppn), .eng_blk_i(eng_blk), .eng_rsp_valid_o(rsp_valid), .eng_rsp_ready_i(rsp_ready),
    .eng_rsp_sv_o(rsp_sv), .eng_rsp_hit_o(rsp_hit), .eng_rsp_reject_o(rsp_rej),
    .uv_update_o(uv_upd), .uv_ppn_o(uv_ppn),
    .mac_lookup_i(mac_lookup), .mac_pa_i(mac_pa), .mac_hit_o(mac_hit), .mac_o(mac), .mac_uv_o(mac_uv),
    .mac_fill_i(mac_fill), .mac_fline_i(mac_fline), .mac_wr_i(mac_wr), .mac_wdata_i(mac_wdata),
    .mac_wr_uv_i(mac_wr_uv), .mac_uv_i(mac_uv_in),
    .link_bad_o(link_bad), .dev_used_blks_o(used),
    .ev_upgrade_o(ev_upg), .ev_normalize_o(ev_norm), .ev_sreset_o(ev_sr), .ev_reject_o(ev_rej)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  longint ref_v [NODES][PGS][BLKS];
  bit uv_seen [NODES];
  logic [PPN_W-1:0] uv_pg [NODES];
  int n_hit = 0, n_miss = 0, n_ovb = 0, n_upg = 0, n_upg_full = 0, n_norm = 0, n_sr = 0, n_rej = 0;
  int n_os = 0, n_conflict = 0, n_mac_hit = 0, n_mac_evict = 0, n_uv = 0;

  always @(posedge clk) begin
    for (int n = 0; n < NODES; n++) if (uv_upd[n]) begin uv_seen[n] = 1; uv_pg[n] = uv_ppn[n]; n_uv++; end
    if (ev_upg) n_upg++;
    if (ev_norm) n_norm++;
    if (ev_sr) n_sr++;
    if ($countones(dut.m2s_valid) > 1) n_conflict++;
    if (dut.u_dev.u_store.alloc_req_i == ALLOC_FULL && dut.u_dev.u_store.alloc_ok_o) n_upg_full++;
  end

  for (genvar g = 0; g < NODES; g++) begin : g_mon
    always @(posedge clk)
      if (dut.g_node[g].u_hvu.st == 1 && dut.g_node[g].u_hvu.op_q == OP_READ &&
          dut.g_node[g].u_hvu.t_fvalid && dut.g_node[g].u_hvu.o_hit) n_ovb++;
  end

  function automatic longint pmax(input int n, input int p);
    longint m = ref_v[n][p][0];
    for (int j = 1; j < BLKS; j++) if (ref_v[n][p][j] > m) m = ref_v[n][p][j];
    return m;
  endfunction

  task automatic xact(input int n, input op_e op, input int p, input int b,
                      output logic [SV_W-1:0] sv, output bit hit, output bit rej, output int lat);
    eng_op[n] = op; eng_vpn[n] = VPN_W'(1000 + n * PGS + p); eng_ppn[n] = PPN_W'(n * PGS + p);
    eng_blk[n] = BLK_IDX_W'(b);
    eng_valid[n] = 1;
    uv_seen[n] = 0;
    @(posedge clk);
    while (!eng_ready[n]) @(posedge clk);
    #1 eng_valid[n] = 0;
    lat = 1;
    while (!rsp_valid[n]) begin @(posedge clk); #1; lat++; end
    sv = rsp_sv[n]; hit = rsp_hit[n]; rej = rsp_rej[n];
    @(posedge clk); #1;
  endtask

  task automatic rd(input int n, input int p, input int b);
    logic [SV_W-1:0] sv; bit hit, rej; int lat;
    xact(n, OP_READ, p, b, sv, hit, rej, lat);
    check(sv == SV_W'(ref_v[n][p][b]), $sformatf("node %0d READ p%0d b%0d %h exp %h", n, p, b, sv, SV_W'(ref_v[n][p][b])));
    if (hit) begin n_hit++; check(lat == 2, $sformatf("hit latency %0d", lat)); end
    else n_miss++;
  endtask

  task automatic upd(input int n, input int p, input int b);
    logic [SV_W-1:0] sv; bit hit, rej, lead; int lat;
    lead = (ref_v[n][p][b] == pmax(n, p));
    xact(n, OP_UPDATE, p, b, sv, hit, rej, lat);
    check(!hit, "an UPDATE always goes to the device");
    if (rej) begin
      n_rej++;
      check(!uv_seen[n], "no UV update on reject");
    end else if (uv_seen[n]) begin
      check(lead, "stealth reset only on the leading block");
      check(uv_pg[n] == PPN_W'(n * PGS + p), "UV update names the page");
      for (int j = 0; j < BLKS; j++) ref_v[n][p][j] = longint'(sv);
    end else begin
      ref_v[n][p][b]++;
      check(sv == SV_W'(ref_v[n][p][b]), $sformatf("node %0d UPDATE p%0d b%0d %h exp %h", n, p, b, sv, SV_W'(ref_v[n][p][b])));
    end
  endtask

  task automatic os_reset(input int n, input int p);
    logic [SV_W-1:0] sv; bit hit, rej; int lat;
    xact(n, OP_RESET, p, 0, sv, hit, rej, lat);
    n_os++;
    for (int j = 0; j < BLKS; j++) ref_v[n][p][j] = longint'(sv);
  endtask

  task automatic node_traffic(input int n, input int ops);
    for (int k = 0; k < ops; k++) begin
      int p, b, c;
      p = $urandom_range(0, PGS - 1);
      c = $urandom_range(0, 19);
      b = (p < 4) ? $urandom_range(0, 2) : $urandom_range(0, BLKS - 1);
      if (c < 10) rd(n, p, b);
      else if (c < 19) upd(n, p, b);
      else os_reset(n, p);
    end
  endtask

  // MAC cache traffic: lookup, fill on a miss, then write a new MAC/UV
  task automatic mac_traffic(input int n, input int ops);
    logic [511:0] mline [longint];
    for (int k = 0; k < ops; k++) begin
      longint key;
      key = $urandom_range(0, 199);
      mac_pa[n] = PA_W'({key[50:0], 3'($urandom()), 6'd0});
      mac_lookup[n] = 1;
      #1;
      if (mac_hit[n]) begin
        n_mac_hit++;
        check(mline.exists(key) && mac[n] == mline[key][mac_pa[n][8:6]*56 +: 56] &&
              mac_uv[n] == mline[key][448 +: 37], "MAC cache data");
        @(posedge clk); #1;
        mac_lookup[n] = 0;
      end else begin
        if (mline.exists(key)) n_mac_evict++;
        @(posedge clk); #1;
        mac_lookup[n] = 0;
        mac_fill[n] = 1; mac_fline[n] = {16{$urandom()}};
        mline[key] = mac_fline[n];
        @(posedge clk); #1;
        mac_fill[n] = 0;
      end
      mac_wr[n] = 1; mac_wdata[n] = MAC_W'({$urandom(), $urandom()});
      mac_wr_uv[n] = $urandom_range(0, 3) == 0; mac_uv_in[n] = UV_W'({$urandom(), $urandom()});
      mline[key][mac_pa[n][8:6]*56 +: 56] = mac_wdata[n];
      if (mac_wr_uv[n]) mline[key][448 +: 37] = mac_uv_in[n];
      @(posedge clk); #1;
      mac_wr[n] = 0; mac_wr_uv[n] = 0;
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    c = 0;
    while (!init_done) begin @(posedge clk); #1; c++; end
    check(c == NP, $sformatf("init sweep took %0d cycles", c));
    // learn every page's random start (first touch: device read)
    for (int n = 0; n < NODES; n++)
      for (int p = 0; p < PGS; p++) begin
        logic [SV_W-1:0] sv; bit hit, rej; int lat;
        xact(n, OP_READ, p, 0, sv, hit, rej, lat);
        check(!hit, "first touch misses");
        for (int j = 0; j < BLKS; j++) ref_v[n][p][j] = longint'(sv);
      end
    // phase 1: all nodes at once, versions and MAC cache
    fork
      begin node_traffic(0, 800); end
      begin node_traffic(1, 800); end
      begin node_traffic(2, 800); end
      begin node_traffic(3, 800); end
      begin mac_traffic(0, 400); end
      begin mac_traffic(2, 400); end
    join
    // phase 2: normalisation on node 0 page 4 (uneven, every offset >= 1,
    // then one block pushed past offset 127, normalised, then upgraded to full)
    for (int n = 0; n < NODES; n++) for (int p = 0; p < PGS; p++) os_reset(n, p);
    check(used == 0, "OS resets free the dynamic region");
    for (int t = 0; t < 12 && (n_norm == 0 || n_upg_full == 0); t++) begin
      os_reset(0, 4);
      upd(0, 4, 0); upd(0, 4, 0);
      for (int j = 1; j < BLKS; j++) upd(0, 4, j);
      for (int k = 0; k < 140; k++) upd(0, 4, 0);
      for (int j = 0; j < BLKS; j += 5) rd(0, 4, j);
    end
    // phase 3: every node upgrades every page until the device refuses
    fork
      for (int p = 0; p < PGS; p++) begin upd(0, p, 1); upd(0, p, 1); rd(0, p, 1); rd(0, p, 2); end
      for (int p = 0; p < PGS; p++) begin upd(1, p, 1); upd(1, p, 1); rd(1, p, 1); rd(1, p, 2); end
      for (int p = 0; p < PGS; p++) begin upd(2, p, 1); upd(2, p, 1); rd(2, p, 1); rd(2, p, 2); end
      for (int p = 0; p < PGS; p++) begin upd(3, p, 1); upd(3, p, 1); rd(3, p, 1); rd(3, p, 2); end
    join
    // phase 4: OS downgrades, then more traffic and a final read-back
    for (int n = 0; n < NODES; n++) for (int p = 0; p < PGS; p++) os_reset(n, p);
    check(used == 0, "region empty after downgrade");
    fork
      node_traffic(0, 300);
      node_traffic(1, 300);
      node_traffic(2, 300);
      node_traffic(3, 300);
    join
    for (int n = 0; n < NODES; n++) for (int p = 0; p < PGS; p++) for (int j = 0; j < BLKS; j += 13) rd(n, p, j);

    check(link_bad == '0, "no refused link request");
    check(n_hit > 0, "on-chip hit");
    check(n_ovb > 0, "overflow-buffer hit");
    check(n_miss > 0, "device read");
    check(n_upg > 0, "upgrade");
    check(n_upg_full > 0, "uneven->full upgrade");
    check(n_norm > 0, "normalisation");
    check(n_sr > 0 && n_uv > 0, "stealth reset with UV update");
    check(n_rej > 0, "device-full reject");
    check(n_os > 0, "OS reset");
    check(n_conflict > 0, "link arbitration conflict");
    check(n_mac_hit > 0 && n_mac_evict > 0, "MAC hit and eviction");
    $display("hit=%0d ovb=%0d miss=%0d upg=%0d full=%0d norm=%0d sreset=%0d uv=%0d rej=%0d os=%0d conflict=%0d machit=%0d macevict=%0d",
             n_hit, n_ovb, n_miss, n_upg, n_upg_full, n_norm, n_sr, n_uv, n_rej, n_os, n_conflict, n_mac_hit, n_mac_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
