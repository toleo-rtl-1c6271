// tb_toleo_rack_full: the rack at its default size (four nodes, 2^24 pages
// of device flat entries, 2^22 dynamic blocks, 256-entry TLB extensions,
// 512-entry overflow buffers, 1 MB MAC caches, reset draw 2^-20).
// Checks that the device's start-up sweep gives every page a random flat
// entry in one cycle per page, then runs a short mixed load on each node
// against a per-block reference model: READs return the block's current
// version (on chip after the first touch of a flat page, in two cycles),
// UPDATEs return the previous version + 1 and move pages to the uneven and
// full formats, and OS RESETs return the page to flat. Pages are spread
// over the whole page range.
`timescale 1ns/1ps
module tb_toleo_rack_full;
  import toleo_pkg::*;

  localparam int NODES = 4, NP = 1 << 24, PGS = 6;
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
  logic [NODES-1:0] mac_hit;
  logic [NODES-1:0][MAC_W-1:0] mac;
  logic [NODES-1:0][UV_W-1:0] mac_uv;
  logic [22:0] used;
  logic ev_upg, ev_norm, ev_sr, ev_rej;

  toleo_rack dut (
    .clk, .rst_n, .init_done_o(init_done),
    .eng_valid_i(eng_valid), .eng_ready_o(eng_ready), .eng_op_i(eng_op), .eng_vpn_i(eng_vpn),
    .eng_ppn_i(eng_ppn), .eng_blk_i(eng_blk), .eng_rsp_valid_o(rsp_valid), .eng_rsp_ready_i(rsp_ready),
    .eng_rsp_sv_o(rsp_sv), .eng_rsp_hit_o(rsp_hit), .eng_rsp_reject_o(rsp_rej),
    .uv_update_o(uv_upd), .uv_ppn_o(uv_ppn),
    .mac_lookup_i('0), .mac_pa_i('0), .mac_hit_o(mac_hit), .mac_o(mac), .mac_uv_o(mac_uv),
    .mac_fill_i('0), .mac_fline_i('0), .mac_wr_i('0), .mac_wdata_i('0), .mac_wr_uv_i('0), .mac_uv_i('0),
    .link_bad_o(link_bad), .dev_used_blks_o(used),
    .ev_upgrade_o(ev_upg), .ev_normalize_o(ev_norm), .ev_sreset_o(ev_sr), .ev_reject_o(ev_rej)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  longint ref_v [NODES][PGS][BLKS];
  logic [PPN_W-1:0] pg_ppn [NODES][PGS];
  bit uv_seen [NODES];
  int n_hit = 0, n_miss = 0, n_upg = 0;

  always @(posedge clk) begin
    for (int n = 0; n < NODES; n++) if (uv_upd[n]) uv_seen[n] = 1;
    if (ev_upg) n_upg++;
  end

  task automatic xact(input int n, input op_e op, input int p, input int b,
                      output logic [SV_W-1:0] sv, output bit hit, output bit rej, output int lat);
    eng_op[n] = op; eng_vpn[n] = VPN_W'(pg_ppn[n][p]); eng_ppn[n] = pg_ppn[n][p]; eng_blk[n] = BLK_IDX_W'(b);
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

  task automatic node_run(input int n);
    logic [SV_W-1:0] sv;
    bit hit, rej;
    int lat;
    for (int p = 0; p < PGS; p++) begin
      xact(n, OP_READ, p, 0, sv, hit, rej, lat);
      check(!hit, "first touch goes to the device");
      for (int j = 0; j < BLKS; j++) ref_v[n][p][j] = longint'(sv);
    end
    for (int k = 0; k < 400; k++) begin
      int p, b, c;
      p = $urandom_range(0, PGS - 1);
      b = (p < 2) ? $urandom_range(0, 3) : $urandom_range(0, BLKS - 1);
      c = $urandom_range(0, 9);
      if (c < 4) begin
        xact(n, OP_READ, p, b, sv, hit, rej, lat);
        check(sv == SV_W'(ref_v[n][p][b]), $sformatf("node %0d READ p%0d b%0d %h exp %h", n, p, b, sv, SV_W'(ref_v[n][p][b])));
        if (hit) begin n_hit++; check(lat == 2, $sformatf("hit latency %0d", lat)); end
        else n_miss++;
      end else if (c < 9) begin
        xact(n, OP_UPDATE, p, b, sv, hit, rej, lat);
        check(!rej, "no reject on an empty device");
        if (uv_seen[n]) for (int j = 0; j < BLKS; j++) ref_v[n][p][j] = longint'(sv);
        else begin
          ref_v[n][p][b]++;
          check(sv == SV_W'(ref_v[n][p][b]), $sformatf("node %0d UPDATE p%0d b%0d", n, p, b));
        end
      end else begin
        xact(n, OP_RESET, p, 0, sv, hit, rej, lat);
        for (int j = 0; j < BLKS; j++) ref_v[n][p][j] = longint'(sv);
      end
    end
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c;
    for (int n = 0; n < NODES; n++)
      for (int p = 0; p < PGS; p++)
        pg_ppn[n][p] = PPN_W'((n * PGS + p) * 699053 % NP);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    c = 0;
    while (!init_done) begin @(posedge clk); #1; c++; end
    check(c == NP, $sformatf("init sweep %0d cycles, expected %0d", c, NP));
    fork
      node_run(0);
      node_run(1);
      node_run(2);
      node_run(3);
    join
    check(link_bad == '0, "no refused link request");
    check(n_hit > 0 && n_miss > 0 && n_upg > 0, "on-chip hits, device reads and upgrades seen");
    check(used > 0, "dynamic region in use");
    $display("hits=%0d misses=%0d upgrades=%0d used_blocks=%0d", n_hit, n_miss, n_upg, used);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
