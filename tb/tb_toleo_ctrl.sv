// tb_toleo_ctrl: the request handler together with the version store and the
// random-source model, on a small device (16 pages, 16 dynamic blocks, reset
// draw 1 in 256 so that stealth resets happen).
// Checks against a model that keeps plain per-block version numbers:
//   * the init sweep takes one cycle per page, and every page starts flat with
//     all 64 blocks at the same (random) version;
//   * every UPDATE returns the previous version + 1, unless it reports a
//     stealth reset, which is allowed only on the page's leading block and
//     moves every block of the page to the returned version;
//   * READs return the model's version, in 4 cycles from acceptance;
//   * the returned format matches the largest version spread since the last
//     reset (flat <= 1, uneven <= 127, full beyond);
//   * with the dynamic region exhausted an upgrading UPDATE is refused
//     (ST_REJECT) and changes nothing; an OS RESET frees space and the same
//     UPDATE then succeeds.
`timescale 1ns/1ps
module tb_toleo_ctrl;
  import toleo_pkg::*;

  localparam int NP = 16, PB = 16;
  localparam int PG_W = $clog2(NP), PL_W = $clog2(PB);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_done, req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  toleo_req_t req = '0;
  toleo_rsp_t rsp;
  logic [1:0] rsp_dst;
  logic [PG_W-1:0] flat_raddr, flat_waddr;
  flat_entry_t flat_rdata, flat_wdata;
  logic flat_we;
  logic [PL_W-1:0] pool_raddr, pool_waddr, alloc_ptr, free_ptr;
  ext_t pool_rdata, pool_wdata;
  logic [FULL_NB-1:0] pool_we;
  alloc_e alloc_req;
  logic alloc_ok, free_v, rnd_valid, rnd_take;
  fmt_e free_fmt;
  logic [63:0] rnd;
  logic [PL_W:0] used;
  logic ev_upg, ev_norm, ev_sr, ev_rej;

  toleo_ctrl #(.NUM_PAGES(NP), .POOL_BLKS(PB), .RESET_BITS(8)) dut (
    .clk, .rst_n, .init_done_o(init_done),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req), .req_src_i(2'd2),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp), .rsp_dst_o(rsp_dst),
    .flat_raddr_o(flat_raddr), .flat_rdata_i(flat_rdata), .flat_we_o(flat_we),
    .flat_waddr_o(flat_waddr), .flat_wdata_o(flat_wdata),
    .pool_raddr_o(pool_raddr), .pool_rdata_i(pool_rdata), .pool_we_o(pool_we),
    .pool_waddr_o(pool_waddr), .pool_wdata_o(pool_wdata),
    .alloc_req_o(alloc_req), .alloc_ok_i(alloc_ok), .alloc_ptr_i(alloc_ptr),
    .free_o(free_v), .free_fmt_o(free_fmt), .free_ptr_o(free_ptr),
    .rnd_valid_i(rnd_valid), .rnd_i(rnd), .rnd_take_o(rnd_take),
    .ev_upgrade_o(ev_upg), .ev_normalize_o(ev_norm), .ev_sreset_o(ev_sr), .ev_reject_o(ev_rej)
  );

  toleo_version_store #(.NUM_PAGES(NP), .POOL_BLKS(PB)) u_store (
    .clk, .rst_n,
    .flat_raddr_i(flat_raddr), .flat_rdata_o(flat_rdata), .flat_we_i(flat_we),
    .flat_waddr_i(flat_waddr), .flat_wdata_i(flat_wdata),
    .pool_raddr_i(pool_raddr), .pool_rdata_o(pool_rdata), .pool_we_i(pool_we),
    .pool_waddr_i(pool_waddr), .pool_wdata_i(pool_wdata),
    .alloc_req_i(alloc_req), .alloc_ok_o(alloc_ok), .alloc_ptr_o(alloc_ptr),
    .free_i(free_v), .free_fmt_i(free_fmt), .free_ptr_i(free_ptr), .used_blks_o(used)
  );

  range_trng #(.GEN_CYCLES(0)) u_rng (.clk, .rst_n, .take_i(rnd_take), .valid_o(rnd_valid), .rnd_o(rnd));

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  longint ref_v [NP][BLKS];
  longint spread [NP];
  int n_rej = 0, n_sr = 0, n_upg = 0, n_norm = 0, n_reset_op = 0;
  toleo_rsp_t r;
  int lat;

  always @(posedge clk) begin
    if (ev_upg)  n_upg++;
    if (ev_norm) n_norm++;
  end

  function automatic longint pmax(input int p);
    longint m = ref_v[p][0];
    for (int j = 1; j < BLKS; j++) if (ref_v[p][j] > m) m = ref_v[p][j];
    return m;
  endfunction
  function automatic longint pmin(input int p);
    longint m = ref_v[p][0];
    for (int j = 1; j < BLKS; j++) if (ref_v[p][j] < m) m = ref_v[p][j];
    return m;
  endfunction
  function automatic fmt_e efmt(input longint s);
    return (s <= 1) ? FMT_FLAT : (s <= 127) ? FMT_UNEVEN : FMT_FULL;
  endfunction

  task automatic xact(input op_e op, input int p, input int b);
    req = '{op: op, page: PPN_W'(p), blk: BLK_IDX_W'(b)};
    req_valid = 1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(posedge clk); #1; lat++; end
    r = rsp;
    check(rsp_dst == 2'd2, "response routed to the requesting port");
    @(posedge clk); #1;
  endtask

  task automatic rd(input int p, input int b);
    xact(OP_READ, p, b);
    check(r.status == ST_OK && r.sv == SV_W'(ref_v[p][b]),
          $sformatf("READ p%0d b%0d got %h exp %h", p, b, r.sv, SV_W'(ref_v[p][b])));
    check(lat == 4, $sformatf("READ latency %0d", lat));
  endtask

  task automatic upd(input int p, input int b);
    bit lead;
    longint s2;
    lead = (ref_v[p][b] == pmax(p));
    xact(OP_UPDATE, p, b);
    if (r.status == ST_REJECT) begin
      n_rej++;
      ref_v[p][b]++;
      s2 = pmax(p) - pmin(p);
      ref_v[p][b]--;
      check(efmt(s2 > spread[p] ? s2 : spread[p]) != efmt(spread[p]), "reject only on an upgrade");
      check(r.sv == SV_W'(ref_v[p][b]), "reject leaves version");
    end else if (r.uv_update) begin
      n_sr++;
      check(lead, $sformatf("stealth reset on non-leading block p%0d b%0d", p, b));
      for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(r.sv);
      spread[p] = 0;
      check(r.flat.fmt == FMT_FLAT, "reset page is flat");
    end else begin
      ref_v[p][b]++;
      if (pmax(p) - pmin(p) > spread[p]) spread[p] = pmax(p) - pmin(p);
      check(r.sv == SV_W'(ref_v[p][b]), $sformatf("UPDATE p%0d b%0d got %h exp %h", p, b, r.sv, SV_W'(ref_v[p][b])));
      check(r.flat.fmt == efmt(spread[p]), $sformatf("format p%0d %0d exp %0d", p, r.flat.fmt, efmt(spread[p])));
    end
  endtask

  task automatic os_reset(input int p);
    xact(OP_RESET, p, 0);
    n_reset_op++;
    for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(r.sv);
    spread[p] = 0;
    check(r.flat.fmt == FMT_FLAT && r.flat.bv == '0, "RESET gives empty flat entry");
  endtask

  initial begin
    #5000000;
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
    // learn each page's random start
    for (int p = 0; p < NP; p++) begin
      xact(OP_READ, p, 0);
      for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(r.sv);
      spread[p] = 0;
      for (int j = 0; j < BLKS; j += 9) rd(p, j);
    end
    // mixed traffic on pages 0..3
    for (int n = 0; n < 3000; n++) begin
      int p, b;
      p = $urandom_range(0, 3);
      b = ($urandom_range(0, 2) == 0) ? p : $urandom_range(0, BLKS-1);
      upd(p, b);
      if (n % 50 == 0) rd(p, $urandom_range(0, BLKS-1));
    end
    // normalisation: page 3 uneven with every offset >= 1, then one block
    // driven past offset 127
    for (int t = 0; t < 8 && n_norm == 0; t++) begin
      os_reset(3);
      upd(3, 0); upd(3, 0);
      for (int j = 1; j < BLKS; j++) upd(3, j);
      for (int k = 0; k < 130; k++) upd(3, 0);
    end
    // push many pages to uneven/full until the region refuses
    for (int n = 0; n < 2000 && n_rej < 3; n++) begin
      int p;
      p = 4 + $urandom_range(0, NP-5);
      upd(p, 1);
    end
    check(n_rej > 0, "device-full reject seen");
    // OS downgrades every page; updates go through again
    for (int p = 0; p < NP; p++) os_reset(p);
    check(used == 0, "all dynamic space freed");
    upd(5, 1); upd(5, 1);
    check(r.status == ST_OK && r.flat.fmt == FMT_UNEVEN, "upgrade after free succeeds");
    for (int p = 0; p < NP; p++) for (int j = 0; j < BLKS; j += 7) rd(p, j);

    check(n_sr > 0, "stealth reset seen");
    check(n_upg > 0, "upgrade seen");
    check(n_norm > 0, "normalisation seen");
    $display("rej=%0d sreset=%0d upg=%0d norm=%0d", n_rej, n_sr, n_upg, n_norm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
