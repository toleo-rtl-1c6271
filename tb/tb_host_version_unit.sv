// tb_host_version_unit: one node's version front end (4-entry TLB
// extension, 16-entry 4-way overflow buffer) connected to a small device
// (32 pages, 64 dynamic blocks, reset draw 1 in 256) on link 0.
// Checks against a per-block reference model over 12 pages:
//   * READ returns the block's version; a READ of a flat page whose entry is
//     in the TLB, or of an uneven/full block in the overflow buffer, is
//     answered on chip in 2 cycles without a link request;
//   * UPDATE always uses the link and returns previous + 1, or, with a
//     uv_update strobe naming the page, a stealth reset of the whole page;
//   * RESET sends the page number to the reset register and the page reads
//     back flat at the returned version afterwards (no stale cached copy);
//   * TLB evictions (12 pages in 4 entries) and overflow-buffer hits happen.
`timescale 1ns/1ps
module tb_host_version_unit;
  import toleo_pkg::*;

  localparam int NP = 32, PB = 64, PGS = 12;
  localparam logic [63:0] MMR = 64'hFFFF_FFFF_FFFF_F000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1, rsp_hit, rsp_rej, uv_upd;
  op_e req_op = OP_READ;
  logic [VPN_W-1:0] req_vpn = '0;
  logic [PPN_W-1:0] req_ppn = '0, uv_ppn;
  logic [BLK_IDX_W-1:0] req_blk = '0;
  logic [SV_W-1:0] rsp_sv;
  logic [3:0] mv, mr, mw, bad, sv, sr;
  logic [3:0][63:0] ma, md;
  toleo_rsp_t [3:0] rsp;
  logic init_done;
  logic [6:0] used;
  logic ev_upg, ev_norm, ev_sr, ev_rej;

  host_version_unit #(.TLB_ENTRIES(4), .OVB_ENTRIES(16), .OVB_WAYS(4), .MMR_ADDR(MMR)) dut (
    .clk, .rst_n,
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_op_i(req_op), .req_vpn_i(req_vpn),
    .req_ppn_i(req_ppn), .req_blk_i(req_blk), .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready),
    .rsp_sv_o(rsp_sv), .rsp_hit_o(rsp_hit), .rsp_reject_o(rsp_rej), .uv_update_o(uv_upd), .uv_ppn_o(uv_ppn),
    .m2s_valid_o(mv[0]), .m2s_ready_i(mr[0]), .m2s_wr_o(mw[0]), .m2s_addr_o(ma[0]), .m2s_data_o(md[0]),
    .s2m_valid_i(sv[0]), .s2m_ready_o(sr[0]), .s2m_rsp_i(rsp[0])
  );
  assign mv[3:1] = '0; assign mw[3:1] = '0; assign ma[3:1] = '0; assign md[3:1] = '0; assign sr[3:1] = '1;

  toleo_device #(.NPORTS(4), .NUM_PAGES(NP), .POOL_BLKS(PB), .RESET_BITS(8), .MMR_ADDR(MMR)) u_dev (
    .clk, .rst_n, .init_done_o(init_done),
    .m2s_valid_i(mv), .m2s_ready_o(mr), .m2s_wr_i(mw), .m2s_addr_i(ma), .m2s_data_i(md), .m2s_bad_o(bad),
    .s2m_valid_o(sv), .s2m_ready_i(sr), .s2m_rsp_o(rsp), .used_blks_o(used),
    .ev_upgrade_o(ev_upg), .ev_normalize_o(ev_norm), .ev_sreset_o(ev_sr), .ev_reject_o(ev_rej)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  longint ref_v [PGS][BLKS];
  bit uv_seen, link_used;
  logic [PPN_W-1:0] uv_pg;
  int n_hit = 0, n_miss = 0, n_ovb = 0, n_sr = 0, n_tlb_evict = 0, n_os = 0;
  always @(posedge clk) begin
    if (uv_upd) begin uv_seen = 1; uv_pg = uv_ppn; end
    if (mv[0]) link_used = 1;
    if (dut.st == 1 && dut.op_q == OP_READ && dut.t_fvalid && dut.o_hit) n_ovb++;
    if (dut.u_tlb.fill_i && !dut.u_tlb.fhit && !dut.u_tlb.vfound) n_tlb_evict++;
  end

  function automatic longint pmax(input int p);
    longint m = ref_v[p][0];
    for (int j = 1; j < BLKS; j++) if (ref_v[p][j] > m) m = ref_v[p][j];
    return m;
  endfunction

  task automatic xact(input op_e op, input int p, input int b, output int lat);
    req_op = op; req_vpn = VPN_W'(500 + p); req_ppn = PPN_W'(3 + 2 * p); req_blk = BLK_IDX_W'(b);
    req_valid = 1; uv_seen = 0; link_used = 0;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(posedge clk); #1; lat++; end
    @(posedge clk); #1;
  endtask

  task automatic rd(input int p, input int b);
    int lat;
    xact(OP_READ, p, b, lat);
    check(rsp_sv == SV_W'(ref_v[p][b]), $sformatf("READ p%0d b%0d %h exp %h", p, b, rsp_sv, SV_W'(ref_v[p][b])));
    if (rsp_hit) begin
      n_hit++;
      check(lat == 2 && !link_used, $sformatf("on-chip hit: %0d cycles, link %0d", lat, link_used));
    end else begin
      n_miss++;
      check(link_used, "miss uses the link");
    end
  endtask

  task automatic upd(input int p, input int b);
    int lat; bit lead;
    lead = ref_v[p][b] == pmax(p);
    xact(OP_UPDATE, p, b, lat);
    check(!rsp_hit && link_used, "UPDATE goes to the device");
    if (rsp_rej) ;
    else if (uv_seen) begin
      n_sr++;
      check(lead && uv_pg == PPN_W'(3 + 2 * p), "UV update on the leading block names the page");
      for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(rsp_sv);
    end else begin
      ref_v[p][b]++;
      check(rsp_sv == SV_W'(ref_v[p][b]), $sformatf("UPDATE p%0d b%0d", p, b));
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (!init_done) @(posedge clk);
    #1;
    for (int p = 0; p < PGS; p++) begin
      xact(OP_READ, p, 0, lat);
      for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(rsp_sv);
    end
    for (int k = 0; k < 4000; k++) begin
      int p, b, c;
      p = (k % 3 == 0) ? $urandom_range(0, PGS - 1) : $urandom_range(0, 3);
      b = (p < 2) ? $urandom_range(0, 1) : (p < 4) ? $urandom_range(0, 63) : $urandom_range(0, 2);
      c = $urandom_range(0, 39);
      if (c < 24) rd(p, b);
      else if (c < 39) upd(p, b);
      else begin
        xact(OP_RESET, p, 0, lat);
        check(link_used && ma[0] == MMR && md[0] == 64'(3 + 2 * p), "RESET writes the page to the register");
        n_os++;
        for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(rsp_sv);
        rd(p, b);
      end
    end
    check(n_hit > 100 && n_miss > 100 && n_ovb > 50 && n_tlb_evict > 10 && n_os > 10 && n_sr > 0,
          "hits, misses, overflow-buffer hits, TLB evictions, resets and stealth resets");
    $display("hit=%0d miss=%0d ovb=%0d tlb_evict=%0d os=%0d sreset=%0d", n_hit, n_miss, n_ovb, n_tlb_evict, n_os, n_sr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
