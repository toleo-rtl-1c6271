// tb_toleo_device: the trusted version-storage device with its four host
// links, on a small configuration (32 pages, 16 dynamic blocks, reset draw
// 1 in 256). Each link works on its own 8 pages through raw CXL.mem-style
// requests (MemRd / MemWr of block addresses, MemWr of the reset register).
// Checks:
//   * no request is taken before the start-up sweep is done (32 cycles);
//   * a READ on an idle device answers 4 cycles after it is taken;
//   * with all four links busy, every response goes back on the link that
//     asked and matches a per-block reference model (UPDATE = previous + 1,
//     or a stealth reset of the whole page; a refusal changes nothing),
//     and arrives within 200 cycles;
//   * malformed requests (MemRd of the reset register, a block address or a
//     reset page beyond the protected range) are flagged and not answered.
`timescale 1ns/1ps
module tb_toleo_device;
  import toleo_pkg::*;

  localparam int NP = 32, PB = 16, PGS = 8;
  localparam logic [63:0] MMR = 64'hFFFF_FFFF_FFFF_F000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_done;
  logic [3:0] mv = '0, mr, mw = '0, bad, sv, sr = '1;
  logic [3:0][63:0] ma = '0, md = '0;
  toleo_rsp_t [3:0] rsp;
  logic [4:0] used;
  logic ev_upg, ev_norm, ev_sr, ev_rej;

  toleo_device #(.NPORTS(4), .NUM_PAGES(NP), .POOL_BLKS(PB), .RESET_BITS(8), .MMR_ADDR(MMR)) dut (
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

  longint ref_v [NP][BLKS];
  int n_bad = 0, n_rej = 0, n_sr = 0, n_conf = 0;
  int served [4];
  always @(posedge clk) begin
    if ($countones(mv & ~bad) > 1) n_conf++;
    for (int i = 0; i < 4; i++) if (sv[i] && sr[i]) served[i]++;
  end

  function automatic longint pmax(input int p);
    longint m = ref_v[p][0];
    for (int j = 1; j < BLKS; j++) if (ref_v[p][j] > m) m = ref_v[p][j];
    return m;
  endfunction

  task automatic xact(input int n, input bit wr, input logic [63:0] a, input logic [63:0] d,
                      output toleo_rsp_t r, output int lat);
    mv[n] = 1; mw[n] = wr; ma[n] = a; md[n] = d;
    @(posedge clk);
    while (!mr[n]) @(posedge clk);
    #1 mv[n] = 0;
    lat = 1;
    while (!sv[n] && lat < 200) begin @(posedge clk); #1; lat++; end
    check(sv[n], $sformatf("port %0d response within 200 cycles", n));
    r = rsp[n];
    @(posedge clk); #1;
  endtask

  function automatic logic [63:0] baddr(input int p, input int b);
    return {6'd0, 46'(p), 6'(b), 6'd0};
  endfunction

  task automatic port_run(input int n, input int ops);
    toleo_rsp_t r; int lat;
    for (int k = 0; k < ops; k++) begin
      int p, b, c;
      bit lead;
      p = n * PGS + $urandom_range(0, PGS - 1);
      b = $urandom_range(0, 3);
      c = $urandom_range(0, 19);
      if (c < 8) begin
        xact(n, 0, baddr(p, b), '0, r, lat);
        check(r.sv == SV_W'(ref_v[p][b]), $sformatf("port %0d READ p%0d b%0d", n, p, b));
      end else if (c < 19) begin
        lead = ref_v[p][b] == pmax(p);
        xact(n, 1, baddr(p, b), '0, r, lat);
        if (r.status == ST_REJECT) begin
          n_rej++;
          check(r.sv == SV_W'(ref_v[p][b]), "refusal leaves the version");
        end else if (r.uv_update) begin
          n_sr++;
          check(lead, "stealth reset only on the leading block");
          for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(r.sv);
        end else begin
          ref_v[p][b]++;
          check(r.sv == SV_W'(ref_v[p][b]), $sformatf("port %0d UPDATE p%0d b%0d", n, p, b));
        end
      end else begin
        xact(n, 1, MMR, 64'(p), r, lat);
        check(r.flat.fmt == FMT_FLAT, "RESET gives a flat page");
        for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(r.sv);
      end
    end
  endtask

  task automatic bad_req(input bit wr, input logic [63:0] a, input logic [63:0] d);
    mv[0] = 1; mw[0] = wr; ma[0] = a; md[0] = d;
    #1;
    check(bad[0] && mr[0], "malformed request flagged and consumed");
    @(posedge clk); #1;
    mv[0] = 0;
    n_bad++;
    repeat (8) begin check(!sv[0], "no response to a malformed request"); @(posedge clk); #1; end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, lat;
    toleo_rsp_t r;
    for (int i = 0; i < 4; i++) served[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    mv = 4'b0001; ma[0] = baddr(0, 0);
    c = 0;
    while (!init_done) begin check(!mr[0], "no request before the sweep is done"); @(posedge clk); #1; c++; end
    mv = '0;
    check(c == NP, $sformatf("sweep %0d cycles", c));
    for (int p = 0; p < NP; p++) begin
      xact(p % 4, 0, baddr(p, 5), '0, r, lat);
      check(lat == 4, $sformatf("idle READ latency %0d", lat));
      for (int j = 0; j < BLKS; j++) ref_v[p][j] = longint'(r.sv);
    end
    fork
      port_run(0, 600);
      port_run(1, 600);
      port_run(2, 600);
      port_run(3, 600);
    join
    bad_req(0, MMR, '0);
    bad_req(1, {6'd1, 46'd0, 12'd0}, '0);
    bad_req(1, MMR, 64'(NP));
    check(n_conf > 0, "link conflicts arbitrated");
    for (int i = 0; i < 4; i++) check(served[i] > 100, "every link served");
    check(n_rej > 0 && n_sr > 0 && n_bad == 3, "refusal, stealth reset and malformed requests seen");
    $display("conflicts=%0d rej=%0d sreset=%0d", n_conf, n_rej, n_sr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
