// tb_trip_engine: self-checking test of the Trip version arithmetic.
//
// The testbench keeps one page's state (flat entry and extension blocks) the
// way the controller would, applies UPDATE / RESET operations through the
// engine and, after every operation, READs all 64 blocks back. It checks
// against an independent model that knows nothing of the Trip encoding: a
// list of 64 unwrapped version numbers per page. From that model it predicts
//   * every block's version (modulo 2^27),
//   * the format: flat while the largest spread max-min since the last reset
//     is at most 1, uneven while it is 2..127, full from 128 on,
//   * a stealth reset exactly when the updated block held the page maximum
//     and the random draw is zero.
// The base starts just below 2^27 so that wrap-around is exercised.
`timescale 1ns/1ps
module tb_trip_engine;
  import toleo_pkg::*;

  op_e                  op;
  flat_entry_t          flat, e_flat;
  ext_t                 ext, e_ext;
  logic [BLK_IDX_W-1:0] blk;
  logic [63:0]          rnd;
  logic [FULL_NB-1:0]   e_we;
  logic [SV_W-1:0]      e_ver;
  alloc_e               e_alloc;
  logic                 e_free, e_uv, e_lead, e_upg, e_norm;

  trip_engine dut (
    .op_i(op), .flat_i(flat), .ext_i(ext), .blk_i(blk), .rnd_i(rnd),
    .flat_o(e_flat), .ext_o(e_ext), .ext_we_o(e_we), .version_o(e_ver),
    .alloc_o(e_alloc), .free_o(e_free), .uv_update_o(e_uv), .leading_o(e_lead),
    .upgrade_o(e_upg), .normalize_o(e_norm)
  );

  int checks = 0, failures = 0;
  longint ref_v [BLKS];
  longint max_spread;
  int n_uneven = 0, n_full = 0, n_norm = 0, n_reset = 0, n_flatinc = 0;
  int fake_ptr = 100;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic longint ref_max();
    longint m = ref_v[0];
    for (int j = 1; j < BLKS; j++) if (ref_v[j] > m) m = ref_v[j];
    return m;
  endfunction
  function automatic longint ref_min();
    longint m = ref_v[0];
    for (int j = 1; j < BLKS; j++) if (ref_v[j] < m) m = ref_v[j];
    return m;
  endfunction

  function automatic fmt_e expect_fmt();
    if (max_spread <= 1)   return FMT_FLAT;
    if (max_spread <= 127) return FMT_UNEVEN;
    return FMT_FULL;
  endfunction

  task automatic read_all(input string tag);
    for (int j = 0; j < BLKS; j++) begin
      op = OP_READ; blk = BLK_IDX_W'(j); #1;
      check(e_ver == SV_W'(ref_v[j]), $sformatf("%s read blk %0d got %h exp %h", tag, j, e_ver, SV_W'(ref_v[j])));
    end
    check(flat.fmt == expect_fmt(), $sformatf("%s format %0d exp %0d (spread %0d)", tag, flat.fmt, expect_fmt(), max_spread));
  endtask

  // apply the engine's result as the controller would
  task automatic commit();
    flat = e_flat;
    if (e_alloc != ALLOC_NONE) begin
      flat.bv[PTR_W-1:0] = PTR_W'(fake_ptr);
      fake_ptr += 4;
    end
    for (int b = 0; b < FULL_NB; b++) if (e_we[b]) ext[b] = e_ext[b];
  endtask

  task automatic do_update(input int j, input bit draw_zero);
    longint m;
    bit     lead, exp_reset;
    logic [SV_W-1:0] nb;
    fmt_e   f0;
    m   = ref_max();
    lead = (ref_v[j] == m);
    rnd = {$urandom(), $urandom()};
    if (draw_zero) rnd[19:0] = '0;
    else if (rnd[19:0] == '0) rnd[0] = 1'b1;
    nb  = rnd[63:37];
    exp_reset = lead && draw_zero;
    f0  = flat.fmt;
    op  = OP_UPDATE; blk = BLK_IDX_W'(j); #1;
    check(e_uv == exp_reset, $sformatf("uv_update %0d exp %0d (blk %0d)", e_uv, exp_reset, j));
    if (exp_reset) begin
      for (int q = 0; q < BLKS; q++) ref_v[q] = longint'(nb);
      max_spread = 0;
      n_reset++;
      check(e_free == (f0 != FMT_FLAT), "reset frees extension");
    end else begin
      ref_v[j] = ref_v[j] + 1;
      if (ref_max() - ref_min() > max_spread) max_spread = ref_max() - ref_min();
    end
    check(e_ver == SV_W'(ref_v[j]), $sformatf("update blk %0d returned %h exp %h", j, e_ver, SV_W'(ref_v[j])));
    if (e_upg && e_flat.fmt == FMT_UNEVEN) n_uneven++;
    if (e_upg && e_flat.fmt == FMT_FULL) begin
      n_full++;
      check(e_alloc == ALLOC_FULL && e_free, "uneven->full allocates full, frees uneven");
    end
    if (e_norm) n_norm++;
    if (f0 == FMT_FLAT && e_flat.fmt == FMT_FLAT && !exp_reset && e_flat.base != flat.base) n_flatinc++;
    commit();
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [SV_W-1:0] b0;
    b0 = SV_W'((1 << SV_W) - 5);
    flat = '{rsvd: '0, fmt: FMT_FLAT, base: b0, bv: '0};
    ext  = '0;
    for (int j = 0; j < BLKS; j++) ref_v[j] = longint'(b0);
    max_spread = 0;
    rnd = '1;
    read_all("init");

    // A: uniform passes keep the page flat and advance the shared base
    for (int p = 0; p < 3; p++)
      for (int j = 0; j < BLKS; j++) do_update(j, 0);
    read_all("flat passes");

    // B: a block written twice in one pass makes the page uneven
    do_update(3, 0);
    do_update(3, 0);
    read_all("to uneven");
    // bring every block up, then hammer block 3 past a 7-bit offset: normalise
    for (int p = 0; p < 4; p++)
      for (int j = 0; j < BLKS; j++) do_update(j, 0);
    for (int r = 0; r < 130; r++) do_update(3, 0);
    read_all("after normalise");
    // keep hammering: stride over 128 makes the page full
    for (int r = 0; r < 130; r++) do_update(3, 0);
    read_all("full");
    for (int r = 0; r < 300; r++) do_update($urandom_range(0, BLKS-1), 0);
    read_all("full random");

    // C: OS RESET turns the page back to flat with a random base
    rnd = {$urandom(), $urandom()};
    op = OP_RESET; #1;
    check(e_free && e_flat.fmt == FMT_FLAT && e_flat.bv == '0, "RESET downgrades to flat and frees");
    for (int q = 0; q < BLKS; q++) ref_v[q] = longint'(rnd[63:37]);
    max_spread = 0;
    commit();
    read_all("after RESET");

    // D: random traffic with frequent stealth-reset draws
    for (int r = 0; r < 3000; r++) begin
      int j;
      j = ($urandom_range(0, 3) == 0) ? 7 : $urandom_range(0, BLKS-1);
      do_update(j, $urandom_range(0, 15) == 0);
      if (r % 200 == 0) read_all("random");
    end
    read_all("end");

    check(n_uneven > 0, "flat->uneven upgrade seen");
    check(n_full > 0, "uneven->full upgrade seen");
    check(n_norm > 0, "normalisation seen");
    check(n_reset > 0, "stealth reset seen");
    check(n_flatinc > 0, "flat base increment seen");
    $display("uneven=%0d full=%0d norm=%0d reset=%0d flatinc=%0d", n_uneven, n_full, n_norm, n_reset, n_flatinc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
