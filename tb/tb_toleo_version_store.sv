// tb_toleo_version_store: checks the flat array, the dynamic region and its
// allocator on a small instance (64 pages, 32 blocks).
//   * flat entries and masked four-block region writes read back one cycle
//     after the address;
//   * uneven entries come from the bottom (0, 1, 2, ...), full entries from
//     the top (28, 24, ...), and allocation fails exactly when the two meet;
//   * freed entries are reused last-in first-out, a list whose last entry is
//     freed restarts at its end of the region, and the used-block count
//     follows every allocation and free.
`timescale 1ns/1ps
module tb_toleo_version_store;
  import toleo_pkg::*;

  localparam int NP = 64, PB = 32;
  localparam int PG_W = $clog2(NP), PL_W = $clog2(PB);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PG_W-1:0]    flat_raddr = '0, flat_waddr = '0;
  flat_entry_t        flat_rdata, flat_wdata = '0;
  logic               flat_we = 0;
  logic [PL_W-1:0]    pool_raddr = '0, pool_waddr = '0;
  ext_t               pool_rdata, pool_wdata = '0;
  logic [FULL_NB-1:0] pool_we = '0;
  alloc_e             alloc_req = ALLOC_NONE;
  logic               alloc_ok;
  logic [PL_W-1:0]    alloc_ptr;
  logic               free_v = 0;
  fmt_e               free_fmt = FMT_FLAT;
  logic [PL_W-1:0]    free_ptr = '0;
  logic [PL_W:0]      used;

  toleo_version_store #(.NUM_PAGES(NP), .POOL_BLKS(PB)) dut (
    .clk, .rst_n,
    .flat_raddr_i(flat_raddr), .flat_rdata_o(flat_rdata), .flat_we_i(flat_we),
    .flat_waddr_i(flat_waddr), .flat_wdata_i(flat_wdata),
    .pool_raddr_i(pool_raddr), .pool_rdata_o(pool_rdata), .pool_we_i(pool_we),
    .pool_waddr_i(pool_waddr), .pool_wdata_i(pool_wdata),
    .alloc_req_i(alloc_req), .alloc_ok_o(alloc_ok), .alloc_ptr_o(alloc_ptr),
    .free_i(free_v), .free_fmt_i(free_fmt), .free_ptr_i(free_ptr), .used_blks_o(used)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  flat_entry_t ref_flat [NP];
  int exp_used = 0;

  task automatic alloc(input alloc_e k, input bit exp_ok, input int exp_ptr);
    alloc_req = k;
    #1;
    check(alloc_ok == exp_ok, $sformatf("alloc %0d ok=%0d exp %0d", k, alloc_ok, exp_ok));
    if (exp_ok) check(int'(alloc_ptr) == exp_ptr, $sformatf("alloc %0d ptr=%0d exp %0d", k, alloc_ptr, exp_ptr));
    @(posedge clk); #1;
    alloc_req = ALLOC_NONE;
    if (exp_ok) exp_used += (k == ALLOC_FULL) ? 4 : 1;
    check(int'(used) == exp_used, $sformatf("used %0d exp %0d", used, exp_used));
  endtask

  task automatic free_e(input fmt_e f, input int p);
    free_v = 1; free_fmt = f; free_ptr = PL_W'(p);
    @(posedge clk); #1;
    free_v = 0;
    exp_used -= (f == FMT_FULL) ? 4 : 1;
    check(int'(used) == exp_used, $sformatf("used after free %0d exp %0d", used, exp_used));
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    // flat array
    for (int p = 0; p < NP; p++) begin
      ref_flat[p] = '{rsvd: '0, fmt: fmt_e'($urandom_range(0, 2)), base: SV_W'($urandom()), bv: {$urandom(), $urandom()}};
      flat_we = 1; flat_waddr = PG_W'(p); flat_wdata = ref_flat[p];
      @(posedge clk); #1;
    end
    flat_we = 0;
    for (int p = NP - 1; p >= 0; p--) begin
      flat_raddr = PG_W'(p);
      @(posedge clk); #1;
      check(flat_rdata == ref_flat[p], $sformatf("flat %0d readback", p));
    end
    // region: write four blocks at 8, then only block 2 again
    for (int b = 0; b < FULL_NB; b++) pool_wdata[b] = {14{$urandom()}};
    pool_we = 4'b1111; pool_waddr = 8;
    @(posedge clk); #1;
    begin
      ext_t keep;
      keep = pool_wdata;
      pool_wdata[2] = ~pool_wdata[2];
      pool_wdata[1] = '0;
      pool_we = 4'b0100;
      @(posedge clk); #1;
      pool_we = '0;
      keep[2] = pool_wdata[2];
      pool_raddr = 8;
      @(posedge clk); #1;
      check(pool_rdata == keep, "masked region write");
    end

    // allocator: uneven from bottom, full from top
    alloc(ALLOC_UNEVEN, 1, 0);
    alloc(ALLOC_UNEVEN, 1, 1);
    alloc(ALLOC_FULL,   1, 28);
    alloc(ALLOC_FULL,   1, 24);
    alloc(ALLOC_UNEVEN, 1, 2);
    // free and reuse (LIFO)
    free_e(FMT_UNEVEN, 1);
    free_e(FMT_UNEVEN, 0);
    alloc(ALLOC_UNEVEN, 1, 0);
    alloc(ALLOC_UNEVEN, 1, 1);
    free_e(FMT_FULL, 28);
    alloc(ALLOC_FULL, 1, 28);
    // fill up: bottom at 3, top at 24 -> full entries at 20, 16, 12, 8, 4
    alloc(ALLOC_FULL, 1, 20);
    alloc(ALLOC_FULL, 1, 16);
    alloc(ALLOC_FULL, 1, 12);
    alloc(ALLOC_FULL, 1, 8);
    alloc(ALLOC_FULL, 1, 4);
    alloc(ALLOC_FULL, 0, 0);   // 3 + 4 > 4: no room for a full entry
    alloc(ALLOC_UNEVEN, 1, 3);
    alloc(ALLOC_UNEVEN, 0, 0); // lists have met
    check(int'(used) == PB, "region fully used");
    free_e(FMT_FULL, 16);
    alloc(ALLOC_UNEVEN, 0, 0); // a freed full slot is not an uneven slot
    alloc(ALLOC_FULL, 1, 16);
    // freeing every uneven entry empties that list: it restarts at block 0
    // and its blocks become available to full entries
    free_e(FMT_UNEVEN, 3); free_e(FMT_UNEVEN, 1); free_e(FMT_UNEVEN, 0); free_e(FMT_UNEVEN, 2);
    alloc(ALLOC_FULL, 1, 0);
    alloc(ALLOC_UNEVEN, 0, 0);
    free_e(FMT_FULL, 0);
    alloc(ALLOC_UNEVEN, 0, 0);  // still on the full free stack
    // freeing every full entry returns the whole region
    free_e(FMT_FULL, 4); free_e(FMT_FULL, 8); free_e(FMT_FULL, 12); free_e(FMT_FULL, 16);
    free_e(FMT_FULL, 20); free_e(FMT_FULL, 24); free_e(FMT_FULL, 28);
    check(used == 0, "region empty");
    alloc(ALLOC_FULL, 1, 28);
    alloc(ALLOC_UNEVEN, 1, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
