// tb_mac_cache: the MAC cache on a small instance (64 lines, 4 ways, 16 sets)
// against a least-recently-used reference model.
// Checks that a lookup returns the 56-bit MAC of the block's slot (pa[8:6])
// and the line's upper version, that MAC and upper-version writes update a
// present line in place and are ignored on a miss, and that the least
// recently used line of a set is replaced.
`timescale 1ns/1ps
module tb_mac_cache;
  import toleo_pkg::*;

  localparam int L = 64, W = 4, S = L / W, PA_W = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lookup = 0, hit, fill = 0, wr_mac = 0, wr_uv = 0;
  logic [PA_W-1:0] pa = '0;
  logic [MAC_W-1:0] mac, mac_in = '0;
  logic [UV_W-1:0] uv, uv_in = '0;
  logic [511:0] fline = '0;

  mac_cache #(.LINES(L), .WAYS(W), .PA_W(PA_W)) dut (
    .clk, .rst_n, .lookup_i(lookup), .pa_i(pa), .hit_o(hit), .mac_o(mac), .uv_o(uv),
    .fill_i(fill), .fline_i(fline), .wr_mac_i(wr_mac), .mac_i(mac_in), .wr_uv_i(wr_uv), .uv_i(uv_in)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  typedef logic [PA_W-10:0] key_t;
  key_t lru [S][$];
  logic [511:0] mdata [key_t];

  function automatic int setof(input key_t k); return int'(k[3:0]); endfunction
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
    int n_hit = 0, n_evict = 0, n_wr = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      int k, sl;
      key_t key;
      k = $urandom_range(0, 9);
      lookup = 0; fill = 0; wr_mac = 0; wr_uv = 0;
      pa = {PA_W'($urandom_range(0, 95)) << 9} | PA_W'($urandom_range(0, 511));
      key = pa[PA_W-1:9];
      sl = int'(pa[8:6]);
      mac_in = MAC_W'({$urandom(), $urandom()});
      uv_in  = UV_W'({$urandom(), $urandom()});
      fline  = {16{$urandom()}};
      if (k < 5) lookup = 1;
      else if (k < 7) fill = 1;
      else if (k < 9) wr_mac = 1;
      else wr_uv = 1;
      #1;
      check(hit == (pos(key) >= 0), "hit");
      if (pos(key) >= 0) begin
        check(mac == mdata[key][sl*56 +: 56], "MAC of slot");
        check(uv == mdata[key][448 +: 37], "upper version");
      end
      if (lookup && pos(key) >= 0) begin n_hit++; touch(key); end
      if (fill) begin
        if (pos(key) < 0 && lru[setof(key)].size() == W) begin
          mdata.delete(lru[setof(key)].pop_back());
          n_evict++;
        end
        touch(key);
        mdata[key] = fline;
      end
      if ((wr_mac || wr_uv) && pos(key) >= 0) begin
        n_wr++;
        if (wr_mac) mdata[key][sl*56 +: 56] = mac_in;
        if (wr_uv)  mdata[key][448 +: 37] = uv_in;
        touch(key);
      end
      @(posedge clk);
      #1;
    end
    check(n_hit > 100 && n_evict > 50 && n_wr > 50, "all cases exercised");
    $display("hits=%0d evictions=%0d writes=%0d", n_hit, n_evict, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
