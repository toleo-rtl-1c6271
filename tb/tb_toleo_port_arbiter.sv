// tb_toleo_port_arbiter: four ports with random request patterns and a
// controller that accepts at random. Checks that at most one port is granted,
// that the grant is the first requester after the last granted port (round
// robin), that the forwarded request and source tag are that port's, that no
// port waits more than three other grants while requesting, and that each
// response goes to exactly the port in its destination tag.
`timescale 1ns/1ps
module tb_toleo_port_arbiter;
  import toleo_pkg::*;

  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] pv, pr, rv, rr;
  toleo_req_t [N-1:0] preq;
  toleo_rsp_t [N-1:0] prsp;
  logic cv, cr, crv, crr;
  toleo_req_t creq;
  logic [1:0] src, dst;
  toleo_rsp_t crsp;

  toleo_port_arbiter #(.N(N)) dut (
    .clk, .rst_n, .p_req_valid_i(pv), .p_req_ready_o(pr), .p_req_i(preq),
    .p_rsp_valid_o(rv), .p_rsp_ready_i(rr), .p_rsp_o(prsp),
    .req_valid_o(cv), .req_ready_i(cr), .req_o(creq), .req_src_o(src),
    .rsp_valid_i(crv), .rsp_ready_o(crr), .rsp_i(crsp), .rsp_dst_i(dst)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last = N - 1;
    int waits [N];
    int grants [N];
    logic [N-1:0] acc = '0;
    for (int i = 0; i < N; i++) begin waits[i] = 0; grants[i] = 0; end
    pv = '0; rr = '0; cr = 0; crv = 0; dst = '0; crsp = '0;
    for (int i = 0; i < N; i++) preq[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int exp_g;
      for (int i = 0; i < N; i++) begin
        if (!pv[i] || acc[i]) pv[i] = ($urandom_range(0, 2) != 0);
        preq[i] = '{op: op_e'($urandom_range(0, 2)), page: PPN_W'({$urandom(), $urandom()}), blk: BLK_IDX_W'($urandom())};
      end
      cr  = $urandom_range(0, 3) != 0;
      crv = $urandom_range(0, 1);
      dst = 2'($urandom_range(0, N-1));
      crsp = '{status: ST_OK, uv_update: 1'b0, sv: SV_W'($urandom()), flat: '0, xoff: 2'd0, xblk: '0};
      rr  = 4'($urandom());
      #1;
      exp_g = -1;
      for (int i = 1; i <= N; i++) if (exp_g < 0 && pv[(last + i) % N]) exp_g = (last + i) % N;
      check($countones(pr) <= 1, "one grant");
      check(cv == (exp_g >= 0), "valid when any port requests");
      if (exp_g >= 0) begin
        check(int'(src) == exp_g, $sformatf("round-robin grant %0d exp %0d", src, exp_g));
        check(creq == preq[exp_g], "forwarded request");
        check(pr == (cr ? 4'(1 << exp_g) : 4'b0), "ready to granted port only");
      end
      check(rv == (crv ? 4'(1 << dst) : 4'b0), "response to destination port");
      check(prsp[dst] == crsp, "response payload");
      check(crr == rr[dst], "response ready from destination");
      acc = pr;
      @(posedge clk);
      #1;
      if (exp_g >= 0 && cr) begin
        for (int i = 0; i < N; i++)
          if (i != exp_g && pv[i]) begin waits[i]++; check(waits[i] <= 3, "starvation bound"); end
        waits[exp_g] = 0;
        grants[exp_g]++;
        last = exp_g;
      end
    end
    for (int i = 0; i < N; i++) check(grants[i] > 100, $sformatf("port %0d served", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
