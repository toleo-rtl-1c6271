// tb_toleo_req_decoder: random CXL.mem requests against the documented map:
// MemRd/MemWr of a protected block address -> READ/UPDATE of page addr[63:12],
// block addr[11:6]; MemWr of the reset register -> RESET of the page in the
// data; MemRd of the register, an out-of-range page or an out-of-range RESET
// page -> refused (bad, nothing forwarded, request consumed).
`timescale 1ns/1ps
module tb_toleo_req_decoder;
  import toleo_pkg::*;

  localparam int NP = 1 << 20;
  localparam logic [63:0] MMR = 64'hFFFF_FFFF_FFFF_F000;

  logic        m_valid, m_ready, m_wr, bad, r_valid, r_ready;
  logic [63:0] m_addr, m_data;
  toleo_req_t  rq;

  toleo_req_decoder #(.MMR_ADDR(MMR), .NUM_PAGES(NP)) dut (
    .m2s_valid_i(m_valid), .m2s_ready_o(m_ready), .m2s_wr_i(m_wr), .m2s_addr_i(m_addr),
    .m2s_data_i(m_data), .bad_o(bad), .req_valid_o(r_valid), .req_ready_i(r_ready), .req_o(rq)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_rd = 0, n_up = 0, n_rs = 0, n_bad = 0;
    for (int n = 0; n < 4000; n++) begin
      int kind;
      longint page;
      int blk;
      bit exp_bad;
      op_e exp_op;
      kind = $urandom_range(0, 5);
      page = $urandom_range(0, NP - 1);
      blk  = $urandom_range(0, 63);
      m_valid = 1;
      r_ready = $urandom_range(0, 1);
      m_data  = {$urandom(), $urandom()};
      m_wr    = $urandom_range(0, 1);
      m_addr  = {page[51:0], 6'(blk), 6'($urandom_range(0, 63))};
      exp_bad = 0;
      exp_op  = m_wr ? OP_UPDATE : OP_READ;
      if (kind == 4) begin           // out-of-range block address
        m_addr  = {20'($urandom_range(1, 1000)), 32'($urandom()), 12'h0};
        exp_bad = (m_addr != MMR);
      end else if (kind == 5) begin  // reset register
        m_addr  = MMR;
        exp_op  = OP_RESET;
        if ($urandom_range(0, 3) != 0) m_data = 64'(page);
        exp_bad = !m_wr || (m_data >= 64'(NP));
      end
      #1;
      check(bad == exp_bad, $sformatf("bad=%0d exp %0d addr %h", bad, exp_bad, m_addr));
      check(r_valid == !exp_bad, "forward valid");
      check(m_ready == (exp_bad ? 1'b1 : r_ready), "ready pass-through");
      if (!exp_bad) begin
        check(rq.op == exp_op, $sformatf("op %0d exp %0d", rq.op, exp_op));
        if (exp_op == OP_RESET) check(rq.page == PPN_W'(m_data), "reset page from data");
        else check(rq.page == PPN_W'(page) && rq.blk == BLK_IDX_W'(blk), "page/block split");
        if (exp_op == OP_READ) n_rd++;
        if (exp_op == OP_UPDATE) n_up++;
        if (exp_op == OP_RESET) n_rs++;
      end else n_bad++;
      m_valid = 0;
      #1;
      check(!r_valid, "no request without valid");
    end
    check(n_rd > 0 && n_up > 0 && n_rs > 0 && n_bad > 0, "all kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
