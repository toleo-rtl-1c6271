// toleo_req_decoder: turns a host's CXL.mem request, as it leaves the IDE
// port already decrypted and checked, into one of the device's three
// operations:
//   MemRd to a protected block address            -> READ
//   MemWr to a protected block address            -> UPDATE
//   MemWr to the reset register (address MMR_ADDR) -> RESET of the page whose
//                                                    number is in the write data
// The block address is a byte address of a protected 64-byte cache block:
// bits [11:6] select the block in its 4 KB page and the bits above select the
// page. A MemRd of the register address, or a request outside the protected
// range, is refused with bad_o (nothing is forwarded).
// The paper states the mapping of the three operations onto CXL.mem reads,
// writes and a register write; the opcode encoding, address map and register
// address are this design's choices. Purely combinational, valid/ready pass
// straight through.
module toleo_req_decoder
  import toleo_pkg::*;
#(
  parameter logic [63:0] MMR_ADDR  = 64'hFFFF_FFFF_FFFF_F000,
  parameter int          NUM_PAGES = 1 << 24
) (
  // CXL.mem side
  input  logic        m2s_valid_i,
  output logic        m2s_ready_o,
  input  logic        m2s_wr_i,     // 0: MemRd, 1: MemWr
  input  logic [63:0] m2s_addr_i,
  input  logic [63:0] m2s_data_i,
  output logic        bad_o,
  // device side
  output logic        req_valid_o,
  input  logic        req_ready_i,
  output toleo_req_t  req_o
);

  logic is_mmr, in_range;

  assign is_mmr   = (m2s_addr_i == MMR_ADDR);
  assign in_range = (m2s_addr_i[63:12] < 52'(NUM_PAGES));

  always_comb begin
    req_o      = '0;
    req_o.page = PPN_W'(m2s_addr_i[63:12]);
    req_o.blk  = m2s_addr_i[11:6];
    req_o.op   = m2s_wr_i ? OP_UPDATE : OP_READ;
    bad_o      = 1'b0;
    if (is_mmr) begin
      req_o.op   = OP_RESET;
      req_o.page = PPN_W'(m2s_data_i);
      req_o.blk  = '0;
      bad_o      = !m2s_wr_i || (m2s_data_i >= 64'(NUM_PAGES));
    end else if (!in_range) begin
      bad_o = 1'b1;
    end
  end

  assign req_valid_o = m2s_valid_i && !bad_o;
  assign m2s_ready_o = bad_o ? 1'b1 : req_ready_i;

endmodule
