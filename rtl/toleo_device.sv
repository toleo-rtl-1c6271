// toleo_device: logic die of the trusted version-storage device.
//
// It holds the 27-bit stealth versions of every protected cache block in the
// rack and answers READ / UPDATE / RESET requests from NPORTS compute nodes.
// Inside (as in the paper's device diagram): per-link request decoding, one
// controller with its random number generator, and the version store that
// stands in for the stacked DRAM and its controller. The CXL IDE link ports
// (PHY, link layer, IDE encryption and integrity) are not part of this RTL:
// each m2s_*/s2m_* group is the plaintext side of one x8 IDE port.
//
//   host link  -> toleo_req_decoder -> toleo_port_arbiter -> toleo_ctrl
//                                                 |            |     |
//                                         response routing  store  range_trng
//
// After reset the device initialises every flat entry (one page per cycle)
// and raises init_done_o; requests wait until then. A request takes five
// controller cycles plus arbitration and any response back-pressure.
module toleo_device
  import toleo_pkg::*;
#(
  parameter int          NPORTS     = 4,
  parameter int          NUM_PAGES  = 1 << 24,
  parameter int          POOL_BLKS  = 1 << 22,
  parameter int          RESET_BITS = 20,
  parameter logic [63:0] MMR_ADDR   = 64'hFFFF_FFFF_FFFF_F000,
  parameter logic [63:0] RNG_SEED   = 64'h9E37_79B9_7F4A_7C15,
  localparam int PL_W = $clog2(POOL_BLKS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      init_done_o,
  // plaintext side of the IDE ports
  input  logic [NPORTS-1:0]         m2s_valid_i,
  output logic [NPORTS-1:0]         m2s_ready_o,
  input  logic [NPORTS-1:0]         m2s_wr_i,
  input  logic [NPORTS-1:0][63:0]   m2s_addr_i,
  input  logic [NPORTS-1:0][63:0]   m2s_data_i,
  output logic [NPORTS-1:0]         m2s_bad_o,
  output logic [NPORTS-1:0]         s2m_valid_o,
  input  logic [NPORTS-1:0]         s2m_ready_i,
  output toleo_rsp_t [NPORTS-1:0]   s2m_rsp_o,
  // status
  output logic [PL_W:0]             used_blks_o,
  output logic                      ev_upgrade_o,
  output logic                      ev_normalize_o,
  output logic                      ev_sreset_o,
  output logic                      ev_reject_o
);

  localparam int PG_W = $clog2(NUM_PAGES);
  localparam int SW   = $clog2(NPORTS);

  logic [NPORTS-1:0]       d_valid, d_ready;
  toleo_req_t [NPORTS-1:0] d_req;

  logic                    a_valid, a_ready;
  toleo_req_t              a_req;
  logic [SW-1:0]           a_src;
  logic                    c_rsp_valid, c_rsp_ready;
  toleo_rsp_t              c_rsp;
  logic [SW-1:0]           c_dst;
  logic [1:0]              c_src2, c_dst2;
  logic                    init_done;

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    toleo_req_decoder #(.MMR_ADDR(MMR_ADDR), .NUM_PAGES(NUM_PAGES)) u_dec (
      .m2s_valid_i (m2s_valid_i[p] && init_done),
      .m2s_ready_o (m2s_ready_o[p]),
      .m2s_wr_i    (m2s_wr_i[p]),
      .m2s_addr_i  (m2s_addr_i[p]),
      .m2s_data_i  (m2s_data_i[p]),
      .bad_o       (m2s_bad_o[p]),
      .req_valid_o (d_valid[p]),
      .req_ready_i (d_ready[p] && init_done),
      .req_o       (d_req[p])
    );
  end

  toleo_port_arbiter #(.N(NPORTS)) u_arb (
    .clk, .rst_n,
    .p_req_valid_i (d_valid),
    .p_req_ready_o (d_ready),
    .p_req_i       (d_req),
    .p_rsp_valid_o (s2m_valid_o),
    .p_rsp_ready_i (s2m_ready_i),
    .p_rsp_o       (s2m_rsp_o),
    .req_valid_o   (a_valid),
    .req_ready_i   (a_ready),
    .req_o         (a_req),
    .req_src_o     (a_src),
    .rsp_valid_i   (c_rsp_valid),
    .rsp_ready_o   (c_rsp_ready),
    .rsp_i         (c_rsp),
    .rsp_dst_i     (c_dst)
  );

  // store <-> controller
  logic [PG_W-1:0]    flat_raddr, flat_waddr;
  flat_entry_t        flat_rdata, flat_wdata;
  logic               flat_we;
  logic [PL_W-1:0]    pool_raddr, pool_waddr, alloc_ptr, free_ptr;
  ext_t               pool_rdata, pool_wdata;
  logic [FULL_NB-1:0] pool_we;
  alloc_e             alloc_req;
  logic               alloc_ok, free_v;
  fmt_e               free_fmt;
  logic               rnd_valid, rnd_take;
  logic [63:0]        rnd;

  assign c_src2 = 2'(a_src);
  assign c_dst  = SW'(c_dst2);

  toleo_ctrl #(.NUM_PAGES(NUM_PAGES), .POOL_BLKS(POOL_BLKS), .RESET_BITS(RESET_BITS)) u_ctrl (
    .clk, .rst_n,
    .init_done_o  (init_done),
    .req_valid_i  (a_valid),
    .req_ready_o  (a_ready),
    .req_i        (a_req),
    .req_src_i    (c_src2),
    .rsp_valid_o  (c_rsp_valid),
    .rsp_ready_i  (c_rsp_ready),
    .rsp_o        (c_rsp),
    .rsp_dst_o    (c_dst2),
    .flat_raddr_o (flat_raddr),
    .flat_rdata_i (flat_rdata),
    .flat_we_o    (flat_we),
    .flat_waddr_o (flat_waddr),
    .flat_wdata_o (flat_wdata),
    .pool_raddr_o (pool_raddr),
    .pool_rdata_i (pool_rdata),
    .pool_we_o    (pool_we),
    .pool_waddr_o (pool_waddr),
    .pool_wdata_o (pool_wdata),
    .alloc_req_o  (alloc_req),
    .alloc_ok_i   (alloc_ok),
    .alloc_ptr_i  (alloc_ptr),
    .free_o       (free_v),
    .free_fmt_o   (free_fmt),
    .free_ptr_o   (free_ptr),
    .rnd_valid_i  (rnd_valid),
    .rnd_i        (rnd),
    .rnd_take_o   (rnd_take),
    .ev_upgrade_o   (ev_upgrade_o),
    .ev_normalize_o (ev_normalize_o),
    .ev_sreset_o    (ev_sreset_o),
    .ev_reject_o    (ev_reject_o)
  );

  toleo_version_store #(.NUM_PAGES(NUM_PAGES), .POOL_BLKS(POOL_BLKS)) u_store (
    .clk, .rst_n,
    .flat_raddr_i (flat_raddr),
    .flat_rdata_o (flat_rdata),
    .flat_we_i    (flat_we),
    .flat_waddr_i (flat_waddr),
    .flat_wdata_i (flat_wdata),
    .pool_raddr_i (pool_raddr),
    .pool_rdata_o (pool_rdata),
    .pool_we_i    (pool_we),
    .pool_waddr_i (pool_waddr),
    .pool_wdata_i (pool_wdata),
    .alloc_req_i  (alloc_req),
    .alloc_ok_o   (alloc_ok),
    .alloc_ptr_o  (alloc_ptr),
    .free_i       (free_v),
    .free_fmt_i   (free_fmt),
    .free_ptr_i   (free_ptr),
    .used_blks_o  (used_blks_o)
  );

  range_trng #(.SEED(RNG_SEED), .GEN_CYCLES(0)) u_rng (
    .clk, .rst_n,
    .take_i  (rnd_take),
    .valid_o (rnd_valid),
    .rnd_o   (rnd)
  );

  assign init_done_o = init_done;

endmodule
