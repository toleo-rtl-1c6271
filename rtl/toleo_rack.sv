// toleo_rack: freshness protection for a rack of NODES compute nodes sharing
// one trusted version-storage device.
//
// Every node's memory protection engine owns a host_version_unit (TLB
// extension + overflow buffer + device requester) and a MAC cache; the
// version units reach the shared toleo_device over one x8 IDE link each. The
// rack therefore keeps a 27-bit stealth version for every protected 64-byte
// block of every node's memory in one place, inside trusted silicon, instead
// of in a Merkle tree.
//
//   node n: eng_* --> host_version_unit --(link n)--> toleo_device
//           mac_* --> mac_cache                       (decoders, arbiter,
//                                                      controller, store, RNG)
//
// Not in this RTL (their signals are the ports): the cores and caches that
// issue eng_* requests, the AES-XTS / MAC engine that consumes versions and
// uv_update, the conventional memory that fills the MAC cache, and the CXL
// IDE link layer between each node and the device (the links are wired
// straight through here, in plaintext).
// Defaults follow the paper's rack: four nodes, 256-entry TLB extension,
// 512-entry 16-way overflow buffer, 1 MB 16-way MAC cache per node, reset
// probability 2^-20; the device's store is scaled (see toleo_version_store).
module toleo_rack
  import toleo_pkg::*;
#(
  parameter int NODES       = 4,
  parameter int NUM_PAGES   = 1 << 24,
  parameter int POOL_BLKS   = 1 << 22,
  parameter int RESET_BITS  = 20,
  parameter int TLB_ENTRIES = 256,
  parameter int OVB_ENTRIES = 512,
  parameter int MAC_LINES   = 16384,
  localparam int PA_W = PPN_W + 12,
  localparam int PL_W = $clog2(POOL_BLKS)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  output logic                             init_done_o,
  // per-node version requests from the protection engine
  input  logic [NODES-1:0]                 eng_valid_i,
  output logic [NODES-1:0]                 eng_ready_o,
  input  op_e  [NODES-1:0]                 eng_op_i,
  input  logic [NODES-1:0][VPN_W-1:0]      eng_vpn_i,
  input  logic [NODES-1:0][PPN_W-1:0]      eng_ppn_i,
  input  logic [NODES-1:0][BLK_IDX_W-1:0]  eng_blk_i,
  output logic [NODES-1:0]                 eng_rsp_valid_o,
  input  logic [NODES-1:0]                 eng_rsp_ready_i,
  output logic [NODES-1:0][SV_W-1:0]       eng_rsp_sv_o,
  output logic [NODES-1:0]                 eng_rsp_hit_o,
  output logic [NODES-1:0]                 eng_rsp_reject_o,
  output logic [NODES-1:0]                 uv_update_o,
  output logic [NODES-1:0][PPN_W-1:0]      uv_ppn_o,
  // per-node MAC cache
  input  logic [NODES-1:0]                 mac_lookup_i,
  input  logic [NODES-1:0][PA_W-1:0]       mac_pa_i,
  output logic [NODES-1:0]                 mac_hit_o,
  output logic [NODES-1:0][MAC_W-1:0]      mac_o,
  output logic [NODES-1:0][UV_W-1:0]       mac_uv_o,
  input  logic [NODES-1:0]                 mac_fill_i,
  input  logic [NODES-1:0][511:0]          mac_fline_i,
  input  logic [NODES-1:0]                 mac_wr_i,
  input  logic [NODES-1:0][MAC_W-1:0]      mac_wdata_i,
  input  logic [NODES-1:0]                 mac_wr_uv_i,
  input  logic [NODES-1:0][UV_W-1:0]       mac_uv_i,
  // device status
  output logic [NODES-1:0]                 link_bad_o,
  output logic [PL_W:0]                    dev_used_blks_o,
  output logic                             ev_upgrade_o,
  output logic                             ev_normalize_o,
  output logic                             ev_sreset_o,
  output logic                             ev_reject_o
);

  logic [NODES-1:0]             m2s_valid, m2s_ready, m2s_wr;
  logic [NODES-1:0][63:0]       m2s_addr, m2s_data;
  logic [NODES-1:0]             s2m_valid, s2m_ready;
  toleo_rsp_t [NODES-1:0]       s2m_rsp;

  for (genvar n = 0; n < NODES; n++) begin : g_node
    host_version_unit #(.TLB_ENTRIES(TLB_ENTRIES), .OVB_ENTRIES(OVB_ENTRIES)) u_hvu (
      .clk, .rst_n,
      .req_valid_i  (eng_valid_i[n]),
      .req_ready_o  (eng_ready_o[n]),
      .req_op_i     (eng_op_i[n]),
      .req_vpn_i    (eng_vpn_i[n]),
      .req_ppn_i    (eng_ppn_i[n]),
      .req_blk_i    (eng_blk_i[n]),
      .rsp_valid_o  (eng_rsp_valid_o[n]),
      .rsp_ready_i  (eng_rsp_ready_i[n]),
      .rsp_sv_o     (eng_rsp_sv_o[n]),
      .rsp_hit_o    (eng_rsp_hit_o[n]),
      .rsp_reject_o (eng_rsp_reject_o[n]),
      .uv_update_o  (uv_update_o[n]),
      .uv_ppn_o     (uv_ppn_o[n]),
      .m2s_valid_o  (m2s_valid[n]),
      .m2s_ready_i  (m2s_ready[n]),
      .m2s_wr_o     (m2s_wr[n]),
      .m2s_addr_o   (m2s_addr[n]),
      .m2s_data_o   (m2s_data[n]),
      .s2m_valid_i  (s2m_valid[n]),
      .s2m_ready_o  (s2m_ready[n]),
      .s2m_rsp_i    (s2m_rsp[n])
    );

    mac_cache #(.LINES(MAC_LINES)) u_mac (
      .clk, .rst_n,
      .lookup_i (mac_lookup_i[n]),
      .pa_i     (mac_pa_i[n]),
      .hit_o    (mac_hit_o[n]),
      .mac_o    (mac_o[n]),
      .uv_o     (mac_uv_o[n]),
      .fill_i   (mac_fill_i[n]),
      .fline_i  (mac_fline_i[n]),
      .wr_mac_i (mac_wr_i[n]),
      .mac_i    (mac_wdata_i[n]),
      .wr_uv_i  (mac_wr_uv_i[n]),
      .uv_i     (mac_uv_i[n])
    );
  end

  toleo_device #(
    .NPORTS(NODES), .NUM_PAGES(NUM_PAGES), .POOL_BLKS(POOL_BLKS), .RESET_BITS(RESET_BITS)
  ) u_dev (
    .clk, .rst_n,
    .init_done_o    (init_done_o),
    .m2s_valid_i    (m2s_valid),
    .m2s_ready_o    (m2s_ready),
    .m2s_wr_i       (m2s_wr),
    .m2s_addr_i     (m2s_addr),
    .m2s_data_i     (m2s_data),
    .m2s_bad_o      (link_bad_o),
    .s2m_valid_o    (s2m_valid),
    .s2m_ready_i    (s2m_ready),
    .s2m_rsp_o      (s2m_rsp),
    .used_blks_o    (dev_used_blks_o),
    .ev_upgrade_o   (ev_upgrade_o),
    .ev_normalize_o (ev_normalize_o),
    .ev_sreset_o    (ev_sreset_o),
    .ev_reject_o    (ev_reject_o)
  );

endmodule
