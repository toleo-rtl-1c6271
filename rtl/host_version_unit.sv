// host_version_unit: stealth-version front end of a compute node's memory
// protection engine.
//
// On a last-level-cache miss the engine needs the block's stealth version to
// decrypt and verify the returning data; on a dirty eviction it needs a new
// one. This unit answers both, plus the OS's page downgrade:
//   READ   - the TLB extension and the overflow buffer are looked up in the
//            same cycle. A flat page whose flat entry is in the TLB, or an
//            uneven/full page whose block is also in the overflow buffer, is
//            answered on chip (hit). Otherwise a READ goes to the device.
//   UPDATE - always goes to the device (MemWr to the block's address); the
//            device increments the version and returns the new one.
//   RESET  - MemWr of the page number to the device's reset register.
// Every device response refreshes the cached copies: the TLB entry gets the
// returned flat entry, the overflow buffer drops the page's blocks if the
// format changed or the page was reset, and stores the returned block for
// uneven/full pages. A response with uv_update (stealth reset) is passed to
// the engine on uv_update_o, which bumps the page's UV and re-encrypts it.
// Timing: a hit answers two cycles after the request is taken (LOOK, RSP);
// a miss adds the device round trip and one fill cycle.
// Follows the paper: both caches looked up together, one device access per
// write, UV update on reset. This design's choices: the request carries
// both VPN and PPN (the engine already has the translation), a TLB miss
// installs the translation with the device's flat entry, and the handshake.
module host_version_unit
  import toleo_pkg::*;
#(
  parameter int          TLB_ENTRIES = 256,
  parameter int          OVB_ENTRIES = 512,
  parameter int          OVB_WAYS    = 16,
  parameter logic [63:0] MMR_ADDR    = 64'hFFFF_FFFF_FFFF_F000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // protection-engine side
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  op_e                  req_op_i,
  input  logic [VPN_W-1:0]     req_vpn_i,
  input  logic [PPN_W-1:0]     req_ppn_i,
  input  logic [BLK_IDX_W-1:0] req_blk_i,
  output logic                 rsp_valid_o,
  input  logic                 rsp_ready_i,
  output logic [SV_W-1:0]      rsp_sv_o,
  output logic                 rsp_hit_o,     // answered from the on-chip caches
  output logic                 rsp_reject_o,  // device full, update refused
  output logic                 uv_update_o,   // one-cycle strobe
  output logic [PPN_W-1:0]     uv_ppn_o,
  // plaintext side of the node's IDE link to the device
  output logic                 m2s_valid_o,
  input  logic                 m2s_ready_i,
  output logic                 m2s_wr_o,
  output logic [63:0]          m2s_addr_o,
  output logic [63:0]          m2s_data_o,
  input  logic                 s2m_valid_i,
  output logic                 s2m_ready_o,
  input  toleo_rsp_t           s2m_rsp_i
);

  typedef enum logic [2:0] {H_IDLE, H_LOOK, H_SEND, H_WAIT, H_FILL, H_RSP} hstate_e;

  hstate_e              st;
  op_e                  op_q;
  logic [VPN_W-1:0]     vpn_q;
  logic [PPN_W-1:0]     ppn_q;
  logic [BLK_IDX_W-1:0] blk_q;
  toleo_rsp_t           drsp_q;
  logic [SV_W-1:0]      sv_q;
  logic                 hit_q, rej_q;

  // TLB extension
  logic        t_hit, t_fvalid;
  logic [PPN_W-1:0] t_ppn;
  flat_entry_t t_flat;
  logic        t_fill, t_inv;
  // overflow buffer
  logic        o_hit, o_fill, o_inv;
  logic [SV_W-1:0] o_ver;
  logic        cached_hit;
  logic [SV_W-1:0] cached_ver;
  logic        fmt_changed;

  tlb_stealth_ext #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .vpn_i        (vpn_q),
    .hit_o        (t_hit),
    .ppn_o        (t_ppn),
    .flat_valid_o (t_fvalid),
    .flat_o       (t_flat),
    .fill_i       (t_fill),
    .fvpn_i       (vpn_q),
    .fppn_i       (ppn_q),
    .fflat_i      (drsp_q.flat),
    .upd_i        (1'b0),
    .inv_i        (t_inv)
  );

  stealth_ovf_buf #(.ENTRIES(OVB_ENTRIES), .WAYS(OVB_WAYS)) u_ovb (
    .clk, .rst_n,
    .lookup_i   (st == H_LOOK && t_fvalid),
    .vpn_i      (vpn_q),
    .blk_i      (blk_q),
    .flat_i     (t_flat),
    .hit_o      (o_hit),
    .version_o  (o_ver),
    .fill_i     (o_fill),
    .fvpn_i     (vpn_q),
    .foff_i     (drsp_q.xoff),
    .fblk_i     (drsp_q.xblk),
    .inv_page_i (o_inv),
    .ivpn_i     (vpn_q)
  );

  assign cached_hit = t_fvalid && ((t_flat.fmt == FMT_FLAT) || o_hit);
  assign cached_ver = (t_flat.fmt == FMT_FLAT) ? trip_version(t_flat, '0, blk_q) : o_ver;
  // the page's cached blocks are dropped when its format changed or it was
  // reset (a stale block of an earlier uneven/full period must not be reused)
  assign fmt_changed = !t_fvalid || (t_flat.fmt != s2m_rsp_i.flat.fmt) ||
                       s2m_rsp_i.uv_update || (op_q == OP_RESET);

  // cache maintenance: WAIT->FILL cycle invalidates (if needed), FILL writes
  assign t_fill = (st == H_FILL) && (drsp_q.status == ST_OK) && (op_q != OP_RESET);
  assign t_inv  = (st == H_FILL) && (op_q == OP_RESET);
  assign o_inv  = (st == H_WAIT) && s2m_valid_i && fmt_changed;
  assign o_fill = (st == H_FILL) && (drsp_q.status == ST_OK) && (op_q != OP_RESET) &&
                  (drsp_q.flat.fmt != FMT_FLAT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= H_IDLE;
      op_q   <= OP_READ;
      vpn_q  <= '0;
      ppn_q  <= '0;
      blk_q  <= '0;
      drsp_q <= '0;
      sv_q   <= '0;
      hit_q  <= 1'b0;
      rej_q  <= 1'b0;
    end else begin
      unique case (st)
        H_IDLE: if (req_valid_i) begin
          op_q  <= req_op_i;
          vpn_q <= req_vpn_i;
          ppn_q <= req_ppn_i;
          blk_q <= req_blk_i;
          st    <= H_LOOK;
        end
        H_LOOK: begin
          if (op_q == OP_READ && cached_hit) begin
            sv_q  <= cached_ver;
            hit_q <= 1'b1;
            rej_q <= 1'b0;
            st    <= H_RSP;
          end else begin
            hit_q <= 1'b0;
            st    <= H_SEND;
          end
        end
        H_SEND: if (m2s_ready_i) st <= H_WAIT;
        H_WAIT: if (s2m_valid_i) begin
          drsp_q <= s2m_rsp_i;
          sv_q   <= s2m_rsp_i.sv;
          rej_q  <= (s2m_rsp_i.status == ST_REJECT);
          st     <= H_FILL;
        end
        H_FILL: st <= H_RSP;
        H_RSP:  if (rsp_ready_i) st <= H_IDLE;
        default: st <= H_IDLE;
      endcase
    end
  end

  assign req_ready_o  = (st == H_IDLE);
  assign rsp_valid_o  = (st == H_RSP);
  assign rsp_sv_o     = sv_q;
  assign rsp_hit_o    = hit_q;
  assign rsp_reject_o = rej_q;
  assign uv_update_o  = (st == H_FILL) && drsp_q.uv_update;
  assign uv_ppn_o     = ppn_q;

  assign m2s_valid_o = (st == H_SEND);
  assign m2s_wr_o    = (op_q != OP_READ);
  assign m2s_addr_o  = (op_q == OP_RESET) ? MMR_ADDR : {4'b0, ppn_q, blk_q, 6'b0};
  assign m2s_data_o  = (op_q == OP_RESET) ? 64'(ppn_q) : '0;
  assign s2m_ready_o = (st == H_WAIT);

endmodule
