// toleo_ctrl: request handler of the trusted version-storage device.
//
// It serves one request at a time from the port arbiter:
//   READ   - return the stealth version of a cache block;
//   UPDATE - increment it (Trip rules, see trip_engine) and return the new one;
//   RESET  - OS downgrade of a page to a fresh random flat entry.
// Sequence per request (one state per cycle):
//   IDLE  accept, read the page's flat entry
//   FLAT  flat entry arrives; read the four dynamic blocks its pointer names
//   POOL  dynamic blocks arrive
//   EXEC  run trip_engine with one random word; allocate an uneven/full
//         entry if the engine asks for one (if the dynamic region is full the
//         request is answered ST_REJECT and nothing changes); write back the
//         flat entry and the changed blocks; free a dropped extension
//   RSP   hold the response until it is taken
// so a request takes five cycles plus any wait for the random source or the
// response consumer. After reset the controller first sweeps the flat array,
// giving every page a random base and an empty bit vector (one page per
// cycle), and only then raises init_done_o.
// The paper runs this work as a program on a small in-order core whose code it
// does not give; this design implements the same three request types as a
// fixed state machine. Everything the engine decides follows the paper; the
// state sequence, the init sweep and the response contents are this design's.
module toleo_ctrl
  import toleo_pkg::*;
#(
  parameter int NUM_PAGES  = 1 << 24,
  parameter int POOL_BLKS  = 1 << 22,
  parameter int RESET_BITS = 20,
  localparam int PG_W = $clog2(NUM_PAGES),
  localparam int PL_W = $clog2(POOL_BLKS)
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               init_done_o,
  // request / response
  input  logic               req_valid_i,
  output logic               req_ready_o,
  input  toleo_req_t         req_i,
  input  logic [1:0]         req_src_i,
  output logic               rsp_valid_o,
  input  logic               rsp_ready_i,
  output toleo_rsp_t         rsp_o,
  output logic [1:0]         rsp_dst_o,
  // version store
  output logic [PG_W-1:0]    flat_raddr_o,
  input  flat_entry_t        flat_rdata_i,
  output logic               flat_we_o,
  output logic [PG_W-1:0]    flat_waddr_o,
  output flat_entry_t        flat_wdata_o,
  output logic [PL_W-1:0]    pool_raddr_o,
  input  ext_t               pool_rdata_i,
  output logic [FULL_NB-1:0] pool_we_o,
  output logic [PL_W-1:0]    pool_waddr_o,
  output ext_t               pool_wdata_o,
  output alloc_e             alloc_req_o,
  input  logic               alloc_ok_i,
  input  logic [PL_W-1:0]    alloc_ptr_i,
  output logic               free_o,
  output fmt_e               free_fmt_o,
  output logic [PL_W-1:0]    free_ptr_o,
  // random source
  input  logic               rnd_valid_i,
  input  logic [63:0]        rnd_i,
  output logic               rnd_take_o,
  // event strobes (one cycle each)
  output logic               ev_upgrade_o,
  output logic               ev_normalize_o,
  output logic               ev_sreset_o,
  output logic               ev_reject_o
);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_FLAT, S_POOL, S_EXEC, S_RSP} state_e;

  state_e             state;
  toleo_req_t         req_q;
  logic [1:0]         src_q;
  flat_entry_t        flat_q;
  ext_t               ext_q;
  logic [PG_W-1:0]    init_idx;
  toleo_rsp_t         rsp_q;

  // engine
  flat_entry_t        e_flat;
  ext_t               e_ext;
  logic [FULL_NB-1:0] e_we;
  logic [SV_W-1:0]    e_ver;
  alloc_e             e_alloc;
  logic               e_free, e_uv, e_lead, e_upg, e_norm;
  logic               need_rnd, exec_go, rejected;
  logic [PL_W-1:0]    old_ptr;
  logic [1:0]         k;

  trip_engine #(.RESET_BITS(RESET_BITS)) u_trip (
    .op_i        (req_q.op),
    .flat_i      (flat_q),
    .ext_i       (ext_q),
    .blk_i       (req_q.blk),
    .rnd_i       (rnd_i),
    .flat_o      (e_flat),
    .ext_o       (e_ext),
    .ext_we_o    (e_we),
    .version_o   (e_ver),
    .alloc_o     (e_alloc),
    .free_o      (e_free),
    .uv_update_o (e_uv),
    .leading_o   (e_lead),
    .upgrade_o   (e_upg),
    .normalize_o (e_norm)
  );

  assign old_ptr  = flat_q.bv[PL_W-1:0];
  assign k        = req_q.blk[5:4];
  assign need_rnd = (req_q.op != OP_READ);
  assign exec_go  = (state == S_EXEC) && (!need_rnd || rnd_valid_i);
  assign rejected = exec_go && (e_alloc != ALLOC_NONE) && !alloc_ok_i;

  // ---- store / allocator / random-source drive ----------------------------
  always_comb begin
    flat_raddr_o = PG_W'(req_i.page);
    pool_raddr_o = flat_rdata_i.bv[PL_W-1:0];
    flat_we_o    = 1'b0;
    flat_waddr_o = PG_W'(req_q.page);
    flat_wdata_o = e_flat;
    pool_we_o    = '0;
    pool_waddr_o = old_ptr;
    pool_wdata_o = e_ext;
    alloc_req_o  = ALLOC_NONE;
    free_o       = 1'b0;
    free_fmt_o   = flat_q.fmt;
    free_ptr_o   = old_ptr;
    rnd_take_o   = 1'b0;

    if (state == S_INIT) begin
      flat_waddr_o = init_idx;
      flat_wdata_o = '{rsvd: '0, fmt: FMT_FLAT, base: rnd_i[63:37], bv: '0};
      flat_we_o    = rnd_valid_i;
      rnd_take_o   = rnd_valid_i;
    end else if (exec_go) begin
      alloc_req_o = e_alloc;
      if (!rejected && req_q.op != OP_READ) begin
        rnd_take_o = 1'b1;
        flat_we_o  = 1'b1;
        if (e_alloc != ALLOC_NONE) begin
          flat_wdata_o.bv[PL_W-1:0] = alloc_ptr_i;
          pool_waddr_o = alloc_ptr_i;
        end
        pool_we_o = e_we;
        free_o    = e_free;
      end
    end
  end

  // ---- state machine ------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_idx <= '0;
      req_q    <= '0;
      src_q    <= '0;
      flat_q   <= '0;
      ext_q    <= '0;
      rsp_q    <= '0;
    end else begin
      unique case (state)
        S_INIT: if (rnd_valid_i) begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == PG_W'(NUM_PAGES - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid_i) begin
          req_q <= req_i;
          src_q <= req_src_i;
          state <= S_FLAT;
        end
        S_FLAT: begin
          flat_q <= flat_rdata_i;
          state  <= S_POOL;
        end
        S_POOL: begin
          ext_q <= pool_rdata_i;
          state <= S_EXEC;
        end
        S_EXEC: if (exec_go) begin
          rsp_q.status    <= rejected ? ST_REJECT : ST_OK;
          rsp_q.uv_update <= !rejected && e_uv;
          rsp_q.sv        <= rejected ? trip_version(flat_q, (flat_q.fmt == FMT_FULL) ? ext_q[k] : ext_q[0], req_q.blk)
                                      : e_ver;
          if (rejected) begin
            rsp_q.flat <= flat_q;
            rsp_q.xoff <= (flat_q.fmt == FMT_FULL) ? k : 2'd0;
            rsp_q.xblk <= (flat_q.fmt == FMT_FULL) ? ext_q[k] : ext_q[0];
          end else begin
            rsp_q.flat <= e_flat;
            if (e_alloc != ALLOC_NONE) rsp_q.flat.bv[PL_W-1:0] <= alloc_ptr_i;
            rsp_q.xoff <= (e_flat.fmt == FMT_FULL) ? k : 2'd0;
            rsp_q.xblk <= (e_flat.fmt == FMT_FULL) ? e_ext[k] :
                          (e_flat.fmt == FMT_UNEVEN) ? e_ext[0] : '0;
          end
          state <= S_RSP;
        end
        S_RSP: if (rsp_ready_i) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign init_done_o = (state != S_INIT);
  assign req_ready_o = (state == S_IDLE);
  assign rsp_valid_o = (state == S_RSP);
  assign rsp_o       = rsp_q;
  assign rsp_dst_o   = src_q;

  assign ev_upgrade_o   = exec_go && !rejected && e_upg;
  assign ev_normalize_o = exec_go && !rejected && e_norm;
  assign ev_sreset_o    = exec_go && !rejected && e_uv;
  assign ev_reject_o    = rejected;

  // a request is only taken when the controller is idle
  a_req_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               (req_valid_i && req_ready_o) |-> state == S_IDLE);

endmodule
