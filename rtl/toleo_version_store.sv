// toleo_version_store: the contents of the trusted device's DRAM as seen by
// its controller, together with the allocator of the dynamic region.
//
// Layout (follows the paper's memory-layout description):
//   * a static array of 12-byte flat entries, one per protected 4 KB page,
//     indexed directly by page number;
//   * a dynamic region of 56-byte blocks shared by uneven entries (one block)
//     and full entries (four blocks). Uneven entries are taken from the bottom
//     of the region and full entries from the top, so the two lists grow toward
//     each other; the device is full when they meet.
// Freed entries are pushed on one free stack per kind and are reused before
// the bump pointers move again. When the last live entry of a list is freed
// the list shrinks back to its end of the region (pointer and stack reset),
// so space freed by one kind becomes usable by the other once all of its
// pages are downgraded. The free-stack scheme and that rule are this design's
// choices; the paper only says the lists are dynamically allocated and grow
// toward each other.
//
// Interface and timing: one flat read and one region read (four consecutive
// blocks, for a full entry) per cycle, data one cycle after the address;
// one flat write and one masked four-block region write per cycle. Alloc is
// answered combinationally (alloc_ok_o/alloc_ptr_o) and takes effect at the
// clock edge when alloc_req_o != ALLOC_NONE; free takes effect at the edge.
// The DRAM's own latency (15 ns in the paper's setup) and its 16-byte
// transactions are not modelled: the arrays stand in for the DRAM behind the
// device's DRAM controller.
//
// Sizes: the paper's device holds 74.6 GB of flat entries (24.8 TB of data)
// and 93.4 GB of dynamic space. Those cannot be held by a simulator, so the
// defaults are 2^24 pages (64 GB of data) and 2^22 blocks (224 MB), in about
// the paper's ratio of dynamic space to flat entries.
module toleo_version_store
  import toleo_pkg::*;
#(
  parameter int NUM_PAGES = 1 << 24,
  parameter int POOL_BLKS = 1 << 22,
  localparam int PG_W = $clog2(NUM_PAGES),
  localparam int PL_W = $clog2(POOL_BLKS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // flat-entry array
  input  logic [PG_W-1:0]    flat_raddr_i,
  output flat_entry_t        flat_rdata_o,
  input  logic               flat_we_i,
  input  logic [PG_W-1:0]    flat_waddr_i,
  input  flat_entry_t        flat_wdata_i,
  // dynamic region (block granularity)
  input  logic [PL_W-1:0]    pool_raddr_i,
  output ext_t               pool_rdata_o,
  input  logic [FULL_NB-1:0] pool_we_i,
  input  logic [PL_W-1:0]    pool_waddr_i,
  input  ext_t               pool_wdata_i,
  // allocator
  input  alloc_e             alloc_req_i,
  output logic               alloc_ok_o,
  output logic [PL_W-1:0]    alloc_ptr_o,
  input  logic               free_i,
  input  fmt_e               free_fmt_i,
  input  logic [PL_W-1:0]    free_ptr_i,
  output logic [PL_W:0]      used_blks_o
);

  flat_entry_t       flat_mem [NUM_PAGES];
  logic [XBLK_W-1:0] pool_mem [POOL_BLKS];
  logic [PL_W-1:0]   ufree    [POOL_BLKS];
  logic [PL_W-1:0]   ffree    [POOL_BLKS/FULL_NB];

  logic [PL_W:0]     u_top, f_bot;      // bump pointers
  logic [PL_W:0]     u_sp;              // free-stack depths
  logic [PL_W-2:0]   f_sp;
  logic [PL_W:0]     used;

  // ---- arrays -------------------------------------------------------------
  always_ff @(posedge clk) begin
    flat_rdata_o <= flat_mem[flat_raddr_i];
    if (flat_we_i) flat_mem[flat_waddr_i] <= flat_wdata_i;
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < FULL_NB; b++) begin
      pool_rdata_o[b] <= pool_mem[pool_raddr_i + PL_W'(b)];
      if (pool_we_i[b]) pool_mem[pool_waddr_i + PL_W'(b)] <= pool_wdata_i[b];
    end
  end

  // ---- allocator ----------------------------------------------------------
  always_comb begin
    alloc_ok_o  = 1'b0;
    alloc_ptr_o = '0;
    unique case (alloc_req_i)
      ALLOC_UNEVEN: begin
        if (u_sp != '0) begin
          alloc_ok_o  = 1'b1;
          alloc_ptr_o = ufree[PL_W'(u_sp - 1'b1)];
        end else if (u_top < f_bot) begin
          alloc_ok_o  = 1'b1;
          alloc_ptr_o = u_top[PL_W-1:0];
        end
      end
      ALLOC_FULL: begin
        if (f_sp != '0) begin
          alloc_ok_o  = 1'b1;
          alloc_ptr_o = ffree[(PL_W-2)'(f_sp - 1'b1)];
        end else if (f_bot >= u_top + (PL_W+1)'(FULL_NB)) begin
          alloc_ok_o  = 1'b1;
          alloc_ptr_o = PL_W'(f_bot - (PL_W+1)'(FULL_NB));
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_top <= '0;
      f_bot <= (PL_W+1)'(POOL_BLKS);
      u_sp  <= '0;
      f_sp  <= '0;
      used  <= '0;
    end else begin
      logic [PL_W:0] used_n;
      used_n = used;
      if (alloc_ok_o && alloc_req_i == ALLOC_UNEVEN) begin
        if (u_sp != '0) u_sp <= u_sp - 1'b1;
        else            u_top <= u_top + 1'b1;
        used_n = used_n + 1'b1;
      end else if (alloc_ok_o && alloc_req_i == ALLOC_FULL) begin
        if (f_sp != '0) f_sp <= f_sp - 1'b1;
        else            f_bot <= f_bot - (PL_W+1)'(FULL_NB);
        used_n = used_n + (PL_W+1)'(FULL_NB);
      end
      if (free_i && free_fmt_i == FMT_UNEVEN) begin
        // a free in the same cycle as a pop of the same stack is not issued
        // by the controller (alloc and free are in different states)
        if (u_top == u_sp + 1'b1 && alloc_req_i != ALLOC_UNEVEN) begin
          u_top <= '0;                 // last live uneven entry: list empty
          u_sp  <= '0;
        end else u_sp <= u_sp + 1'b1;
        used_n = used_n - 1'b1;
      end else if (free_i && free_fmt_i == FMT_FULL) begin
        if ((PL_W+1)'(POOL_BLKS) - f_bot == (PL_W+1)'(f_sp + 1'b1) * (PL_W+1)'(FULL_NB) &&
            alloc_req_i != ALLOC_FULL) begin
          f_bot <= (PL_W+1)'(POOL_BLKS); // last live full entry: list empty
          f_sp  <= '0;
        end else f_sp <= f_sp + 1'b1;
        used_n = used_n - (PL_W+1)'(FULL_NB);
      end
      used <= used_n;
    end
  end

  always_ff @(posedge clk) begin
    if (free_i && free_fmt_i == FMT_UNEVEN) ufree[u_sp[PL_W-1:0]] <= free_ptr_i;
    if (free_i && free_fmt_i == FMT_FULL)   ffree[(PL_W-2)'(f_sp)] <= free_ptr_i;
  end

  assign used_blks_o = used;

endmodule
