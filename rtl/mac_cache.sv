// mac_cache: host-side cache of MAC blocks.
//
// Conventional memory holds, next to the ciphertext, 64-byte MAC blocks: eight
// 56-bit MACs (one per 64-byte data block) and, in the spare bits, the 37-bit
// upper version (UV) of the page those blocks belong to. This cache keeps such
// blocks on the processor, so that both the MAC for an integrity check and the
// UV for building the 64-bit version come from one hit.
// Line layout (this design's choice; the paper shows MACs followed by UV):
// MAC j in bits [56j +: 56], UV in bits [448 +: 37], the rest zero.
// A data block at physical byte address pa uses MAC block pa>>9, slot pa[8:6].
// Operations: lookup (combinational hit, MAC and UV for pa_i); fill_i writes a
// whole line; wr_mac_i / wr_uv_i replace one MAC / the UV of a line that hits
// (write-back of a dirty block, UV increment after a stealth reset).
// Paper: 1 MB in total (32 KB per core), 16-way, LRU; this design models
// the total as one array per compute node.
module mac_cache
  import toleo_pkg::*;
#(
  parameter int LINES = 16384,
  parameter int WAYS  = 16,
  parameter int PA_W  = PPN_W + 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lookup_i,
  input  logic [PA_W-1:0]  pa_i,
  output logic             hit_o,
  output logic [MAC_W-1:0] mac_o,
  output logic [UV_W-1:0]  uv_o,
  input  logic             fill_i,
  input  logic [511:0]     fline_i,
  input  logic             wr_mac_i,
  input  logic [MAC_W-1:0] mac_i,
  input  logic             wr_uv_i,
  input  logic [UV_W-1:0]  uv_i
);

  localparam int KEY_W = PA_W - 9;

  logic [511:0] line, wline;
  logic [2:0]   slot;
  logic         chit, do_fill;

  assign slot = pa_i[8:6];

  always_comb begin
    wline = line;
    if (fill_i) wline = fline_i;
    else begin
      if (wr_mac_i) wline[slot*MAC_W +: MAC_W] = mac_i;
      if (wr_uv_i)  wline[MACS_PER_BLK*MAC_W +: UV_W] = uv_i;
    end
  end
  assign do_fill = fill_i || ((wr_mac_i || wr_uv_i) && chit);

  sa_lru_cache #(
    .SETS(LINES / WAYS), .WAYS(WAYS), .KEY_W(KEY_W), .DATA_W(512), .IDX_LSB(0)
  ) u_cache (
    .clk, .rst_n,
    .lookup_i (lookup_i),
    .lkey_i   (pa_i[PA_W-1:9]),
    .hit_o    (chit),
    .rdata_o  (line),
    .fill_i   (do_fill),
    .fkey_i   (pa_i[PA_W-1:9]),
    .fdata_i  (wline),
    .inv_i    (1'b0),
    .ikey_i   ('0),
    .imask_i  ('0)
  );

  assign hit_o = chit;
  assign mac_o = line[slot*MAC_W +: MAC_W];
  assign uv_o  = line[MACS_PER_BLK*MAC_W +: UV_W];

endmodule
