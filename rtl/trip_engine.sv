// trip_engine: the Trip (tri-level page) version arithmetic for one page.
//
// Given the page's flat entry, the 56-byte extension blocks that go with it
// (uneven offsets in block 0, or the four blocks of a full entry), the block
// index and one random word, it computes in one combinational pass what a
// READ, UPDATE or RESET does to the page:
//   * READ   returns the block's stealth version and changes nothing.
//   * UPDATE increments the block's stealth version (modulo 2^27):
//       flat   - version = base + bv[i]. Setting bv[i] is the update; when the
//                vector becomes all ones the base is incremented and the vector
//                cleared. Updating a block whose bit is already set would make
//                the stride two, so the page is upgraded to uneven (offsets =
//                old bit vector, offset i = 2) and an uneven block is requested.
//       uneven - version = base + off[i] with 7-bit offsets; MAX and MIN of the
//                offsets sit in bv[63:57] and bv[56:50], the pointer in
//                bv[47:0]. An offset that would reach 128 triggers
//                normalisation (subtract MIN from every offset, add it to the
//                base); if MIN is 0 the stride exceeds 128 and the page is
//                upgraded to full (a full entry is requested, the uneven block
//                freed).
//       full   - 64 explicit 27-bit versions; the flat base tracks the leading
//                (highest) version.
//     When the updated block holds the leading version of its page, a stealth
//     reset is drawn with probability 2^-RESET_BITS. A reset turns the page
//     back into a flat entry with a random base and an empty bit vector, frees
//     any extension and raises uv_update so the host bumps the page's UV.
//   * RESET  (OS downgrade) does the same turn-back-to-flat without the draw.
// All of the above follows the paper. Bit placement, the exact random-bit
// slices (rnd[RESET_BITS-1:0] for the draw, rnd[63:37] for the new base), the
// value returned on an update (the new version) and recomputing MIN/MAX from
// all offsets on every uneven write are this design's choices. The caller
// (toleo_ctrl) writes the allocated pointer into flat_o.bv[47:0].
module trip_engine
  import toleo_pkg::*;
#(
  parameter int RESET_BITS = 20
) (
  input  op_e                  op_i,
  input  flat_entry_t          flat_i,
  input  ext_t                 ext_i,
  input  logic [BLK_IDX_W-1:0] blk_i,
  input  logic [63:0]          rnd_i,
  output flat_entry_t          flat_o,
  output ext_t                 ext_o,
  output logic [FULL_NB-1:0]   ext_we_o,    // extension blocks to write back
  output logic [SV_W-1:0]      version_o,   // version read / new version
  output alloc_e               alloc_o,     // extension the caller must allocate
  output logic                 free_o,      // caller frees the old extension
  output logic                 uv_update_o, // stealth reset happened
  output logic                 leading_o,   // update touched the leading version
  output logic                 upgrade_o,   // format upgrade flat->uneven or uneven->full
  output logic                 normalize_o  // uneven offsets normalised
);

  logic [SV_W-1:0]  rnd_base;
  logic             reset_draw;
  logic [OFF_W-1:0] offs   [BLKS];
  logic [OFF_W-1:0] omax, omin;
  logic [OFF_W:0]   newoff;
  logic [SV_W-1:0]  fv;
  logic [1:0]       k;
  logic [63:0]      bv_set;

  assign rnd_base   = rnd_i[63:37];
  assign reset_draw = (rnd_i[RESET_BITS-1:0] == '0);
  assign k          = blk_i[5:4];

  always_comb begin
    flat_o      = flat_i;
    ext_o       = ext_i;
    ext_we_o    = '0;
    version_o   = '0;
    alloc_o     = ALLOC_NONE;
    free_o      = 1'b0;
    uv_update_o = 1'b0;
    leading_o   = 1'b0;
    upgrade_o   = 1'b0;
    normalize_o = 1'b0;
    newoff      = '0;
    fv          = '0;
    bv_set      = '0;
    omax        = '0;
    omin        = '0;
    for (int j = 0; j < BLKS; j++) offs[j] = unev_off(ext_i[0], BLK_IDX_W'(j));

    unique case (op_i)
      OP_READ: begin
        version_o = trip_version(flat_i, (flat_i.fmt == FMT_FULL) ? ext_i[k] : ext_i[0], blk_i);
      end

      OP_RESET: begin
        flat_o    = '{rsvd: '0, fmt: FMT_FLAT, base: rnd_base, bv: '0};
        free_o    = (flat_i.fmt != FMT_FLAT);
        version_o = rnd_base;
      end

      OP_UPDATE: begin
        unique case (flat_i.fmt)
          FMT_UNEVEN: begin
            omax      = flat_i.bv[BV_MAX_LSB +: OFF_W];
            leading_o = (offs[blk_i] == omax);
            newoff    = {1'b0, offs[blk_i]} + 1'b1;
            omin      = offs[0];
            for (int j = 1; j < BLKS; j++) if (offs[j] < omin) omin = offs[j];
            if (!newoff[OFF_W]) begin
              offs[blk_i] = newoff[OFF_W-1:0];
              version_o   = flat_i.base + SV_W'(newoff);
              ext_we_o    = 4'b0001;
            end else if (omin != '0) begin
              // normalise: rebase on MIN
              for (int j = 0; j < BLKS; j++) offs[j] = offs[j] - omin;
              offs[blk_i]  = OFF_W'(newoff - {1'b0, omin});
              flat_o.base  = flat_i.base + SV_W'(omin);
              version_o    = flat_i.base + SV_W'(newoff);
              ext_we_o     = 4'b0001;
              normalize_o  = 1'b1;
            end else begin
              // stride over 128: upgrade to full
              for (int j = 0; j < BLKS; j++)
                ext_o[j/VPB][(j%VPB)*SV_W +: SV_W] = flat_i.base + SV_W'(offs[j]);
              for (int b = 0; b < FULL_NB; b++) ext_o[b][XBLK_W-1:VPB*SV_W] = '0;
              ext_o[k][blk_i[3:0]*SV_W +: SV_W] = flat_i.base + SV_W'(newoff);
              version_o    = flat_i.base + SV_W'(newoff);
              flat_o.fmt   = FMT_FULL;
              flat_o.base  = version_o;
              flat_o.bv    = '0;
              ext_we_o     = 4'b1111;
              alloc_o      = ALLOC_FULL;
              free_o       = 1'b1;
              upgrade_o    = 1'b1;
            end
            if (flat_o.fmt == FMT_UNEVEN) begin
              omax = offs[0];
              omin = offs[0];
              for (int j = 1; j < BLKS; j++) begin
                if (offs[j] > omax) omax = offs[j];
                if (offs[j] < omin) omin = offs[j];
              end
              for (int j = 0; j < BLKS; j++) ext_o[0][j*OFF_W +: OFF_W] = offs[j];
              flat_o.bv[BV_MAX_LSB +: OFF_W] = omax;
              flat_o.bv[BV_MIN_LSB +: OFF_W] = omin;
            end
          end

          FMT_FULL: begin
            fv        = full_ver(ext_i[k], blk_i[3:0]);
            leading_o = (fv == flat_i.base);
            version_o = fv + 1'b1;
            ext_o[k][blk_i[3:0]*SV_W +: SV_W] = version_o;
            ext_we_o[k] = 1'b1;
            if (leading_o) flat_o.base = version_o;
          end

          default: begin // FMT_FLAT
            leading_o = (flat_i.bv == '0);
            if (!flat_i.bv[blk_i]) begin
              bv_set    = flat_i.bv | (64'd1 << blk_i);
              version_o = flat_i.base + 1'b1;
              if (&bv_set) begin
                flat_o.base = version_o;
                flat_o.bv   = '0;
              end else begin
                flat_o.bv   = bv_set;
              end
            end else begin
              // stride two inside the page: upgrade to uneven
              leading_o = 1'b1;
              for (int j = 0; j < BLKS; j++)
                ext_o[0][j*OFF_W +: OFF_W] = OFF_W'(flat_i.bv[j]);
              ext_o[0][blk_i*OFF_W +: OFF_W] = OFF_W'(2);
              version_o   = flat_i.base + SV_W'(2);
              flat_o.fmt  = FMT_UNEVEN;
              flat_o.bv   = '0;
              flat_o.bv[BV_MAX_LSB +: OFF_W] = OFF_W'(2);
              flat_o.bv[BV_MIN_LSB +: OFF_W] = '0;
              ext_we_o    = 4'b0001;
              alloc_o     = ALLOC_UNEVEN;
              upgrade_o   = 1'b1;
            end
          end
        endcase

        if (leading_o && reset_draw) begin
          flat_o      = '{rsvd: '0, fmt: FMT_FLAT, base: rnd_base, bv: '0};
          ext_o       = ext_i;
          ext_we_o    = '0;
          alloc_o     = ALLOC_NONE;
          free_o      = (flat_i.fmt != FMT_FLAT);
          uv_update_o = 1'b1;
          upgrade_o   = 1'b0;
          normalize_o = 1'b0;
          version_o   = rnd_base;
        end
      end

      default: ;
    endcase
  end

endmodule
