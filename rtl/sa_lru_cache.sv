// sa_lru_cache: set-associative tag/data store with true LRU replacement,
// used by the host's stealth-version overflow buffer and MAC cache.
//
// The full key is kept as the tag; the set index is key[IDX_LSB +: IDX_W].
// Operations (at most one of fill/inv per cycle; a lookup may accompany them):
//   lookup - combinational hit/data for lkey_i; on a hit the way becomes
//            most recently used at the clock edge
//   fill   - writes fdata_i under fkey_i: over the matching way if present,
//            else into an invalid way, else into the least recently used way
//   inv    - clears every way of ikey_i's set whose tag matches ikey_i on the
//            bits set in imask_i (used to drop all blocks of one page at once)
// LRU is kept as an age per way (0 = most recent); a touched way gets age 0
// and every way younger than it ages by one.
module sa_lru_cache #(
  parameter int SETS    = 32,
  parameter int WAYS    = 16,
  parameter int KEY_W   = 38,
  parameter int DATA_W  = 448,
  parameter int IDX_LSB = 0,
  localparam int IDX_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int AGE_W = $clog2(WAYS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lookup_i,
  input  logic [KEY_W-1:0]  lkey_i,
  output logic              hit_o,
  output logic [DATA_W-1:0] rdata_o,
  input  logic              fill_i,
  input  logic [KEY_W-1:0]  fkey_i,
  input  logic [DATA_W-1:0] fdata_i,
  input  logic              inv_i,
  input  logic [KEY_W-1:0]  ikey_i,
  input  logic [KEY_W-1:0]  imask_i
);

  logic [KEY_W-1:0]  tag_mem  [SETS][WAYS];
  logic [DATA_W-1:0] data_mem [SETS*WAYS];
  logic [WAYS-1:0]   valid    [SETS];
  logic [AGE_W-1:0]  age      [SETS][WAYS];

  logic [IDX_W-1:0] lset, fset, iset;
  logic [AGE_W-1:0] lway, fway;
  logic             fhit;

  assign lset = IDX_W'(lkey_i >> IDX_LSB);
  assign fset = IDX_W'(fkey_i >> IDX_LSB);
  assign iset = IDX_W'(ikey_i >> IDX_LSB);

  always_comb begin
    hit_o = 1'b0;
    lway  = '0;
    for (int w = 0; w < WAYS; w++)
      if (!hit_o && valid[lset][w] && tag_mem[lset][w] == lkey_i) begin
        hit_o = 1'b1;
        lway  = AGE_W'(w);
      end
  end
  assign rdata_o = data_mem[{lset, lway}];

  // fill way: matching, else first invalid, else oldest
  always_comb begin
    logic found;
    fhit  = 1'b0;
    fway  = '0;
    found = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (!fhit && valid[fset][w] && tag_mem[fset][w] == fkey_i) begin
        fhit = 1'b1;
        fway = AGE_W'(w);
      end
    if (!fhit) begin
      for (int w = 0; w < WAYS; w++)
        if (!found && !valid[fset][w]) begin
          found = 1'b1;
          fway  = AGE_W'(w);
        end
      for (int w = 0; w < WAYS; w++)
        if (!found && age[fset][w] == AGE_W'(WAYS - 1)) begin
          found = 1'b1;
          fway  = AGE_W'(w);
        end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_i) begin
      tag_mem[fset][fway]    <= fkey_i;
      data_mem[{fset, fway}] <= fdata_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        for (int w = 0; w < WAYS; w++) age[s][w] <= AGE_W'(w);
      end
    end else begin
      if (lookup_i && hit_o && !(fill_i && fset == lset)) begin
        for (int w = 0; w < WAYS; w++)
          if (age[lset][w] < age[lset][lway]) age[lset][w] <= age[lset][w] + 1'b1;
        age[lset][lway] <= '0;
      end
      if (fill_i) begin
        valid[fset][fway] <= 1'b1;
        for (int w = 0; w < WAYS; w++)
          if (age[fset][w] < age[fset][fway]) age[fset][w] <= age[fset][w] + 1'b1;
        age[fset][fway] <= '0;
      end else if (inv_i) begin
        for (int w = 0; w < WAYS; w++)
          if (((tag_mem[iset][w] ^ ikey_i) & imask_i) == '0) valid[iset][w] <= 1'b0;
      end
    end
  end

  a_one_write: assert property (@(posedge clk) disable iff (!rst_n) !(fill_i && inv_i));

endmodule
