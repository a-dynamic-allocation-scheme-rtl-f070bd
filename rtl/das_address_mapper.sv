// das_address_mapper: the DAS address remapping logic.
//
// What it does: turns the address a PE (or the DMA splitter) sees into the
// physical L1 address. Outside every enabled DAS region the address passes
// unchanged, which is the word-interleaved mapping of the cluster: byte
// offset (2 bits), bank bits b, row bits above. Inside a region the word
// offset from the region start is split, from the bottom, into
//   p bits  - bank within a partition of 2^p banks (unchanged),
//   s bits  - row within the region, 2^s rows,
//   v bits  - partition index, v = b - p (2^v partitions of 2^p banks),
// and the s field is moved above the v field, so physical = {.., s, v, p}.
// Contiguous logical addresses therefore fill the 2^p banks of one
// partition, then move one row down in the same partition, and only after
// 2^s rows step to the next partition. With s = 0 the map is the identity.
//
// Timing: purely combinational. Interface: addr_i in, addr_o out, plus the
// hit flag and the p/s of the matching region (used by the DMA splitter).
//
// From the paper: the field order and widths, and that p, s and the region
// start are configured at run time. This design's choices: the remap is
// applied to the offset from the region start, so a region must start on a
// full L1 row (2^b words); a region is [start, start+size); size 0 disables
// it; the lowest-numbered matching region wins; p is clamped to b and s to
// the row bits. The paper's text gives v = b + s - p, but its figure (s, v
// and p together filling the b bank bits plus s row bits) needs v = b - p,
// which is used here.
module das_address_mapper
  import das_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = 4,
  parameter int unsigned BANK_BITS   = 12,  // b: log2 of all banks in L1
  parameter int unsigned ROW_BITS    = 8    // r: log2 of rows per bank
) (
  input  addr_t                              addr_i,
  input  das_region_t [NUM_REGIONS-1:0]      cfg_i,
  output addr_t                              addr_o,
  output logic                               hit_o,
  output logic        [DasFieldWidth-1:0]    p_o,
  output logic        [DasFieldWidth-1:0]    s_o
);

  // Remaps a word offset for a given p and s (both already clamped).
  function automatic addr_t remap_words(addr_t w, int unsigned p, int unsigned s);
    addr_t pf, sf, vf, uf;
    int unsigned v;
    v  = BANK_BITS - p;
    pf = w & ((addr_t'(1) << p) - 1);
    sf = (w >> p) & ((addr_t'(1) << s) - 1);
    vf = (w >> (p + s)) & ((addr_t'(1) << v) - 1);
    uf = w >> (BANK_BITS + s);
    return (uf << (BANK_BITS + s)) | (sf << BANK_BITS) | (vf << p) | pf;
  endfunction

  always_comb begin
    int unsigned p_c, s_c;
    addr_t       off, woff;
    p_c    = 0;
    s_c    = 0;
    off    = '0;
    woff   = '0;
    addr_o = addr_i;
    hit_o  = 1'b0;
    p_o    = '0;
    s_o    = '0;
    for (int i = NUM_REGIONS - 1; i >= 0; i--) begin
      if (cfg_i[i].size != '0 && addr_i >= cfg_i[i].start &&
          (addr_i - cfg_i[i].start) < cfg_i[i].size) begin
        p_c   = (int'(cfg_i[i].p) > int'(BANK_BITS)) ? BANK_BITS : int'(cfg_i[i].p);
        s_c   = (int'(cfg_i[i].s) > int'(ROW_BITS))  ? ROW_BITS  : int'(cfg_i[i].s);
        off   = addr_i - cfg_i[i].start;
        woff  = remap_words(off >> 2, p_c, s_c);
        addr_o = cfg_i[i].start + ((woff << 2) | (off & addr_t'(3)));
        hit_o = 1'b1;
        p_o   = DasFieldWidth'(p_c);
        s_o   = DasFieldWidth'(s_c);
      end
    end
  end

endmodule
