// dma_splitter: first midend stage of the DMA engine, with DAS awareness.
//
// What it does: takes one job at a time from the frontend and cuts it into
// pieces that are contiguous in physical L1. Outside a DAS region a piece
// ends at the next L1 line boundary (a line is one row across all banks,
// 4 * 2^BANK_BITS bytes). Inside a DAS region with s > 0 the contiguous run
// is one partition row, 2^p words, so the piece ends at the next 2^p-word
// boundary. The L1 address of each piece goes through an address mapper, so
// the pieces leave with physical addresses.
//
// Timing: the job is taken in one cycle; then one piece leaves per cycle
// while the distributor accepts them. idle_o is high when no job is held.
//
// From the paper: the cut at L1-line boundaries, the mapper inside the
// splitter, and reshaping at partition boundaries. This design's choices:
// the exact cut rule for DAS regions, and that a job's L1 range lies wholly
// inside one DAS region or wholly outside all of them.
module dma_splitter
  import das_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = 4,
  parameter int unsigned BANK_BITS   = 12,
  parameter int unsigned ROW_BITS    = 8
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  das_region_t [NUM_REGIONS-1:0] cfg_i,
  input  logic                          job_valid_i,
  input  dma_job_t                      job_i,
  output logic                          job_ready_o,
  output logic                          piece_valid_o,
  output dma_job_t                      piece_o,
  input  logic                          piece_ready_i,
  output logic                          idle_o
);

  dma_job_t                 cur_q;
  logic                     busy_q;
  addr_t                    phys, chunk, seg;
  logic                     hit;
  logic [DasFieldWidth-1:0] p, s;

  das_address_mapper #(
    .NUM_REGIONS(NUM_REGIONS), .BANK_BITS(BANK_BITS), .ROW_BITS(ROW_BITS)
  ) i_mapper (
    .addr_i(cur_q.l1_addr), .cfg_i, .addr_o(phys), .hit_o(hit), .p_o(p), .s_o(s)
  );

  always_comb begin
    addr_t room;
    chunk = (hit && s != '0) ? (addr_t'(4) << p) : (addr_t'(4) << BANK_BITS);
    room  = chunk - (cur_q.l1_addr & (chunk - 1));
    seg   = (cur_q.len < room) ? cur_q.len : room;
    piece_o         = cur_q;
    piece_o.l1_addr = phys;
    piece_o.len     = seg;
  end

  assign piece_valid_o = busy_q;
  assign job_ready_o   = !busy_q;
  assign idle_o        = !busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      cur_q  <= '0;
    end else if (!busy_q) begin
      if (job_valid_i) begin
        busy_q <= job_i.len != '0;
        cur_q  <= job_i;
      end
    end else if (piece_ready_i) begin
      cur_q.l1_addr <= cur_q.l1_addr + seg;
      cur_q.l2_addr <= cur_q.l2_addr + seg;
      cur_q.len     <= cur_q.len - seg;
      if (cur_q.len == seg) busy_q <= 1'b0;
    end
  end

endmodule
