// dma_distributor: DMA midend stage that hands pieces to the level below.
//
// What it does: one L1 line is owned in slices of REGION_BYTES by N_OUT
// children (the Groups at cluster level, the SubGroups at Group level). A
// piece entering here, which never crosses a line, is cut at slice
// boundaries and each part is sent to the child whose slice it lies in:
// child = (l1_addr / REGION_BYTES) mod N_OUT. The L2 address advances with
// the L1 address.
//
// Timing: takes a piece in one cycle, then offers one part per cycle to the
// selected child. idle_o is high when no piece is held.
//
// From the paper: distributors at cluster and Group level assigning pieces
// to one backend per SubGroup, aligned to the SubGroup memory region. This
// design's choices: the handshake and the one-part-per-cycle schedule.
module dma_distributor
  import das_pkg::*;
#(
  parameter int unsigned N_OUT        = 4,
  parameter int unsigned REGION_BYTES = 4096,
  localparam int unsigned SelW        = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   piece_valid_i,
  input  dma_job_t               piece_i,
  output logic                   piece_ready_o,
  output logic     [N_OUT-1:0]   out_valid_o,
  output dma_job_t [N_OUT-1:0]   out_o,
  input  logic     [N_OUT-1:0]   out_ready_i,
  output logic                   idle_o
);

  dma_job_t        cur_q;
  logic            busy_q;
  logic [SelW-1:0] sel;
  addr_t           seg;
  dma_job_t        part;

  always_comb begin
    addr_t room;
    room     = addr_t'(REGION_BYTES) - (cur_q.l1_addr % addr_t'(REGION_BYTES));
    seg      = (cur_q.len < room) ? cur_q.len : room;
    sel      = SelW'((cur_q.l1_addr / addr_t'(REGION_BYTES)) % addr_t'(N_OUT));
    part     = cur_q;
    part.len = seg;
    for (int o = 0; o < N_OUT; o++) begin
      out_o[o]       = part;
      out_valid_o[o] = busy_q && (int'(sel) == o);
    end
  end

  assign piece_ready_o = !busy_q;
  assign idle_o        = !busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      cur_q  <= '0;
    end else if (!busy_q) begin
      if (piece_valid_i) begin
        busy_q <= piece_i.len != '0;
        cur_q  <= piece_i;
      end
    end else if (out_ready_i[sel]) begin
      cur_q.l1_addr <= cur_q.l1_addr + seg;
      cur_q.l2_addr <= cur_q.l2_addr + seg;
      cur_q.len     <= cur_q.len - seg;
      if (cur_q.len == seg) busy_q <= 1'b0;
    end
  end

endmodule
