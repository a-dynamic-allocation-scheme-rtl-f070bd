// dma_backend: DMA data mover of one SubGroup.
//
// What it does: takes a piece that lies in this SubGroup's slice of an L1
// line and moves it one 32-bit word at a time. For L2 -> L1 it reads the
// word from L2 through its L2 port and writes it into the owning tile
// through that tile's DMA port; for L1 -> L2 the other way round. The tile
// is picked from the physical L1 address (the tile bits above the bank
// bits). The backend waits for every response before the next request.
//
// Timing: per word, one read and one write handshake plus the two response
// latencies (3 cycles per word with a 1-cycle L2 and an idle tile). idle_o
// is high when no piece is held.
//
// From the paper: one backend per SubGroup, issuing requests to L2 and
// distributing the data to the tile banks. This design's choices: the
// word-by-word schedule and the L2 port, which uses the cluster's own
// request/response format instead of AXI.
module dma_backend
  import das_pkg::*;
#(
  parameter int unsigned N_TILES = 8,
  parameter int unsigned N_BANKS = 32,
  localparam int unsigned TSelW  = (N_TILES > 1) ? $clog2(N_TILES) : 1
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     job_valid_i,
  input  dma_job_t                 job_i,
  output logic                     job_ready_o,
  // L2 port
  output logic                     l2_req_valid_o,
  output mem_req_t                 l2_req_o,
  input  logic                     l2_req_ready_i,
  input  logic                     l2_rsp_valid_i,
  input  mem_rsp_t                 l2_rsp_i,
  output logic                     l2_rsp_ready_o,
  // one DMA port per tile of the SubGroup
  output logic     [N_TILES-1:0]   tile_req_valid_o,
  output mem_req_t [N_TILES-1:0]   tile_req_o,
  input  logic     [N_TILES-1:0]   tile_req_ready_i,
  input  logic     [N_TILES-1:0]   tile_rsp_valid_i,
  input  mem_rsp_t [N_TILES-1:0]   tile_rsp_i,
  output logic     [N_TILES-1:0]   tile_rsp_ready_o,
  output logic                     idle_o
);

  localparam int unsigned BankOffW = $clog2(N_BANKS);

  typedef enum logic [2:0] {Idle, RdReq, RdWait, WrReq, WrWait} state_e;

  state_e          state_q;
  dma_job_t        cur_q;
  data_t           data_q;
  logic [TSelW-1:0] tile;
  logic            rd_from_l2;
  logic            req_fire, rsp_fire;

  assign tile       = cur_q.l1_addr[2+BankOffW +: TSelW];
  assign rd_from_l2 = !cur_q.to_l2;
  assign idle_o     = state_q == Idle;
  assign job_ready_o = state_q == Idle;

  mem_req_t req;
  always_comb begin
    req       = '0;
    req.be    = 4'hF;
    req.wdata = data_q;
    if (state_q == RdReq) begin
      req.addr = rd_from_l2 ? cur_q.l2_addr : cur_q.l1_addr;
      req.we   = 1'b0;
    end else begin
      req.addr = rd_from_l2 ? cur_q.l1_addr : cur_q.l2_addr;
      req.we   = 1'b1;
    end
  end

  // The side a request goes to: L2 when reading from L2 or writing to L2.
  logic to_l2_side;
  assign to_l2_side = (state_q == RdReq || state_q == RdWait) ? rd_from_l2 : !rd_from_l2;

  always_comb begin
    l2_req_o         = req;
    l2_req_valid_o   = (state_q == RdReq || state_q == WrReq) && to_l2_side;
    l2_rsp_ready_o   = (state_q == RdWait || state_q == WrWait) && to_l2_side;
    tile_req_valid_o = '0;
    tile_rsp_ready_o = '0;
    for (int t = 0; t < N_TILES; t++) begin
      tile_req_o[t] = req;
      if (int'(tile) == t) begin
        tile_req_valid_o[t] = (state_q == RdReq || state_q == WrReq) && !to_l2_side;
        tile_rsp_ready_o[t] = (state_q == RdWait || state_q == WrWait) && !to_l2_side;
      end
    end
    req_fire = to_l2_side ? (l2_req_valid_o && l2_req_ready_i)
                          : (tile_req_valid_o[tile] && tile_req_ready_i[tile]);
    rsp_fire = to_l2_side ? (l2_rsp_valid_i && l2_rsp_ready_o)
                          : (tile_rsp_valid_i[tile] && tile_rsp_ready_o[tile]);
  end

  data_t rsp_data;
  assign rsp_data = to_l2_side ? l2_rsp_i.rdata : tile_rsp_i[tile].rdata;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= Idle;
      cur_q   <= '0;
      data_q  <= '0;
    end else begin
      unique case (state_q)
        Idle: if (job_valid_i && job_i.len != '0) begin
          cur_q   <= job_i;
          state_q <= RdReq;
        end
        RdReq:  if (req_fire) state_q <= RdWait;
        RdWait: if (rsp_fire) begin
          data_q  <= rsp_data;
          state_q <= WrReq;
        end
        WrReq:  if (req_fire) state_q <= WrWait;
        WrWait: if (rsp_fire) begin
          cur_q.l1_addr <= cur_q.l1_addr + 4;
          cur_q.l2_addr <= cur_q.l2_addr + 4;
          cur_q.len     <= cur_q.len - 4;
          state_q       <= (cur_q.len <= 4) ? Idle : RdReq;
        end
        default: state_q <= Idle;
      endcase
    end
  end

endmodule
