// das_tile: one tile of the cluster, N_PE cores' data ports sharing N_BANKS
// banks of L1.
//
// What it does: every PE request first passes an address mapper (the DAS
// remapping, configured by cfg_i), then a crossbar that reaches the tile's
// own banks in one cycle or one of the tile's outgoing remote ports. There
// is one outgoing and one incoming port per destination class:
//   port 0                      other tiles of the own SubGroup,
//   ports 1 .. N_SG-1           each other SubGroup of the own Group,
//   ports N_SG .. N_SG+N_GROUPS-2  each other Group.
// The 8 PEs share these ports, which is what makes remote accesses scarcer
// than local ones. Requests arriving on the incoming ports, and those of
// the DMA port (from the SubGroup's DMA backend, already physical), go
// straight to the banks. A second crossbar returns responses: bank
// responses go to the crossbar input recorded in r_in, responses coming
// back on an outgoing port go to the PE recorded in r_pe.
//
// Timing: register stages on the outgoing ports give the uncontended load
// latencies 1 (own tile), 3 (own SubGroup), 5 (own Group) and 7 (other
// Group) cycles; a port of class c has c request and c response stages.
// Responses carry the PE's tag and may return out of order.
//
// From the paper: 8 PEs and 32 banks per tile, the mapper after each PE's
// request port, the crossbar sizes one level up, and the four latencies.
// This design's choices: the port scheme, where the register stages sit,
// arbitration, and the tag-based out-of-order responses.
module das_tile
  import das_pkg::*;
#(
  parameter int unsigned N_PE        = 8,
  parameter int unsigned N_BANKS     = 32,
  parameter int unsigned BANK_WORDS  = 256,
  parameter int unsigned N_TILES     = 8,   // tiles per SubGroup
  parameter int unsigned N_SG        = 4,   // SubGroups per Group
  parameter int unsigned N_GROUPS    = 4,   // Groups per cluster
  parameter int unsigned NUM_REGIONS = 4,
  localparam int unsigned N_REM      = N_SG + N_GROUPS - 1,
  localparam int unsigned TileW      = $clog2(N_TILES * N_SG * N_GROUPS)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [TileW-1:0]              tile_id_i,
  input  das_region_t [NUM_REGIONS-1:0] cfg_i,
  // PE data ports (logical addresses)
  input  logic     [N_PE-1:0]           pe_req_valid_i,
  input  mem_req_t [N_PE-1:0]           pe_req_i,
  output logic     [N_PE-1:0]           pe_req_ready_o,
  output logic     [N_PE-1:0]           pe_rsp_valid_o,
  output mem_rsp_t [N_PE-1:0]           pe_rsp_o,
  input  logic     [N_PE-1:0]           pe_rsp_ready_i,
  // outgoing remote ports (this tile is the master)
  output logic     [N_REM-1:0]          out_req_valid_o,
  output mem_req_t [N_REM-1:0]          out_req_o,
  input  logic     [N_REM-1:0]          out_req_ready_i,
  input  logic     [N_REM-1:0]          out_rsp_valid_i,
  input  mem_rsp_t [N_REM-1:0]          out_rsp_i,
  output logic     [N_REM-1:0]          out_rsp_ready_o,
  // incoming remote ports (this tile's banks are the target)
  input  logic     [N_REM-1:0]          in_req_valid_i,
  input  mem_req_t [N_REM-1:0]          in_req_i,
  output logic     [N_REM-1:0]          in_req_ready_o,
  output logic     [N_REM-1:0]          in_rsp_valid_o,
  output mem_rsp_t [N_REM-1:0]          in_rsp_o,
  input  logic     [N_REM-1:0]          in_rsp_ready_i,
  // DMA backend port (physical addresses, own banks only)
  input  logic                          dma_req_valid_i,
  input  mem_req_t                      dma_req_i,
  output logic                          dma_req_ready_o,
  output logic                          dma_rsp_valid_o,
  output mem_rsp_t                      dma_rsp_o,
  input  logic                          dma_rsp_ready_i
);

  localparam int unsigned BankOffW = $clog2(N_BANKS);
  localparam int unsigned BankBits = BankOffW + TileW;
  localparam int unsigned RowW     = $clog2(BANK_WORDS);
  localparam int unsigned TW       = $clog2(N_TILES);
  localparam int unsigned SGW      = $clog2(N_SG);
  localparam int unsigned GW       = $clog2(N_GROUPS);
  localparam int unsigned NIn      = N_PE + N_REM + 1;   // PEs, incoming, DMA
  localparam int unsigned NOut     = N_BANKS + N_REM;    // banks, outgoing
  localparam int unsigned SelW     = $clog2(NOut);
  localparam int unsigned IdxW     = $clog2(NIn);
  localparam int unsigned RSelW    = $clog2(NIn);

  // Register stages of a remote port: 1 for the SubGroup, 2 for the Group,
  // 3 for the Cluster level.
  function automatic int unsigned port_stages(int unsigned k);
    if (k == 0) return 1;
    else if (k < N_SG) return 2;
    else return 3;
  endfunction

  // Crossbar output for a physical address issued inside this tile.
  function automatic logic [SelW-1:0] route(addr_t a, logic [TileW-1:0] own);
    logic [TileW-1:0] tid;
    logic [SGW-1:0]   sg_d, sg_o;
    logic [GW-1:0]    g_d, g_o;
    tid  = a[2+BankOffW +: TileW];
    sg_d = tid[TW +: SGW];
    sg_o = own[TW +: SGW];
    g_d  = tid[TW+SGW +: GW];
    g_o  = own[TW+SGW +: GW];
    if (tid == own)      return SelW'(a[2 +: BankOffW]);
    else if (g_d == g_o && sg_d == sg_o) return SelW'(N_BANKS);
    else if (g_d == g_o) return SelW'(N_BANKS + int'(SGW'(sg_d - sg_o)));
    else                 return SelW'(N_BANKS + N_SG - 1 + int'(GW'(g_d - g_o)));
  endfunction

  // ---------------------------------------------------------------- request
  logic     [NIn-1:0]           x_in_valid, x_in_ready;
  logic     [NIn-1:0][SelW-1:0] x_in_sel;
  mem_req_t [NIn-1:0]           x_in_data;
  logic     [NOut-1:0]          x_out_valid, x_out_ready;
  mem_req_t [NOut-1:0]          x_out_data;
  logic     [NOut-1:0][IdxW-1:0] x_out_idx;

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    addr_t phys;
    das_address_mapper #(
      .NUM_REGIONS(NUM_REGIONS), .BANK_BITS(BankBits), .ROW_BITS(RowW)
    ) i_mapper (
      .addr_i(pe_req_i[i].addr), .cfg_i, .addr_o(phys), .hit_o(), .p_o(), .s_o()
    );
    always_comb begin
      x_in_data[i]      = pe_req_i[i];
      x_in_data[i].addr = phys;
      x_in_sel[i]       = route(phys, tile_id_i);
    end
    assign x_in_valid[i]     = pe_req_valid_i[i];
    assign pe_req_ready_o[i] = x_in_ready[i];
  end

  for (genvar k = 0; k < N_REM; k++) begin : g_in
    assign x_in_valid[N_PE+k] = in_req_valid_i[k];
    assign x_in_data[N_PE+k]  = in_req_i[k];
    assign x_in_sel[N_PE+k]   = SelW'(in_req_i[k].addr[2 +: BankOffW]);
    assign in_req_ready_o[k]  = x_in_ready[N_PE+k];
  end

  assign x_in_valid[NIn-1] = dma_req_valid_i;
  assign x_in_data[NIn-1]  = dma_req_i;
  assign x_in_sel[NIn-1]   = SelW'(dma_req_i.addr[2 +: BankOffW]);
  assign dma_req_ready_o   = x_in_ready[NIn-1];

  das_xbar #(.N_IN(NIn), .N_OUT(NOut), .T(mem_req_t)) i_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(x_in_valid), .in_sel_i(x_in_sel), .in_data_i(x_in_data), .in_ready_o(x_in_ready),
    .out_valid_o(x_out_valid), .out_data_o(x_out_data), .out_idx_o(x_out_idx), .out_ready_i(x_out_ready)
  );

  // --------------------------------------------------------------- response
  logic     [NOut-1:0]            r_in_valid, r_in_ready;
  logic     [NOut-1:0][RSelW-1:0] r_in_sel;
  mem_rsp_t [NOut-1:0]            r_in_data;
  logic     [NIn-1:0]             r_out_valid, r_out_ready;
  mem_rsp_t [NIn-1:0]             r_out_data;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    das_l1_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i(x_out_valid[b]), .req_i(x_out_data[b]),
      .row_i(x_out_data[b].addr[2+BankBits +: RowW]),
      .req_idx_i(BankRouteWidth'(x_out_idx[b])),
      .req_ready_o(x_out_ready[b]),
      .rsp_valid_o(r_in_valid[b]), .rsp_o(r_in_data[b]), .rsp_ready_i(r_in_ready[b])
    );
    assign r_in_sel[b] = RSelW'(r_in_data[b].r_in);
  end

  for (genvar k = 0; k < N_REM; k++) begin : g_out
    mem_req_t req_tagged;
    always_comb begin
      req_tagged      = x_out_data[N_BANKS+k];
      req_tagged.r_pe = PeRouteWidth'(x_out_idx[N_BANKS+k]);
    end
    das_pipe_reg #(.STAGES(port_stages(k)), .T(mem_req_t)) i_req_stage (
      .clk_i, .rst_ni,
      .valid_i(x_out_valid[N_BANKS+k]), .data_i(req_tagged), .ready_o(x_out_ready[N_BANKS+k]),
      .valid_o(out_req_valid_o[k]), .data_o(out_req_o[k]), .ready_i(out_req_ready_i[k])
    );
    das_pipe_reg #(.STAGES(port_stages(k)), .T(mem_rsp_t)) i_rsp_stage (
      .clk_i, .rst_ni,
      .valid_i(out_rsp_valid_i[k]), .data_i(out_rsp_i[k]), .ready_o(out_rsp_ready_o[k]),
      .valid_o(r_in_valid[N_BANKS+k]), .data_o(r_in_data[N_BANKS+k]), .ready_i(r_in_ready[N_BANKS+k])
    );
    assign r_in_sel[N_BANKS+k] = RSelW'(r_in_data[N_BANKS+k].r_pe);
  end

  das_xbar #(.N_IN(NOut), .N_OUT(NIn), .T(mem_rsp_t)) i_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(r_in_valid), .in_sel_i(r_in_sel), .in_data_i(r_in_data), .in_ready_o(r_in_ready),
    .out_valid_o(r_out_valid), .out_data_o(r_out_data), .out_idx_o(), .out_ready_i(r_out_ready)
  );

  assign pe_rsp_valid_o = r_out_valid[N_PE-1:0];
  assign pe_rsp_o       = r_out_data[N_PE-1:0];
  assign r_out_ready[N_PE-1:0] = pe_rsp_ready_i;
  assign in_rsp_valid_o = r_out_valid[N_PE +: N_REM];
  assign in_rsp_o       = r_out_data[N_PE +: N_REM];
  assign r_out_ready[N_PE +: N_REM] = in_rsp_ready_i;
  assign dma_rsp_valid_o = r_out_valid[NIn-1];
  assign dma_rsp_o       = r_out_data[NIn-1];
  assign r_out_ready[NIn-1] = dma_rsp_ready_i;

endmodule
