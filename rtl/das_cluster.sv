// das_cluster: the shared-L1 many-core cluster with the Dynamic Allocation
// Scheme (DAS), top level.
//
// What it does: N_GROUPS Groups of N_SG SubGroups of N_TILES tiles, each
// tile with N_PE core data ports and N_BANKS L1 banks of BANK_WORDS words
// (by default 1024 ports, 4096 banks, 4 MiB). For every ordered pair of
// Groups (g, h) one (N_SG*N_TILES)-port link joins the tiles of g (remote
// port N_SG-1 + (h-g) mod N_GROUPS) to those of h (incoming port
// N_SG-1 + (g-h) mod N_GROUPS): three 32x32 crossbars per Group. The DAS
// CSRs feed every tile's address mappers and the DMA splitter's mapper.
// The DMA engine is frontend -> splitter -> cluster distributor (one slice
// per Group) -> Group distributors -> one backend per SubGroup.
//
// Interface: the cores are outside; their data ports are pe_* indexed
// [((g*N_SG + sg)*N_TILES + tile)*N_PE + pe] with logical addresses; each
// request returns one response with the same tag, possibly out of order.
// csr_* is the DAS CSR register bus, dma_reg_* the DMA frontend register
// bus (see das_csr and dma_frontend). l2_* are the backends' L2 ports,
// indexed [g*N_SG + sg]. L1 occupies byte addresses 0 .. L1 size - 1.
// Timing: uncontended loads take 1, 3, 5 or 7 cycles for the own tile, own
// SubGroup, own Group and other Groups.
//
// From the paper: the hierarchy and its sizes, the crossbars, the latencies,
// the mapper placement, the CSRs and the DMA structure. This design's own
// choices are listed in the submodules. Lint may report combinational loops
// on ready vectors that run through request and response crossbars; they
// are artefacts of packed vectors, no ready depends on itself.
module das_cluster
  import das_pkg::*;
#(
  parameter int unsigned N_PE        = 8,
  parameter int unsigned N_BANKS     = 32,
  parameter int unsigned BANK_WORDS  = 256,
  parameter int unsigned N_TILES     = 8,
  parameter int unsigned N_SG        = 4,
  parameter int unsigned N_GROUPS    = 4,
  parameter int unsigned NUM_REGIONS = 4,
  localparam int unsigned NT_G       = N_SG * N_TILES,
  localparam int unsigned NP_G       = NT_G * N_PE,
  localparam int unsigned NP         = N_GROUPS * NP_G,
  localparam int unsigned NL2        = N_GROUPS * N_SG
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic     [NP-1:0]    pe_req_valid_i,
  input  mem_req_t [NP-1:0]    pe_req_i,
  output logic     [NP-1:0]    pe_req_ready_o,
  output logic     [NP-1:0]    pe_rsp_valid_o,
  output mem_rsp_t [NP-1:0]    pe_rsp_o,
  input  logic     [NP-1:0]    pe_rsp_ready_i,
  input  reg_req_t             csr_req_i,
  output data_t                csr_rdata_o,
  input  reg_req_t             dma_reg_req_i,
  output data_t                dma_reg_rdata_o,
  output logic                 dma_busy_o,
  output logic     [NL2-1:0]   l2_req_valid_o,
  output mem_req_t [NL2-1:0]   l2_req_o,
  input  logic     [NL2-1:0]   l2_req_ready_i,
  input  logic     [NL2-1:0]   l2_rsp_valid_i,
  input  mem_rsp_t [NL2-1:0]   l2_rsp_i,
  output logic     [NL2-1:0]   l2_rsp_ready_o
);

  localparam int unsigned NTOT     = N_GROUPS * NT_G;
  localparam int unsigned BankOffW = $clog2(N_BANKS);
  localparam int unsigned BankBits = BankOffW + $clog2(NTOT);
  localparam int unsigned RowW     = $clog2(BANK_WORDS);
  localparam int unsigned L1Bytes  = 4 * N_BANKS * BANK_WORDS * NTOT;
  localparam int unsigned GUP      = (N_GROUPS - 1) * NT_G;
  localparam int unsigned GW       = $clog2(N_GROUPS);

  das_region_t [NUM_REGIONS-1:0] cfg;

  das_csr #(.NUM_REGIONS(NUM_REGIONS)) i_csr (
    .clk_i, .rst_ni, .reg_req_i(csr_req_i), .reg_rdata_o(csr_rdata_o), .cfg_o(cfg)
  );

  // ----------------------------------------------------------------- Groups
  logic     [N_GROUPS-1:0][GUP-1:0] g_oq_v, g_oq_r, g_os_v, g_os_r, g_iq_v, g_iq_r, g_is_v, g_is_r;
  mem_req_t [N_GROUPS-1:0][GUP-1:0] g_oq, g_iq;
  mem_rsp_t [N_GROUPS-1:0][GUP-1:0] g_os, g_is;
  logic     [N_GROUPS-1:0]          g_idle, gd_v, gd_r;
  dma_job_t [N_GROUPS-1:0]          gd_job;

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_group
    das_group #(
      .N_PE(N_PE), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS), .N_TILES(N_TILES),
      .N_SG(N_SG), .N_GROUPS(N_GROUPS), .NUM_REGIONS(NUM_REGIONS)
    ) i_group (
      .clk_i, .rst_ni,
      .group_id_i(GW'(g)),
      .cfg_i(cfg),
      .pe_req_valid_i(pe_req_valid_i[g*NP_G +: NP_G]),
      .pe_req_i      (pe_req_i[g*NP_G +: NP_G]),
      .pe_req_ready_o(pe_req_ready_o[g*NP_G +: NP_G]),
      .pe_rsp_valid_o(pe_rsp_valid_o[g*NP_G +: NP_G]),
      .pe_rsp_o      (pe_rsp_o[g*NP_G +: NP_G]),
      .pe_rsp_ready_i(pe_rsp_ready_i[g*NP_G +: NP_G]),
      .out_req_valid_o(g_oq_v[g]), .out_req_o(g_oq[g]), .out_req_ready_i(g_oq_r[g]),
      .out_rsp_valid_i(g_os_v[g]), .out_rsp_i(g_os[g]), .out_rsp_ready_o(g_os_r[g]),
      .in_req_valid_i (g_iq_v[g]), .in_req_i (g_iq[g]), .in_req_ready_o (g_iq_r[g]),
      .in_rsp_valid_o (g_is_v[g]), .in_rsp_o (g_is[g]), .in_rsp_ready_i (g_is_r[g]),
      .dma_valid_i(gd_v[g]), .dma_i(gd_job[g]), .dma_ready_o(gd_r[g]),
      .l2_req_valid_o(l2_req_valid_o[g*N_SG +: N_SG]), .l2_req_o(l2_req_o[g*N_SG +: N_SG]),
      .l2_req_ready_i(l2_req_ready_i[g*N_SG +: N_SG]),
      .l2_rsp_valid_i(l2_rsp_valid_i[g*N_SG +: N_SG]), .l2_rsp_i(l2_rsp_i[g*N_SG +: N_SG]),
      .l2_rsp_ready_o(l2_rsp_ready_o[g*N_SG +: N_SG]),
      .idle_o(g_idle[g])
    );

    for (genvar d = 1; d < N_GROUPS; d++) begin : g_link
      localparam int unsigned H  = (g + d) % N_GROUPS;      // target Group
      localparam int unsigned CO = d - 1;                   // class at g
      localparam int unsigned CI = (N_GROUPS - d) - 1;      // class at h
      das_level_link #(.N(NT_G), .SEL_LSB(2 + BankOffW)) i_link (
        .clk_i, .rst_ni,
        .m_req_valid_i(g_oq_v[g][CO*NT_G +: NT_G]),
        .m_req_i      (g_oq[g][CO*NT_G +: NT_G]),
        .m_req_ready_o(g_oq_r[g][CO*NT_G +: NT_G]),
        .m_rsp_valid_o(g_os_v[g][CO*NT_G +: NT_G]),
        .m_rsp_o      (g_os[g][CO*NT_G +: NT_G]),
        .m_rsp_ready_i(g_os_r[g][CO*NT_G +: NT_G]),
        .s_req_valid_o(g_iq_v[H][CI*NT_G +: NT_G]),
        .s_req_o      (g_iq[H][CI*NT_G +: NT_G]),
        .s_req_ready_i(g_iq_r[H][CI*NT_G +: NT_G]),
        .s_rsp_valid_i(g_is_v[H][CI*NT_G +: NT_G]),
        .s_rsp_i      (g_is[H][CI*NT_G +: NT_G]),
        .s_rsp_ready_o(g_is_r[H][CI*NT_G +: NT_G])
      );
    end
  end

  // -------------------------------------------------------------------- DMA
  logic     fe_v, fe_r, sp_v, sp_r, sp_idle, cd_idle;
  dma_job_t fe_job, sp_piece;

  dma_frontend #(.L1_BYTES(L1Bytes)) i_frontend (
    .clk_i, .rst_ni,
    .reg_req_i(dma_reg_req_i), .reg_rdata_o(dma_reg_rdata_o),
    .job_valid_o(fe_v), .job_o(fe_job), .job_ready_i(fe_r),
    .idle_i(sp_idle && cd_idle && (&g_idle)),
    .busy_o(dma_busy_o)
  );

  dma_splitter #(.NUM_REGIONS(NUM_REGIONS), .BANK_BITS(BankBits), .ROW_BITS(RowW)) i_splitter (
    .clk_i, .rst_ni, .cfg_i(cfg),
    .job_valid_i(fe_v), .job_i(fe_job), .job_ready_o(fe_r),
    .piece_valid_o(sp_v), .piece_o(sp_piece), .piece_ready_i(sp_r),
    .idle_o(sp_idle)
  );

  dma_distributor #(.N_OUT(N_GROUPS), .REGION_BYTES(4 * N_BANKS * NT_G)) i_distributor (
    .clk_i, .rst_ni,
    .piece_valid_i(sp_v), .piece_i(sp_piece), .piece_ready_o(sp_r),
    .out_valid_o(gd_v), .out_o(gd_job), .out_ready_i(gd_r),
    .idle_o(cd_idle)
  );

endmodule
