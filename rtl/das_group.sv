// das_group: a Group of N_SG SubGroups with the crossbars between them and
// the Group-level DMA distributor.
//
// What it does: for every ordered pair of SubGroups (a, b), a != b, one
// N_TILES x N_TILES link carries requests from the tiles of a (their remote
// port (b-a) mod N_SG) to the tiles of b (their incoming port (a-b) mod N_SG),
// so each SubGroup has N_SG-1 such links towards the others, as the paper
// describes ("three additional 8x8 crossbars"). Ports towards other Groups
// pass up to the cluster. The distributor cuts each DMA piece at SubGroup
// slice boundaries and hands the parts to the SubGroups' backends.
//
// Port arrays: pe_* are [(sg*N_TILES + tile)*N_PE + pe]; the up-going ports
// are [c*N_SG*N_TILES + sg*N_TILES + tile] for Group-level class c (0 ..
// N_GROUPS-2, i.e. tile remote port N_SG + c); l2_* are [sg].
// Timing: a request to another SubGroup of the Group sees 5 cycles.
//
// Why a combinational-loop lint warning may appear here: ready signals run
// through request and response crossbars of the same packed vectors, which
// the linter cannot split bit by bit; no ready depends on itself.
module das_group
  import das_pkg::*;
#(
  parameter int unsigned N_PE        = 8,
  parameter int unsigned N_BANKS     = 32,
  parameter int unsigned BANK_WORDS  = 256,
  parameter int unsigned N_TILES     = 8,
  parameter int unsigned N_SG        = 4,
  parameter int unsigned N_GROUPS    = 4,
  parameter int unsigned NUM_REGIONS = 4,
  localparam int unsigned N_REM      = N_SG + N_GROUPS - 1,
  localparam int unsigned NT         = N_SG * N_TILES,          // tiles per Group
  localparam int unsigned NUP        = (N_GROUPS - 1) * NT,
  localparam int unsigned NP         = NT * N_PE,
  localparam int unsigned GW         = $clog2(N_GROUPS)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [GW-1:0]                 group_id_i,
  input  das_region_t [NUM_REGIONS-1:0] cfg_i,
  input  logic     [NP-1:0]             pe_req_valid_i,
  input  mem_req_t [NP-1:0]             pe_req_i,
  output logic     [NP-1:0]             pe_req_ready_o,
  output logic     [NP-1:0]             pe_rsp_valid_o,
  output mem_rsp_t [NP-1:0]             pe_rsp_o,
  input  logic     [NP-1:0]             pe_rsp_ready_i,
  output logic     [NUP-1:0]            out_req_valid_o,
  output mem_req_t [NUP-1:0]            out_req_o,
  input  logic     [NUP-1:0]            out_req_ready_i,
  input  logic     [NUP-1:0]            out_rsp_valid_i,
  input  mem_rsp_t [NUP-1:0]            out_rsp_i,
  output logic     [NUP-1:0]            out_rsp_ready_o,
  input  logic     [NUP-1:0]            in_req_valid_i,
  input  mem_req_t [NUP-1:0]            in_req_i,
  output logic     [NUP-1:0]            in_req_ready_o,
  output logic     [NUP-1:0]            in_rsp_valid_o,
  output mem_rsp_t [NUP-1:0]            in_rsp_o,
  input  logic     [NUP-1:0]            in_rsp_ready_i,
  input  logic                          dma_valid_i,
  input  dma_job_t                      dma_i,
  output logic                          dma_ready_o,
  output logic     [N_SG-1:0]           l2_req_valid_o,
  output mem_req_t [N_SG-1:0]           l2_req_o,
  input  logic     [N_SG-1:0]           l2_req_ready_i,
  input  logic     [N_SG-1:0]           l2_rsp_valid_i,
  input  mem_rsp_t [N_SG-1:0]           l2_rsp_i,
  output logic     [N_SG-1:0]           l2_rsp_ready_o,
  output logic                          idle_o
);

  localparam int unsigned SGW      = $clog2(N_SG);
  localparam int unsigned BankOffW = $clog2(N_BANKS);
  localparam int unsigned SUP      = (N_REM - 1) * N_TILES;   // up-ports per SubGroup

  // SubGroup up-port bundles, [sg][(k-1)*N_TILES + tile]
  logic     [N_SG-1:0][SUP-1:0] s_oq_v, s_oq_r, s_os_v, s_os_r, s_iq_v, s_iq_r, s_is_v, s_is_r;
  mem_req_t [N_SG-1:0][SUP-1:0] s_oq, s_iq;
  mem_rsp_t [N_SG-1:0][SUP-1:0] s_os, s_is;

  logic     [N_SG-1:0] sg_idle, d_v, d_r;
  dma_job_t [N_SG-1:0] d_job;
  logic                dist_idle;

  for (genvar s = 0; s < N_SG; s++) begin : g_sg
    das_subgroup #(
      .N_PE(N_PE), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS), .N_TILES(N_TILES),
      .N_SG(N_SG), .N_GROUPS(N_GROUPS), .NUM_REGIONS(NUM_REGIONS)
    ) i_sg (
      .clk_i, .rst_ni,
      .sg_id_i({group_id_i, SGW'(s)}),
      .cfg_i,
      .pe_req_valid_i(pe_req_valid_i[s*N_TILES*N_PE +: N_TILES*N_PE]),
      .pe_req_i      (pe_req_i[s*N_TILES*N_PE +: N_TILES*N_PE]),
      .pe_req_ready_o(pe_req_ready_o[s*N_TILES*N_PE +: N_TILES*N_PE]),
      .pe_rsp_valid_o(pe_rsp_valid_o[s*N_TILES*N_PE +: N_TILES*N_PE]),
      .pe_rsp_o      (pe_rsp_o[s*N_TILES*N_PE +: N_TILES*N_PE]),
      .pe_rsp_ready_i(pe_rsp_ready_i[s*N_TILES*N_PE +: N_TILES*N_PE]),
      .out_req_valid_o(s_oq_v[s]), .out_req_o(s_oq[s]), .out_req_ready_i(s_oq_r[s]),
      .out_rsp_valid_i(s_os_v[s]), .out_rsp_i(s_os[s]), .out_rsp_ready_o(s_os_r[s]),
      .in_req_valid_i (s_iq_v[s]), .in_req_i (s_iq[s]), .in_req_ready_o (s_iq_r[s]),
      .in_rsp_valid_o (s_is_v[s]), .in_rsp_o (s_is[s]), .in_rsp_ready_i (s_is_r[s]),
      .dma_valid_i(d_v[s]), .dma_i(d_job[s]), .dma_ready_o(d_r[s]),
      .l2_req_valid_o(l2_req_valid_o[s]), .l2_req_o(l2_req_o[s]), .l2_req_ready_i(l2_req_ready_i[s]),
      .l2_rsp_valid_i(l2_rsp_valid_i[s]), .l2_rsp_i(l2_rsp_i[s]), .l2_rsp_ready_o(l2_rsp_ready_o[s]),
      .idle_o(sg_idle[s])
    );

    // links from this SubGroup (a = s) to every other SubGroup b
    for (genvar d = 1; d < N_SG; d++) begin : g_link
      localparam int unsigned B  = (s + d) % N_SG;        // target SubGroup
      localparam int unsigned KI = (N_SG - d) % N_SG;     // incoming port at b
      das_level_link #(.N(N_TILES), .SEL_LSB(2 + BankOffW)) i_link (
        .clk_i, .rst_ni,
        .m_req_valid_i(s_oq_v[s][(d-1)*N_TILES +: N_TILES]),
        .m_req_i      (s_oq[s][(d-1)*N_TILES +: N_TILES]),
        .m_req_ready_o(s_oq_r[s][(d-1)*N_TILES +: N_TILES]),
        .m_rsp_valid_o(s_os_v[s][(d-1)*N_TILES +: N_TILES]),
        .m_rsp_o      (s_os[s][(d-1)*N_TILES +: N_TILES]),
        .m_rsp_ready_i(s_os_r[s][(d-1)*N_TILES +: N_TILES]),
        .s_req_valid_o(s_iq_v[B][(KI-1)*N_TILES +: N_TILES]),
        .s_req_o      (s_iq[B][(KI-1)*N_TILES +: N_TILES]),
        .s_req_ready_i(s_iq_r[B][(KI-1)*N_TILES +: N_TILES]),
        .s_rsp_valid_i(s_is_v[B][(KI-1)*N_TILES +: N_TILES]),
        .s_rsp_i      (s_is[B][(KI-1)*N_TILES +: N_TILES]),
        .s_rsp_ready_o(s_is_r[B][(KI-1)*N_TILES +: N_TILES])
      );
    end

    // Group-level ports go up: SubGroup up-port class k = N_SG + c
    for (genvar c = 0; c < N_GROUPS - 1; c++) begin : g_up
      localparam int unsigned SU = (N_SG - 1 + c) * N_TILES;  // (k-1)*N_TILES
      localparam int unsigned GU = c * NT + s * N_TILES;
      assign out_req_valid_o[GU +: N_TILES] = s_oq_v[s][SU +: N_TILES];
      assign out_req_o[GU +: N_TILES]       = s_oq[s][SU +: N_TILES];
      assign s_oq_r[s][SU +: N_TILES]       = out_req_ready_i[GU +: N_TILES];
      assign s_os_v[s][SU +: N_TILES]       = out_rsp_valid_i[GU +: N_TILES];
      assign s_os[s][SU +: N_TILES]         = out_rsp_i[GU +: N_TILES];
      assign out_rsp_ready_o[GU +: N_TILES] = s_os_r[s][SU +: N_TILES];
      assign s_iq_v[s][SU +: N_TILES]       = in_req_valid_i[GU +: N_TILES];
      assign s_iq[s][SU +: N_TILES]         = in_req_i[GU +: N_TILES];
      assign in_req_ready_o[GU +: N_TILES]  = s_iq_r[s][SU +: N_TILES];
      assign in_rsp_valid_o[GU +: N_TILES]  = s_is_v[s][SU +: N_TILES];
      assign in_rsp_o[GU +: N_TILES]        = s_is[s][SU +: N_TILES];
      assign s_is_r[s][SU +: N_TILES]       = in_rsp_ready_i[GU +: N_TILES];
    end
  end

  dma_distributor #(.N_OUT(N_SG), .REGION_BYTES(4 * N_BANKS * N_TILES)) i_dist (
    .clk_i, .rst_ni,
    .piece_valid_i(dma_valid_i), .piece_i(dma_i), .piece_ready_o(dma_ready_o),
    .out_valid_o(d_v), .out_o(d_job), .out_ready_i(d_r),
    .idle_o(dist_idle)
  );

  assign idle_o = dist_idle && (&sg_idle);

endmodule
