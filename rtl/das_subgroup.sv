// das_subgroup: a SubGroup of N_TILES tiles with its local interconnect and
// its DMA backend.
//
// What it does: instantiates the tiles, joins their SubGroup ports (remote
// port 0) through one N_TILES x N_TILES link, and passes every other remote
// port (other SubGroups, other Groups) up to the Group. The SubGroup's DMA
// backend takes pieces from the Group distributor and reaches each tile
// through the tile's DMA port; its L2 port leaves the SubGroup.
//
// Port arrays: pe_* are indexed [tile*N_PE + pe]; the up-going remote port
// arrays are indexed [(k-1)*N_TILES + tile] for remote port class k >= 1
// (see das_tile). sg_id_i is {group, subgroup}, so tile t has the global
// tile index {sg_id_i, t}.
// Timing: a request to another tile of the same SubGroup sees 3 cycles.
//
// From the paper: 8 tiles per SubGroup, the 8x8 SubGroup crossbar and one
// DMA backend per SubGroup. This design's choices: the per-tile DMA port
// used by the backend and the port indexing.
//
// Lint may report a combinational loop through the packed ready vectors of
// the tiles and the link: a tile's incoming ready depends on its bank
// arbitration, which depends on other tiles' valid bits only, never on the
// ready bit it drives. The loop exists between different bits of one
// vector, not through any single signal, so it is not a real loop.
module das_subgroup
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
  localparam int unsigned NUP        = (N_REM - 1) * N_TILES,
  localparam int unsigned NP         = N_TILES * N_PE,
  localparam int unsigned SgIdW      = $clog2(N_SG * N_GROUPS)
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic [SgIdW-1:0]              sg_id_i,
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
  output logic                          l2_req_valid_o,
  output mem_req_t                      l2_req_o,
  input  logic                          l2_req_ready_i,
  input  logic                          l2_rsp_valid_i,
  input  mem_rsp_t                      l2_rsp_i,
  output logic                          l2_rsp_ready_o,
  output logic                          idle_o
);

  localparam int unsigned TW       = $clog2(N_TILES);
  localparam int unsigned BankOffW = $clog2(N_BANKS);

  // per-tile remote port bundles
  logic     [N_TILES-1:0][N_REM-1:0] t_oq_v, t_oq_r, t_os_v, t_os_r, t_iq_v, t_iq_r, t_is_v, t_is_r;
  mem_req_t [N_TILES-1:0][N_REM-1:0] t_oq, t_iq;
  mem_rsp_t [N_TILES-1:0][N_REM-1:0] t_os, t_is;
  // SubGroup link
  logic     [N_TILES-1:0] l_mq_v, l_mq_r, l_ms_v, l_ms_r, l_sq_v, l_sq_r, l_ss_v, l_ss_r;
  mem_req_t [N_TILES-1:0] l_mq, l_sq;
  mem_rsp_t [N_TILES-1:0] l_ms, l_ss;
  // DMA ports
  logic     [N_TILES-1:0] d_q_v, d_q_r, d_s_v, d_s_r;
  mem_req_t [N_TILES-1:0] d_q;
  mem_rsp_t [N_TILES-1:0] d_s;

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    das_tile #(
      .N_PE(N_PE), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS), .N_TILES(N_TILES),
      .N_SG(N_SG), .N_GROUPS(N_GROUPS), .NUM_REGIONS(NUM_REGIONS)
    ) i_tile (
      .clk_i, .rst_ni,
      .tile_id_i({sg_id_i, TW'(t)}),
      .cfg_i,
      .pe_req_valid_i(pe_req_valid_i[t*N_PE +: N_PE]),
      .pe_req_i      (pe_req_i[t*N_PE +: N_PE]),
      .pe_req_ready_o(pe_req_ready_o[t*N_PE +: N_PE]),
      .pe_rsp_valid_o(pe_rsp_valid_o[t*N_PE +: N_PE]),
      .pe_rsp_o      (pe_rsp_o[t*N_PE +: N_PE]),
      .pe_rsp_ready_i(pe_rsp_ready_i[t*N_PE +: N_PE]),
      .out_req_valid_o(t_oq_v[t]), .out_req_o(t_oq[t]), .out_req_ready_i(t_oq_r[t]),
      .out_rsp_valid_i(t_os_v[t]), .out_rsp_i(t_os[t]), .out_rsp_ready_o(t_os_r[t]),
      .in_req_valid_i (t_iq_v[t]), .in_req_i (t_iq[t]), .in_req_ready_o (t_iq_r[t]),
      .in_rsp_valid_o (t_is_v[t]), .in_rsp_o (t_is[t]), .in_rsp_ready_i (t_is_r[t]),
      .dma_req_valid_i(d_q_v[t]), .dma_req_i(d_q[t]), .dma_req_ready_o(d_q_r[t]),
      .dma_rsp_valid_o(d_s_v[t]), .dma_rsp_o(d_s[t]), .dma_rsp_ready_i(d_s_r[t])
    );

    // remote port 0: the SubGroup link
    assign l_mq_v[t]    = t_oq_v[t][0];
    assign l_mq[t]      = t_oq[t][0];
    assign t_oq_r[t][0] = l_mq_r[t];
    assign t_os_v[t][0] = l_ms_v[t];
    assign t_os[t][0]   = l_ms[t];
    assign l_ms_r[t]    = t_os_r[t][0];
    assign t_iq_v[t][0] = l_sq_v[t];
    assign t_iq[t][0]   = l_sq[t];
    assign l_sq_r[t]    = t_iq_r[t][0];
    assign l_ss_v[t]    = t_is_v[t][0];
    assign l_ss[t]      = t_is[t][0];
    assign t_is_r[t][0] = l_ss_r[t];

    // remote ports 1 .. N_REM-1 go up
    for (genvar k = 1; k < N_REM; k++) begin : g_up
      localparam int unsigned U = (k - 1) * N_TILES + t;
      assign out_req_valid_o[U] = t_oq_v[t][k];
      assign out_req_o[U]       = t_oq[t][k];
      assign t_oq_r[t][k]       = out_req_ready_i[U];
      assign t_os_v[t][k]       = out_rsp_valid_i[U];
      assign t_os[t][k]         = out_rsp_i[U];
      assign out_rsp_ready_o[U] = t_os_r[t][k];
      assign t_iq_v[t][k]       = in_req_valid_i[U];
      assign t_iq[t][k]         = in_req_i[U];
      assign in_req_ready_o[U]  = t_iq_r[t][k];
      assign in_rsp_valid_o[U]  = t_is_v[t][k];
      assign in_rsp_o[U]        = t_is[t][k];
      assign t_is_r[t][k]       = in_rsp_ready_i[U];
    end
  end

  das_level_link #(.N(N_TILES), .SEL_LSB(2 + BankOffW)) i_sg_link (
    .clk_i, .rst_ni,
    .m_req_valid_i(l_mq_v), .m_req_i(l_mq), .m_req_ready_o(l_mq_r),
    .m_rsp_valid_o(l_ms_v), .m_rsp_o(l_ms), .m_rsp_ready_i(l_ms_r),
    .s_req_valid_o(l_sq_v), .s_req_o(l_sq), .s_req_ready_i(l_sq_r),
    .s_rsp_valid_i(l_ss_v), .s_rsp_i(l_ss), .s_rsp_ready_o(l_ss_r)
  );

  dma_backend #(.N_TILES(N_TILES), .N_BANKS(N_BANKS)) i_backend (
    .clk_i, .rst_ni,
    .job_valid_i(dma_valid_i), .job_i(dma_i), .job_ready_o(dma_ready_o),
    .l2_req_valid_o, .l2_req_o, .l2_req_ready_i,
    .l2_rsp_valid_i, .l2_rsp_i, .l2_rsp_ready_o,
    .tile_req_valid_o(d_q_v), .tile_req_o(d_q), .tile_req_ready_i(d_q_r),
    .tile_rsp_valid_i(d_s_v), .tile_rsp_i(d_s), .tile_rsp_ready_o(d_s_r),
    .idle_o
  );

endmodule
