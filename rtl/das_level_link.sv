// das_level_link: one N x N crossbar link of the hierarchical interconnect,
// with its response path.
//
// What it does: N master ports (one outgoing remote port from each of N
// tiles) reach N slave ports (one incoming remote port of each of N target
// tiles). A request picks its target tile from the address bits at SEL_LSB;
// the link writes the master index into r_lvl on the way, and a response
// coming back from a target is routed to master r_lvl. It is used for the
// 8x8 SubGroup crossbar, the 8x8 crossbars between SubGroups of a Group and
// the 32x32 crossbars between Groups.
//
// Timing: combinational; register stages are in the tiles' remote ports.
// From the paper: the crossbar sizes and where they sit. This design's
// choice: routing responses by the recorded master index.
module das_level_link
  import das_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned SEL_LSB = 7,
  localparam int unsigned SelW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic     [N-1:0]    m_req_valid_i,
  input  mem_req_t [N-1:0]    m_req_i,
  output logic     [N-1:0]    m_req_ready_o,
  output logic     [N-1:0]    m_rsp_valid_o,
  output mem_rsp_t [N-1:0]    m_rsp_o,
  input  logic     [N-1:0]    m_rsp_ready_i,
  output logic     [N-1:0]    s_req_valid_o,
  output mem_req_t [N-1:0]    s_req_o,
  input  logic     [N-1:0]    s_req_ready_i,
  input  logic     [N-1:0]    s_rsp_valid_i,
  input  mem_rsp_t [N-1:0]    s_rsp_i,
  output logic     [N-1:0]    s_rsp_ready_o
);

  logic     [N-1:0][SelW-1:0] req_sel, rsp_sel, req_idx;
  mem_req_t [N-1:0]           req_out;

  for (genvar i = 0; i < N; i++) begin : g_sel
    assign req_sel[i] = m_req_i[i].addr[SEL_LSB +: SelW];
    assign rsp_sel[i] = s_rsp_i[i].r_lvl[SelW-1:0];
    always_comb begin
      s_req_o[i]       = req_out[i];
      s_req_o[i].r_lvl = LvlRouteWidth'(req_idx[i]);
    end
  end

  das_xbar #(.N_IN(N), .N_OUT(N), .T(mem_req_t)) i_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(m_req_valid_i), .in_sel_i(req_sel), .in_data_i(m_req_i), .in_ready_o(m_req_ready_o),
    .out_valid_o(s_req_valid_o), .out_data_o(req_out), .out_idx_o(req_idx), .out_ready_i(s_req_ready_i)
  );

  das_xbar #(.N_IN(N), .N_OUT(N), .T(mem_rsp_t)) i_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(s_rsp_valid_i), .in_sel_i(rsp_sel), .in_data_i(s_rsp_i), .in_ready_o(s_rsp_ready_o),
    .out_valid_o(m_rsp_valid_o), .out_data_o(m_rsp_o), .out_idx_o(), .out_ready_i(m_rsp_ready_i)
  );

endmodule
