// das_l1_bank: one bank of the shared L1 scratchpad.
//
// What it does: a single-ported memory of WORDS 32-bit words with byte
// enables. A request is accepted when the response register is free or is
// being emptied in the same cycle; the response (read data, or the old word
// for a write) is valid in the next cycle, so an uncontended access takes
// one cycle. The response copies the request's tag and return-route fields
// and records in r_in which tile crossbar input sent the request.
//
// Interface: row_i is the row (word) index inside the bank, computed by the
// tile from the physical address. Timing: one cycle, one access per cycle.
// From the paper: 4 MiB in 4096 banks, i.e. 256 words per bank, and
// single-cycle access from the own tile. This design's choices: the write
// acknowledge, byte enables, and a plain array in place of an SRAM macro.
module das_l1_bank
  import das_pkg::*;
#(
  parameter int unsigned WORDS = 256,
  localparam int unsigned RowW = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      req_valid_i,
  input  mem_req_t                  req_i,
  input  logic [RowW-1:0]           row_i,
  input  logic [BankRouteWidth-1:0] req_idx_i,
  output logic                      req_ready_o,
  output logic                      rsp_valid_o,
  output mem_rsp_t                  rsp_o,
  input  logic                      rsp_ready_i
);

  data_t mem_q [WORDS];
  logic  fire;

  assign req_ready_o = !rsp_valid_o || rsp_ready_i;
  assign fire        = req_valid_i && req_ready_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rsp_valid_o <= 1'b0;
    else if (req_ready_o) rsp_valid_o <= req_valid_i;
  end

  always_ff @(posedge clk_i) begin
    if (fire) begin
      rsp_o.rdata <= mem_q[row_i];
      rsp_o.tag   <= req_i.tag;
      rsp_o.r_pe  <= req_i.r_pe;
      rsp_o.r_lvl <= req_i.r_lvl;
      rsp_o.r_in  <= req_idx_i;
      if (req_i.we) begin
        for (int b = 0; b < 4; b++) begin
          if (req_i.be[b]) mem_q[row_i][8*b +: 8] <= req_i.wdata[8*b +: 8];
        end
      end
    end
  end

endmodule
