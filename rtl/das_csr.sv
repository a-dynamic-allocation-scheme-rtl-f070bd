// das_csr: control/status registers that hold the DAS region configuration.
//
// What it does: keeps, for each of NUM_REGIONS DAS regions, the three
// registers size, addr (region start) and DAS (p and s), and drives them to
// every address mapper of the cluster. The dynamic allocator in the runtime
// writes them when it allocates or frees a region.
//
// Interface: a single-cycle register bus (reg_req_i.valid/we/addr/wdata,
// reg_rdata_o valid in the same cycle). Register map, region i at 0x10*i:
//   +0x0 size  (bytes, 0 = region off)
//   +0x4 addr  (start byte address)
//   +0x8 DAS   (bits [3:0] = p, bits [7:4] = s)
// Timing: a write takes effect on the mappers in the next cycle.
//
// From the paper: the per-region size/addr/DAS registers and that the
// allocator programs them. This design's choices: the bus (the paper uses
// AXI), the register map and reset to all regions off (fully interleaved).
module das_csr
  import das_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = 4
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  reg_req_t                      reg_req_i,
  output data_t                         reg_rdata_o,
  output das_region_t [NUM_REGIONS-1:0] cfg_o
);

  das_region_t [NUM_REGIONS-1:0] cfg_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q <= '0;
    end else if (reg_req_i.valid && reg_req_i.we) begin
      for (int i = 0; i < NUM_REGIONS; i++) begin
        if (int'(reg_req_i.addr[RegAddrWidth-1:4]) == i) begin
          unique case (reg_req_i.addr[3:0])
            4'h0: cfg_q[i].size  <= reg_req_i.wdata;
            4'h4: cfg_q[i].start <= reg_req_i.wdata;
            4'h8: begin
              cfg_q[i].p <= reg_req_i.wdata[3:0];
              cfg_q[i].s <= reg_req_i.wdata[7:4];
            end
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    reg_rdata_o = '0;
    for (int i = 0; i < NUM_REGIONS; i++) begin
      if (int'(reg_req_i.addr[RegAddrWidth-1:4]) == i) begin
        unique case (reg_req_i.addr[3:0])
          4'h0: reg_rdata_o = cfg_q[i].size;
          4'h4: reg_rdata_o = cfg_q[i].start;
          4'h8: reg_rdata_o = {24'b0, cfg_q[i].s, cfg_q[i].p};
          default: ;
        endcase
      end
    end
  end

  assign cfg_o = cfg_q;

endmodule
