// dma_frontend: register-based frontend of the cluster DMA engine.
//
// What it does: a core writes the source address, destination address and
// length in bytes, then writes the start register. The frontend turns this
// into one job for the midend (splitter): the address inside L1 (below
// L1_BYTES) becomes the job's L1 address, the other one its L2 address, and
// the direction follows. It accepts no new start while a job is pending or
// the midend and backends are still working (idle_i low).
//
// Register map on the single-cycle register bus:
//   0x00 src, 0x04 dst, 0x08 len (bytes, a multiple of 4),
//   0x0C start (write any value), 0x10 status (bit 0 busy),
//   0x14 number of completed transfers.
// Timing: the job is offered in the cycle after the start write; busy drops
// in the cycle after the last backend returns to idle.
//
// From the paper: a single register-based frontend, programmed by any core
// with source, target and size. This design's choices: the bus (the paper
// uses AXI), the register map, and taking the direction from the addresses.
module dma_frontend
  import das_pkg::*;
#(
  parameter int unsigned L1_BYTES = 32'h0040_0000
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t reg_req_i,
  output data_t    reg_rdata_o,
  output logic     job_valid_o,
  output dma_job_t job_o,
  input  logic     job_ready_i,
  input  logic     idle_i,
  output logic     busy_o
);

  addr_t src_q, dst_q, len_q;
  data_t done_q;
  logic  pending_q, busy_q;

  assign busy_o      = pending_q || !idle_i;
  assign job_valid_o = pending_q;

  always_comb begin
    job_o.len = len_q;
    if (dst_q < L1_BYTES) begin
      job_o.to_l2   = 1'b0;
      job_o.l1_addr = dst_q;
      job_o.l2_addr = src_q;
    end else begin
      job_o.to_l2   = 1'b1;
      job_o.l1_addr = src_q;
      job_o.l2_addr = dst_q;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q     <= '0;
      dst_q     <= '0;
      len_q     <= '0;
      done_q    <= '0;
      pending_q <= 1'b0;
      busy_q    <= 1'b0;
    end else begin
      busy_q <= busy_o;
      if (busy_q && !busy_o) done_q <= done_q + 1;
      if (pending_q && job_ready_i) pending_q <= 1'b0;
      if (reg_req_i.valid && reg_req_i.we) begin
        unique case (reg_req_i.addr[7:0])
          8'h00: src_q <= reg_req_i.wdata;
          8'h04: dst_q <= reg_req_i.wdata;
          8'h08: len_q <= reg_req_i.wdata;
          8'h0C: if (!busy_o && len_q != '0) pending_q <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (reg_req_i.addr[7:0])
      8'h00:   reg_rdata_o = src_q;
      8'h04:   reg_rdata_o = dst_q;
      8'h08:   reg_rdata_o = len_q;
      8'h10:   reg_rdata_o = {31'b0, busy_o};
      8'h14:   reg_rdata_o = done_q;
      default: reg_rdata_o = '0;
    endcase
  end

endmodule
