// tb_dma_backend: the DMA backend of a SubGroup of 4 tiles with 4 banks
// each, against a 1-cycle L2 model and one 1-cycle memory model per tile
// DMA port, with random stalls on all of them. Random jobs in both
// directions over the SubGroup's 64-byte slice of a line; checks that each
// word lands in the tile its address names (and only there), that L2 gets
// what L1 held, and that an unstalled job takes at most 4 cycles per
// word.
module tb_dma_backend;
  import das_pkg::*;

  localparam int unsigned N_TILES = 4, N_BANKS = 4;
  localparam int unsigned SLICE = 4 * N_BANKS * N_TILES;
  localparam int unsigned LINE  = 4 * SLICE;     // four SubGroups in the line

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic job_valid, job_ready, idle;
  dma_job_t job;
  logic l2_req_valid, l2_req_ready, l2_rsp_valid, l2_rsp_ready;
  mem_req_t l2_req;
  mem_rsp_t l2_rsp;
  logic     [N_TILES-1:0] t_req_valid, t_req_ready, t_rsp_valid, t_rsp_ready;
  mem_req_t [N_TILES-1:0] t_req;
  mem_rsp_t [N_TILES-1:0] t_rsp;
  int checks = 0, failures = 0;
  bit stalls = 1'b1;

  dma_backend #(.N_TILES(N_TILES), .N_BANKS(N_BANKS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .job_valid_i(job_valid), .job_i(job), .job_ready_o(job_ready),
    .l2_req_valid_o(l2_req_valid), .l2_req_o(l2_req), .l2_req_ready_i(l2_req_ready),
    .l2_rsp_valid_i(l2_rsp_valid), .l2_rsp_i(l2_rsp), .l2_rsp_ready_o(l2_rsp_ready),
    .tile_req_valid_o(t_req_valid), .tile_req_o(t_req), .tile_req_ready_i(t_req_ready),
    .tile_rsp_valid_i(t_rsp_valid), .tile_rsp_i(t_rsp), .tile_rsp_ready_o(t_rsp_ready),
    .idle_o(idle)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t l2mem [addr_t];
  data_t tmem [N_TILES][addr_t];
  logic  l2_gate;
  logic [N_TILES-1:0] t_gate;
  assign l2_req_ready = (~l2_rsp_valid | l2_rsp_ready) & l2_gate;
  assign t_req_ready  = (~t_rsp_valid | t_rsp_ready) & t_gate;
  always @(negedge clk) begin
    l2_gate <= !stalls || ($urandom_range(0, 3) != 0);
    t_gate  <= stalls ? N_TILES'($urandom) | N_TILES'($urandom) : '1;
  end
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l2_rsp_valid <= 1'b0;
      t_rsp_valid  <= '0;
    end else begin
      if (l2_req_valid && l2_req_ready) begin
        l2_rsp_valid <= 1'b1;
        l2_rsp       <= '0;
        l2_rsp.rdata <= l2mem.exists(l2_req.addr) ? l2mem[l2_req.addr] : '0;
        if (l2_req.we) l2mem[l2_req.addr] = l2_req.wdata;
      end else if (l2_rsp_ready) l2_rsp_valid <= 1'b0;
      for (int t = 0; t < N_TILES; t++) begin
        if (t_req_valid[t] && t_req_ready[t]) begin
          check(int'((t_req[t].addr >> 2) / N_BANKS % N_TILES) == t, "request on the owning tile's port");
          t_rsp_valid[t] <= 1'b1;
          t_rsp[t]       <= '0;
          t_rsp[t].rdata <= tmem[t].exists(t_req[t].addr) ? tmem[t][t_req[t].addr] : '0;
          if (t_req[t].we) tmem[t][t_req[t].addr] = t_req[t].wdata;
        end else if (t_rsp_ready[t]) t_rsp_valid[t] <= 1'b0;
      end
    end
  end

  task automatic run_job(input dma_job_t j, output int cycles);
    @(negedge clk);
    job = j; job_valid = 1'b1;
    #1;
    while (!job_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    job_valid = 1'b0;
    cycles = 1;
    #1;
    while (!idle) begin @(negedge clk); #1; cycles++; end
  endtask

  initial begin
    int cyc;
    job_valid = 0; job = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 60; i++) begin
      addr_t off, len, l1, l2;
      bit to_l2;
      off   = $urandom_range(0, SLICE / 4 - 1) * 4;
      len   = $urandom_range(1, (SLICE - off) / 4) * 4;
      l1    = 3 * LINE + 2 * SLICE + off;
      l2    = 32'h8000_0000 + $urandom_range(0, 1023) * 4;
      to_l2 = (i % 2 == 1);
      if (!to_l2) for (addr_t o = 0; o < len; o += 4) l2mem[l2 + o] = $urandom;
      stalls = (i % 4 != 0);
      run_job('{l2_addr: l2, l1_addr: l1, len: len, to_l2: to_l2}, cyc);
      for (addr_t o = 0; o < len; o += 4) begin
        int t;
        t = int'(((l1 + o) >> 2) / N_BANKS % N_TILES);
        if (!to_l2) check(tmem[t].exists(l1 + o) && tmem[t][l1 + o] == l2mem[l2 + o],
                          $sformatf("L2 -> L1 word %h", l1 + o));
        else        check(l2mem.exists(l2 + o) && l2mem[l2 + o] == (tmem[t].exists(l1 + o) ? tmem[t][l1 + o] : 0),
                          $sformatf("L1 -> L2 word %h", l1 + o));
      end
      if (!stalls) check(cyc <= 4 * int'(len / 4) + 2, $sformatf("%0d words took %0d cycles", len / 4, cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
