// tb_das_gemv_locality: a GEMV-shaped read pattern on the reduced cluster
// (2 Groups x 2 SubGroups x 2 tiles, 2 cores and 4 banks of 16 words per
// tile), once with the matrix in plain interleaved memory and once in a
// DAS region with one partition per tile.
//
// In a row-parallel GEMV each core streams its own contiguous block of
// the matrix. The matrix is brought in by DMA from the L2 model; then all
// cores read their blocks at the same time. The testbench checks the data,
// counts how many loads were served by the core's own tile, and measures
// the cycles the whole read phase takes. With DAS every load must be local
// (1-cycle class) and the phase must be faster than with interleaving,
// where most loads go to remote tiles. This is the effect the scheme is
// built for, shown at a size a simulator handles in seconds.
module tb_das_gemv_locality;
  import das_pkg::*;

  localparam int unsigned N_PE = 2, N_BANKS = 4, BANK_WORDS = 16;
  localparam int unsigned N_TILES = 2, N_SG = 2, N_GROUPS = 2;
  localparam int unsigned NUM_REGIONS = 4;
  localparam int unsigned NTOT = N_TILES * N_SG * N_GROUPS;
  localparam int unsigned NP   = NTOT * N_PE;
  localparam int unsigned NL2  = N_SG * N_GROUPS;
  localparam int unsigned BANK_BITS = $clog2(N_BANKS * NTOT);
  localparam int unsigned LINE = 4 * N_BANKS * NTOT;
  localparam int unsigned L1B  = LINE * BANK_WORDS;
  localparam int unsigned PE_STEP  = 1;      // cores visited in the sequential tests
  localparam int unsigned W_STEP   = 3;      // words visited in the DAS region read-back
  localparam int unsigned OUT_LEN  = 2 * LINE;
  localparam int unsigned WATCHDOG = 400000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     [NP-1:0]  pe_req_valid, pe_req_ready, pe_rsp_valid, pe_rsp_ready;
  mem_req_t [NP-1:0]  pe_req;
  mem_rsp_t [NP-1:0]  pe_rsp;
  reg_req_t           csr_req, dma_req;
  data_t              csr_rdata, dma_rdata;
  logic               dma_busy;
  logic     [NL2-1:0] l2_req_valid, l2_req_ready, l2_rsp_valid, l2_rsp_ready;
  mem_req_t [NL2-1:0] l2_req;
  mem_rsp_t [NL2-1:0] l2_rsp;

  das_cluster #(
    .N_PE(N_PE), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS), .N_TILES(N_TILES),
    .N_SG(N_SG), .N_GROUPS(N_GROUPS), .NUM_REGIONS(NUM_REGIONS)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .pe_req_valid_i(pe_req_valid), .pe_req_i(pe_req), .pe_req_ready_o(pe_req_ready),
    .pe_rsp_valid_o(pe_rsp_valid), .pe_rsp_o(pe_rsp), .pe_rsp_ready_i(pe_rsp_ready),
    .csr_req_i(csr_req), .csr_rdata_o(csr_rdata),
    .dma_reg_req_i(dma_req), .dma_reg_rdata_o(dma_rdata), .dma_busy_o(dma_busy),
    .l2_req_valid_o(l2_req_valid), .l2_req_o(l2_req), .l2_req_ready_i(l2_req_ready),
    .l2_rsp_valid_i(l2_rsp_valid), .l2_rsp_i(l2_rsp), .l2_rsp_ready_o(l2_rsp_ready)
  );

  int checks = 0, failures = 0;
  // mechanism counters
  int n_lat1 = 0, n_lat3 = 0, n_lat5 = 0, n_lat7 = 0, n_das_hit = 0, n_conflict = 0;
  int n_contention = 0, n_dma_in = 0, n_dma_out = 0, n_part_cut = 0, n_multi_group = 0;

  // ------------------------------------------------------------ L2 model
  data_t l2mem [addr_t];
  assign l2_req_ready = ~l2_rsp_valid | l2_rsp_ready;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l2_rsp_valid <= '0;
    end else begin
      for (int i = 0; i < NL2; i++) begin
        if (l2_req_valid[i] && l2_req_ready[i]) begin
          l2_rsp_valid[i]       <= 1'b1;
          l2_rsp[i]             <= '0;
          l2_rsp[i].rdata       <= l2mem.exists(l2_req[i].addr) ? l2mem[l2_req[i].addr] : '0;
          if (l2_req[i].we) l2mem[l2_req[i].addr] = l2_req[i].wdata;
        end else if (l2_rsp_ready[i]) begin
          l2_rsp_valid[i] <= 1'b0;
        end
      end
    end
  end

  // pieces leaving the splitter: cut shorter than a line = partition cut
  logic [N_GROUPS-1:0] grp_seen;
  always @(posedge clk) begin
    if (dut.sp_v && dut.sp_r && dut.sp_piece.len < LINE &&
        (dut.sp_piece.l1_addr % LINE) + dut.sp_piece.len < LINE && dut.i_splitter.hit)
      n_part_cut++;
    for (int g = 0; g < N_GROUPS; g++) if (dut.gd_v[g] && dut.gd_r[g]) grp_seen[g] = 1'b1;
  end

  // ------------------------------------------------------- reference model
  addr_t r_start [NUM_REGIONS], r_size [NUM_REGIONS];
  int    r_p [NUM_REGIONS], r_s [NUM_REGIONS];

  function automatic addr_t ref_map(addr_t a);
    for (int r = 0; r < NUM_REGIONS; r++) begin
      if (r_size[r] != 0 && a >= r_start[r] && a - r_start[r] < r_size[r]) begin
        addr_t w, ph;
        int v;
        w  = (a - r_start[r]) >> 2;
        ph = '0;
        v  = BANK_BITS - r_p[r];
        // walk the logical bits and drop each at its physical position
        for (int j = 0; j < 30; j++) begin
          if (j < r_p[r])                   ph[j] = w[j];
          else if (j < r_p[r] + r_s[r])     ph[BANK_BITS + j - r_p[r]] = w[j];
          else if (j < r_p[r] + r_s[r] + v) ph[j - r_s[r]] = w[j];
          else                              ph[j] = w[j];
        end
        return r_start[r] + (ph << 2) + (a & 3);
      end
    end
    return a;
  endfunction

  function automatic bit in_region(addr_t a);
    for (int r = 0; r < NUM_REGIONS; r++)
      if (r_size[r] != 0 && a >= r_start[r] && a - r_start[r] < r_size[r]) return 1'b1;
    return 1'b0;
  endfunction

  function automatic int tile_of(addr_t phys);
    return int'(((phys >> 2) / N_BANKS) % NTOT);
  endfunction

  function automatic int nominal_latency(int pe, addr_t a);
    int ts, td;
    ts = pe / N_PE;
    td = tile_of(ref_map(a));
    if (ts == td) return 1;
    if (ts / N_TILES == td / N_TILES) return 3;
    if (ts / (N_TILES * N_SG) == td / (N_TILES * N_SG)) return 5;
    return 7;
  endfunction

  // cycles the last request of each core waited for its handshake
  int last_stall [NP];

  // ----------------------------------------------------------------- tasks
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pe_access(input int p, input addr_t a, input bit we, input data_t wd,
                           output data_t rd, output int lat);
    mem_req_t r;
    r = '0; r.addr = a; r.we = we; r.wdata = wd; r.be = 4'hF; r.tag = tag_t'(p);
    @(negedge clk);
    pe_req[p] = r;
    pe_req_valid[p] = 1'b1;
    #1;
    last_stall[p] = 0;
    while (!pe_req_ready[p]) begin @(negedge clk); #1; last_stall[p]++; end
    @(negedge clk);
    pe_req_valid[p] = 1'b0;
    lat = 1;
    #1;
    while (!pe_rsp_valid[p]) begin @(negedge clk); #1; lat++; end
    rd = pe_rsp[p].rdata;
    if (pe_rsp[p].tag != tag_t'(p)) begin
      checks++; failures++;
      $display("FAIL: tag mismatch on pe %0d", p);
    end
  endtask

  task automatic reg_write(input bit to_dma, input int unsigned a, input data_t d);
    @(negedge clk);
    if (to_dma) begin
      dma_req = '{valid: 1'b1, we: 1'b1, addr: RegAddrWidth'(a), wdata: d};
    end else begin
      csr_req = '{valid: 1'b1, we: 1'b1, addr: RegAddrWidth'(a), wdata: d};
    end
    @(negedge clk);
    dma_req = '0;
    csr_req = '0;
  endtask

  task automatic set_region(input int r, input addr_t start, input addr_t size, input int p, input int s);
    reg_write(1'b0, 16 * r + 0, size);
    reg_write(1'b0, 16 * r + 4, start);
    reg_write(1'b0, 16 * r + 8, data_t'((s << 4) | p));
    r_start[r] = start; r_size[r] = size; r_p[r] = p; r_s[r] = s;
  endtask

  task automatic dma_copy(input addr_t src, input addr_t dst, input addr_t len);
    int guard;
    reg_write(1'b1, 8'h00, src);
    reg_write(1'b1, 8'h04, dst);
    reg_write(1'b1, 8'h08, len);
    reg_write(1'b1, 8'h0C, 1);
    check(dma_busy, "DMA busy after start");
    guard = 0;
    while (dma_busy && guard < 200000) begin @(negedge clk); guard++; end
    check(!dma_busy, "DMA finished");
  endtask


  int n_done, n_local;

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned WPC   = 8;                  // words per core
  localparam addr_t       MBASE = addr_t'(4 * LINE);  // matrix base
  localparam int unsigned MWORDS = NP * WPC;

  task automatic read_phase(output int cycles, output int local_loads);
    int t0;
    n_done = 0; n_local = 0;
    t0 = int'($time / 10);
    for (int p = 0; p < NP; p++) begin
      fork
        automatic int pp = p;
        begin
          automatic data_t r;
          automatic int l, i2;
          automatic addr_t aa;
          for (int i = 0; i < int'(WPC); i++) begin
            // cores of a tile start at different banks
            i2 = (i + 2 * (pp % N_PE)) % WPC;
            aa = MBASE + addr_t'(4 * (pp * WPC + i2));
            pe_access(pp, aa, 1'b0, '0, r, l);
            check(r == l2mem[32'h8000_0000 + 4 * (pp * WPC + i2)],
                  $sformatf("core %0d word %0d: %h", pp, pp * WPC + i2, r));
            if (nominal_latency(pp, aa) == 1) n_local++;
          end
          n_done++;
        end
      join_none
    end
    wait (n_done == NP);
    cycles = int'($time / 10) - t0;
    local_loads = n_local;
  endtask

  initial begin : main
    int cyc_il, cyc_das, loc_il, loc_das;
    pe_req_valid = '0; pe_req = '0; pe_rsp_ready = '1;
    csr_req = '0; dma_req = '0; grp_seen = '0;
    for (int r = 0; r < NUM_REGIONS; r++) begin r_start[r] = 0; r_size[r] = 0; r_p[r] = 0; r_s[r] = 0; end
    for (int i = 0; i < int'(MWORDS); i++) l2mem[32'h8000_0000 + 4 * i] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // interleaved
    dma_copy(32'h8000_0000, MBASE, addr_t'(4 * MWORDS));
    read_phase(cyc_il, loc_il);

    // DAS: one partition per tile (p = log2 banks per tile), 2^s rows each,
    // so each tile holds N_BANKS * 2^s consecutive words = its cores' blocks
    set_region(0, MBASE, addr_t'(4 * MWORDS), $clog2(N_BANKS), $clog2(N_PE * WPC / N_BANKS));
    dma_copy(32'h8000_0000, MBASE, addr_t'(4 * MWORDS));
    read_phase(cyc_das, loc_das);

    $display("interleaved: %0d cycles, %0d of %0d loads local; DAS: %0d cycles, %0d local",
             cyc_il, loc_il, MWORDS, cyc_das, loc_das);
    check(loc_das == int'(MWORDS), "with DAS every load is served by the own tile");
    check(loc_il < int'(MWORDS) / 2, "with interleaving most loads are remote");
    check(cyc_das < cyc_il, "DAS read phase is faster");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
