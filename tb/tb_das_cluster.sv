// tb_das_cluster: end-to-end test of the DAS cluster at a reduced size
// (2 Groups x 2 SubGroups x 2 tiles x 2 cores, 4 banks of 16 words).
//
// The testbench plays the cores (one access at a time per core port) and
// the L2 memory (1-cycle behavioural model on every backend port). It
// checks, against its own bit-level model of the DAS remapping:
//   - data written and read back through every core port;
//   - the uncontended latency of each load, 1/3/5/7 cycles by the distance
//     of the bank that the remapped address lands in;
//   - a bank conflict between two cores of a tile (one waits a cycle);
//   - DMA from L2 into a DAS region and from interleaved L1 back to L2,
//     including the splitter's cuts at partition boundaries;
//   - all cores at once on private addresses (contention, data only).
// Each mechanism is counted; one that never happens counts as a failure.
module tb_das_cluster;
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

  // single load with latency check (network otherwise idle)
  task automatic timed_load(input int p, input addr_t a, input data_t exp);
    data_t rd; int lat, nl;
    pe_access(p, a, 1'b0, '0, rd, lat);
    nl = nominal_latency(p, a);
    check(rd == exp, $sformatf("pe %0d load %h: got %h expected %h", p, a, rd, exp));
    check(lat == nl, $sformatf("pe %0d load %h: latency %0d expected %0d", p, a, lat, nl));
    case (lat)
      1: n_lat1++;
      3: n_lat3++;
      5: n_lat5++;
      7: n_lat7++;
      default: ;
    endcase
    if (in_region(a)) n_das_hit++;
  endtask

  data_t shadow [addr_t];
  int    n_done;

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    data_t rd;
    int lat;
    addr_t a;
    pe_req_valid = '0; pe_req = '0; pe_rsp_ready = '1;
    csr_req = '0; dma_req = '0; grp_seen = '0;
    for (int r = 0; r < NUM_REGIONS; r++) begin r_start[r] = 0; r_size[r] = 0; r_p[r] = 0; r_s[r] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1) interleaved: every core writes words spread over the cluster, then
    //    every core reads a spread of addresses with latency checks.
    for (int p = 0; p < NP; p += PE_STEP) begin
      for (int k = 0; k < 4; k++) begin
        a = addr_t'(((p * 37 + k * 101) % (L1B / 4)) * 4);
        shadow[a] = $urandom;
        pe_access(p, a, 1'b1, shadow[a], rd, lat);
      end
    end
    for (int p = 0; p < NP; p += PE_STEP) begin
      for (int k = 0; k < 4; k++) begin
        a = addr_t'(((p * 37 + k * 101) % (L1B / 4)) * 4);
        timed_load((p + 3 * k) % NP, a, shadow[a]);
      end
    end

    // 2) bank conflict: two cores of tile 0 read the same bank together
    begin
      data_t r0, r1; int l0, l1;
      a = addr_t'(0);
      shadow[a] = 32'hCAFE_0001;
      pe_access(0, a, 1'b1, shadow[a], rd, lat);
      fork
        pe_access(0, a, 1'b0, '0, r0, l0);
        pe_access(1, a + addr_t'(LINE), 1'b0, '0, r1, l1);
      join
      check(r0 == shadow[a], "conflict: data of first core");
      check(l0 == 1 && l1 == 1 && last_stall[0] + last_stall[1] == 1,
            $sformatf("conflict: latencies %0d/%0d stalls %0d/%0d, expected one stall",
                      l0, l1, last_stall[0], last_stall[1]));
      if (last_stall[0] + last_stall[1] == 1) n_conflict++;
    end

    // 3) DAS region: one tile per partition (p = log2 banks per tile), s = 2
    set_region(0, addr_t'(4 * LINE), addr_t'(4 * LINE), $clog2(N_BANKS), 2);
    #1;
    check(csr_rdata == 4 * LINE, "DAS CSR read back: region 0 size");
    for (int i = 0; i < int'(4 * LINE / 4); i++) l2mem[32'h8000_0000 + 4 * i] = $urandom;
    dma_copy(32'h8000_0000, addr_t'(4 * LINE), addr_t'(4 * LINE));
    n_dma_in++;
    // every core reads its own partition's first words and some others
    for (int i = 0; i < int'(4 * LINE / 4); i += W_STEP) begin
      a = addr_t'(4 * LINE + 4 * i);
      timed_load((i / 7) % NP, a, l2mem[32'h8000_0000 + 4 * i]);
    end
    // a core's own partition is in its own tile: contiguous words are local
    for (int p = 0; p < NP; p += N_PE) begin
      int part;
      part = p / N_PE;
      a = addr_t'(4 * LINE + part * (N_BANKS * 4) * 4);
      timed_load(p, a, l2mem[32'h8000_0000 + (a - 4 * LINE)]);
      check(nominal_latency(p, a) == 1, "DAS partition of a tile is local");
    end

    // 4) DMA out of interleaved L1 into L2 (spans all Groups)
    //    (filled first by a DMA from L2, spot-checked by core loads)
    for (int i = 0; i < int'(OUT_LEN / 4); i++) l2mem[32'hA000_0000 + 4 * i] = $urandom;
    grp_seen = '0;
    dma_copy(32'hA000_0000, addr_t'(0), addr_t'(OUT_LEN));
    n_dma_in++;
    if (&grp_seen) n_multi_group++;
    for (int i = 0; i < int'(OUT_LEN / 4); i += 97)
      timed_load((i * 13) % NP, addr_t'(4 * i), l2mem[32'hA000_0000 + 4 * i]);
    dma_copy(addr_t'(0), 32'h9000_0000, addr_t'(OUT_LEN));
    n_dma_out++;
    for (int i = 0; i < int'(OUT_LEN / 4); i++)
      check(l2mem[32'h9000_0000 + 4 * i] == l2mem[32'hA000_0000 + 4 * i],
            $sformatf("DMA out word %0d", i));

    // 5) all cores at once on private addresses
    n_done = 0;
    for (int p = 0; p < NP; p++) begin
      fork
        automatic int pp = p;
        begin
          automatic data_t d, r;
          automatic int    l;
          automatic addr_t aa;
          // every core targets tile 0: remote ports and banks are contended
          for (int k = 0; k < 2; k++) begin
            aa = addr_t'((8 + pp / N_BANKS + k * (NP / N_BANKS)) * LINE + (pp % N_BANKS) * 4);
            d  = $urandom;
            pe_access(pp, aa, 1'b1, d, r, l);
            pe_access(pp, aa, 1'b0, '0, r, l);
            check(r == d, $sformatf("stress pe %0d addr %h got %h exp %h lat %0d", pp, aa, r, d, l));
            if (l > nominal_latency(pp, aa) || last_stall[pp] > 0) n_contention++;
          end
          n_done++;
        end
      join_none
    end
    wait (n_done == NP);

    // 6) back to fully interleaved
    set_region(0, '0, '0, 0, 0);
    a = addr_t'(4 * LINE);
    // logical offset 0 of the old region was stored at physical offset 0
    timed_load(0, a, l2mem[32'h8000_0000]);

    $display("mechanisms: lat1=%0d lat3=%0d lat5=%0d lat7=%0d das_hit=%0d conflict=%0d contention=%0d dma_in=%0d dma_out=%0d part_cut=%0d multi_group=%0d",
             n_lat1, n_lat3, n_lat5, n_lat7, n_das_hit, n_conflict, n_contention, n_dma_in, n_dma_out, n_part_cut, n_multi_group);
    check(n_lat1 > 0, "own-tile access happened");
    check(n_lat3 > 0, "SubGroup access happened");
    check(n_lat5 > 0, "Group access happened");
    check(n_lat7 > 0, "remote-Group access happened");
    check(n_das_hit > 0, "DAS-remapped access happened");
    check(n_conflict > 0, "bank conflict happened");
    check(n_contention > 0, "interconnect contention happened");
    check(n_dma_in > 0 && n_dma_out > 0, "DMA both directions happened");
    check(n_part_cut > 0, "splitter partition cut happened");
    check(n_multi_group > 0, "distribution over all Groups happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
