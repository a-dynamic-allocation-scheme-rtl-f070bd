// tb_das_subgroup: one SubGroup of an 8-tile cluster (2 Groups x 2 SubGroups x
// 2 tiles, 2 cores per tile, 4 banks of 16 words), SubGroup id 1.
//
// The testbench plays the cores, the L2 memory (a 1-cycle model on every
// L2 port) and the rest of the cluster behind the upward ports (a
// responder with its own memory that answers one cycle after it accepts,
// like a bank). It checks, against its own model of the remapping and of
// the port scheme:
//   - every core reaches every address, with the data kept, and the
//     uncontended latency of 1, 3, 5 or 7 cycles by distance;
//   - requests that leave the SubGroup do so on the upward port of their
//     source tile and destination class, with the remapped address;
//   - requests arriving on upward incoming ports reach the right tile;
//   - a DMA job L2 -> L1 over this SubGroup's slice of a line, checked by
//     core reads, and L1 -> L2 back, checked in the L2 model.
module tb_das_subgroup;
  import das_pkg::*;

  localparam int unsigned N_PE = 2, N_BANKS = 4, BANK_WORDS = 16;
  localparam int unsigned N_TILES = 2, N_SG = 2, N_GROUPS = 2, NUM_REGIONS = 4;
  localparam int unsigned NTOT  = N_TILES * N_SG * N_GROUPS;
  localparam int unsigned N_REM = N_SG + N_GROUPS - 1;
  localparam int unsigned NT    = N_TILES;                 // tiles in this block
  localparam int unsigned NP    = NT * N_PE;
  localparam int unsigned NUP   = (N_REM - 1) * N_TILES;
  localparam int unsigned NL2   = 1;
  localparam int unsigned ID    = 1;
  localparam int unsigned TILE0 = ID * NT;              // first global tile id
  localparam int unsigned BANK_BITS = $clog2(N_BANKS * NTOT);
  localparam int unsigned LINE  = 4 * N_BANKS * NTOT;
  localparam int unsigned SLICE = 4 * N_BANKS * NT;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  das_region_t [NUM_REGIONS-1:0] cfg;
  logic     [NP-1:0]  pe_req_valid, pe_req_ready, pe_rsp_valid, pe_rsp_ready;
  mem_req_t [NP-1:0]  pe_req;
  mem_rsp_t [NP-1:0]  pe_rsp;
  logic     [NUP-1:0] out_req_valid, out_req_ready, out_rsp_valid, out_rsp_ready;
  mem_req_t [NUP-1:0] out_req;
  mem_rsp_t [NUP-1:0] out_rsp;
  logic     [NUP-1:0] in_req_valid, in_req_ready, in_rsp_valid, in_rsp_ready;
  mem_req_t [NUP-1:0] in_req;
  mem_rsp_t [NUP-1:0] in_rsp;
  logic     dma_valid, dma_ready, idle;
  dma_job_t dma_job;
  logic     [NL2-1:0] l2_req_valid, l2_req_ready, l2_rsp_valid, l2_rsp_ready;
  mem_req_t [NL2-1:0] l2_req;
  mem_rsp_t [NL2-1:0] l2_rsp;

  das_subgroup #(
    .N_PE(N_PE), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS), .N_TILES(N_TILES),
    .N_SG(N_SG), .N_GROUPS(N_GROUPS), .NUM_REGIONS(NUM_REGIONS)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n), .sg_id_i(2'(ID)), .cfg_i(cfg),
    .pe_req_valid_i(pe_req_valid), .pe_req_i(pe_req), .pe_req_ready_o(pe_req_ready),
    .pe_rsp_valid_o(pe_rsp_valid), .pe_rsp_o(pe_rsp), .pe_rsp_ready_i(pe_rsp_ready),
    .out_req_valid_o(out_req_valid), .out_req_o(out_req), .out_req_ready_i(out_req_ready),
    .out_rsp_valid_i(out_rsp_valid), .out_rsp_i(out_rsp), .out_rsp_ready_o(out_rsp_ready),
    .in_req_valid_i(in_req_valid), .in_req_i(in_req), .in_req_ready_o(in_req_ready),
    .in_rsp_valid_o(in_rsp_valid), .in_rsp_o(in_rsp), .in_rsp_ready_i(in_rsp_ready),
    .dma_valid_i(dma_valid), .dma_i(dma_job), .dma_ready_o(dma_ready),
    .l2_req_valid_o(l2_req_valid), .l2_req_o(l2_req), .l2_req_ready_i(l2_req_ready),
    .l2_rsp_valid_i(l2_rsp_valid), .l2_rsp_i(l2_rsp), .l2_rsp_ready_o(l2_rsp_ready),
    .idle_o(idle)
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------ rest of the cluster, L2
  data_t rmem [addr_t];
  data_t l2mem [addr_t];
  addr_t last_out_addr [NUP];
  assign out_req_ready = ~out_rsp_valid | out_rsp_ready;
  assign l2_req_ready  = ~l2_rsp_valid | l2_rsp_ready;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_rsp_valid <= '0;
      l2_rsp_valid  <= '0;
    end else begin
      for (int k = 0; k < NUP; k++) begin
        if (out_req_valid[k] && out_req_ready[k]) begin
          out_rsp_valid[k]  <= 1'b1;
          out_rsp[k]        <= '0;
          out_rsp[k].rdata  <= rmem.exists(out_req[k].addr) ? rmem[out_req[k].addr] : '0;
          out_rsp[k].tag    <= out_req[k].tag;
          out_rsp[k].r_pe   <= out_req[k].r_pe;
          out_rsp[k].r_lvl  <= out_req[k].r_lvl;
          if (out_req[k].we) rmem[out_req[k].addr] = out_req[k].wdata;
          last_out_addr[k] = out_req[k].addr;
        end else if (out_rsp_ready[k]) begin
          out_rsp_valid[k] <= 1'b0;
        end
      end
      for (int i = 0; i < NL2; i++) begin
        if (l2_req_valid[i] && l2_req_ready[i]) begin
          l2_rsp_valid[i]  <= 1'b1;
          l2_rsp[i]        <= '0;
          l2_rsp[i].rdata  <= l2mem.exists(l2_req[i].addr) ? l2mem[l2_req[i].addr] : '0;
          if (l2_req[i].we) l2mem[l2_req[i].addr] = l2_req[i].wdata;
        end else if (l2_rsp_ready[i]) begin
          l2_rsp_valid[i] <= 1'b0;
        end
      end
    end
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

  function automatic int tile_of(addr_t phys);
    return int'(((phys >> 2) / N_BANKS) % NTOT);
  endfunction

  // destination class of a tile's port (-1: own tile), as seen from tile ts
  function automatic int port_of(int ts, addr_t phys);
    int td;
    td = tile_of(phys);
    if (td == ts) return -1;
    if (td / (N_TILES * N_SG) == ts / (N_TILES * N_SG)) begin
      if (td / N_TILES == ts / N_TILES) return 0;
      return ((td / N_TILES) % N_SG - (ts / N_TILES) % N_SG + N_SG) % N_SG;
    end
    return N_SG - 1 + (td / (N_TILES * N_SG) - ts / (N_TILES * N_SG) + N_GROUPS) % N_GROUPS;
  endfunction

  function automatic int lat_of(int k);
    if (k < 0) return 1;
    if (k == 0) return 3;
    if (k < N_SG) return 5;
    return 7;
  endfunction

  // upward port used by local tile t for class k, or -1 if it stays inside
  function automatic int up_of(int t, int k);
    if (k <= 0) return -1;
    return (k - 1) * N_TILES + t;
  endfunction

  task automatic pe_access(input int p, input addr_t a, input bit we, input data_t wd,
                           output data_t rd, output int lat);
    mem_req_t r;
    r = '0; r.addr = a; r.we = we; r.wdata = wd; r.be = 4'hF; r.tag = tag_t'(p);
    @(negedge clk);
    pe_req[p] = r;
    pe_req_valid[p] = 1'b1;
    #1;
    while (!pe_req_ready[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    pe_req_valid[p] = 1'b0;
    lat = 1;
    #1;
    while (!pe_rsp_valid[p]) begin @(negedge clk); #1; lat++; end
    rd = pe_rsp[p].rdata;
    check(pe_rsp[p].tag == tag_t'(p), "response tag");
  endtask

  initial begin
    data_t rd, wd;
    int    lat, k, up, p;
    addr_t a, ph, base;
    int    n_lat [8];
    for (int i = 0; i < 8; i++) n_lat[i] = 0;
    cfg = '0;
    for (int r = 0; r < NUM_REGIONS; r++) begin r_size[r] = 0; r_start[r] = 0; r_p[r] = 0; r_s[r] = 0; end
    pe_req_valid = '0; pe_req = '0; pe_rsp_ready = '1;
    in_req_valid = '0; in_req = '0; in_rsp_ready = '1;
    dma_valid = 1'b0; dma_job = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. core accesses, first interleaved, then with two DAS regions
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1) begin
        r_start[0] = 2 * LINE; r_size[0] = 4 * LINE; r_p[0] = 1; r_s[0] = 1;
        r_start[1] = 8 * LINE; r_size[1] = 4 * LINE; r_p[1] = 3; r_s[1] = 2;
        for (int r = 0; r < 2; r++) begin
          cfg[r].start = r_start[r]; cfg[r].size = r_size[r];
          cfg[r].p = 4'(r_p[r]); cfg[r].s = 4'(r_s[r]);
        end
      end
      for (int i = 0; i < 80; i++) begin
        p  = $urandom_range(0, NP - 1);
        a  = addr_t'($urandom_range(0, LINE * BANK_WORDS / 4 - 1)) << 2;
        if (pass == 1 && i % 2 == 0) a = 2 * LINE + (addr_t'($urandom_range(0, 4 * LINE - 1)) & ~addr_t'(3));
        ph = ref_map(a);
        k  = port_of(TILE0 + p / N_PE, ph);
        up = up_of(p / N_PE, k);
        wd = $urandom;
        pe_access(p, a, 1'b1, wd, rd, lat);
        if (up >= 0) check(last_out_addr[up] == ph,
                           $sformatf("address %h: upward port %0d saw %h, expected %h", a, up, last_out_addr[up], ph));
        pe_access(p, a, 1'b0, 0, rd, lat);
        check(rd == wd, $sformatf("read back %h by core %0d: %h vs %h", a, p, rd, wd));
        check(lat == lat_of(k), $sformatf("latency %0d, expected %0d", lat, lat_of(k)));
        n_lat[lat_of(k)]++;
      end
    end
    check(n_lat[1] > 0 && n_lat[3] > 0 && n_lat[5] > 0 && n_lat[7] > 0, "all four latencies seen");
    cfg = '0;
    for (int r = 0; r < NUM_REGIONS; r++) r_size[r] = 0;

    // 2. upward incoming ports: write through one, read back by a core of that tile
    for (int j = 0; j < NUP; j++) begin
      mem_req_t r;
      int t;
      t  = j % NT;
      a  = (TILE0 + t) * N_BANKS * 4 + $urandom_range(0, N_BANKS - 1) * 4 + $urandom_range(0, BANK_WORDS - 1) * LINE;
      wd = $urandom;
      r = '0; r.addr = a; r.we = 1'b1; r.wdata = wd; r.be = 4'hF; r.r_lvl = 8'(j); r.tag = 8'(j);
      @(negedge clk);
      in_req[j] = r; in_req_valid[j] = 1'b1;
      #1;
      while (!in_req_ready[j]) begin @(negedge clk); #1; end
      @(negedge clk);
      in_req_valid[j] = 1'b0;
      #1;
      while (!in_rsp_valid[j]) begin @(negedge clk); #1; end
      check(in_rsp[j].r_lvl == 8'(j) && in_rsp[j].tag == 8'(j), "incoming response fields");
      pe_access(t * N_PE, a, 1'b0, 0, rd, lat);
      check(rd == wd && lat == 1, $sformatf("incoming port %0d write landed in tile %0d", j, t));
    end

    // 3. DMA L2 -> L1 over this block's slice of line 5, then L1 -> L2
    base = 5 * LINE + ID * SLICE;
    for (int w = 0; w < SLICE / 4; w++) l2mem[32'h1000 + 4 * w] = $urandom;
    @(negedge clk);
    dma_job = '{l2_addr: 32'h1000, l1_addr: base, len: SLICE, to_l2: 1'b0};
    dma_valid = 1'b1;
    #1;
    while (!dma_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    dma_valid = 1'b0;
    #1;
    while (!idle) begin @(negedge clk); #1; end
    for (int w = 0; w < SLICE / 4; w++) begin
      pe_access($urandom_range(0, NP - 1), base + 4 * w, 1'b0, 0, rd, lat);
      check(rd == l2mem[32'h1000 + 4 * w], $sformatf("DMA in word %0d", w));
    end
    @(negedge clk);
    dma_job = '{l2_addr: 32'h3000, l1_addr: base, len: SLICE, to_l2: 1'b1};
    dma_valid = 1'b1;
    #1;
    while (!dma_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    dma_valid = 1'b0;
    #1;
    while (!idle) begin @(negedge clk); #1; end
    for (int w = 0; w < SLICE / 4; w++)
      check(l2mem.exists(32'h3000 + 4 * w) && l2mem[32'h3000 + 4 * w] == l2mem[32'h1000 + 4 * w],
            $sformatf("DMA out word %0d", w));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
