// tb_das_tile: one tile (2 cores, 4 banks of 16 words) of an 8-tile
// cluster (2 Groups x 2 SubGroups x 2 tiles), tile id 5.
//
// The testbench plays the cores, the rest of the cluster behind the
// outgoing ports (a responder with its own memory that answers one cycle
// after it accepts a request, like a bank), the incoming ports and the DMA
// port. It checks, against its own model of the DAS remapping and of the
// port scheme:
//   - local accesses return in 1 cycle and keep their data;
//   - a remote access leaves on the port of its destination class, with
//     the remapped physical address, and returns after 1 + 2 x (register
//     stages of that port) cycles: 3, 5 or 7;
//   - requests on every incoming port and on the DMA port reach the banks;
//   - two cores on the same bank: one of them waits.
module tb_das_tile;
  import das_pkg::*;

  localparam int unsigned N_PE = 2, N_BANKS = 4, BANK_WORDS = 16;
  localparam int unsigned N_TILES = 2, N_SG = 2, N_GROUPS = 2, NUM_REGIONS = 4;
  localparam int unsigned NTOT = N_TILES * N_SG * N_GROUPS;
  localparam int unsigned N_REM = N_SG + N_GROUPS - 1;
  localparam int unsigned BANK_BITS = $clog2(N_BANKS * NTOT);
  localparam int unsigned LINE = 4 * N_BANKS * NTOT;
  localparam int unsigned OWN = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  das_region_t [NUM_REGIONS-1:0] cfg;
  logic     [N_PE-1:0]  pe_req_valid, pe_req_ready, pe_rsp_valid, pe_rsp_ready;
  mem_req_t [N_PE-1:0]  pe_req;
  mem_rsp_t [N_PE-1:0]  pe_rsp;
  logic     [N_REM-1:0] out_req_valid, out_req_ready, out_rsp_valid, out_rsp_ready;
  mem_req_t [N_REM-1:0] out_req;
  mem_rsp_t [N_REM-1:0] out_rsp;
  logic     [N_REM-1:0] in_req_valid, in_req_ready, in_rsp_valid, in_rsp_ready;
  mem_req_t [N_REM-1:0] in_req;
  mem_rsp_t [N_REM-1:0] in_rsp;
  logic     dma_req_valid, dma_req_ready, dma_rsp_valid, dma_rsp_ready;
  mem_req_t dma_req;
  mem_rsp_t dma_rsp;

  das_tile #(
    .N_PE(N_PE), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS), .N_TILES(N_TILES),
    .N_SG(N_SG), .N_GROUPS(N_GROUPS), .NUM_REGIONS(NUM_REGIONS)
  ) dut (
    .clk_i(clk), .rst_ni(rst_n), .tile_id_i(3'(OWN)), .cfg_i(cfg),
    .pe_req_valid_i(pe_req_valid), .pe_req_i(pe_req), .pe_req_ready_o(pe_req_ready),
    .pe_rsp_valid_o(pe_rsp_valid), .pe_rsp_o(pe_rsp), .pe_rsp_ready_i(pe_rsp_ready),
    .out_req_valid_o(out_req_valid), .out_req_o(out_req), .out_req_ready_i(out_req_ready),
    .out_rsp_valid_i(out_rsp_valid), .out_rsp_i(out_rsp), .out_rsp_ready_o(out_rsp_ready),
    .in_req_valid_i(in_req_valid), .in_req_i(in_req), .in_req_ready_o(in_req_ready),
    .in_rsp_valid_o(in_rsp_valid), .in_rsp_o(in_rsp), .in_rsp_ready_i(in_rsp_ready),
    .dma_req_valid_i(dma_req_valid), .dma_req_i(dma_req), .dma_req_ready_o(dma_req_ready),
    .dma_rsp_valid_o(dma_rsp_valid), .dma_rsp_o(dma_rsp), .dma_rsp_ready_i(dma_rsp_ready)
  );

  int checks = 0, failures = 0;

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

  // ----------------------------------------------- rest of the cluster
  data_t rmem [addr_t];
  addr_t last_out_addr [N_REM];
  int    out_count [N_REM];
  assign out_req_ready = ~out_rsp_valid | out_rsp_ready;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_rsp_valid <= '0;
      for (int k = 0; k < N_REM; k++) out_count[k] = 0;
    end else begin
      for (int k = 0; k < N_REM; k++) begin
        if (out_req_valid[k] && out_req_ready[k]) begin
          out_rsp_valid[k]     <= 1'b1;
          out_rsp[k]           <= '0;
          out_rsp[k].rdata     <= rmem.exists(out_req[k].addr) ? rmem[out_req[k].addr] : '0;
          out_rsp[k].tag       <= out_req[k].tag;
          out_rsp[k].r_pe      <= out_req[k].r_pe;
          if (out_req[k].we) rmem[out_req[k].addr] = out_req[k].wdata;
          last_out_addr[k] = out_req[k].addr;
          out_count[k]++;
        end else if (out_rsp_ready[k]) begin
          out_rsp_valid[k] <= 1'b0;
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

  // expected outgoing port, or -1 for the own banks
  function automatic int port_of(addr_t phys);
    int td, sgd, gd, sgo, go;
    td = tile_of(phys);
    if (td == OWN) return -1;
    sgd = (td / N_TILES) % N_SG; gd = td / (N_TILES * N_SG);
    sgo = (OWN / N_TILES) % N_SG; go = OWN / (N_TILES * N_SG);
    if (gd == go && sgd == sgo) return 0;
    if (gd == go) return (sgd - sgo + N_SG) % N_SG;
    return N_SG - 1 + (gd - go + N_GROUPS) % N_GROUPS;
  endfunction

  function automatic int stages_of(int k);
    if (k == 0) return 1;
    if (k < N_SG) return 2;
    return 3;
  endfunction

  int last_stall [N_PE];

  task automatic pe_access(input int p, input addr_t a, input bit we, input data_t wd,
                           output data_t rd, output int lat);
    mem_req_t r;
    r = '0; r.addr = a; r.we = we; r.wdata = wd; r.be = 4'hF; r.tag = tag_t'(8'h40 + p);
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
    check(pe_rsp[p].tag == tag_t'(8'h40 + p), "response tag");
  endtask

  task automatic side_access(input int k, input addr_t a, input bit we, input data_t wd,
                             output data_t rd);
    // k < N_REM: incoming port k; k == N_REM: DMA port
    mem_req_t r;
    r = '0; r.addr = a; r.we = we; r.wdata = wd; r.be = 4'hF; r.tag = tag_t'(k);
    r.r_pe = 5'(k + 3); r.r_lvl = 8'(k + 9);
    @(negedge clk);
    if (k < N_REM) begin in_req[k] = r; in_req_valid[k] = 1'b1; end
    else begin dma_req = r; dma_req_valid = 1'b1; end
    #1;
    while (k < N_REM ? !in_req_ready[k] : !dma_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    if (k < N_REM) in_req_valid[k] = 1'b0; else dma_req_valid = 1'b0;
    #1;
    while (k < N_REM ? !in_rsp_valid[k] : !dma_rsp_valid) begin @(negedge clk); #1; end
    if (k < N_REM) begin
      rd = in_rsp[k].rdata;
      check(in_rsp[k].r_pe == 5'(k + 3) && in_rsp[k].r_lvl == 8'(k + 9), "routing fields kept");
    end else begin
      rd = dma_rsp.rdata;
    end
  endtask

  initial begin
    data_t rd, wd;
    int    lat, k, exp_lat;
    addr_t a, ph, own_base;
    int    n_lat [8];
    for (int i = 0; i < 8; i++) n_lat[i] = 0;
    cfg = '0;
    for (int r = 0; r < NUM_REGIONS; r++) begin r_size[r] = 0; r_start[r] = 0; r_p[r] = 0; r_s[r] = 0; end
    pe_req_valid = '0; pe_req = '0; pe_rsp_ready = '1;
    in_req_valid = '0; in_req = '0; in_rsp_ready = '1;
    dma_req_valid = 1'b0; dma_req = '0; dma_rsp_ready = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. interleaved addresses over the whole L1, both with and without a region
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1) begin
        // one region of 4 lines with s = 1, p = 1; one of 2 lines with s = 2, p = 3
        r_start[0] = 2 * LINE; r_size[0] = 4 * LINE; r_p[0] = 1; r_s[0] = 1;
        r_start[1] = 8 * LINE; r_size[1] = 4 * LINE; r_p[1] = 3; r_s[1] = 2;
        for (int r = 0; r < 2; r++) begin
          cfg[r].start = r_start[r]; cfg[r].size = r_size[r];
          cfg[r].p = 4'(r_p[r]); cfg[r].s = 4'(r_s[r]);
        end
      end
      for (int i = 0; i < 60; i++) begin
        int p;
        p  = $urandom_range(0, N_PE - 1);
        a  = addr_t'($urandom_range(0, LINE * BANK_WORDS / 4 - 1)) << 2;
        if (pass == 1 && i % 2 == 0) a = 2 * LINE + (addr_t'($urandom_range(0, 2 * LINE - 1)) & ~addr_t'(3));
        if (pass == 1 && i % 4 == 1) a = 8 * LINE + (addr_t'($urandom_range(0, 4 * LINE - 1)) & ~addr_t'(3));
        ph = ref_map(a);
        k  = port_of(ph);
        wd = $urandom;
        pe_access(p, a, 1'b1, wd, rd, lat);
        if (k >= 0) check(last_out_addr[k] == ph,
                          $sformatf("address %h left as %h, expected %h on port %0d", a, last_out_addr[k], ph, k));
        pe_access(p, a, 1'b0, 0, rd, lat);
        check(rd == wd, $sformatf("read back %h: %h vs %h", a, rd, wd));
        exp_lat = (k < 0) ? 1 : 1 + 2 * stages_of(k);
        check(lat == exp_lat, $sformatf("latency %0d, expected %0d (port %0d)", lat, exp_lat, k));
        n_lat[exp_lat]++;
      end
    end
    check(n_lat[1] > 0 && n_lat[3] > 0 && n_lat[5] > 0 && n_lat[7] > 0, "all four latencies seen");

    // 2. incoming ports and DMA port reach the own banks
    own_base = OWN * N_BANKS * 4;
    for (int i = 0; i < 20; i++) begin
      int b, row;
      k   = $urandom_range(0, N_REM);
      b   = $urandom_range(0, N_BANKS - 1);
      row = $urandom_range(0, BANK_WORDS - 1);
      a   = own_base + b * 4 + row * LINE;
      wd  = $urandom;
      side_access(k, a, 1'b1, wd, rd);
      // these ports carry physical addresses: no remapping; read back
      // through another port
      side_access((k + 1) % (N_REM + 1), a, 1'b0, 0, rd);
      check(rd == wd, $sformatf("side port write/read of %h", a));
    end

    // 3. bank conflict: both cores to the same bank of this tile at once
    begin
      mem_req_t r0, r1;
      r0 = '0; r0.addr = own_base + 12 * LINE; r0.tag = 8'h40; r0.be = 4'hF;
      r1 = r0; r1.addr = own_base + 13 * LINE; r1.tag = 8'h41;
      @(negedge clk);
      pe_req[0] = r0; pe_req[1] = r1; pe_req_valid = 2'b11;
      #1;
      check($countones(pe_req_ready) == 1, "one of two conflicting cores waits");
      // hold each request until it is taken
      for (int c = 0; c < 4 && pe_req_valid != '0; c++) begin
        logic [N_PE-1:0] taken;
        taken = pe_req_valid & pe_req_ready;
        @(negedge clk);
        pe_req_valid = pe_req_valid & ~taken;
        #1;
      end
      check(pe_req_valid == '0, "waiting core served next cycle");
    end
    pe_req_valid = '0;
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
