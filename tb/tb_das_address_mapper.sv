// tb_das_address_mapper: checks the DAS remapping against a bit-by-bit
// model of the field move (physical = {upper, s, v, p, byte}).
//
// Regions (b = 12 bank bits, r = 8 row bits, like the 4096-bank L1):
//   0: 0x10000 + 128 KiB, p = 5 (one tile), s = 3
//   1: 0x40000 +  64 KiB, p = 3, s = 2
//   2: 0x10000 +  16 KiB, p = 0, s = 1   (overlaps region 0, must lose)
//   3: disabled (size 0)
//   4th case: s = 0 is the identity.
// Also checks that region 1 maps onto itself one-to-one, that the p/s
// outputs follow the matching region, and that addresses outside pass.
module tb_das_address_mapper;
  import das_pkg::*;

  localparam int unsigned NR = 4, B = 12, R = 8;

  addr_t                addr, phys;
  das_region_t [NR-1:0] cfg;
  logic                 hit;
  logic [3:0]           p_o, s_o;
  int checks = 0, failures = 0;

  das_address_mapper #(.NUM_REGIONS(NR), .BANK_BITS(B), .ROW_BITS(R)) dut (
    .addr_i(addr), .cfg_i(cfg), .addr_o(phys), .hit_o(hit), .p_o(p_o), .s_o(s_o)
  );

  function automatic addr_t model(addr_t a, output bit h, output int mp, output int ms);
    h = 0; mp = 0; ms = 0;
    for (int r = 0; r < NR; r++) begin
      if (cfg[r].size != 0 && a >= cfg[r].start && a < cfg[r].start + cfg[r].size) begin
        addr_t w, ph;
        int p, s, v;
        p = int'(cfg[r].p); s = int'(cfg[r].s); v = B - p;
        w = (a - cfg[r].start) >> 2;
        ph = '0;
        // walk the logical bits and drop each at its physical position
        for (int j = 0; j < 30; j++) begin
          if (j < p)           ph[j] = w[j];
          else if (j < p + s)  ph[B + j - p] = w[j];
          else if (j < p + s + v) ph[j - s] = w[j];
          else                 ph[j] = w[j];
        end
        h = 1; mp = p; ms = s;
        return cfg[r].start + (ph << 2) + (a & 3);
      end
    end
    return a;
  endfunction

  task automatic check_addr(input addr_t a);
    addr_t exp; bit eh; int ep, es;
    addr = a;
    #1;
    exp = model(a, eh, ep, es);
    checks++;
    if (phys !== exp || hit !== eh || (eh && (int'(p_o) != ep || int'(s_o) != es))) begin
      failures++;
      $display("FAIL: %h -> %h (hit %0d p %0d s %0d), expected %h (hit %0d p %0d s %0d)",
               a, phys, hit, p_o, s_o, exp, eh, ep, es);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg[0] = '{start: 32'h1_0000, size: 32'h2_0000, s: 4'd3, p: 4'd5};
    cfg[1] = '{start: 32'h4_0000, size: 32'h1_0000, s: 4'd2, p: 4'd3};
    cfg[2] = '{start: 32'h1_0000, size: 32'h0_4000, s: 4'd1, p: 4'd0};
    cfg[3] = '{start: 32'h8_0000, size: 32'h0,      s: 4'd4, p: 4'd4};

    // hand-worked example in region 0: logical word 32 (the 33rd word) is
    // the first word of row 1 of partition 0: physical word 1 << 12.
    addr = 32'h1_0000 + 32 * 4;
    #1;
    checks++;
    if (phys != 32'h1_0000 + (32'd1 << 14)) begin
      failures++;
      $display("FAIL: worked example gave %h", phys);
    end
    // word 32*8 = 256 starts partition 1: physical bank 32, row 0
    addr = 32'h1_0000 + 256 * 4;
    #1;
    checks++;
    if (phys != 32'h1_0000 + 32 * 4) begin
      failures++;
      $display("FAIL: partition step gave %h", phys);
    end

    for (int i = 0; i < 3000; i++) check_addr(addr_t'($urandom_range(0, 32'hF_FFFF)));
    for (int i = 0; i < 200; i++) check_addr(32'h1_0000 + addr_t'($urandom_range(0, 32'h3FFF)));

    // region 1 maps onto itself one-to-one
    begin
      bit seen [addr_t];
      int bad = 0;
      for (addr_t a = 32'h4_0000; a < 32'h5_0000; a += 4) begin
        addr = a;
        #1;
        if (phys < 32'h4_0000 || phys >= 32'h5_0000 || seen.exists(phys)) bad++;
        seen[phys] = 1'b1;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL: region 1 is not a permutation (%0d bad)", bad);
      end
    end

    // s = 0 gives the interleaved mapping
    cfg[1].s = 4'd0;
    for (int i = 0; i < 50; i++) begin
      addr = 32'h4_0000 + addr_t'($urandom_range(0, 32'hFFFF));
      #1;
      checks++;
      if (phys != addr || !hit) begin
        failures++;
        $display("FAIL: s=0 changed %h to %h", addr, phys);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
