// tb_dma_splitter: random DMA jobs, inside and outside DAS regions, through
// the splitter of a small L1 (2^5 banks, lines of 128 bytes), under random
// backpressure. For every piece the testbench checks, with its own model
// of the remapping, that the piece's words are contiguous in physical L1
// and are exactly the images of the job's next logical words, that pieces
// follow each other without gaps, that a piece never crosses a line (or,
// in a DAS region with s > 0, a partition row of 2^p words), and that the
// L2 address advances with them.
module tb_dma_splitter;
  import das_pkg::*;

  localparam int unsigned NUM_REGIONS = 4, BANK_BITS = 5, ROW_BITS = 4;
  localparam int unsigned LINE = 4 << BANK_BITS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  das_region_t [NUM_REGIONS-1:0] cfg;
  logic job_valid, job_ready, piece_valid, piece_ready, idle;
  dma_job_t job, piece;
  int checks = 0, failures = 0, n_cut = 0;
  addr_t next_l1, next_l2, left;

  dma_splitter #(.NUM_REGIONS(NUM_REGIONS), .BANK_BITS(BANK_BITS), .ROW_BITS(ROW_BITS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .job_valid_i(job_valid), .job_i(job), .job_ready_o(job_ready),
    .piece_valid_o(piece_valid), .piece_o(piece), .piece_ready_i(piece_ready), .idle_o(idle)
  );

  addr_t r_start [NUM_REGIONS], r_size [NUM_REGIONS];
  int    r_p [NUM_REGIONS], r_s [NUM_REGIONS];

  function automatic int region_of(addr_t a);
    for (int r = 0; r < NUM_REGIONS; r++)
      if (r_size[r] != 0 && a >= r_start[r] && a - r_start[r] < r_size[r]) return r;
    return -1;
  endfunction

  function automatic addr_t ref_map(addr_t a);
    int r;
    addr_t w, ph;
    r = region_of(a);
    if (r < 0) return a;
    w  = (a - r_start[r]) >> 2;
    ph = '0;
    for (int j = 0; j < 30; j++) begin
      if (j < r_p[r])                               ph[j] = w[j];
      else if (j < r_p[r] + r_s[r])                 ph[BANK_BITS + j - r_p[r]] = w[j];
      else if (j < r_p[r] + r_s[r] + BANK_BITS - r_p[r]) ph[j - r_s[r]] = w[j];
      else                                          ph[j] = w[j];
    end
    return r_start[r] + (ph << 2) + (a & 3);
  endfunction

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

  always @(posedge clk) begin
    if (rst_n && piece_valid && piece_ready) begin
      int r;
      addr_t unit;
      bit ok;
      r = region_of(next_l1);
      unit = (r >= 0 && r_s[r] > 0) ? addr_t'(4 << r_p[r]) : addr_t'(LINE);
      check(piece.len > 0 && piece.len <= left, "piece length within the job");
      check(piece.l2_addr == next_l2, "L2 address follows");
      check(next_l1 / unit == (next_l1 + piece.len - 1) / unit, "piece stays within one run");
      check(piece.len == left || (next_l1 + piece.len) % unit == 0, "piece is cut only at a boundary");
      if (piece.len < LINE && piece.len < left) n_cut++;
      ok = 1'b1;
      for (addr_t o = 0; o < piece.len; o += 4)
        if (ref_map(next_l1 + o) != piece.l1_addr + o) ok = 1'b0;
      check(ok, $sformatf("piece at logical %h: physical words not contiguous from %h", next_l1, piece.l1_addr));
      next_l1 += piece.len; next_l2 += piece.len; left -= piece.len;
    end
  end

  initial begin
    cfg = '0; job_valid = 0; job = '0; piece_ready = 0;
    r_start[0] = 2 * LINE; r_size[0] = 4 * LINE; r_p[0] = 2; r_s[0] = 1;
    r_start[1] = 8 * LINE; r_size[1] = 8 * LINE; r_p[1] = 3; r_s[1] = 2;
    r_start[2] = 20 * LINE; r_size[2] = 2 * LINE; r_p[2] = 4; r_s[2] = 0;
    r_start[3] = 0; r_size[3] = 0; r_p[3] = 0; r_s[3] = 0;
    for (int r = 0; r < NUM_REGIONS; r++) begin
      cfg[r].start = r_start[r]; cfg[r].size = r_size[r]; cfg[r].p = 4'(r_p[r]); cfg[r].s = 4'(r_s[r]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      addr_t lo, hi, a, len;
      int sel;
      sel = $urandom_range(0, 3);
      case (sel)
        0: begin lo = 2 * LINE; hi = 6 * LINE; end
        1: begin lo = 8 * LINE; hi = 16 * LINE; end
        2: begin lo = 20 * LINE; hi = 22 * LINE; end
        default: begin lo = 24 * LINE; hi = 32 * LINE; end
      endcase
      a   = lo + $urandom_range(0, (hi - lo) / 4 - 1) * 4;
      len = $urandom_range(1, (hi - a) / 4) * 4;
      @(negedge clk);
      job = '{l2_addr: 32'h9000_0000 + $urandom_range(0, 255) * 4, l1_addr: a, len: len, to_l2: 1'($urandom)};
      job_valid = 1'b1;
      #1;
      while (!job_ready) begin @(negedge clk); #1; end
      next_l1 = job.l1_addr; next_l2 = job.l2_addr; left = job.len;
      @(negedge clk);
      job_valid = 1'b0;
      for (int c = 0; c < 1000 && !(idle && left == 0); c++) begin
        piece_ready = 1'($urandom);
        @(negedge clk);
      end
      check(left == 0 && idle, "job fully split");
    end
    check(n_cut > 0, "partition-row cuts happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
