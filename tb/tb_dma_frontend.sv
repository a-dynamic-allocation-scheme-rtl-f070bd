// tb_dma_frontend: programs the DMA register file and checks the job it
// hands on: fields and direction (taken from which address lies in L1),
// read-back of every register, busy while a job is pending or the engine
// below is not idle, no second start while busy, and the completed count.
module tb_dma_frontend;
  import das_pkg::*;

  localparam int unsigned L1B = 32'h0000_4000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  data_t    rdata;
  logic     job_valid, job_ready, idle, busy;
  dma_job_t job;
  int checks = 0, failures = 0;
  int jobs_seen = 0;
  dma_job_t last_job;

  dma_frontend #(.L1_BYTES(L1B)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rdata_o(rdata),
    .job_valid_o(job_valid), .job_o(job), .job_ready_i(job_ready), .idle_i(idle), .busy_o(busy)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && job_valid && job_ready) begin jobs_seen++; last_job = job; end

  task automatic wr(input int unsigned a, input data_t d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, addr: RegAddrWidth'(a), wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  // read all registers at once (reads are combinational)
  data_t rv [6];
  task automatic rd_all();
    for (int i = 0; i < 6; i++) begin
      req.addr = RegAddrWidth'(4 * i);
      #1;
      rv[i] = rdata;
    end
  endtask

  initial begin
    addr_t src, dst, len;
    int    n0;
    req = '0; job_ready = 1'b0; idle = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 30; i++) begin
      bit to_l2;
      to_l2 = 1'($urandom);
      len = addr_t'($urandom_range(1, 64)) * 4;
      if (to_l2) begin src = $urandom_range(0, L1B / 4 - 1) * 4; dst = 32'h8000_0000 + $urandom_range(0, 1 << 16) * 4; end
      else       begin dst = $urandom_range(0, L1B / 4 - 1) * 4; src = 32'h8000_0000 + $urandom_range(0, 1 << 16) * 4; end
      wr(8'h00, src); wr(8'h04, dst); wr(8'h08, len);
      @(negedge clk);
      rd_all();
      check(rv[0] == src && rv[1] == dst && rv[2] == len, "register read-back");
      check(rv[4] == 0 && !busy, "idle before start");
      n0 = jobs_seen;
      wr(8'h0C, 1);
      rd_all();
      check(job_valid && busy && rv[4] == 1, "job offered and busy after start");
      check(job.len == len && job.to_l2 == to_l2 &&
            job.l1_addr == (to_l2 ? src : dst) && job.l2_addr == (to_l2 ? dst : src), "job fields");
      // hold the job a few cycles, then the engine below goes busy
      repeat ($urandom_range(0, 3)) @(negedge clk);
      check(job_valid, "job held until taken");
      wr(8'h0C, 1);              // a second start while busy must be ignored
      job_ready = 1'b1; idle = 1'b0;
      @(negedge clk);
      job_ready = 1'b0;
      #1;
      check(!job_valid && busy, "busy while the engine works");
      repeat ($urandom_range(1, 5)) @(negedge clk);
      check(busy, "still busy");
      idle = 1'b1;
      @(negedge clk);
      #1;
      check(!busy && !job_valid, "not busy after the engine is idle");
      check(jobs_seen == n0 + 1 && last_job.len == len, "exactly one job per start");
      repeat (2) @(negedge clk);
      rd_all();
      check(rv[5] == data_t'(i + 1), $sformatf("completed count %0d", rv[5]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
