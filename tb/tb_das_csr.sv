// tb_das_csr: writes random values into every DAS region register over the
// register bus, then checks the read-back values and the configuration
// driven to the mappers, and that reset clears every region.
module tb_das_csr;
  import das_pkg::*;

  localparam int unsigned NR = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t             req;
  data_t                rdata;
  das_region_t [NR-1:0] cfg;
  int checks = 0, failures = 0;
  data_t exp_size [NR], exp_start [NR];
  logic [7:0] exp_das [NR];

  das_csr #(.NUM_REGIONS(NR)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rdata_o(rdata), .cfg_o(cfg));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input data_t d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, addr: RegAddrWidth'(a), wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(input int a, output data_t d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, addr: RegAddrWidth'(a), wdata: '0};
    #1;
    d = rdata;
    @(negedge clk);
    req = '0;
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t d;
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < NR; r++) chk(cfg[r].size == 0, "reset: region off");
    for (int r = 0; r < NR; r++) begin
      exp_size[r]  = $urandom;
      exp_start[r] = $urandom;
      exp_das[r]   = 8'($urandom);
      wr(16 * r + 0, exp_size[r]);
      wr(16 * r + 4, exp_start[r]);
      wr(16 * r + 8, {24'hFFFFFF, exp_das[r]});
    end
    for (int r = 0; r < NR; r++) begin
      rd(16 * r + 0, d); chk(d == exp_size[r],  $sformatf("size %0d", r));
      rd(16 * r + 4, d); chk(d == exp_start[r], $sformatf("addr %0d", r));
      rd(16 * r + 8, d); chk(d == {24'h0, exp_das[r]}, $sformatf("DAS %0d", r));
      chk(cfg[r].size == exp_size[r] && cfg[r].start == exp_start[r] &&
          cfg[r].p == exp_das[r][3:0] && cfg[r].s == exp_das[r][7:4], $sformatf("cfg_o %0d", r));
    end
    // a read does not write
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, addr: RegAddrWidth'(0), wdata: 32'h1234};
    @(negedge clk);
    req = '0;
    chk(cfg[0].size == exp_size[0], "read leaves register");
    rst_n = 1'b0;
    #1;
    for (int r = 0; r < NR; r++) chk(cfg[r].size == 0 && cfg[r].start == 0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
