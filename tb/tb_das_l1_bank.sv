// tb_das_l1_bank: random reads and writes with byte enables against a
// model array; checks the one-cycle response, that the tag and route
// fields come back, and that a held-back response stalls new requests
// without losing either.
module tb_das_l1_bank;
  import das_pkg::*;

  localparam int unsigned WORDS = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t req;
  logic [3:0] row;
  logic [BankRouteWidth-1:0] idx;
  mem_rsp_t rsp;
  data_t model [WORDS];
  int checks = 0, failures = 0;

  das_l1_bank #(.WORDS(WORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_i(req), .row_i(row),
    .req_idx_i(idx), .req_ready_o(req_ready), .rsp_valid_o(rsp_valid), .rsp_o(rsp), .rsp_ready_i(rsp_ready)
  );

  task automatic chk(input bit ok, input string what);
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

  initial begin
    req_valid = 0; req = '0; row = 0; idx = 0; rsp_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise
    for (int w = 0; w < WORDS; w++) begin
      model[w] = $urandom;
      req = '0; req.we = 1; req.be = 4'hF; req.wdata = model[w]; row = 4'(w);
      req_valid = 1;
      @(negedge clk);
    end
    req_valid = 0;
    @(negedge clk);
    // random traffic, one request per cycle, response checked next cycle
    for (int i = 0; i < 400; i++) begin
      data_t exp, old;
      int    w;
      logic [3:0] be;
      w  = $urandom_range(0, WORDS - 1);
      be = 4'($urandom);
      req = '0;
      req.we = 1'($urandom);
      req.be = be;
      req.wdata = $urandom;
      req.tag = tag_t'(i);
      req.r_pe = 5'($urandom);
      req.r_lvl = 8'($urandom);
      row = 4'(w);
      idx = 5'($urandom);
      req_valid = 1;
      #1;
      chk(req_ready, "ready with free response register");
      old = model[w];
      if (req.we) for (int b = 0; b < 4; b++) if (be[b]) model[w][8*b +: 8] = req.wdata[8*b +: 8];
      @(negedge clk);
      req_valid = 0;
      chk(rsp_valid, "response after one cycle");
      chk(rsp.rdata == old, $sformatf("data row %0d: %h vs %h", w, rsp.rdata, old));
      chk(rsp.tag == tag_t'(i) && rsp.r_pe == req.r_pe && rsp.r_lvl == req.r_lvl && rsp.r_in == idx,
          "tag and route fields");
    end
    // backpressure: response not taken, a second request must wait
    @(negedge clk);
    rsp_ready = 0;
    req = '0; req.tag = 8'hA1; row = 0; req_valid = 1;
    @(negedge clk);
    req.tag = 8'hA2; row = 1;
    #1;
    chk(rsp_valid && !req_ready, "stall while response is held");
    @(negedge clk);
    chk(rsp_valid && rsp.tag == 8'hA1, "held response unchanged");
    rsp_ready = 1;
    #1;
    chk(req_ready, "ready when response leaves");
    @(negedge clk);
    req_valid = 0;
    chk(rsp_valid && rsp.tag == 8'hA2 && rsp.rdata == model[1], "second response follows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
