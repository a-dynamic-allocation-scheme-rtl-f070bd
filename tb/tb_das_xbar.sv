// tb_das_xbar: 5 inputs, 3 outputs, random traffic with random output
// backpressure. Every input sends numbered items to random outputs; the
// testbench checks that each item arrives once, at the output it named,
// with the right input index, in order per input and output pair. It also
// checks round-robin fairness: with all inputs always requesting output 0,
// each input is served once every 5 grants.
module tb_das_xbar;
  localparam int unsigned NI = 5, NO = 3;
  typedef logic [15:0] item_t;   // {input[3:0], seq[11:0]}

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [NI-1:0]       in_valid, in_ready;
  logic  [NI-1:0][1:0]  in_sel;
  item_t [NI-1:0]       in_data;
  logic  [NO-1:0]       out_valid, out_ready;
  item_t [NO-1:0]       out_data;
  logic  [NO-1:0][2:0]  out_idx;
  int checks = 0, failures = 0;

  das_xbar #(.N_IN(NI), .N_OUT(NO), .T(item_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_sel_i(in_sel), .in_data_i(in_data),
    .in_ready_o(in_ready), .out_valid_o(out_valid), .out_data_o(out_data), .out_idx_o(out_idx),
    .out_ready_i(out_ready)
  );

  int sent [NI], rcvd [NI];
  int next_seq [NI][NO];
  int expect_q [NI][NO][$];
  bit fair_mode = 0;
  int grants [$];

  // drivers: hold each item until accepted
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NI; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          expect_q[i][in_sel[i]].push_back(int'(in_data[i][11:0]));
          sent[i]++;
          in_valid[i] <= 1'b0;
        end
      end
      // monitor
      for (int o = 0; o < NO; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          int i;
          i = int'(out_data[o][15:12]);
          checks++;
          if (i != int'(out_idx[o]) || expect_q[i][o].size() == 0 ||
              expect_q[i][o].pop_front() != int'(out_data[o][11:0])) begin
            failures++;
            $display("FAIL: output %0d got %h idx %0d", o, out_data[o], out_idx[o]);
          end
          rcvd[i]++;
          if (fair_mode && o == 0) grants.push_back(i);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq;
    in_valid = '0; in_sel = '0; in_data = '0; out_ready = '0;
    for (int i = 0; i < NI; i++) begin sent[i] = 0; rcvd[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    seq = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      out_ready = NO'($urandom);
      for (int i = 0; i < NI; i++) begin
        if (!in_valid[i] && $urandom_range(0, 2) != 0) begin
          in_valid[i] = 1'b1;
          in_sel[i]   = 2'($urandom_range(0, NO - 1));
          in_data[i]  = {4'(i), 12'(seq)};
          seq++;
        end
      end
    end
    @(negedge clk);
    out_ready = '1;
    repeat (20) @(negedge clk);
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (sent[i] != rcvd[i]) begin failures++; $display("FAIL: input %0d sent %0d received %0d", i, sent[i], rcvd[i]); end
    end
    // fairness
    fair_mode = 1;
    for (int c = 0; c < 40; c++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) if (!in_valid[i]) begin
        in_valid[i] = 1'b1; in_sel[i] = 2'd0; in_data[i] = {4'(i), 12'(seq)}; seq++;
      end
    end
    // let the pending items drain; the count of grants stays a multiple of NI
    wait (in_valid == '0);
    @(negedge clk);
    fair_mode = 0;
    for (int k = NI; k < grants.size(); k++) begin
      checks++;
      if (grants[k] != grants[k - NI]) begin failures++; $display("FAIL: round robin order at grant %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
