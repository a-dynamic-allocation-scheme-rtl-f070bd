// tb_dma_distributor: sends random pieces that stay inside one line to a
// distributor with 4 children of 32-byte slices, under random child
// backpressure. Checks that every part lies in one slice and goes to the
// child that owns that slice, that the L2 address moves with the L1
// address, and that the parts of a piece cover it exactly, in order.
module tb_dma_distributor;
  import das_pkg::*;

  localparam int unsigned N_OUT = 4, REGION = 32, LINE = N_OUT * REGION;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic piece_valid, piece_ready, idle;
  dma_job_t piece;
  logic     [N_OUT-1:0] out_valid, out_ready;
  dma_job_t [N_OUT-1:0] out;
  int checks = 0, failures = 0;
  addr_t next_l1, next_l2, left;

  dma_distributor #(.N_OUT(N_OUT), .REGION_BYTES(REGION)) dut (
    .clk_i(clk), .rst_ni(rst_n), .piece_valid_i(piece_valid), .piece_i(piece), .piece_ready_o(piece_ready),
    .out_valid_o(out_valid), .out_o(out), .out_ready_i(out_ready), .idle_o(idle)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      check($countones(out_valid) <= 1, "one part at a time");
      for (int c = 0; c < N_OUT; c++) begin
        if (out_valid[c] && out_ready[c]) begin
          check(out[c].l1_addr == next_l1 && out[c].l2_addr == next_l2, "parts in order, L2 follows L1");
          check(int'((out[c].l1_addr / REGION) % N_OUT) == c, "part sent to the owning child");
          check(out[c].len > 0 && out[c].l1_addr / REGION == (out[c].l1_addr + out[c].len - 1) / REGION,
                "part inside one slice");
          check(out[c].len <= left, "no more than the piece");
          next_l1 += out[c].len; next_l2 += out[c].len; left -= out[c].len;
        end
      end
    end
  end

  initial begin
    piece_valid = 0; piece = '0; out_ready = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      addr_t off, len;
      off = $urandom_range(0, LINE / 4 - 1) * 4;
      len = $urandom_range(1, (LINE - off) / 4) * 4;
      piece = '{l2_addr: $urandom & ~32'h3, l1_addr: 7 * LINE + off, len: len, to_l2: 1'($urandom)};
      piece_valid = 1'b1;
      #1;
      while (!piece_ready) begin @(negedge clk); out_ready = N_OUT'($urandom); #1; end
      next_l1 = piece.l1_addr; next_l2 = piece.l2_addr; left = piece.len;
      @(negedge clk);
      piece_valid = 1'b0;
      for (int c = 0; c < 200 && !(idle && left == 0); c++) begin
        out_ready = N_OUT'($urandom);
        @(negedge clk);
      end
      check(left == 0 && idle, "piece fully distributed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
