// das_xbar: N_IN x N_OUT crossbar with valid/ready handshakes.
//
// What it does: every input names an output with in_sel_i; each output has a
// round-robin arbiter that picks one requesting input and forwards its data.
// The index of the granted input leaves with the data (out_idx_o) so that a
// response network can route an answer back. The same module builds every
// network of the cluster: the tile crossbar, the SubGroup, Group and Cluster
// crossbars, and the response path of each of them.
//
// How it works: once an output shows a valid that is not accepted, its grant
// is locked until the handshake, so an output behaves like a well-formed
// valid/ready source as long as its inputs do. The round-robin pointer
// advances past the input that completed a handshake.
//
// Timing: combinational from input to output; one cycle per transfer.
// From the paper: the crossbar sizes where it is instantiated. This design's
// choices: round-robin arbitration and the grant lock.
module das_xbar #(
  parameter int unsigned N_IN  = 4,
  parameter int unsigned N_OUT = 4,
  parameter type         T     = logic [31:0],
  localparam int unsigned SelW = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned IdxW = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic [N_IN-1:0]                in_valid_i,
  input  logic [N_IN-1:0][SelW-1:0]      in_sel_i,
  input  T     [N_IN-1:0]                in_data_i,
  output logic [N_IN-1:0]                in_ready_o,
  output logic [N_OUT-1:0]               out_valid_o,
  output T     [N_OUT-1:0]               out_data_o,
  output logic [N_OUT-1:0][IdxW-1:0]     out_idx_o,
  input  logic [N_OUT-1:0]               out_ready_i
);

  logic [N_OUT-1:0][IdxW-1:0] rr_q, lock_idx_q;
  logic [N_OUT-1:0]           lock_q;
  logic [N_OUT-1:0][IdxW-1:0] gnt_idx;

  always_comb begin
    int unsigned cand;
    cand        = 0;
    out_valid_o = '0;
    out_data_o  = '0;
    out_idx_o   = '0;
    gnt_idx     = '0;
    for (int o = 0; o < N_OUT; o++) begin
      if (lock_q[o]) begin
        out_valid_o[o] = 1'b1;
        gnt_idx[o]     = lock_idx_q[o];
      end else begin
        for (int k = 0; k < N_IN; k++) begin
          cand = int'(rr_q[o]) + 1 + k;
          if (cand >= N_IN) cand = cand - N_IN;
          if (!out_valid_o[o] && in_valid_i[cand] && int'(in_sel_i[cand]) == o) begin
            out_valid_o[o] = 1'b1;
            gnt_idx[o]     = IdxW'(cand);
          end
        end
      end
      out_data_o[o] = in_data_i[gnt_idx[o]];
      out_idx_o[o]  = gnt_idx[o];
    end
  end

  always_comb begin
    in_ready_o = '0;
    for (int o = 0; o < N_OUT; o++) begin
      if (out_valid_o[o] && out_ready_i[o]) in_ready_o[gnt_idx[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q       <= '0;
      lock_q     <= '0;
      lock_idx_q <= '0;
    end else begin
      for (int o = 0; o < N_OUT; o++) begin
        if (out_valid_o[o] && out_ready_i[o]) begin
          rr_q[o]   <= gnt_idx[o];
          lock_q[o] <= 1'b0;
        end else if (out_valid_o[o]) begin
          lock_q[o]     <= 1'b1;
          lock_idx_q[o] <= gnt_idx[o];
        end
      end
    end
  end

  // Handshake rule on every input: a valid request is held, unchanged, until
  // it is accepted, and it names an existing output.
  for (genvar i = 0; i < N_IN; i++) begin : g_in_checks
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      in_valid_i[i] && !in_ready_o[i] |=> in_valid_i[i] && $stable(in_data_i[i]) && $stable(in_sel_i[i]))
      else $error("das_xbar: input %0d dropped or changed a pending request", i);
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      in_valid_i[i] |-> int'(in_sel_i[i]) < N_OUT)
      else $error("das_xbar: input %0d selects a missing output", i);
  end

endmodule
