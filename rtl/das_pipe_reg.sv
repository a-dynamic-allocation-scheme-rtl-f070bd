// das_pipe_reg: STAGES back-to-back valid/ready register stages.
//
// Each stage holds one item and takes a new one when it is empty or when its
// item leaves in the same cycle (ready_o = !valid | ready of the next stage),
// so a full chain moves one item per cycle. STAGES = 0 is a plain wire. The
// tile uses these stages on its remote ports to give the latency of each
// interconnect level. This is a helper of this design, not a paper block.
//
// Lint may flag the ready vector r as circular logic when many instances
// sit between crossbars: r[i] is computed from r[i+1], a different bit of
// the same vector, and the chain ends at ready_i. The linter sees the
// vector as one signal; no bit depends on itself.
module das_pipe_reg #(
  parameter int unsigned STAGES = 1,
  parameter type         T      = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic valid_i,
  input  T     data_i,
  output logic ready_o,
  output logic valid_o,
  output T     data_o,
  input  logic ready_i
);

  if (STAGES == 0) begin : g_wire
    assign valid_o = valid_i;
    assign data_o  = data_i;
    assign ready_o = ready_i;
  end else begin : g_regs
    logic [STAGES:0] v;
    logic [STAGES:0] r;
    T     [STAGES:0] d;
    assign v[0]    = valid_i;
    assign d[0]    = data_i;
    assign ready_o = r[0];
    assign valid_o = v[STAGES];
    assign data_o  = d[STAGES];
    assign r[STAGES] = ready_i;
    for (genvar k = 0; k < STAGES; k++) begin : g_stage
      assign r[k] = !v[k+1] || r[k+1];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          v[k+1] <= 1'b0;
        end else if (r[k]) begin
          v[k+1] <= v[k];
        end
      end
      always_ff @(posedge clk_i) begin
        if (r[k] && v[k]) d[k+1] <= d[k];
      end
    end
  end

endmodule
