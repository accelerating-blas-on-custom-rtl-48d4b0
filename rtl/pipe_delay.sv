// pipe_delay: a register chain of STAGES stages carrying a valid bit and a
// payload.  The floating-point units compute their result in one block of
// logic and pass it down this chain so that their latency equals the pipeline
// depth the PE is built with; a synthesis tool can retime the logic across it.
// STAGES = 0 gives a wire.
module pipe_delay #(
  parameter int W      = 64,
  parameter int STAGES = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  if (STAGES == 0) begin : g_wire
    assign out_valid = in_valid;
    assign out_data  = in_data;
  end else begin : g_pipe
    logic         v [STAGES];
    logic [W-1:0] d [STAGES];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < STAGES; i++) begin
          v[i] <= 1'b0;
          d[i] <= '0;
        end
      end else begin
        v[0] <= in_valid;
        d[0] <= in_data;
        for (int i = 1; i < STAGES; i++) begin
          v[i] <= v[i-1];
          d[i] <= d[i-1];
        end
      end
    end
    assign out_valid = v[STAGES-1];
    assign out_data  = d[STAGES-1];
  end
endmodule
