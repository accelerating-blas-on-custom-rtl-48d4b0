// sync_token: a token counter that orders two instruction streams of the PE.
// The producer stream pulses sig to add a token; the consumer stream may
// execute its WAIT instruction only while avail is high, and pulses take to
// remove one.  A sig and a take in the same cycle cancel.  Overflow and
// underflow are assertion errors.  The paper says the Load-Store CFU runs
// "simultaneously with FPS (depending on availability of data)" but not how
// the streams synchronise; these counters are this design's mechanism.
module sync_token #(
  parameter int W = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sig,
  input  logic take,
  output logic avail
);
  logic [W-1:0] cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (sig && !take) cnt <= cnt + 1'b1;
    else if (take && !sig) cnt <= cnt - 1'b1;
  end
  assign avail = (cnt != '0);

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) take |-> (avail || sig));
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) sig |-> (cnt != '1 || take));
endmodule
