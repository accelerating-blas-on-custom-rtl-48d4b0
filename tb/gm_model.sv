// gm_model: behavioural model of the external (global) memory seen by the PE.
// A word-addressed array of 64-bit words behind a request channel and an
// in-order response channel.  Every read returns its data LAT cycles after
// the request is accepted, through a pipelined delay (LAT = 20, the external
// memory delay used in the paper's simulations), so a new request can be
// accepted every cycle.  With STALL_PCT > 0 the model refuses requests at
// random (req_ready low) that percentage of the time.  Writes take effect
// when accepted.  Test benches fill and read mem[] directly.
module gm_model
  import blas_pkg::*;
#(
  parameter int DEPTH     = 65536,
  parameter int LAT       = 20,
  parameter int STALL_PCT = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [GM_AW-1:0] req_addr,
  input  dword_t           req_wdata,
  output logic             resp_valid,
  output dword_t           resp_data
);
  dword_t mem [DEPTH];
  logic   pv [LAT];
  dword_t pd [LAT];
  int     reads = 0, writes = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_ready <= 1'b1;
    else req_ready <= (STALL_PCT == 0) || ($urandom_range(0, 99) >= STALL_PCT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      pv[0] <= req_valid && req_ready && !req_we;
      pd[0] <= mem[req_addr % DEPTH];
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      if (req_valid && req_ready && req_we) begin
        mem[req_addr % DEPTH] <= req_wdata;
        writes <= writes + 1;
      end
      if (req_valid && req_ready && !req_we) reads <= reads + 1;
    end
  end
  assign resp_valid = pv[LAT-1];
  assign resp_data  = pd[LAT-1];
endmodule
