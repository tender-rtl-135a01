// hbm2_model: behavioural model of the off-chip HBM2 channel, for simulation
// only. A word array of DEPTH beats of W bits; requests are accepted when
// req_ready is high (ready is withheld at random cycles to exercise back
// pressure), read data returns in order LAT cycles after acceptance, writes
// update the array at acceptance. Testbenches load and inspect the array
// directly through the mem variable.
module hbm2_model #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned LAT   = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_write,
  input  logic [31:0]   req_addr,
  input  logic [W-1:0]  req_wdata,
  output logic          rsp_valid,
  output logic [W-1:0]  rsp_rdata
);
  logic [W-1:0] mem [DEPTH];
  logic [W-1:0] pipe_d [LAT];
  logic         pipe_v [LAT];
  int unsigned  stalls = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      for (int i = 0; i < LAT; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
    end else begin
      req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
      if (!req_ready && req_valid) stalls <= stalls + 1;
      pipe_v[0] <= req_valid && req_ready && !req_write;
      pipe_d[0] <= mem[req_addr % DEPTH];
      for (int i = 1; i < LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      if (req_valid && req_ready && req_write) mem[req_addr % DEPTH] <= req_wdata;
    end
  end

  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_rdata = pipe_d[LAT-1];
endmodule
