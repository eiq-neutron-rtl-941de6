// dram_model: behavioural model of the system memory (DDR behind the SoC
// interconnect) for testbenches. Accepts a request when req_ready is high
// (withheld at random when STALL is set); reads return in order LAT cycles
// later. The array `mem` can be preloaded or inspected by the testbench.
module dram_model #(
  parameter int LAT   = 12,
  parameter int WORDS = 65536,
  parameter bit STALL = 1
) (
  input  logic         clk,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  logic [31:0]  req_addr,
  input  logic [127:0] req_wdata,
  output logic         rsp_valid,
  output logic [127:0] rsp_data
);
  logic [127:0] mem [WORDS];
  logic         v_pipe [LAT];
  logic [127:0] d_pipe [LAT];
  int reads = 0, writes = 0;

  initial begin
    for (int i = 0; i < LAT; i++) v_pipe[i] = 0;
    req_ready = 1;
  end
  always @(posedge clk) begin
    v_pipe[0] <= req_valid && req_ready && !req_we;
    d_pipe[0] <= mem[req_addr % WORDS];
    if (req_valid && req_ready && req_we) begin
      mem[req_addr % WORDS] <= req_wdata;
      writes++;
    end
    if (req_valid && req_ready && !req_we) reads++;
    for (int i = 1; i < LAT; i++) begin
      v_pipe[i] <= v_pipe[i-1];
      d_pipe[i] <= d_pipe[i-1];
    end
    req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
  assign rsp_valid = v_pipe[LAT-1];
  assign rsp_data  = d_pipe[LAT-1];
endmodule
