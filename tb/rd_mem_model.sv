// rd_mem_model: behavioural word memory with one read port for testbenches.
// Requests are accepted when req_ready is high (randomly withheld when
// STALL is set); data returns in order LAT cycles after acceptance. The
// array `mem` is filled by the testbench through a hierarchical reference.
module rd_mem_model #(
  parameter int LAT   = 3,
  parameter int WORDS = 4096,
  parameter bit STALL = 1
) (
  input  logic         clk,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic [15:0]  req_addr,
  output logic         rsp_valid,
  output logic [127:0] rsp_data
);
  logic [127:0] mem [WORDS];
  logic         v_pipe [LAT];
  logic [127:0] d_pipe [LAT];

  initial begin
    for (int i = 0; i < LAT; i++) v_pipe[i] = 0;
    req_ready = 1;
  end
  always @(posedge clk) begin
    v_pipe[0] <= req_valid && req_ready;
    d_pipe[0] <= mem[req_addr % WORDS];
    for (int i = 1; i < LAT; i++) begin
      v_pipe[i] <= v_pipe[i-1];
      d_pipe[i] <= d_pipe[i-1];
    end
    req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
  assign rsp_valid = v_pipe[LAT-1];
  assign rsp_data  = d_pipe[LAT-1];
endmodule
