// tb_acc_scratchpad: writes random rows and checks read-back, including a
// read in the cycle right after a write to the same row.
//
// Drives the write port on the falling edge and samples the combinational
// read port; the expected contents are a shadow array kept here. The
// M x A x 32-bit shape follows the architecture; one read and one write
// port per cycle is this design's own choice.
module tb_acc_scratchpad;
  localparam int M = 16, A = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [4:0] rd_idx, wr_idx;
  logic wr_en;
  logic [M-1:0][31:0] rd_data, wr_data;
  logic [M-1:0][31:0] model [A];
  int checks = 0, failures = 0;

  acc_scratchpad #(.M(M), .A(A)) dut (.clk, .rd_idx, .rd_data, .wr_en, .wr_idx, .wr_data);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; rd_idx = 0; wr_idx = 0; wr_data = '0;
    for (int r = 0; r < A; r++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 5'(r);
      for (int m = 0; m < M; m++) wr_data[m] = $urandom;
      model[r] = wr_data;
    end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1);
      wr_idx = 5'($urandom);
      for (int m = 0; m < M; m++) wr_data[m] = $urandom;
      rd_idx = (t % 2) ? wr_idx : 5'($urandom);
      #1;
      checks++;
      if (rd_data != model[rd_idx]) begin failures++; $display("FAIL row %0d", rd_idx); end
      if (wr_en) model[wr_idx] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
