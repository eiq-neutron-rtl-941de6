// tb_weight_cache: fills all 512 words, reads them back in random order and
// checks the one-cycle read latency.
//
// Write and read ports are driven on the falling edge; read data must
// appear one clock after rd_en. The 8 kB size is the architecture's.
module tb_weight_cache;
  localparam int DEPTH = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [8:0] wr_addr, rd_addr;
  logic [127:0] wr_data, rd_data;
  logic [127:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_cache #(.BYTES(8192)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 9'(i);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      logic [8:0] a;
      a = 9'($urandom);
      rd_en = 1; rd_addr = a;
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
