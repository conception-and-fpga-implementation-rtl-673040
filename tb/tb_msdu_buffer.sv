// tb_msdu_buffer: random writes and reads against a reference array, checking
// the one-cycle read latency.
module tb_msdu_buffer;
  localparam int DEPTH = 2048;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [10:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  logic [31:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  msdu_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      ref_mem[i] = $urandom;
      wr_en = 1; wr_addr = 11'(i); wr_data = ref_mem[i];
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int k = 0; k < 3000; k++) begin
      logic [10:0] a;
      a = 11'($urandom);
      rd_en = 1; rd_addr = a;
      if ($urandom % 4 == 0) begin
        wr_en = 1; wr_addr = 11'($urandom); wr_data = $urandom;
      end
      @(posedge clk); #1;
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        $display("FAIL read %0d: %h expected %h", a, rd_data, ref_mem[a]);
      end
      if (wr_en) ref_mem[wr_addr] = wr_data;
      wr_en = 0; rd_en = 0;
      // read data holds while rd_en is low
      @(posedge clk); #1;
      checks++;
      if (rd_data !== ref_mem[a] && !(wr_addr == a)) begin
        failures++;
        $display("FAIL hold %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
