// tb_instr_mem: self-checking test of the instruction memory. Writes random
// words to random addresses through the host port, keeps a reference copy,
// and reads every written address back through the scheduler port.
module tb_instr_mem;
  localparam int DEPTH = 4096;
  logic clk = 0, wr_en;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [int];

  instr_mem #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 12'($urandom); wr_data = $urandom;
      ref_mem[int'(wr_addr)] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    foreach (ref_mem[a]) begin
      rd_addr = 12'(a);
      #1;
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        $display("mismatch at %0d: %h vs %h", a, rd_data, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
