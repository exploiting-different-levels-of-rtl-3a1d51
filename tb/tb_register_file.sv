// tb_register_file: self-checking test of the register file. Random writes
// and reads on both ports against a reference array; checks reset to zero.
module tb_register_file;
  logic clk = 0, rst_n = 0, we;
  logic [3:0] ra, rb, wa;
  logic [31:0] rdata_a, rdata_b, wdata;
  logic [31:0] r [16];
  int checks = 0, failures = 0;

  register_file dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra = 0; rb = 0; wa = 0; wdata = 0;
    for (int i = 0; i < 16; i++) r[i] = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      ra = 4'(i); #1; checks++; if (rdata_a != 0) failures++;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      ra = 4'($urandom); rb = 4'($urandom);
      #1;
      checks += 2;
      if (rdata_a != r[ra]) failures++;
      if (rdata_b != r[rb]) failures++;
      we = 1'($urandom); wa = 4'($urandom); wdata = $urandom;
      @(posedge clk); #1;
      if (we) r[wa] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
