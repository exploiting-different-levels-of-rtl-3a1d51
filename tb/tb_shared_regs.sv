// tb_shared_regs: self-checking test of the shared registers. Three
// processors request random loads and stores at once; checks that exactly
// the lowest requesting index is granted, that granted stores land, and
// that granted loads return the reference value.
module tb_shared_regs;
  localparam int NPROC = 3;
  logic clk = 0, rst_n = 0;
  logic [NPROC-1:0] req, we, gnt;
  logic [3:0] idx [NPROC];
  logic [31:0] wdata [NPROC];
  logic [31:0] rdata;
  logic [31:0] r [16];
  int checks = 0, failures = 0;

  shared_regs #(.NPROC(NPROC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w;
    req = 0; we = 0;
    for (int p = 0; p < NPROC; p++) begin idx[p] = 0; wdata[p] = 0; end
    for (int i = 0; i < 16; i++) r[i] = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      req = 3'($urandom); we = 3'($urandom);
      for (int p = 0; p < NPROC; p++) begin idx[p] = 4'($urandom); wdata[p] = $urandom; end
      #1;
      w = -1;
      for (int p = NPROC-1; p >= 0; p--) if (req[p]) w = p;
      checks++;
      if (w < 0 ? gnt != 0 : gnt != (3'b1 << w)) begin failures++; $display("grant %b req %b", gnt, req); end
      if (w >= 0 && !we[w]) begin
        checks++;
        if (rdata != r[idx[w]]) failures++;
      end
      @(posedge clk); #1;
      if (w >= 0 && we[w]) r[idx[w]] = wdata[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
