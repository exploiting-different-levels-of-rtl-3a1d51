// tb_private_icache: self-checking test of the two-bank private instruction
// cache. Fills both banks with different blocks, sets their lengths, and
// checks the WAYS-wide read window, the bank switch, the length per bank
// and that words past the end of the bank read as zero.
module tb_private_icache;
  localparam int DEPTH = 64, WAYS = 4;
  logic clk = 0, rst_n = 0;
  logic wr_en, wr_bank, len_we, len_bank, sel;
  logic [5:0] wr_addr;
  logic [31:0] wr_data;
  logic [6:0] len, rd_addr, active_len;
  logic [31:0] rd_data [WAYS];
  int checks = 0, failures = 0;
  logic [31:0] m [2][DEPTH];

  private_icache #(.DEPTH(DEPTH), .WAYS(WAYS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    wr_en = 0; wr_bank = 0; len_we = 0; len_bank = 0; sel = 0; wr_addr = 0; wr_data = 0;
    len = 0; rd_addr = 0;
    #12 rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        m[b][a] = $urandom;
        wr_en = 1; wr_bank = b[0]; wr_addr = 6'(a); wr_data = m[b][a];
      end
    @(negedge clk); wr_en = 0; len_we = 1; len_bank = 0; len = 7'd11;
    @(negedge clk); len_bank = 1; len = 7'd23;
    @(negedge clk); len_we = 0;
    for (int s = 0; s < 2; s++) begin
      sel = s[0];
      for (int a = 0; a < DEPTH; a += 3) begin
        rd_addr = 7'(a); #1;
        for (int i = 0; i < WAYS; i++)
          chk(rd_data[i] == ((a + i < DEPTH) ? m[s][a+i] : 32'd0), $sformatf("bank %0d addr %0d way %0d", s, a, i));
      end
      chk(active_len == (s ? 7'd23 : 7'd11), "length of active bank");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
