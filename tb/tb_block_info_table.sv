// tb_block_info_table: self-checking test of the block information table.
// Loads the four-block example (W1..W4 with PC ranges 0-10, 11-20, 21-30,
// 31-40 and priorities 0, 0, 1, 2) plus random entries, and reads all back.
module tb_block_info_table;
  import quape_pkg::*;
  logic clk = 0, wr_en;
  logic [5:0] wr_addr, rd_addr;
  bit_entry_t wr_data, rd_data;
  int checks = 0, failures = 0;
  bit_entry_t ref_tbl [64];

  block_info_table #(.ENTRIES(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = '0; rd_addr = 0;
    for (int i = 0; i < 64; i++) begin
      ref_tbl[i] = bit_entry_t'($urandom);
    end
    ref_tbl[0] = '{pc_start: 0,  pc_end: 10, prio: 0};
    ref_tbl[1] = '{pc_start: 11, pc_end: 20, prio: 0};
    ref_tbl[2] = '{pc_start: 21, pc_end: 30, prio: 1};
    ref_tbl[3] = '{pc_start: 31, pc_end: 40, prio: 2};
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i); wr_data = ref_tbl[i];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 64; i++) begin
      rd_addr = 6'(i); #1;
      checks++;
      if (rd_data !== ref_tbl[i]) begin failures++; $display("entry %0d wrong", i); end
    end
    rd_addr = 2; #1; checks++;
    if (rd_data.pc_start != 21 || rd_data.pc_end != 30 || rd_data.prio != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
