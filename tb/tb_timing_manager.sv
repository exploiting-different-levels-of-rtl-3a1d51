// tb_timing_manager: self-checking test of the timing queue and timing
// controller. Pushes circuit steps with labels 0..9; checks that step k+1
// is issued exactly label(k+1) cycles after step k, that the way mask is
// broadcast with it, and that a step pushed after its due time is issued
// at once and counted late.
module tb_timing_manager;
  localparam int WAYS = 4;
  logic clk = 0, rst_n = 0, restart, push, full, empty, issue;
  logic [6:0] push_label;
  logic [WAYS-1:0] push_mask, issue_mask;
  logic [31:0] late_count;
  int checks = 0, failures = 0;
  int cyc = 0;
  int issue_cyc [$];
  logic [WAYS-1:0] issue_masks [$];

  timing_manager #(.WAYS(WAYS), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (issue) begin issue_cyc.push_back(cyc); issue_masks.push_back(issue_mask); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int labels [8] = '{0, 3, 1, 5, 2, 9, 4, 1};
    restart = 0; push = 0; push_label = 0; push_mask = 0;
    #12 rst_n = 1;
    @(negedge clk); restart = 1; @(negedge clk); restart = 0;
    for (int i = 0; i < 8; i++) begin
      push = 1; push_label = 7'(labels[i]); push_mask = 4'(i + 1);
      @(negedge clk);
    end
    push = 0;
    repeat (60) @(negedge clk);
    checks++;
    if (issue_cyc.size() != 8) failures++;
    for (int i = 1; i < 8 && i < issue_cyc.size(); i++) begin
      checks += 2;
      if (issue_cyc[i] - issue_cyc[i-1] != labels[i]) begin
        failures++; $display("step %0d spacing %0d, label %0d", i, issue_cyc[i] - issue_cyc[i-1], labels[i]);
      end
      if (issue_masks[i] != 4'(i + 1)) failures++;
    end
    checks++; if (late_count != 0) failures++;
    // a step that arrives too late: label 2, pushed 20 cycles after the last issue
    push = 1; push_label = 7'd2; push_mask = 4'b1;
    @(negedge clk); push = 0;
    repeat (3) @(negedge clk);
    checks++; if (late_count != 1) begin failures++; $display("late_count %0d", late_count); end
    checks++; if (!empty) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
