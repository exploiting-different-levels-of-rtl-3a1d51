// tb_meas_result_reg: self-checking test of the measurement result
// register. Random DAQ writes and processor clears against a reference
// model in which a clear beats a write in the same cycle.
module tb_meas_result_reg;
  localparam int NQ = 16;
  logic clk = 0, rst_n = 0;
  logic [NQ-1:0] daq_valid, daq_value, clr, valid, value, rv, rval;
  int checks = 0, failures = 0;

  meas_result_reg #(.NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    daq_valid = 0; daq_value = 0; clr = 0; rv = 0; rval = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      daq_valid = 16'($urandom); daq_value = 16'($urandom); clr = 16'($urandom & $urandom);
      @(posedge clk); #1;
      for (int q = 0; q < NQ; q++) begin
        if (clr[q]) rv[q] = 0;
        else if (daq_valid[q]) begin rv[q] = 1; rval[q] = daq_value[q]; end
      end
      checks++;
      if (valid != rv || ((value ^ rval) & rv) != 0) begin
        failures++; $display("valid %h/%h value %h/%h", valid, rv, value, rval);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
