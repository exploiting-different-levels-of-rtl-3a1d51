// meas_result_reg: measurement result register shared by all processors.
//
// One result bit and one valid bit per qubit. The digital acquisition side
// writes results (daq_valid[q] with daq_value[q]); processors only read it.
// When a processor dispatches a new measurement of qubit q it clears valid[q]
// (clr[q]), so a later FMR or MRCE waits for the fresh result. If a clear
// and a write hit the same qubit in one cycle the clear wins: the write
// belongs to the older measurement. The valid/clear protocol is this
// design's choice; the published design only says the DAQ writes the
// register and all processors read it.
module meas_result_reg #(
  parameter int unsigned NQ = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NQ-1:0] daq_valid,
  input  logic [NQ-1:0] daq_value,
  input  logic [NQ-1:0] clr,
  output logic [NQ-1:0] valid,
  output logic [NQ-1:0] value
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      value <= '0;
    end else begin
      for (int q = 0; q < NQ; q++) begin
        if (clr[q]) begin
          valid[q] <= 1'b0;
        end else if (daq_valid[q]) begin
          valid[q] <= 1'b1;
          value[q] <= daq_value[q];
        end
      end
    end
  end
endmodule
