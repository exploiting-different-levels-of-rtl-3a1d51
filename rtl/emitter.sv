// emitter: translates issued quantum operations into codewords for the
// analog control electronics.
//
// Every processor presents, each cycle, a per-qubit vector of operations it
// issues now. The emitter merges the processors (lowest index wins if two
// address the same qubit in one cycle; the collision is counted) and routes
// each operation to the analog channel the hardware setup requires: single
// qubit gates to the qubit's microwave channel, two-qubit gates to its flux
// channel, measurements to its readout trigger. Outputs are registered, so
// codewords leave one cycle after issue. The routing rule is the published
// example (microwave and flux operations of one qubit go to different
// channels); the channel numbering (one of each per qubit) is this design's
// choice.
module emitter #(
  parameter int unsigned NPROC = 6,
  parameter int unsigned NQ    = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NQ-1:0]               in_valid [NPROC],
  input  logic [quape_pkg::QOP_W-1:0] in_op    [NPROC][NQ],
  output logic [NQ-1:0]               mw_valid,
  output logic [quape_pkg::QOP_W-1:0] mw_cw    [NQ],
  output logic [NQ-1:0]               flux_valid,
  output logic [quape_pkg::QOP_W-1:0] flux_cw  [NQ],
  output logic [NQ-1:0]               ro_trig,
  output logic [31:0]                 collision_count
);
  import quape_pkg::*;

  logic [NQ-1:0]    m_valid;
  logic [QOP_W-1:0] m_op [NQ];
  logic [7:0]       ncoll;

  always_comb begin
    m_valid = '0;
    ncoll   = '0;
    for (int q = 0; q < NQ; q++) begin
      m_op[q] = '0;
      for (int p = NPROC-1; p >= 0; p--) begin
        if (in_valid[p][q]) begin
          if (m_valid[q]) ncoll = ncoll + 1'b1;
          m_valid[q] = 1'b1;
          m_op[q]    = in_op[p][q];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mw_valid <= '0; flux_valid <= '0; ro_trig <= '0; collision_count <= '0;
      for (int q = 0; q < NQ; q++) begin
        mw_cw[q]   <= '0;
        flux_cw[q] <= '0;
      end
    end else begin
      collision_count <= collision_count + 32'(ncoll);
      for (int q = 0; q < NQ; q++) begin
        mw_valid[q]   <= m_valid[q] && !is_two_qubit(m_op[q]) && m_op[q] != QOP_MEAS;
        flux_valid[q] <= m_valid[q] &&  is_two_qubit(m_op[q]);
        ro_trig[q]    <= m_valid[q] && m_op[q] == QOP_MEAS;
        mw_cw[q]      <= m_op[q];
        flux_cw[q]    <= m_op[q];
      end
    end
  end
endmodule
