// shared_regs: registers shared by all processors.
//
// NSREGS x DATA_W registers that every processor can load (LDS) and store
// (STS); they let program blocks on different processors exchange values,
// e.g. flags for race conditions or hand-offs. One access is granted per
// cycle by a fixed-priority arbiter (lowest processor index wins); a
// processor that is not granted keeps its request and stalls. Size, port
// style and arbitration are this design's choice.
//
// Ports per processor p: req[p], we[p], idx[p], wdata[p]; gnt[p] (same
// cycle), rdata (value of the granted index, same cycle). A store is
// written at the clock edge that ends the granted cycle.
//
// Lint note: verilator's SYNCASYNCNET on rst_n comes from the "disable iff
// (!rst_n)" clause of the assertions; every flip-flop resets asynchronously.
module shared_regs #(
  parameter int unsigned NPROC  = 6,
  parameter int unsigned NSREGS = 16,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned AW     = $clog2(NSREGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPROC-1:0]  req,
  input  logic [NPROC-1:0]  we,
  input  logic [AW-1:0]     idx   [NPROC],
  input  logic [DATA_W-1:0] wdata [NPROC],
  output logic [NPROC-1:0]  gnt,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] regs [NSREGS];
  logic [AW-1:0]     sel_idx;
  logic              sel_we;
  logic [DATA_W-1:0] sel_wdata;

  always_comb begin
    gnt       = '0;
    sel_idx   = '0;
    sel_we    = 1'b0;
    sel_wdata = '0;
    for (int p = NPROC-1; p >= 0; p--) begin
      if (req[p]) begin
        gnt       = '0;
        gnt[p]    = 1'b1;
        sel_idx   = idx[p];
        sel_we    = we[p];
        sel_wdata = wdata[p];
      end
    end
  end

  assign rdata = regs[sel_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSREGS; i++) regs[i] <= '0;
    end else if (|gnt && sel_we) begin
      regs[sel_idx] <= sel_wdata;
    end
  end

  onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
