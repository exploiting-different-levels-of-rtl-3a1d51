// timing_manager: timing queue and timing controller of one processor.
//
// Every circuit step dispatched by the pre-decoder pushes one entry into
// the timing queue: its timing label (cycles since the previous step was
// issued) and the mask of ways that hold its operations. The timing
// controller counts cycles since the last issue and, when the head's label
// is reached, pops it and broadcasts the way mask so that those operation
// FIFOs release their heads together in that cycle. The first step after a
// block starts is issued as soon as it arrives and starts the block's
// timeline. A step that arrives after its time is issued at once and
// counted in late_count: this is the case the time ratio TR > 1 describes.
// Label unit (one clock) and queue depth are this design's choice.
//
// Ports: push/push_label/push_mask, full; restart (new block), issue,
// issue_mask; empty; late_count.
//
// Lint note: verilator's SYNCASYNCNET on rst_n comes from the "disable iff
// (!rst_n)" clause of the assertions; every flip-flop resets asynchronously.
module timing_manager #(
  parameter int unsigned WAYS  = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          restart,
  input  logic                          push,
  input  logic [quape_pkg::LABEL_W-1:0] push_label,
  input  logic [WAYS-1:0]               push_mask,
  output logic                          full,
  output logic                          empty,
  output logic                          issue,
  output logic [WAYS-1:0]               issue_mask,
  output logic [31:0]                   late_count
);
  import quape_pkg::*;
  localparam int unsigned PW = $clog2(DEPTH);

  typedef struct packed {
    logic [LABEL_W-1:0] label;
    logic [WAYS-1:0]    mask;
  } tq_entry_t;

  tq_entry_t     q [DEPTH];
  logic [PW-1:0] rp, wp;
  logic [PW:0]   cnt;
  logic [15:0]   elapsed;   // cycles since the last issue
  logic          started;   // timeline of the current block has begun
  tq_entry_t     head;

  assign head  = q[rp];
  assign full  = cnt == (PW+1)'(DEPTH);
  assign empty = cnt == '0;

  always_comb begin
    issue = 1'b0;
    if (!empty) issue = !started || (elapsed >= 16'(head.label));
  end
  assign issue_mask = issue ? head.mask : '0;

  always_ff @(posedge clk) begin
    if (push && !full) q[wp] <= '{label: push_label, mask: push_mask};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
      elapsed <= '0; started <= 1'b0; late_count <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (issue) rp <= rp + 1'b1;
      cnt <= cnt + (PW+1)'(push && !full) - (PW+1)'(issue);
      if (restart) begin
        started <= 1'b0;
        elapsed <= '0;
      end else if (issue) begin
        started <= 1'b1;
        elapsed <= 16'd1;
        if (started && elapsed > 16'(head.label)) late_count <= late_count + 1;
      end else if (elapsed != 16'hFFFF) begin
        elapsed <= elapsed + 1'b1;
      end
    end
  end

  no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
endmodule
