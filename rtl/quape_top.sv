// quape_top: the complete quantum control processor - multiprocessor with
// W-way quantum superscalar processing units.
//
// Structure: the host loads the instruction memory and the block
// information table, writes the number of blocks and pulses start. The
// scheduler then allocates and prefetches program blocks into the private
// instruction caches (two banks per processor) and starts processors; each
// processor runs its block with superscalar dispatch, timing control and
// fast context switch; the emitter merges all processors' issued operations
// into analog-channel codewords. Measurement results enter the shared
// measurement result register from the acquisition side (daq_*). Processors
// share a small register file for inter-block communication.
//
// Defaults: NPROC = 6 processors and WAYS = 8 follow the largest published
// multiprocessor and the published superscalar width; NBLK = 64 follows the
// published table size. Qubit count (64), instruction memory (4096 words)
// and cache bank depth (256 words) are this design's choice. The host link,
// AWG and DAQ boards are outside this module: their signals are ports.
//
// Status outputs: per-processor busy, every block's status register and
// the scheduler's priority counter; the statistics outputs count the events
// of each mechanism (allocation, prefetch, block switch, lookahead,
// recombination, MRCE switch, measurement stalls, late steps).
//
// Lint note: verilator reports rst_n as used both asynchronously and
// synchronously (SYNCASYNCNET). Every flip-flop uses the asynchronous reset;
// the synchronous use is the "disable iff (!rst_n)" clause of the
// concurrent assertions in the sub-modules, which is not circuit logic.
//
// Timing: codewords appear on the channel outputs one cycle after the
// timing controller issues their step.
module quape_top #(
  parameter int unsigned NPROC      = 6,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned NQ         = 64,
  parameter int unsigned NBLK       = 64,
  parameter int unsigned IMEM_DEPTH = 4096,
  parameter int unsigned CACHE_DEPTH = 256,
  parameter int unsigned IMEM_AW    = $clog2(IMEM_DEPTH),
  parameter int unsigned CACHE_AW   = $clog2(CACHE_DEPTH),
  parameter int unsigned BAW        = $clog2(NBLK)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host interface
  input  logic                        imem_we,
  input  logic [IMEM_AW-1:0]          imem_waddr,
  input  logic [31:0]                 imem_wdata,
  input  logic                        bit_we,
  input  logic [BAW-1:0]              bit_waddr,
  input  quape_pkg::bit_entry_t       bit_wdata,
  input  logic [BAW:0]                num_blocks,
  input  logic                        start,
  output logic                        busy,
  output logic                        all_done,
  output logic [NPROC-1:0]            proc_busy,
  output quape_pkg::blk_status_e      blk_status [NBLK],
  output logic [7:0]                  prio_counter,
  // acquisition side
  input  logic [NQ-1:0]               daq_valid,
  input  logic [NQ-1:0]               daq_value,
  // analog side
  output logic [NQ-1:0]               mw_valid,
  output logic [quape_pkg::QOP_W-1:0] mw_cw   [NQ],
  output logic [NQ-1:0]               flux_valid,
  output logic [quape_pkg::QOP_W-1:0] flux_cw [NQ],
  output logic [NQ-1:0]               ro_trig,
  // statistics
  output logic [31:0]                 alloc_count,
  output logic [31:0]                 prefetch_count,
  output logic [31:0]                 switch_count,
  output logic [31:0]                 collision_count,
  output logic [31:0]                 late_count       [NPROC],
  output logic [31:0]                 fmr_stall_cycles [NPROC],
  output logic [31:0]                 mrce_switches    [NPROC],
  output logic [31:0]                 lookahead_count  [NPROC],
  output logic [31:0]                 recombine_count  [NPROC],
  output logic [31:0]                 dep_stall_count  [NPROC],
  output logic [31:0]                 steps_issued     [NPROC],
  output logic [31:0]                 retired          [NPROC],
  output logic [31:0]                 mrce_clash_count [NPROC]
);
  import quape_pkg::*;

  logic [BAW-1:0]      bit_raddr;
  bit_entry_t          bit_rdata;
  logic [IMEM_AW-1:0]  imem_raddr;
  logic [31:0]         imem_rdata;
  logic [NPROC-1:0]    cw_en, len_we, proc_start, proc_bank, proc_done;
  logic                cw_bank;
  logic [CACHE_AW-1:0] cw_addr;
  logic [31:0]         cw_data;
  logic [CACHE_AW:0]   len;

  logic [NQ-1:0]       mrr_valid, mrr_value, clr_all;
  logic [NQ-1:0]       proc_clr [NPROC];
  logic [NQ-1:0]       op_valid [NPROC];
  logic [QOP_W-1:0]    op_code  [NPROC][NQ];

  logic [NPROC-1:0]    sreg_req, sreg_we, sreg_gnt;
  logic [$clog2(NSREGS)-1:0] sreg_idx [NPROC];
  logic [31:0]         sreg_wdata [NPROC];
  logic [31:0]         sreg_rdata;

  instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .wr_en(imem_we), .wr_addr(imem_waddr), .wr_data(imem_wdata),
    .rd_addr(imem_raddr), .rd_data(imem_rdata)
  );

  block_info_table #(.ENTRIES(NBLK)) u_bit (
    .clk, .wr_en(bit_we), .wr_addr(bit_waddr), .wr_data(bit_wdata),
    .rd_addr(bit_raddr), .rd_data(bit_rdata)
  );

  scheduler #(.NPROC(NPROC), .NBLK(NBLK), .IMEM_AW(IMEM_AW), .CACHE_AW(CACHE_AW)) u_sched (
    .clk, .rst_n, .start, .num_blocks, .bit_raddr, .bit_rdata, .imem_raddr, .imem_rdata,
    .cw_en, .cw_bank, .cw_addr, .cw_data, .len_we, .len,
    .proc_start, .proc_bank, .proc_done, .busy, .all_done, .status(blk_status), .prio_counter,
    .alloc_count, .prefetch_count, .switch_count
  );

  meas_result_reg #(.NQ(NQ)) u_mrr (
    .clk, .rst_n, .daq_valid, .daq_value, .clr(clr_all), .valid(mrr_valid), .value(mrr_value)
  );

  always_comb begin
    clr_all = '0;
    for (int p = 0; p < NPROC; p++) clr_all |= proc_clr[p];
  end

  shared_regs #(.NPROC(NPROC)) u_sregs (
    .clk, .rst_n, .req(sreg_req), .we(sreg_we), .idx(sreg_idx), .wdata(sreg_wdata),
    .gnt(sreg_gnt), .rdata(sreg_rdata)
  );

  for (genvar p = 0; p < NPROC; p++) begin : g_proc
    logic              sel;
    logic [CACHE_AW:0] raddr, alen;
    logic [31:0]       rdata [WAYS];

    private_icache #(.DEPTH(CACHE_DEPTH), .WAYS(WAYS)) u_pic (
      .clk, .rst_n, .wr_en(cw_en[p]), .wr_bank(cw_bank), .wr_addr(cw_addr), .wr_data(cw_data),
      .len_we(len_we[p]), .len_bank(cw_bank), .len, .sel, .rd_addr(raddr),
      .rd_data(rdata), .active_len(alen)
    );

    processor #(.WAYS(WAYS), .NQ(NQ), .CACHE_AW(CACHE_AW)) u_proc (
      .clk, .rst_n, .start(proc_start[p]), .start_bank(proc_bank[p]),
      .busy(proc_busy[p]), .done(proc_done[p]),
      .cache_sel(sel), .cache_addr(raddr), .cache_data(rdata), .cache_len(alen),
      .mrr_valid, .mrr_value, .meas_clr(proc_clr[p]),
      .sreg_req(sreg_req[p]), .sreg_we(sreg_we[p]), .sreg_idx(sreg_idx[p]),
      .sreg_wdata(sreg_wdata[p]), .sreg_gnt(sreg_gnt[p]), .sreg_rdata,
      .op_valid(op_valid[p]), .op_code(op_code[p]),
      .late_count(late_count[p]), .fmr_stall_cycles(fmr_stall_cycles[p]),
      .mrce_switches(mrce_switches[p]), .lookahead_count(lookahead_count[p]),
      .recombine_count(recombine_count[p]), .dep_stall_count(dep_stall_count[p]),
      .steps_issued(steps_issued[p]), .mrce_clash_count(mrce_clash_count[p]),
      .retired(retired[p])
    );
  end

  emitter #(.NPROC(NPROC), .NQ(NQ)) u_emit (
    .clk, .rst_n, .in_valid(op_valid), .in_op(op_code),
    .mw_valid, .mw_cw, .flux_valid, .flux_cw, .ro_trig, .collision_count
  );
endmodule
