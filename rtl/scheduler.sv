// scheduler: dynamic scheduler of the multiprocessor (dependency checking,
// determination, allocation, block status registers and prefetch).
//
// After start the scheduler scans the block information table continuously,
// one entry per cycle. Dependency checking uses the priority representation:
// a block may run when its priority equals the priority counter. The
// counter advances once a whole scan pass has found no block of the current
// priority that is not done; once a pass has shown that every block of the
// current priority has at least started (prefetch allowed), the counter
// also advances at once when no processor is still running a block of that
// priority, so a prefetched block starts within a few cycles of its
// predecessor's done pulse. Each block has a status register: wait,
// prefetch, in execution, done.
//
//  * Allocation: a ready block in "wait" is copied, one instruction per
//    cycle, from the instruction memory into a free bank of an idle
//    processor's private cache; the processor is then started on that bank
//    and the block becomes "in execution". While copying the scheduler is
//    busy and scans nothing.
//  * Prefetch: once every block of the current priority is in execution (or
//    done), a block of the next priority is copied into the free second bank
//    of a busy processor (or a free bank of an idle one) and becomes
//    "prefetch". When the priority counter reaches it and its processor has
//    finished, the processor is told to switch to that bank - no copy on the
//    critical path - and the block becomes "in execution".
//  * Completion: a processor's done pulse marks its block "done" and frees
//    the bank. When every block is done, all_done is raised.
//
// What follows the published design: the table, the four statuses, the
// priority counter, the busy-while-allocating rule, prefetch into an extra
// cache and the switch. This design's own choices: the one-entry-per-cycle
// scan, the exact pass rule for advancing the counter, processor choice
// (lowest index), and that the direct dependency-vector representation is
// not built (only priorities).
//
// Lint note: verilator's SYNCASYNCNET on rst_n comes from the "disable iff
// (!rst_n)" clause of the assertions; every flip-flop resets asynchronously.
module scheduler #(
  parameter int unsigned NPROC    = 6,
  parameter int unsigned NBLK     = 64,
  parameter int unsigned IMEM_AW  = 12,
  parameter int unsigned CACHE_AW = 8,
  parameter int unsigned BAW      = $clog2(NBLK)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [BAW:0]           num_blocks,
  output logic [BAW-1:0]         bit_raddr,
  input  quape_pkg::bit_entry_t  bit_rdata,
  output logic [IMEM_AW-1:0]     imem_raddr,
  input  logic [31:0]            imem_rdata,
  // private cache write bus
  output logic [NPROC-1:0]       cw_en,
  output logic                   cw_bank,
  output logic [CACHE_AW-1:0]    cw_addr,
  output logic [31:0]            cw_data,
  output logic [NPROC-1:0]       len_we,
  output logic [CACHE_AW:0]      len,
  // processor control
  output logic [NPROC-1:0]       proc_start,
  output logic [NPROC-1:0]       proc_bank,
  input  logic [NPROC-1:0]       proc_done,
  output logic                   busy,
  output logic                   all_done,
  output quape_pkg::blk_status_e status [NBLK],
  output logic [7:0]             prio_counter,
  output logic [31:0]            alloc_count,
  output logic [31:0]            prefetch_count,
  output logic [31:0]            switch_count
);
  import quape_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FETCH} state_e;
  state_e state;

  logic [BAW-1:0]     scan;
  logic               pass_pending, pass_unstarted, pf_ok;
  logic [BAW:0]       done_cnt;

  logic [NPROC-1:0]   running, pend, act_bank, pend_bank;
  logic [1:0]         bank_used [NPROC];
  logic [BAW-1:0]     act_blk [NPROC];
  logic [BAW-1:0]     pend_blk [NPROC];
  logic [7:0]         pend_prio [NPROC];
  logic [7:0]         act_prio [NPROC];
  logic               fast_adv;

  // copy in progress
  int unsigned        f_p;
  logic               f_bank, f_pref;
  logic [BAW-1:0]     f_blk;
  logic [7:0]         f_prio;
  logic [IMEM_AW-1:0] f_ptr, f_end;
  logic [CACHE_AW-1:0] f_off;

  bit_entry_t         e;
  logic               e_ready, e_pref, e_cur_pending, e_cur_unstarted;
  int                 idle_p, pf_p;
  logic               pf_bank;

  assign bit_raddr  = scan;
  assign e          = bit_rdata;
  assign imem_raddr = f_ptr;
  assign busy       = state != S_IDLE;

  always_comb begin
    e_ready         = status[scan] == BLK_WAIT && e.prio == prio_counter;
    e_pref          = status[scan] == BLK_WAIT && e.prio == prio_counter + 8'd1 && pf_ok;
    e_cur_pending   = e.prio == prio_counter && status[scan] != BLK_DONE;
    e_cur_unstarted = e.prio == prio_counter &&
                      (status[scan] == BLK_WAIT || status[scan] == BLK_PREFETCH);
    // All blocks of the current priority were seen started in the last pass
    // (pf_ok); once no processor runs one of them, they are all done.
    fast_adv = state == S_SCAN && pf_ok;
    for (int p = 0; p < NPROC; p++)
      if (running[p] && act_prio[p] == prio_counter) fast_adv = 1'b0;
    idle_p = -1;
    pf_p   = -1;
    for (int p = NPROC-1; p >= 0; p--)
      if (!running[p] && !pend[p] && bank_used[p] == 2'b00) idle_p = p;
    for (int p = NPROC-1; p >= 0; p--)
      if (!running[p] && !pend[p] && bank_used[p] != 2'b11) pf_p = p;
    for (int p = NPROC-1; p >= 0; p--)
      if (running[p] && !pend[p] && !bank_used[p][!act_bank[p]]) pf_p = p;
    // bank a prefetch goes to: the free one of a running processor, else
    // the first free bank of an idle one
    pf_bank = 1'b0;
    if (pf_p >= 0) pf_bank = running[pf_p] ? !act_bank[pf_p] : bank_used[pf_p][0];
  end

  // cache write bus
  always_comb begin
    cw_en   = '0;
    len_we  = '0;
    cw_bank = f_bank;
    cw_addr = f_off;
    cw_data = imem_rdata;
    len     = (CACHE_AW+1)'(f_off) + 1'b1;
    if (state == S_FETCH) begin
      cw_en[f_p] = 1'b1;
      if (f_ptr == f_end) len_we[f_p] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      scan <= '0; pass_pending <= 1'b0; pass_unstarted <= 1'b0; pf_ok <= 1'b0;
      done_cnt <= '0; prio_counter <= '0; all_done <= 1'b0;
      running <= '0; pend <= '0; act_bank <= '0; pend_bank <= '0;
      proc_start <= '0; proc_bank <= '0;
      alloc_count <= '0; prefetch_count <= '0; switch_count <= '0;
      f_p <= 0; f_bank <= 1'b0; f_pref <= 1'b0; f_blk <= '0; f_prio <= '0;
      f_ptr <= '0; f_end <= '0; f_off <= '0;
      for (int i = 0; i < NBLK; i++) status[i] <= BLK_WAIT;
      for (int p = 0; p < NPROC; p++) begin
        bank_used[p] <= 2'b00; act_blk[p] <= '0; pend_blk[p] <= '0; pend_prio[p] <= '0;
        act_prio[p] <= '0;
      end
    end else begin
      proc_start <= '0;

      // completion of blocks
      for (int p = 0; p < NPROC; p++) begin
        if (proc_done[p] && running[p]) begin
          status[act_blk[p]]        <= BLK_DONE;
          bank_used[p][act_bank[p]] <= 1'b0;
          running[p]                <= 1'b0;
        end
      end
      done_cnt <= done_cnt + (BAW+1)'($countones(proc_done & running));

      // switch a processor to its prefetched bank
      for (int p = 0; p < NPROC; p++) begin
        if (pend[p] && !running[p] && pend_prio[p] == prio_counter &&
            !(state == S_FETCH && f_p == p)) begin
          proc_start[p]       <= 1'b1;
          proc_bank[p]        <= pend_bank[p];
          running[p]          <= 1'b1;
          act_bank[p]         <= pend_bank[p];
          act_blk[p]          <= pend_blk[p];
          act_prio[p]         <= pend_prio[p];
          status[pend_blk[p]] <= BLK_EXEC;
          pend[p]             <= 1'b0;
          switch_count        <= switch_count + 1;
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_SCAN;
            scan <= '0; pass_pending <= 1'b0; pass_unstarted <= 1'b0; pf_ok <= 1'b0;
            done_cnt <= '0; prio_counter <= '0; all_done <= 1'b0;
            for (int i = 0; i < NBLK; i++) status[i] <= BLK_WAIT;
          end
        end
        S_SCAN: begin
          if (done_cnt >= num_blocks) begin
            state    <= S_IDLE;
            all_done <= 1'b1;
          end else if (e_ready && idle_p >= 0) begin
            state  <= S_FETCH;
            f_p    <= idle_p;
            f_bank <= bank_used[idle_p][0];
            bank_used[idle_p][bank_used[idle_p][0]] <= 1'b1;
            f_pref <= 1'b0;
            f_blk  <= scan; f_prio <= e.prio;
            f_ptr  <= IMEM_AW'(e.pc_start); f_end <= IMEM_AW'(e.pc_end); f_off <= '0;
          end else if (e_pref && pf_p >= 0) begin
            state  <= S_FETCH;
            f_p    <= pf_p;
            f_bank <= pf_bank;
            bank_used[pf_p][pf_bank] <= 1'b1;
            pend[pf_p] <= 1'b1;      // reserve: no second prefetch into this processor
            pend_prio[pf_p] <= 8'hFF;
            f_pref <= 1'b1;
            f_blk  <= scan; f_prio <= e.prio;
            f_ptr  <= IMEM_AW'(e.pc_start); f_end <= IMEM_AW'(e.pc_end); f_off <= '0;
          end else if (fast_adv) begin
            // current priority finished: advance at once and rescan
            prio_counter   <= prio_counter + 1'b1;
            pf_ok          <= 1'b0;
            scan           <= '0;
            pass_pending   <= 1'b0;
            pass_unstarted <= 1'b0;
          end else begin
            if (32'(scan) + 1 >= 32'(num_blocks)) begin
              scan <= '0;
              pass_pending   <= 1'b0;
              pass_unstarted <= 1'b0;
              if (!(pass_pending || e_cur_pending)) begin
                prio_counter <= prio_counter + 1'b1;
                pf_ok        <= 1'b0;
              end else begin
                pf_ok <= !(pass_unstarted || e_cur_unstarted);
              end
            end else begin
              scan <= scan + 1'b1;
              pass_pending   <= pass_pending   || e_cur_pending;
              pass_unstarted <= pass_unstarted || e_cur_unstarted;
            end
          end
        end
        S_FETCH: begin
          f_ptr <= f_ptr + 1'b1;
          f_off <= f_off + 1'b1;
          if (f_ptr == f_end) begin
            state <= S_SCAN;
            if (f_pref) begin
              status[f_blk]  <= BLK_PREFETCH;
              pend_bank[f_p] <= f_bank;
              pend_blk[f_p]  <= f_blk;
              pend_prio[f_p] <= f_prio;
              prefetch_count <= prefetch_count + 1;
            end else begin
              status[f_blk]   <= BLK_EXEC;
              proc_start[f_p] <= 1'b1;
              proc_bank[f_p]  <= f_bank;
              running[f_p]    <= 1'b1;
              act_bank[f_p]   <= f_bank;
              act_blk[f_p]    <= f_blk;
              act_prio[f_p]   <= f_prio;
              alloc_count     <= alloc_count + 1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  block_fits_cache: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SCAN && (e_ready || e_pref)) |-> (32'(e.pc_end) - 32'(e.pc_start) < (1 << CACHE_AW)));
endmodule
