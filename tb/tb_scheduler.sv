// tb_scheduler: self-checking test of the scheduler with two behavioural
// processors, a behavioural instruction memory and block table.
//
// Uses the four-block example: W1 (PC 0-10) and W2 (11-20) with priority 0,
// W3 (21-30) priority 1, W4 (31-40) priority 2. Checks that W1 and W2 are
// allocated to different processors and overlap, that W3 is prefetched
// (status "prefetch") while W1/W2 still run and starts by a bank switch
// within three cycles of the later of them finishing, that W4 follows W3
// the same way, that every copied block matches the instruction memory, and
// that all blocks end "done".
module tb_scheduler;
  import quape_pkg::*;
  localparam int NPROC = 2, NBLK = 8, IAW = 8, CAW = 5;
  logic clk = 0, rst_n = 0, start, busy, all_done;
  logic [3:0] num_blocks;
  logic [2:0] bit_raddr;
  bit_entry_t bit_rdata;
  logic [IAW-1:0] imem_raddr;
  logic [31:0] imem_rdata, cw_data, alloc_count, prefetch_count, switch_count;
  logic [NPROC-1:0] cw_en, len_we, proc_start, proc_bank, proc_done;
  logic cw_bank;
  logic [CAW-1:0] cw_addr;
  logic [CAW:0] len;
  blk_status_e status [NBLK];
  logic [7:0] prio_counter;
  int checks = 0, failures = 0, cyc = 0;

  bit_entry_t tbl [NBLK];
  logic [31:0] imem [256];
  logic [31:0] cache [NPROC][2][32];
  int clen [NPROC][2];
  int run_left [NPROC];
  int runs_blk [NPROC];
  int start_cyc [4], done_cyc [4], start_proc [4];
  logic seen_prefetch [4];

  scheduler #(.NPROC(NPROC), .NBLK(NBLK), .IMEM_AW(IAW), .CACHE_AW(CAW)) dut (.*);
  always #5 clk = ~clk;

  assign bit_rdata  = tbl[bit_raddr];
  assign imem_rdata = imem[imem_raddr];

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // behavioural processors: word 0 of a block holds its block number,
  // word 1 its run time in cycles
  always @(negedge clk) begin
    cyc <= cyc + 1;
    proc_done <= '0;
    for (int p = 0; p < NPROC; p++) begin
      if (cw_en[p]) cache[p][cw_bank][cw_addr] <= cw_data;
      if (len_we[p]) clen[p][cw_bank] <= int'(len);
      if (run_left[p] > 0) begin
        run_left[p] <= run_left[p] - 1;
        if (run_left[p] == 1) begin
          proc_done[p] <= 1'b1;
          done_cyc[runs_blk[p]] = cyc;
        end
      end
      if (proc_start[p]) begin
        int b;
        b = int'(cache[p][proc_bank[p]][0]);
        runs_blk[p] <= b;
        run_left[p] <= int'(cache[p][proc_bank[p]][1]);
        start_cyc[b] = cyc; start_proc[b] = p;
        for (int i = 0; i < clen[p][proc_bank[p]]; i++)
          chk(cache[p][proc_bank[p]][i] == imem[int'(tbl[b].pc_start) + i], "cached block matches memory");
        chk(clen[p][proc_bank[p]] == int'(tbl[b].pc_end) - int'(tbl[b].pc_start) + 1, "cached length");
      end
    end
    for (int b = 0; b < 4; b++) if (status[b] == BLK_PREFETCH) seen_prefetch[b] = 1'b1;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int runtime [4] = '{50, 80, 40, 30};
    int last;
    start = 0; num_blocks = 4;
    for (int p = 0; p < NPROC; p++) begin run_left[p] = 0; runs_blk[p] = 0; end
    for (int b = 0; b < 4; b++) begin seen_prefetch[b] = 0; start_cyc[b] = -1; done_cyc[b] = -1; end
    for (int i = 0; i < 256; i++) imem[i] = $urandom;
    tbl[0] = '{pc_start: 0,  pc_end: 10, prio: 0};
    tbl[1] = '{pc_start: 11, pc_end: 20, prio: 0};
    tbl[2] = '{pc_start: 21, pc_end: 30, prio: 1};
    tbl[3] = '{pc_start: 31, pc_end: 40, prio: 2};
    for (int b = 4; b < NBLK; b++) tbl[b] = '0;
    for (int b = 0; b < 4; b++) begin
      imem[int'(tbl[b].pc_start)]     = b;
      imem[int'(tbl[b].pc_start) + 1] = runtime[b];
    end
    #12 rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (all_done);
    @(negedge clk);
    chk(start_proc[0] != start_proc[1], "W1 and W2 on different processors");
    chk(start_cyc[1] < done_cyc[0], "W1 and W2 overlap");
    chk(seen_prefetch[2] && seen_prefetch[3], "W3 and W4 were prefetched");
    last = done_cyc[0] > done_cyc[1] ? done_cyc[0] : done_cyc[1];
    chk(start_cyc[2] > last && start_cyc[2] <= last + 3,
        $sformatf("W3 starts %0d cycles after W1/W2 end", start_cyc[2] - last));
    chk(start_cyc[3] > done_cyc[2] && start_cyc[3] <= done_cyc[2] + 3,
        $sformatf("W4 starts %0d cycles after W3 ends", start_cyc[3] - done_cyc[2]));
    chk(alloc_count == 2 && prefetch_count == 2 && switch_count == 2, "2 allocations, 2 prefetches, 2 switches");
    for (int b = 0; b < 4; b++) chk(status[b] == BLK_DONE, "block done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
