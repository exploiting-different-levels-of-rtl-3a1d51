// tb_emitter: self-checking test of the emitter. Random per-qubit operations
// from three processors are merged (lowest processor wins) and routed to
// the microwave, flux or readout channel one cycle later; collisions are
// counted.
module tb_emitter;
  import quape_pkg::*;
  localparam int NPROC = 3, NQ = 8;
  logic clk = 0, rst_n = 0;
  logic [NQ-1:0] in_valid [NPROC];
  logic [QOP_W-1:0] in_op [NPROC][NQ];
  logic [NQ-1:0] mw_valid, flux_valid, ro_trig;
  logic [QOP_W-1:0] mw_cw [NQ], flux_cw [NQ];
  logic [31:0] collision_count;
  int checks = 0, failures = 0, coll = 0;

  emitter #(.NPROC(NPROC), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NQ-1:0] ev, efx, ero;
    logic [QOP_W-1:0] eop [NQ];
    for (int p = 0; p < NPROC; p++) begin
      in_valid[p] = 0;
      for (int q = 0; q < NQ; q++) in_op[p][q] = 0;
    end
    #12 rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int p = 0; p < NPROC; p++) begin
        in_valid[p] = 8'($urandom & $urandom);
        for (int q = 0; q < NQ; q++) begin
          case ($urandom % 3)
            0: in_op[p][q] = QOP_MEAS;
            1: in_op[p][q] = 7'h40 | 7'($urandom % 8);
            default: in_op[p][q] = 7'($urandom % 16);
          endcase
        end
      end
      ev = 0; efx = 0; ero = 0;
      for (int q = 0; q < NQ; q++) begin
        int n; n = 0; eop[q] = 0;
        for (int p = NPROC-1; p >= 0; p--) if (in_valid[p][q]) begin n++; eop[q] = in_op[p][q]; end
        if (n > 1) coll += n - 1;
        if (n > 0) begin
          if (eop[q] == QOP_MEAS) ero[q] = 1;
          else if (eop[q][6]) efx[q] = 1;
          else ev[q] = 1;
        end
      end
      @(posedge clk); #1;
      checks += 3;
      if (mw_valid != ev) failures++;
      if (flux_valid != efx) failures++;
      if (ro_trig != ero) failures++;
      for (int q = 0; q < NQ; q++) begin
        if (ev[q]) begin checks++; if (mw_cw[q] != eop[q]) failures++; end
        if (efx[q]) begin checks++; if (flux_cw[q] != eop[q]) failures++; end
      end
    end
    checks++;
    if (collision_count != 32'(coll)) begin failures++; $display("collisions %0d vs %0d", collision_count, coll); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
