// tb_feature_merge: self-checking test of the score join.
//
// Five banks of nine random scores arrive first all in one cycle, then
// staggered in random order over several cycles, and once with one bank
// delivering twice (the later scores must win). The merged vector must be
// qubit-major (feature j*9+m = score m of qubit j), feat_valid must pulse once,
// one cycle after the last bank, and the vector must hold until the next
// merge.
`timescale 1ns/1ps
module tb_feature_merge;
  import readout_pkg::*;

  localparam int unsigned NQ  = N_QUBITS;
  localparam int unsigned NMF = N_MF;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic [NQ-1:0]            in_valid;
  logic signed [FEAT_W-1:0] in_scores [NQ][NMF];
  logic                     feat_valid;
  logic signed [FEAT_W-1:0] feat [NQ*NMF];

  feature_merge #(.NQ(NQ), .NMF(NMF)) dut (.*);

  int checks = 0, failures = 0;
  int n_same_cycle = 0, n_staggered = 0, n_redeliver = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic signed [FEAT_W-1:0] want [NQ][NMF];
  longint due;
  bit     pending = 1'b0;

  always @(negedge clk) if (rst_n) begin
    if (feat_valid) begin
      checks++;
      if (!pending || cycle != due) begin
        failures++; $display("FAIL feat_valid at %0d (due %0d, pending %0b)", cycle, due, pending);
      end
      pending = 1'b0;
    end else if (pending && cycle >= due) begin
      checks++; failures++; pending = 1'b0;
      $display("FAIL feat_valid missing at %0d", cycle);
    end
  end

  task automatic check_vector();
    for (int j = 0; j < NQ; j++)
      for (int m = 0; m < NMF; m++) begin
        checks++;
        if (feat[j*NMF + m] !== want[j][m]) begin
          failures++;
          $display("FAIL feat[%0d] = %0d exp %0d", j*NMF + m, feat[j*NMF + m], want[j][m]);
        end
      end
  endtask

  function automatic void new_scores(int j);
    for (int m = 0; m < NMF; m++) want[j][m] = FEAT_W'($urandom);
  endfunction

  // mode 0: all banks in one cycle; 1: random order with gaps; 2: as 1 and
  // one bank delivers twice.
  task automatic round(input int mode);
    int order [NQ];
    int again;
    for (int j = 0; j < NQ; j++) begin order[j] = j; new_scores(j); end
    order.shuffle();
    again = order[$urandom_range(0, NQ-2)];
    if (mode == 0) begin
      in_valid = '1;
      for (int j = 0; j < NQ; j++) in_scores[j] = want[j];
      due = cycle + 1; pending = 1'b1;
      @(negedge clk);
      in_valid = '0;
    end else begin
      for (int k = 0; k < NQ; k++) begin
        int j = order[k];
        in_valid = '0;
        in_valid[j] = 1'b1;
        if (mode == 2 && j == again) begin
          // first a stale delivery, then the final one later on
          for (int m = 0; m < NMF; m++) in_scores[j][m] = FEAT_W'($urandom);
          @(negedge clk);
          in_valid = '0;
          @(negedge clk);
          in_valid[j] = 1'b1;
        end
        for (int m = 0; m < NMF; m++) in_scores[j][m] = want[j][m];
        if (k == NQ-1) begin due = cycle + 1; pending = 1'b1; end
        @(negedge clk);
        in_valid = '0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
    end
    @(negedge clk);
    @(negedge clk);
    check_vector();
    repeat (3) @(negedge clk);
    check_vector();   // held
    case (mode)
      0: n_same_cycle++;
      1: n_staggered++;
      default: n_redeliver++;
    endcase
  endtask

  initial begin
    in_valid = '0;
    for (int j = 0; j < NQ; j++) for (int m = 0; m < NMF; m++) in_scores[j][m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int r = 0; r < 12; r++) round(r % 3);
    checks++;
    if (n_same_cycle == 0 || n_staggered == 0 || n_redeliver == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
