// tb_phase_unwrap: checks that the unwrapped phase equals a known phase
// trajectory whose wrapped value is fed in.
//
// A reference trajectory Phi[n] with random steps of up to just under half a
// turn per sample (both directions, and long runs in one direction so that
// the sum passes many whole turns) is wrapped to one turn and streamed in.
// Each output must equal Phi[n] exactly; the weight and last flag must stay
// aligned, latency 1 clock. A second segment checks the restart.
module tb_phase_unwrap;
  import fc_pkg::*;

  localparam int NS = 3000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  phase_t in_phase = '0;
  weight_t in_weight = '0;
  logic out_valid, out_last;
  phi_t out_phi;
  weight_t out_weight;

  int checks = 0, failures = 0;
  longint phi_ref [2][NS];
  int     w_ref   [2][NS];
  int seg = 0, k = 0;

  always #5 clk = ~clk;

  phase_unwrap dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      check(longint'(out_phi) == phi_ref[seg][k],
            $sformatf("seg %0d n %0d got %0d want %0d", seg, k, out_phi, phi_ref[seg][k]));
      check(int'(out_weight) == w_ref[seg][k], "weight");
      check(out_last == (k == NS - 1), "last");
      k++;
      if (out_last) begin seg++; k = 0; end
    end
  end

  initial begin
    for (int s = 0; s < 2; s++) begin
      phi_ref[s][0] = longint'(int'($urandom_range(0, 16777215)) - 8388608);
      for (int n = 1; n < NS; n++) begin
        longint step;
        if (s == 0) step = longint'(int'($urandom_range(0, 16777212)) - 8388606);
        else        step = longint'(n < NS / 2 ? 5000000 : -8000000) + longint'($urandom_range(0, 1000));
        phi_ref[s][n] = phi_ref[s][n-1] + step;
      end
      for (int n = 0; n < NS; n++) w_ref[s][n] = int'($urandom_range(0, 65535));
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s < 2; s++)
      for (int n = 0; n < NS; n++) begin
        in_valid  <= 1;
        in_phase  <= phase_t'(phi_ref[s][n]);
        in_weight <= weight_t'(w_ref[s][n]);
        in_last   <= (n == NS - 1);
        @(posedge clk);
        if (n % 11 == 5) begin
          in_valid <= 0;
          @(posedge clk);
        end
      end
    in_valid <= 0;
    in_last  <= 0;
    repeat (5) @(posedge clk);
    check(seg == 2, "both segments seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * NS) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
