// tb_eraser_memory: the memory experiments of the evaluation, run through
// the controller at every code distance evaluated, d = 3, 5, 7, 9 and 11.
//
// Each distance gets its own eraser_top (through tb_memory_lane) and runs
// 10 QEC cycles, i.e. 10*d syndrome-extraction rounds, first with plain
// ERASER and then, after a clear, with ERASER+M. All lanes run in parallel
// on one clock. The lane checks every round's speculation, pairing,
// measurement and ERASER+M squash against independent references; this
// module adds them up and requires that at every distance LRCs were issued
// and leaked qubits cleaned, and at d >= 5 that squashes happened.
// The leakage environment is a stimulus with elevated rates (higher still
// for d = 3 and 5, which have few qubits) so that every
// mechanism occurs in a short run; it does not model physical error rates,
// so no logical error rate is measured here.
module tb_eraser_memory;
  localparam int NL = 5;

  logic clk = 0, start = 0;
  logic [NL-1:0] done;
  int checks_l[NL], failures_l[NL], lrcs_l[NL], leaks_l[NL], cleaned_l[NL], squash_l[NL];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tb_memory_lane #(.D(3),  .ROUNDS(30),  .LEAK_PPM(40000)) lane3  (.clk, .start, .done(done[0]), .checks(checks_l[0]),
      .failures(failures_l[0]), .lrcs(lrcs_l[0]), .leaks(leaks_l[0]), .cleaned(cleaned_l[0]), .squashes(squash_l[0]));
  tb_memory_lane #(.D(5),  .ROUNDS(50),  .LEAK_PPM(20000)) lane5  (.clk, .start, .done(done[1]), .checks(checks_l[1]),
      .failures(failures_l[1]), .lrcs(lrcs_l[1]), .leaks(leaks_l[1]), .cleaned(cleaned_l[1]), .squashes(squash_l[1]));
  tb_memory_lane #(.D(7),  .ROUNDS(70))  lane7  (.clk, .start, .done(done[2]), .checks(checks_l[2]),
      .failures(failures_l[2]), .lrcs(lrcs_l[2]), .leaks(leaks_l[2]), .cleaned(cleaned_l[2]), .squashes(squash_l[2]));
  tb_memory_lane #(.D(9),  .ROUNDS(90))  lane9  (.clk, .start, .done(done[3]), .checks(checks_l[3]),
      .failures(failures_l[3]), .lrcs(lrcs_l[3]), .leaks(leaks_l[3]), .cleaned(cleaned_l[3]), .squashes(squash_l[3]));
  tb_memory_lane #(.D(11), .ROUNDS(110)) lane11 (.clk, .start, .done(done[4]), .checks(checks_l[4]),
      .failures(failures_l[4]), .lrcs(lrcs_l[4]), .leaks(leaks_l[4]), .cleaned(cleaned_l[4]), .squashes(squash_l[4]));

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    start = 1;
    wait (&done);
    for (int i = 0; i < NL; i++) begin
      automatic int d = 3 + 2 * i;
      checks += checks_l[i];
      failures += failures_l[i];
      $display("d=%0d rounds=%0d checks=%0d failures=%0d lrcs=%0d leaks=%0d cleaned=%0d squashed=%0d",
               d, 20 * d, checks_l[i], failures_l[i], lrcs_l[i], leaks_l[i], cleaned_l[i], squash_l[i]);
      checks++;
      if (!(lrcs_l[i] > 0 && cleaned_l[i] > 0)) begin
        failures++;
        $display("FAIL: d=%0d no LRC issued or no leak cleaned", d);
      end
      if (d >= 5) begin
        checks++;
        if (squash_l[i] == 0) begin
          failures++;
          $display("FAIL: d=%0d no ERASER+M squash", d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
