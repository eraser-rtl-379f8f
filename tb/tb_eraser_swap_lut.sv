// tb_eraser_swap_lut: checks the SWAP Lookup Table at the default distance.
// After reset every primary and backup must be a parity neighbour of its
// data qubit, backup != primary, and the primaries must be distinct for all
// data qubits but one (d*d data, d*d-1 parity qubits). Then entries are
// rewritten through the write port and read back; the others must keep
// their values. Geometry comes from tb_lattice_pkg, not from the RTL.
module tb_eraser_swap_lut;
  import tb_lattice_pkg::*;

  localparam int unsigned D  = 11;
  localparam int unsigned ND = D * D;
  localparam int unsigned NP = D * D - 1;
  localparam int unsigned DW = $clog2(ND);
  localparam int unsigned PW = $clog2(NP);

  logic clk = 0, rst_n = 0, we = 0;
  logic [DW-1:0] addr = '0;
  logic [PW-1:0] wr_primary = '0, wr_backup = '0;
  logic [ND-1:0][PW-1:0] primary, backup;
  int checks = 0, failures = 0;

  eraser_swap_lut #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lattice lat;
    int used[int];
    int shared;
    logic [ND-1:0][PW-1:0] before_p, before_b;
    lat = new(D);
    check(lat.np == int'(NP), "reference lattice size");
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int q = 0; q < int'(ND); q++) begin
      check(lat.adjacent(q, int'(primary[q])), $sformatf("primary of %0d adjacent", q));
      check(lat.adjacent(q, int'(backup[q])),  $sformatf("backup of %0d adjacent", q));
      check(primary[q] != backup[q], $sformatf("backup of %0d differs", q));
      if (used.exists(int'(primary[q]))) used[int'(primary[q])]++;
      else used[int'(primary[q])] = 1;
    end
    shared = 0;
    foreach (used[k]) if (used[k] > 1) shared += used[k] - 1;
    check(used.size() == int'(NP), $sformatf("distinct primaries %0d", used.size()));
    check(shared == 1, $sformatf("data qubits sharing a primary: %0d", shared));

    // Rewrite a few entries.
    for (int n = 0; n < 20; n++) begin
      int q = $urandom_range(ND - 1);
      before_p = primary;
      before_b = backup;
      @(negedge clk);
      we = 1; addr = DW'(q);
      wr_primary = PW'($urandom_range(NP - 1));
      wr_backup  = PW'($urandom_range(NP - 1));
      @(negedge clk);
      we = 0;
      check(primary[q] == wr_primary && backup[q] == wr_backup, "entry written");
      for (int k = 0; k < int'(ND); k++)
        if (k != q) check(primary[k] == before_p[k] && backup[k] == before_b[k], "other entries kept");
    end
    // Reset restores the default table.
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < int'(ND); q++)
      check(lat.adjacent(q, int'(primary[q])), "primary restored by reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
