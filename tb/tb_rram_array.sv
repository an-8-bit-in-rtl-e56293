// tb_rram_array: self-checking test of the 1R1T crossbar model.
//
// Keeps its own copy of every cell's state and conductance, programs random
// LRS/HRS patterns row by row and group by group, loads random conductances
// (the device spread) into random cells, applies random word-line patterns
// and compares every bit-line current with the sum computed here. Also checks
// that after form_all_lrs one active word line gives each bit line exactly
// that row's conductance.
module tb_rram_array;
  import cim_pkg::*;

  localparam int R = ROWS, C = COLS, N = NBITS, IW = GW + $clog2(ROWS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic form_all_lrs = 1'b0, prog_we = 1'b0, var_we = 1'b0;
  logic [$clog2(R)-1:0] prog_row = '0, var_row = '0;
  logic [$clog2(C/N)-1:0] prog_group = '0;
  logic [N-1:0] prog_lrs = '0;
  logic [$clog2(C)-1:0] var_col = '0;
  logic [GW-1:0] var_g = '0;
  logic [R-1:0] wl = '0;
  logic [C-1:0][IW-1:0] bl_i;

  bit lrs_ref [R][C];
  int g_ref [R][C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rram_array dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all(input string what);
    int exp;
    int nbad = 0;
    #1;
    for (int c = 0; c < C; c++) begin
      exp = 0;
      for (int r = 0; r < R; r++) if (wl[r] && lrs_ref[r][c]) exp += g_ref[r][c];
      checks++;
      if (int'(bl_i[c]) != exp) begin
        nbad++; failures++;
        if (nbad < 5) $display("FAIL: %s bl %0d = %0d, expected %0d", what, c, bl_i[c], exp);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      lrs_ref[r][c] = 0; g_ref[r][c] = 1 << GFRAC;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wl = '1;
    check_all("after reset (all HRS)");
    // random programming
    for (int k = 0; k < 3000; k++) begin
      prog_we = 1'b1;
      prog_row = $clog2(R)'($urandom); prog_group = $clog2(C/N)'($urandom);
      prog_lrs = N'($urandom);
      for (int b = 0; b < N; b++) lrs_ref[prog_row][int'(prog_group) * N + b] = prog_lrs[b];
      @(negedge clk);
    end
    prog_we = 1'b0;
    for (int k = 0; k < 3000; k++) begin
      var_we = 1'b1;
      var_row = $clog2(R)'($urandom); var_col = $clog2(C)'($urandom);
      var_g = GW'($urandom_range(20, 120));
      g_ref[var_row][var_col] = int'(var_g);
      @(negedge clk);
    end
    var_we = 1'b0;
    for (int k = 0; k < 6; k++) begin
      for (int r = 0; r < R; r++) wl[r] = 1'($urandom);
      check_all("random word lines");
    end
    wl = '1;
    check_all("all word lines");
    // form all LRS, then one row at a time
    @(negedge clk);
    form_all_lrs = 1'b1;
    @(negedge clk);
    form_all_lrs = 1'b0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) lrs_ref[r][c] = 1;
    for (int k = 0; k < 4; k++) begin
      wl = '0;
      wl[$urandom_range(0, R - 1)] = 1'b1;
      check_all("single word line after forming");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
