// tb_bl_mux: self-checking test of the bit-line to integrator multiplexer.
//
// After reset every integrator k must see bit line k of its group. Random
// permutations are then written for random groups; with random bit-line
// currents, integrator k of group g must carry bit line g*8 + perm[g][k].
// perm_ok must be high for permutations and drop when one group selects the
// same bit line twice.
module tb_bl_mux;
  import cim_pkg::*;

  localparam int C = COLS, N = NBITS, NG = C / N, IW = GW + $clog2(ROWS);

  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [$clog2(NG)-1:0] cfg_group = '0;
  logic [$clog2(N)-1:0] cfg_integ = '0, cfg_bl = '0;
  logic [C-1:0][IW-1:0] bl_i;
  logic [NG-1:0][N-1:0][IW-1:0] int_i;
  logic [NG-1:0][N-1:0][$clog2(N)-1:0] sel;
  logic perm_ok;

  int perm_ref [NG][N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bl_mux dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_routes();
    for (int c = 0; c < C; c++) bl_i[c] = IW'($urandom);
    #1;
    for (int g = 0; g < NG; g++)
      for (int k = 0; k < N; k++)
        check(int_i[g][k] == bl_i[g * N + perm_ref[g][k]],
              $sformatf("group %0d integrator %0d", g, k));
  endtask

  task automatic write_perm(input int g);
    int p[N];
    for (int k = 0; k < N; k++) p[k] = k;
    p.shuffle();
    for (int k = 0; k < N; k++) begin
      cfg_we = 1'b1; cfg_group = $clog2(NG)'(g); cfg_integ = $clog2(N)'(k);
      cfg_bl = $clog2(N)'(p[k]);
      perm_ref[g][k] = p[k];
      @(negedge clk);
    end
    cfg_we = 1'b0;
  endtask

  initial begin
    for (int g = 0; g < NG; g++) for (int k = 0; k < N; k++) perm_ref[g][k] = k;
    bl_i = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check_routes();
    check(perm_ok, "identity is a permutation");
    for (int t = 0; t < 40; t++) begin
      write_perm($urandom_range(0, NG - 1));
      check_routes();
      check(perm_ok, "random permutation accepted");
    end
    // duplicate selection in group 3
    cfg_we = 1'b1; cfg_group = 3; cfg_integ = 0; cfg_bl = $clog2(N)'(perm_ref[3][1]);
    @(negedge clk);
    cfg_we = 1'b0;
    #1;
    check(!perm_ok, "duplicate selection flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
