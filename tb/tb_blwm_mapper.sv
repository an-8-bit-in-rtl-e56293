// tb_blwm_mapper: self-checking test of the pseudo-binary quantization and
// greedy bit line weight mapping engine.
//
// 1. The paper's worked example on a 4-bit, 2-row instance (second row holds
//    weight 0): w = 13.4 on cells 1.05, 1.1, 1.125, 0.93 (6 fractional bits:
//    67, 70, 72, 60; w = 858). With the cells in their given order the states
//    must be low, low, high, low (error about -0.3). With remapping, the cell
//    1.125 must become the MSB and 1.1 the next bit, both low, the others
//    high, leaving an error of about 0.
// 2. An 8-bit, 32-row instance with random cell values (mean 1.0) and random
//    weights, compared bit for bit and residual for residual with a reference
//    written here, in both modes, with the run time checked against
//    45*R + 37 ticks (remapping) and 9*R + 1 ticks (plain order), counted
//    from the start tick to the done pulse.
module tb_blwm_mapper;
  import cim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- small instance: paper example
  logic       a_rwe = 0, a_wwe = 0, a_start = 0, a_remap = 0, a_busy, a_done;
  logic [0:0] a_rrow = 0, a_wrow = 0, a_resrow = 0;
  logic [1:0] a_rcol = 0;
  logic [7:0] a_rval = 0;
  logic [9:0] a_wval = 0;
  logic [3:0][1:0] a_perm;
  logic [1:0][3:0] a_q;
  logic signed [13:0] a_res;

  blwm_mapper #(.N_ROWS(2), .N_BITS(4)) dut_a (
    .clk, .rst_n, .r_we(a_rwe), .r_row(a_rrow), .r_col(a_rcol), .r_val(a_rval),
    .w_we(a_wwe), .w_row(a_wrow), .w_val(a_wval), .start(a_start),
    .remap_en(a_remap), .busy(a_busy), .done(a_done), .perm(a_perm),
    .q_bits(a_q), .res_row(a_resrow), .res_rd(a_res));

  // ---------------- large instance: random against the reference
  localparam int R = 32, N = 8, WW = N + GFRAC, SW = WW + 4;
  logic b_rwe = 0, b_wwe = 0, b_start = 0, b_remap = 0, b_busy, b_done;
  logic [4:0] b_rrow = 0, b_wrow = 0, b_resrow = 0;
  logic [2:0] b_rcol = 0;
  logic [7:0] b_rval = 0;
  logic [WW-1:0] b_wval = 0;
  logic [N-1:0][2:0] b_perm;
  logic [R-1:0][N-1:0] b_q;
  logic signed [SW-1:0] b_res;

  blwm_mapper #(.N_ROWS(R), .N_BITS(N)) dut_b (
    .clk, .rst_n, .r_we(b_rwe), .r_row(b_rrow), .r_col(b_rcol), .r_val(b_rval),
    .w_we(b_wwe), .w_row(b_wrow), .w_val(b_wval), .start(b_start),
    .remap_en(b_remap), .busy(b_busy), .done(b_done), .perm(b_perm),
    .q_bits(b_q), .res_row(b_resrow), .res_rd(b_res));

  int rv [R][N];
  int wv [R];
  int ref_perm [N];
  int ref_q [R][N];
  int ref_res [R];

  // Reference: the quantization condition and greedy loss, in plain integers
  function automatic bit qcell(int r, int i, int res);
    int rm = r << i;
    int half = 1 << (GFRAC - 1);
    return !((rm - res > half) || (r <= half) || (rm > 2 * res));
  endfunction

  task automatic reference(input bit remap);
    bit used [N];
    longint best, loss, sq;
    int bestc, mx, nr;
    for (int j = 0; j < R; j++) begin ref_res[j] = wv[j]; for (int i = 0; i < N; i++) ref_q[j][i] = 0; end
    for (int c = 0; c < N; c++) used[c] = 0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!remap) bestc = i;
      else begin
        best = -1; bestc = -1;
        for (int c = 0; c < N; c++) if (!used[c]) begin
          mx = 0; sq = 0;
          for (int j = 0; j < R; j++) begin
            nr = qcell(rv[j][c], i, ref_res[j]) ? ref_res[j] - (rv[j][c] << i) : ref_res[j];
            if ((nr < 0 ? -nr : nr) > mx) mx = (nr < 0 ? -nr : nr);
            sq += longint'(nr) * nr;
          end
          loss = longint'(mx) * sq;
          if (best < 0 || loss < best) begin best = loss; bestc = c; end
        end
      end
      used[bestc] = 1;
      ref_perm[i] = bestc;
      for (int j = 0; j < R; j++)
        if (qcell(rv[j][bestc], i, ref_res[j])) begin
          ref_q[j][i] = 1;
          ref_res[j] -= rv[j][bestc] << i;
        end
    end
  endtask

  task automatic run_b(input bit remap, output int ticks);
    @(negedge clk);
    b_remap = remap; b_start = 1'b1;
    @(negedge clk);
    b_start = 1'b0;
    ticks = 1;
    while (!b_done && ticks < 20000) begin @(negedge clk); ticks++; end
  endtask

  task automatic run_a(input bit remap);
    int t = 0;
    @(negedge clk);
    a_remap = remap; a_start = 1'b1;
    @(negedge clk);
    a_start = 1'b0;
    while (!a_done && t < 1000) begin @(negedge clk); t++; end
  endtask

  initial begin
    int rex [4] = '{60, 72, 70, 67};  // bit lines 0..3; bit line 3 is the MSB in plain order
    int ticks, err_remap, err_plain;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- paper example
    for (int c = 0; c < 4; c++) begin
      a_rwe = 1; a_rrow = 0; a_rcol = 2'(c); a_rval = 8'(rex[c]); @(negedge clk);
      a_rrow = 1; @(negedge clk);
    end
    a_rwe = 0;
    a_wwe = 1; a_wrow = 0; a_wval = 10'd858; @(negedge clk);
    a_wrow = 1; a_wval = 10'd0; @(negedge clk);
    a_wwe = 0;
    run_a(1'b0);
    check(a_q[0] == 4'b1101, $sformatf("plain order states %b, expected low low high low", a_q[0]));
    a_resrow = 0; #1;
    check(a_res == -14'sd18, $sformatf("plain order residual %0d/64", a_res));
    run_a(1'b1);
    check(a_perm[3] == 2'd1, "remapped MSB is the 1.125 cell");
    check(a_perm[2] == 2'd2, "remapped bit 2 is the 1.1 cell");
    check(a_q[0][3] && a_q[0][2] && !a_q[0][1] && !a_q[0][0], "remapped states low low high high");
    #1;
    check(a_res == 14'sd2, $sformatf("remapped residual %0d/64 (about 0)", a_res));
    check(a_q[1] == 4'b0000, "zero weight stays all HRS");

    // ---- random instance
    err_remap = 0; err_plain = 0;
    for (int rep = 0; rep < 6; rep++) begin
      for (int j = 0; j < R; j++) begin
        for (int c = 0; c < N; c++) begin
          rv[j][c] = $urandom_range(38, 90);
          if ($urandom_range(0, 40) == 0) rv[j][c] = $urandom_range(10, 32);  // weak cell
          b_rwe = 1; b_rrow = 5'(j); b_rcol = 3'(c); b_rval = 8'(rv[j][c]);
          @(negedge clk);
        end
        wv[j] = $urandom_range(0, 255 << GFRAC);
        b_rwe = 0; b_wwe = 1; b_wrow = 5'(j); b_wval = WW'(wv[j]);
        @(negedge clk);
        b_wwe = 0;
      end
      for (int m = 0; m < 2; m++) begin
        bit remap;
        remap = (m == 0);
        reference(remap);
        run_b(remap, ticks);
        check(ticks == (remap ? 45 * R + 37 : 9 * R + 1),
              $sformatf("mapping took %0d ticks", ticks));
        for (int i = 0; i < N; i++)
          check(int'(b_perm[i]) == ref_perm[i], $sformatf("perm[%0d] %0d, expected %0d", i, b_perm[i], ref_perm[i]));
        for (int j = 0; j < R; j++) begin
          b_resrow = 5'(j); #1;
          for (int i = 0; i < N; i++)
            check(b_q[j][i] == 1'(ref_q[j][i]), $sformatf("row %0d bit %0d", j, i));
          check(int'(b_res) == ref_res[j], $sformatf("row %0d residual %0d, expected %0d", j, b_res, ref_res[j]));
          if (remap) err_remap += (ref_res[j] < 0) ? -ref_res[j] : ref_res[j];
          else       err_plain += (ref_res[j] < 0) ? -ref_res[j] : ref_res[j];
        end
      end
    end
    $display("sum |quantization error| (1/64 LSB): plain order %0d, remapped %0d", err_plain, err_remap);
    check(err_remap < err_plain, "bit line weight mapping lowers the quantization error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
