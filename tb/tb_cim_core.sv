// tb_cim_core: end-to-end test of the computing core (reduced array).
//
// The test runs the flow the core is built for:
//  1. device spread: random LRS conductances (0.6 .. 1.4 of nominal) are
//     loaded into the cells of neurons 0, 2 and 3; neuron 1 keeps nominal
//     cells;
//  2. resistance reading: all cells are formed to LRS and every cell of the
//     first N_BITS bit lines of each neuron is measured through READ
//     operations; each ADC code must equal the cell's conductance;
//  3. bit line weight mapping of a random weight column onto neuron 0 (with
//     remapping) and onto neuron 2 (plain order), from the measured values;
//     the chosen permutation and residuals are compared with a reference
//     written here, and the apply pass must load the multiplexer;
//  4. host programming of binary weights on neurons 1 and 3, and a host
//     permutation on neuron 3;
//  5. MAC operations: the paper's example (input 186 on one line, weight 236
//     on nominal cells gives code 171 = 8'b10101011), random inputs on all
//     lines, checked exactly against sum_i X_i * sum_k 2^k * g * 2 for each
//     neuron, and, for the mapped neurons, against 2 * sum_i X_i (w_i - e_i)
//     with e_i the mapping residual; one MAC with a small ADC range must
//     saturate. Each MAC must take 54 ticks.
// Every mechanism (read, MAC, remapped and plain mapping, host permutation,
// ADC saturation) is counted and must occur at least once.
module tb_cim_core;
  import cim_pkg::*;

  localparam int R = 32, C = 32;
  localparam int N = NBITS, NG = C / N, WW = N + GFRAC, SWR = WW + 4;
  localparam int RWI = $clog2(R), GWI = $clog2(NG), BW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic x_load = 0, start = 0;
  logic [R-1:0][N-1:0] x_in = '0;
  mode_e mode = MODE_MAC;
  logic [RWI-1:0] read_row = '0;
  logic [BW-1:0] read_integ = '0;
  logic [ACC_W-1:0] adc_fs = '0;
  logic busy, done;
  logic [NG-1:0][ADC_BITS-1:0] y_code;
  logic [NG-1:0][ACC_W-1:0] vout_drop;
  sw_t sw;
  phase_e phase;
  logic form_all_lrs = 0, prog_we = 0, var_we = 0, cfg_we = 0;
  logic [RWI-1:0] prog_row = '0, var_row = '0;
  logic [GWI-1:0] prog_group = '0, cfg_group = '0, map_group = '0;
  logic [N-1:0] prog_lrs = '0;
  logic [$clog2(C)-1:0] var_col = '0;
  logic [GW-1:0] var_g = '0;
  logic [BW-1:0] cfg_integ = '0, cfg_bl = '0;
  logic perm_ok;
  logic [NG-1:0][N-1:0][BW-1:0] mux_sel;
  logic map_r_we = 0, map_w_we = 0, map_start = 0, map_remap = 0, map_busy, map_done;
  logic [RWI-1:0] map_r_row = '0, map_w_row = '0, map_res_row = '0;
  logic [BW-1:0] map_r_col = '0;
  logic [GW-1:0] map_r_val = '0;
  logic [WW-1:0] map_w_val = '0;
  logic signed [SWR-1:0] map_res;

  cim_core #(.N_ROWS(R), .N_COLS(C)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_read = 0, n_mac = 0, n_map_remap = 0, n_map_plain = 0, n_host_perm = 0, n_sat = 0;

  // Reference state of the array and multiplexer
  int g_ref [R][C];
  bit lrs_ref [R][C];
  int sel_ref [NG][N];
  int code_rd [R][C];     // measured values
  int wv [NG][R];         // weights mapped per neuron
  int res_ref [NG][R];
  int perm_ref [N];
  int q_ref [R][N];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- reference mapping (same rule as the mapping engine's specification)
  function automatic bit qcell(int r, int i, int res);
    int rm = r << i;
    int half = 1 << (GFRAC - 1);
    return !((rm - res > half) || (r <= half) || (rm > 2 * res));
  endfunction

  task automatic ref_map(input int g, input bit remap);
    bit used [N];
    longint best, loss, sq;
    int bestc, mx, nr, rv;
    for (int j = 0; j < R; j++) begin
      res_ref[g][j] = wv[g][j];
      for (int i = 0; i < N; i++) q_ref[j][i] = 0;
    end
    for (int c = 0; c < N; c++) used[c] = 0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!remap) bestc = i;
      else begin
        best = -1; bestc = -1;
        for (int c = 0; c < N; c++) if (!used[c]) begin
          mx = 0; sq = 0;
          for (int j = 0; j < R; j++) begin
            rv = code_rd[j][g * N + c];
            nr = qcell(rv, i, res_ref[g][j]) ? res_ref[g][j] - (rv << i) : res_ref[g][j];
            if ((nr < 0 ? -nr : nr) > mx) mx = (nr < 0 ? -nr : nr);
            sq += longint'(nr) * nr;
          end
          loss = longint'(mx) * sq;
          if (best < 0 || loss < best) begin best = loss; bestc = c; end
        end
      end
      used[bestc] = 1;
      perm_ref[i] = bestc;
      for (int j = 0; j < R; j++) begin
        rv = code_rd[j][g * N + bestc];
        if (qcell(rv, i, res_ref[g][j])) begin
          q_ref[j][i] = 1;
          res_ref[g][j] -= rv << i;
        end
      end
    end
  endtask

  // ---- operations
  task automatic run_op(input mode_e m, output int ticks);
    @(negedge clk);
    mode = m; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    ticks = 1;
    while (!done && ticks < 500) begin @(negedge clk); ticks++; end
    check(done, "operation completes");
  endtask

  function automatic longint exp_drop(input int g, input logic [R-1:0][N-1:0] x);
    longint s = 0, wsum;
    int col;
    for (int i = 0; i < R; i++) begin
      wsum = 0;
      for (int k = 0; k < N; k++) begin
        col = g * N + sel_ref[g][k];
        if (lrs_ref[i][col]) wsum += longint'(g_ref[i][col]) << k;
      end
      s += longint'(x[i]) * wsum * INT_TICKS;
    end
    return s;
  endfunction

  task automatic do_mac(input logic [R-1:0][N-1:0] x, input longint fs, input string what);
    int ticks;
    longint e, ec;
    @(negedge clk);
    x_in = x; x_load = 1'b1;
    @(negedge clk);
    x_load = 1'b0; x_in = '0;
    adc_fs = ACC_W'(fs);
    run_op(MODE_MAC, ticks);
    n_mac++;
    check(ticks == 55, $sformatf("%s: MAC took %0d ticks (54 busy + done)", what, ticks));
    for (int g = 0; g < NG; g++) begin
      e = exp_drop(g, x);
      ec = (e * 256) / fs;
      if (ec > 255) begin ec = 255; n_sat++; end
      check(vout_drop[g] == ACC_W'(e), $sformatf("%s: neuron %0d drop %0d, expected %0d", what, g, vout_drop[g], e));
      check(y_code[g] == 8'(ec), $sformatf("%s: neuron %0d code %0d, expected %0d", what, g, y_code[g], ec));
    end
  endtask

  task automatic do_map(input int g, input bit remap);
    int t = 0;
    // load measured values of the neuron's cells and its weights
    for (int j = 0; j < R; j++) begin
      for (int c = 0; c < N; c++) begin
        map_r_we = 1; map_r_row = RWI'(j); map_r_col = BW'(c); map_r_val = GW'(code_rd[j][g * N + c]);
        @(negedge clk);
      end
      map_r_we = 0;
      map_w_we = 1; map_w_row = RWI'(j); map_w_val = WW'(wv[g][j]);
      @(negedge clk);
      map_w_we = 0;
    end
    map_group = GWI'(g); map_remap = remap; map_start = 1;
    @(negedge clk);
    map_start = 0;
    while (!map_done && t < 100000) begin @(negedge clk); t++; end
    check(map_done, "mapping completes");
    ref_map(g, remap);
    if (remap) n_map_remap++; else n_map_plain++;
    for (int i = 0; i < N; i++) begin
      check(int'(mux_sel[g][i]) == perm_ref[i], $sformatf("neuron %0d integrator %0d mux %0d, expected %0d", g, i, mux_sel[g][i], perm_ref[i]));
      sel_ref[g][i] = perm_ref[i];
    end
    for (int j = 0; j < R; j++) begin
      map_res_row = RWI'(j); #1;
      check(int'(map_res) == res_ref[g][j], $sformatf("neuron %0d row %0d residual", g, j));
      for (int i = 0; i < N; i++) lrs_ref[j][g * N + perm_ref[i]] = q_ref[j][i];
    end
    check(perm_ok, "multiplexer holds permutations after mapping");
    @(negedge clk);   // back onto the stimulus edge after the #1 reads
  endtask

  initial begin
    int ticks;
    logic [R-1:0][N-1:0] x;
    longint s, e;
    int p[N];

    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      g_ref[r][c] = 1 << GFRAC; lrs_ref[r][c] = 0;
    end
    for (int g = 0; g < NG; g++) for (int k = 0; k < N; k++) sel_ref[g][k] = k;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // 1. device spread on neurons 0, 2, 3
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) if (c / N != 1) begin
      var_we = 1; var_row = RWI'(r); var_col = $clog2(C)'(c);
      g_ref[r][c] = $urandom_range(38, 90);
      var_g = GW'(g_ref[r][c]);
      @(negedge clk);
    end
    var_we = 0;

    // 2. resistance reading
    form_all_lrs = 1;
    @(negedge clk);
    form_all_lrs = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) lrs_ref[r][c] = 1;
    adc_fs = ACC_W'(longint'(READ_INT_TICKS) << (2 * N - 1 + ADC_BITS));
    for (int r = 0; r < R; r++)
      for (int k = 0; k < N; k++) begin
        read_row = RWI'(r); read_integ = BW'(k);
        run_op(MODE_READ, ticks);
        n_read++;
        check(ticks == 22, $sformatf("read took %0d ticks", ticks));
        for (int g = 0; g < NG; g++) begin
          code_rd[r][g * N + k] = int'(y_code[g]);
          check(int'(y_code[g]) == g_ref[r][g * N + k],
                $sformatf("read row %0d bl %0d: %0d, expected %0d", r, g * N + k, y_code[g], g_ref[r][g * N + k]));
        end
      end

    // 3. bit line weight mapping
    for (int j = 0; j < R; j++) begin
      wv[0][j] = $urandom_range(0, 255 << GFRAC);
      wv[2][j] = $urandom_range(0, 255 << GFRAC);
    end
    do_map(0, 1'b1);
    do_map(2, 1'b0);
    begin
      bit ident = 1;
      for (int i = 0; i < N; i++) if (sel_ref[0][i] != i) ident = 0;
      if (ident) $display("note: remapping kept the identity order");
    end

    // 4. host programming of neurons 1 and 3
    for (int r = 0; r < R; r++) begin
      for (int g = 1; g <= 3; g += 2) begin
        prog_we = 1; prog_row = RWI'(r); prog_group = GWI'(g);
        prog_lrs = (g == 1) ? ((r == 0) ? 8'd236 : N'($urandom)) : N'($urandom);
        for (int b = 0; b < N; b++) lrs_ref[r][g * N + b] = prog_lrs[b];
        @(negedge clk);
      end
    end
    prog_we = 0;
    for (int k = 0; k < N; k++) p[k] = k;
    p.shuffle();
    for (int k = 0; k < N; k++) begin
      cfg_we = 1; cfg_group = 3; cfg_integ = BW'(k); cfg_bl = BW'(p[k]); sel_ref[3][k] = p[k];
      @(negedge clk);
    end
    cfg_we = 0;
    n_host_perm++;
    #1;
    check(perm_ok, "host permutation accepted");
    @(negedge clk);

    // 5. MAC operations
    x = '0; x[0] = 8'd186;
    do_mac(x, longint'(128) << 16, "paper example");
    check(y_code[1] == 8'b10101011, "paper example: 186 x 236 gives 8'b10101011");
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 0; i < R; i++) x[i] = N'($urandom);
      do_mac(x, longint'(R) * 255 * 255 * 2 * 96, $sformatf("random MAC %0d", rep));
      // mapped neurons: the analog result is the dot product with the
      // quantized weights w - e, times 2 integration ticks
      for (int g = 0; g <= 2; g += 2) begin
        s = 0;
        for (int i = 0; i < R; i++) s += longint'(x[i]) * (wv[g][i] - res_ref[g][i]);
        check(vout_drop[g] == ACC_W'(2 * s), $sformatf("neuron %0d equals sum X*(w-e)", g));
      end
    end
    do_mac(x, longint'(R) * 255 * 255 * 2, "saturating MAC");

    $display("mechanisms: read %0d, MAC %0d, remapped mapping %0d, plain mapping %0d, host permutation %0d, ADC saturation %0d",
             n_read, n_mac, n_map_remap, n_map_plain, n_host_perm, n_sat);
    check(n_read > 0, "resistance reading happened");
    check(n_mac > 0, "MAC happened");
    check(n_map_remap > 0, "remapped mapping happened");
    check(n_map_plain > 0, "plain-order mapping happened");
    check(n_host_perm > 0, "host permutation happened");
    check(n_sat > 0, "ADC saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
