// tb_passive_neuron: self-checking test of the passive neuron model.
//
// Drives the phases the sequencer would produce (reset 1 tick, integration
// 2 ticks, redistribution 3 ticks per input bit, LSB first) and checks:
//  * the paper's transient example, input 8'b10111010 on one line with
//    weight 8'b11101100: after each bit, V_out (mapped to volts with the
//    0.234 V step that the first '1' bit produces) must match the values
//    printed on the waveform, 1.001, 0.884, 0.944, 0.855, 0.811, 0.789,
//    0.896, 0.831 V, within 3 mV;
//  * random integrator currents: the final drop must equal
//    sum_j 2^j sum_k 2^k q_(j,k) exactly (q = current * integration ticks);
//  * read mode: only the selected integrator integrates, for 11 ticks, and
//    the sampled drop is half of its voltage drop.
module tb_passive_neuron;
  import cim_pkg::*;

  localparam int N = NBITS, IW = GW + $clog2(ROWS);

  logic clk = 1'b0, rst_n = 1'b0;
  phase_e phase = PH_IDLE;
  mode_e mode = MODE_MAC;
  logic cs_init = 1'b0;
  logic [$clog2(N)-1:0] read_integ = '0;
  logic [N-1:0][IW-1:0] int_i = '0;
  logic [N-1:0][ACC_W-1:0] vc_drop;
  logic [ACC_W-1:0] vout_drop;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  passive_neuron dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic tick(input phase_e p, input int n);
    for (int t = 0; t < n; t++) begin
      phase = p;
      @(negedge clk);
      cs_init = 1'b0;
    end
  endtask

  // One MAC bit step with the given integrator currents
  task automatic bit_step(input logic [N-1:0][IW-1:0] cur, input bit first);
    cs_init = first;
    int_i = '0;
    tick(PH_RESET, 1);
    int_i = cur;
    tick(PH_INTEG, 2);
    int_i = '0;
    tick(PH_REDIST, 3);
  endtask

  initial begin
    logic [7:0] x, w;
    logic [N-1:0][IW-1:0] cur, on;
    longint s_full, exp_acc, s;
    real mv;
    int fig_mv [8] = '{1001, 884, 944, 855, 811, 789, 896, 831};
    logic [N-1:0][IW-1:0] rc [N];

    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // Transient example of the paper
    x = 8'b10111010; w = 8'b11101100;
    for (int k = 0; k < N; k++) on[k] = w[k] ? IW'(1 << GFRAC) : '0;
    s_full = 0;
    for (int k = 0; k < N; k++) s_full += longint'(on[k]) * 2 * (longint'(1) << k);
    mode = MODE_MAC;
    for (int j = 0; j < N; j++) begin
      cur = x[j] ? on : '0;
      bit_step(cur, j == 0);
      mv = 1001.0 - real'(vout_drop) * 234.0 / (real'(longint'(1) << N) * real'(s_full));
      check(mv > fig_mv[j] - 3.0 && mv < fig_mv[j] + 3.0,
            $sformatf("bit %0d: V_out %.1f mV, waveform shows %0d mV", j, mv, fig_mv[j]));
    end
    check(vout_drop == ACC_W'(longint'(186) * 236 * 128), "example dot product 186*236");

    // Random MACs
    for (int rep = 0; rep < 30; rep++) begin
      exp_acc = 0;
      for (int j = 0; j < N; j++) begin
        for (int k = 0; k < N; k++) rc[j][k] = IW'($urandom);
        s = 0;
        for (int k = 0; k < N; k++) s += longint'(rc[j][k]) * 2 * (longint'(1) << k);
        exp_acc += s << j;
      end
      for (int j = 0; j < N; j++) bit_step(rc[j], j == 0);
      check(vout_drop == ACC_W'(exp_acc),
            $sformatf("random MAC %0d: %0d, expected %0d", rep, vout_drop, exp_acc));
    end

    // Resistance reading
    mode = MODE_READ;
    for (int rep = 0; rep < 10; rep++) begin
      read_integ = $clog2(N)'($urandom);
      for (int k = 0; k < N; k++) cur[k] = IW'($urandom_range(10, 200));
      cs_init = 1'b1;
      int_i = '0;
      tick(PH_RESET, 1);
      int_i = cur;
      tick(PH_INTEG, 11);
      int_i = '0;
      for (int k = 0; k < N; k++)
        check(vc_drop[k] == ((k == int'(read_integ)) ? ACC_W'(11 * cur[k]) : '0),
              "only the selected integrator integrates");
      tick(PH_SAMPLE, 3);
      check(vout_drop == (ACC_W'(11 * cur[read_integ]) << (2 * N - 1)),
            "read: V_out drop is half the integrating voltage drop");
    end
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
