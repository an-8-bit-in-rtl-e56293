// tb_phase_sequencer: self-checking test of the phase and switch controller.
//
// Runs one MAC and one resistance-read operation. A small ADC stand-in
// answers adc_start with done in the sixth tick. Every tick the switch
// pattern is compared with the one expected for the phase (integration: S2;
// redistribution: S3+S4; read sampling: S2+S3+S4; reset: S1), and the
// testbench counts the ticks of each phase, the bit order (LSB first), the
// cs_init pulses and the total busy time: 54 ticks for an 8-bit MAC (540 ns
// at 100 MHz, i.e. 1.85 M operations/s) and 21 for a read.
module tb_phase_sequencer;
  import cim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  mode_e mode = MODE_MAC;
  logic adc_done;
  phase_e phase;
  mode_e cur_mode;
  sw_t sw;
  logic [2:0] bit_idx;
  logic wl_en, cs_init, adc_start, busy, done;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  phase_sequencer dut (.*);

  // ADC stand-in: done five ticks after the start tick
  int adc_cnt = 0;
  always_ff @(posedge clk) begin
    adc_done <= 1'b0;
    if (adc_start) adc_cnt <= 5;
    else if (adc_cnt > 0) begin
      adc_cnt <= adc_cnt - 1;
      if (adc_cnt == 2) adc_done <= 1'b1;
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // Monitor
  int n_busy, n_reset, n_integ, n_redist, n_sample, n_conv, n_csinit, n_adcstart;
  int bit_seen[$];
  logic [2:0] last_bit;
  bit monitor_on = 0;

  always @(negedge clk) if (monitor_on && busy) begin
    n_busy++;
    unique case (phase)
      PH_RESET:   begin n_reset++;  check(sw == '{1,0,0,0}, "reset switches"); end
      PH_INTEG:   begin n_integ++;  check(sw == '{0,1,0,0}, "integration switches");
                        check(wl_en, "wl_en during integration"); end
      PH_REDIST:  begin n_redist++; check(sw == '{0,0,1,1}, "redistribution switches"); end
      PH_SAMPLE:  begin n_sample++; check(sw == '{0,1,1,1}, "read sampling switches"); end
      PH_CONVERT: begin n_conv++;   check(sw == '{0,0,0,0}, "conversion switches"); end
      default: ;
    endcase
    if (phase != PH_INTEG) check(!wl_en, "wl_en only during integration");
    if (cs_init) n_csinit++;
    if (adc_start) n_adcstart++;
    if (phase == PH_INTEG && (bit_seen.size() == 0 || bit_idx != last_bit)) begin
      bit_seen.push_back(int'(bit_idx));
      last_bit = bit_idx;
    end
  end

  task automatic run_op(input mode_e m, input int exp_busy, input int exp_integ,
                        input int exp_redist, input int exp_sample, input int exp_bits);
    int t;
    n_busy = 0; n_reset = 0; n_integ = 0; n_redist = 0; n_sample = 0; n_conv = 0;
    n_csinit = 0; n_adcstart = 0; bit_seen.delete();
    @(negedge clk);
    mode = m; start = 1'b1; monitor_on = 1;
    @(negedge clk);
    start = 1'b0;
    t = 0;
    while (!done && t < 200) begin @(negedge clk); t++; end
    monitor_on = 0;
    check(done, "operation finished");
    check(n_busy == exp_busy, $sformatf("busy ticks %0d, expected %0d", n_busy, exp_busy));
    check(n_integ == exp_integ, $sformatf("integration ticks %0d, expected %0d", n_integ, exp_integ));
    check(n_redist == exp_redist, $sformatf("redistribution ticks %0d", n_redist));
    check(n_sample == exp_sample, $sformatf("sampling ticks %0d", n_sample));
    check(n_conv == 6, $sformatf("conversion ticks %0d", n_conv));
    check(n_csinit == 1, "one C_S initialisation per operation");
    check(n_adcstart == 1, "one ADC start per operation");
    check(bit_seen.size() == exp_bits, "number of input bits");
    foreach (bit_seen[i]) check(bit_seen[i] == i, "bits processed LSB first");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_op(MODE_MAC, 54, 16, 24, 0, 8);
    run_op(MODE_READ, 21, 11, 0, 3, 1);
    run_op(MODE_MAC, 54, 16, 24, 0, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
