// tb_adc: self-checking test of the ADC model's transfer function and timing.
//
// Checks the paper's worked example (a drop corresponding to 186 * 236 with
// the full scale of one input line gives code 171 = 8'b10101011), random
// values against floor(vin * 256 / fs) with saturation at 255, and that done
// comes in the sixth tick counted from the start tick.
module tb_adc;
  import cim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic [ACC_W-1:0] vin = '0, fs = '0;
  logic [ADC_BITS-1:0] code;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  adc dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic convert(input longint unsigned v, input longint unsigned f,
                         input int exp_code);
    int t;
    @(negedge clk);
    vin = ACC_W'(v); fs = ACC_W'(f); start = 1'b1;
    @(negedge clk);
    start = 1'b0; vin = '0;
    t = 1;
    while (!done && t < 20) begin @(negedge clk); t++; end
    check(t == 5, $sformatf("done %0d ticks after the start tick, expected 5", t));
    check(int'(code) == exp_code, $sformatf("code %0d, expected %0d", code, exp_code));
  endtask

  initial begin
    longint unsigned v, f, e;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // 8-bit example: one input line, all cells nominal, two integration ticks
    convert(64'd186 * 64'd236 * 64'd128, 64'd128 << 16, 171);
    convert(64'd255 * 64'd255 * 64'd128, 64'd128 << 16, 254);
    convert(64'd1000, 64'd500, 255);    // saturation
    for (int k = 0; k < 40; k++) begin
      f = 64'($urandom_range(1, 1 << 30));
      v = 64'($urandom_range(0, 1 << 30));
      e = (v * 256) / f;
      if (e > 255) e = 255;
      convert(v, f, int'(e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
