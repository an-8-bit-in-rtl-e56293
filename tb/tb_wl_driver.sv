// tb_wl_driver: self-checking test of the bit-serial word-line driver.
//
// Loads random 8-bit inputs on all 256 word lines and checks, for every bit
// index, that word line i carries bit j of X_i while wl_en is high, that all
// lines are low with wl_en low, that read mode drives exactly the selected
// line, and that the register holds its inputs while x_in changes.
module tb_wl_driver;
  import cim_pkg::*;

  localparam int R = ROWS, N = NBITS;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, wl_en = 1'b0;
  logic [R-1:0][N-1:0] x_in, x_ref;
  mode_e mode = MODE_MAC;
  logic [$clog2(R)-1:0] read_row = '0;
  logic [$clog2(N)-1:0] bit_idx = '0;
  logic [R-1:0] wl;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  wl_driver dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    x_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < R; i++) x_ref[i] = N'($urandom);
      x_in = x_ref; load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      x_in = ~x_ref;   // must not reach the word lines without load
      mode = MODE_MAC;
      for (int j = 0; j < N; j++) begin
        bit_idx = j[$clog2(N)-1:0];
        wl_en = 1'b0; #1;
        check(wl == '0, "word lines idle without wl_en");
        wl_en = 1'b1; #1;
        for (int i = 0; i < R; i++)
          check(wl[i] == x_ref[i][j], $sformatf("wl[%0d] bit %0d", i, j));
      end
      mode = MODE_READ;
      for (int k = 0; k < 8; k++) begin
        read_row = $clog2(R)'($urandom);
        #1;
        check(wl == (R'(1) << read_row), "read mode drives one word line");
      end
      wl_en = 1'b0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
