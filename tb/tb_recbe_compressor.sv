// tb_recbe_compressor: random ADC samples with random gaps in sample_valid.
// A reference model sums each group of three pedestal-subtracted samples and
// quantises the sum with the three thresholds; every code and the exact
// cycle of code_valid (one clock after the third sample) are checked.
module tb_recbe_compressor;
  import cottri_pkg::*;
  logic clk = 0, rst_n = 0, sample_valid = 0;
  logic [9:0] adc = 0, pedestal = 10'd20;
  logic [11:0] th [3];
  logic code_valid;
  ecode_t code;
  int checks = 0, failures = 0;

  recbe_compressor dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned acc, n, expect_valid_at, cyc;
    ecode_t exp_code;
    th[0] = 12'd60; th[1] = 12'd300; th[2] = 12'd900;
    acc = 0; n = 0; expect_valid_at = 0; cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      cyc++;
      // check the output produced at the last rising edge
      if (expect_valid_at == cyc) begin
        checks++;
        if (!code_valid || code != exp_code) begin
          failures++;
          $display("mismatch cyc %0d valid=%0b code=%0d exp=%0d", cyc, code_valid, code, exp_code);
        end
      end else begin
        checks++;
        if (code_valid) begin failures++; $display("spurious code_valid at %0d", cyc); end
      end
      sample_valid = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 3))
        0: adc = 10'($urandom_range(0, 40));
        1: adc = 10'($urandom_range(0, 200));
        2: adc = 10'($urandom_range(100, 400));
        default: adc = 10'($urandom_range(0, 1023));
      endcase
      if (sample_valid) begin
        acc += (adc > pedestal) ? adc - pedestal : 0;
        n++;
        if (n == 3) begin
          if (acc < th[0]) exp_code = E_NONE;
          else if (acc < th[1]) exp_code = E_LOW;
          else if (acc < th[2]) exp_code = E_MIP;
          else exp_code = E_LARGE;
          expect_valid_at = cyc + 1;
          acc = 0; n = 0;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
