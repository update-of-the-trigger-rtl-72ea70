// tb_adc_capture: checks the two-cycle ADC capture and out-of-range rule.
//
// Random 12-bit samples with a random out-of-range flag are applied every
// clock; the output after the second clock edge is compared with the input, or with
// 4095 / 0 when that input was flagged out of range with MSB 1 / 0.
module tb_adc_capture;
  import trig_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n;
  sample_t adc_data;
  logic    adc_otr;
  sample_t sample;

  int checks = 0;
  int failures = 0;

  adc_capture dut (.*);

  always #10 clk = ~clk;

  initial begin
    #200_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample_t hist_d[$];
    logic    hist_o[$];
    sample_t exp_s;
    adc_data = '0;
    adc_otr  = 1'b0;
    rst_n    = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      adc_data = sample_t'($urandom);
      adc_otr  = ($urandom_range(0, 7) == 0);
      hist_d.push_back(adc_data);
      hist_o.push_back(adc_otr);
      @(posedge clk);
      #1;
      if (hist_d.size() == 2) begin
        exp_s = hist_o[0] ? (hist_d[0][11] ? 12'hFFF : 12'h000) : hist_d[0];
        void'(hist_d.pop_front());
        void'(hist_o.pop_front());
        checks++;
        if (sample !== exp_s) begin
          failures++;
          $display("FAIL: cycle %0d got %0d expected %0d", i, sample, exp_s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
