// tb_adc_delay: self-checking test of the per-chip ADC alignment delay.
// 8 inputs in 2 chips of 4; random samples every clock. For random delay settings,
// changed every 50 clocks, every output must equal its input from 1 + delay clocks
// before, as recorded by the testbench.
module tb_adc_delay;
  localparam int N_IN = 8, IPC = 4, DMAX = 7, NCHIP = 2, NT = 2000;
  logic clk = 0;
  logic signed [N_IN-1:0][7:0] adc_in = '0, adc_out;
  logic [NCHIP-1:0][2:0] delay = '0;
  int checks = 0, failures = 0;

  adc_delay #(.N_IN(N_IN), .INPUTS_PER_CHIP(IPC), .DMAX(DMAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N_IN-1:0][7:0] hist [NT];
  initial begin
    for (int n = 0; n < NT; n++) begin
      @(negedge clk);
      if (n % 50 == 0) for (int c = 0; c < NCHIP; c++) delay[c] = 3'($urandom_range(0, DMAX));
      #1;
      if (n >= DMAX + 2)
        for (int i = 0; i < N_IN; i++) begin
          checks++;
          if (adc_out[i] != hist[n - 1 - int'(delay[i / IPC])][i]) begin
            failures++;
            $display("FAIL: n=%0d input %0d delay %0d", n, i, delay[i / IPC]);
          end
        end
      for (int i = 0; i < N_IN; i++) adc_in[i] = 8'($urandom);
      hist[n] = adc_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
