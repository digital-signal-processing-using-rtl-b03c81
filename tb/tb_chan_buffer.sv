// tb_chan_buffer: self-checking test of channel selection and the two-bank buffer,
// at 8 inputs, 32-point frames, 6 selected channels and 2 spectra per group.
// Spectra arrive in bit-reversed bin order as the FFT delivers them, each byte a
// known function of (spectrum, bin, input). Checked: the right channels are kept at
// the right rows, a bank is marked full after each group with the number of its
// first spectrum, a group that finds its bank still full is dropped and counted,
// and a changed chan_start moves the window.
module tb_chan_buffer;
  localparam int N_IN = 8, NFFT = 32, NCHAN = 6, TIMES = 2, BW = 5;
  localparam int ROWS = 2 * TIMES * NCHAN, AW = $clog2(ROWS);
  logic clk = 0, rst_n = 0, in_valid = 0, in_sop = 0;
  logic [BW-1:0] chan_start = 5, in_bin = 0;
  leda_pkg::q4_t [N_IN-1:0] in_data = '0;
  logic [1:0] bank_full, bank_release = 0;
  logic [63:0] bank_seq [2];
  logic [AW-1:0] rd_addr [2];
  logic [8*N_IN-1:0] rd_data [2];
  logic drop;
  logic [31:0] drop_cnt;
  int checks = 0, failures = 0;

  chan_buffer #(.N_IN(N_IN), .NFFT(NFFT), .NCHAN(NCHAN), .TIMES(TIMES), .NRD(2)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [7:0] val(int f, int b, int i);
    return 8'((f * 37 + b * 5 + i * 11) & 255);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_frame(input int f);
    for (int n = 0; n < NFFT; n++) begin
      int b;
      b = leda_pkg::bitrev(n, BW);
      in_valid = 1; in_sop = (n == 0); in_bin = BW'(b);
      for (int i = 0; i < N_IN; i++) in_data[i] = val(f, b, i);
      @(negedge clk);
    end
    in_valid = 0; in_sop = 0;
  endtask

  // compare bank contents with spectra f0, f0+1 and window start cs
  task automatic check_bank(input int bank, input int f0, input int cs);
    for (int t = 0; t < TIMES; t++)
      for (int c = 0; c < NCHAN; c++) begin
        rd_addr[bank % 2] = AW'((bank * TIMES + t) * NCHAN + c);
        #1;
        for (int i = 0; i < N_IN; i++)
          check(rd_data[bank % 2][8*i +: 8] == val(f0 + t, cs + c, i),
                $sformatf("bank %0d t %0d chan %0d input %0d", bank, t, c, i));
      end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_addr[0] = 0; rd_addr[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    send_frame(0);
    check(bank_full == 2'b00, "no bank full after one spectrum");
    send_frame(1);
    @(negedge clk);
    check(bank_full == 2'b01 && bank_seq[0] == 0, "bank 0 full, seq 0");
    check_bank(0, 0, 5);
    send_frame(2); send_frame(3);
    @(negedge clk);
    check(bank_full == 2'b11 && bank_seq[1] == 2, "bank 1 full, seq 2");
    check_bank(1, 2, 5);
    // release bank 1 only: the next group needs bank 0, which is still full
    @(negedge clk) bank_release = 2'b10;
    @(negedge clk) bank_release = 2'b00;
    send_frame(4); send_frame(5);
    @(negedge clk);
    check(drop_cnt == 1, $sformatf("one group dropped, drop_cnt=%0d", drop_cnt));
    check(bank_full == 2'b01, "dropped group marks nothing full");
    check_bank(0, 0, 5);  // bank 0 untouched by the dropped group
    @(negedge clk) bank_release = 2'b01;
    @(negedge clk) bank_release = 2'b00;
    // move the window
    chan_start = 9;
    send_frame(6); send_frame(7);
    @(negedge clk);
    check(bank_full == 2'b01 && bank_seq[0] == 6, "bank 0 refilled with spectra 6,7");
    check_bank(0, 6, 9);
    check(drop_cnt == 1, "no more drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
