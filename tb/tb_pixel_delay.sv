// tb_pixel_delay: random L1 stream and enable through the delay line at
// several delay settings (including one above the range, which clamps).
// Reference: a history of din&en; dout at cycle t must equal the history entry
// 1 + min(delay, TAPS-1) cycles back.
module tb_pixel_delay;
  localparam int TAPS = 20;
  logic clk = 0, rst_n = 0, din = 0, en = 1, dout;
  logic [7:0] delay = 0;
  int checks = 0, failures = 0;
  logic hist [0:511];
  int t = 0;

  pixel_delay #(.TAPS(TAPS), .DELAY_W(8)) dut (.clk, .rst_n, .din, .en, .delay, .dout);

  always #5 clk = ~clk;

  initial begin
    int settings[6] = '{0, 1, 5, 13, 19, 40};
    int eff;
    for (int i = 0; i < 512; i++) hist[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (settings[s]) begin
      delay = 8'(settings[s]);
      eff = (settings[s] > TAPS - 1) ? TAPS - 1 : settings[s];
      for (int c = 0; c < 150; c++) begin
        @(negedge clk);
        if (c > TAPS + 2) begin
          checks++;
          if (dout !== hist[(t - 1 - eff) & 511]) begin
            failures++;
            $display("FAIL delay=%0d c=%0d dout=%b exp=%b", settings[s], c, dout, hist[(t - 1 - eff) & 511]);
          end
        end
        din = ($urandom % 4) != 0 ? ~din : din;
        en  = ($urandom % 8) != 0;
        hist[t & 511] = din & en;
        @(posedge clk);
        t++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
