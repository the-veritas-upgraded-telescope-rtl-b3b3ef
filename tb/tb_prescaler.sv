// tb_prescaler: random event pulses at prescale factors 0, 1, 2, 3 and 7; the
// passed pulses must be exactly events number N, 2N, 3N ...
module tb_prescaler;
  logic clk = 0, rst_n = 0, evt = 0, pass;
  logic [15:0] factor = 0;
  int checks = 0, failures = 0;

  prescaler #(.W(16)) dut (.clk, .rst_n, .factor, .evt, .pass);
  always #5 clk = ~clk;

  initial begin
    int fs[5] = '{0, 1, 2, 3, 7};
    int nev, npass, n;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (fs[i]) begin
      factor = 16'(fs[i]);
      n = (fs[i] <= 1) ? 1 : fs[i];
      nev = 0; npass = 0;
      for (int c = 0; c < 500; c++) begin
        @(negedge clk);
        evt = ($urandom % 3) == 0;
        #1;
        if (evt) nev++;
        checks++;
        if (pass !== (evt && (nev % n == 0))) begin
          failures++; $display("FAIL factor=%0d event %0d pass=%b", fs[i], nev, pass);
        end
      end
      evt = 0;
      // finish the current group so the next factor starts from zero
      while (nev % n != 0) begin @(negedge clk); evt = 1; #1; nev++; end
      @(negedge clk); evt = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
