// tb_tdc: edge-to-edge timing. For random separations (start first, stop
// first, same tick) the result must equal stop time - start time in ticks;
// with a small counter width a missing stop must give overflow.
module tb_tdc;
  localparam int W = 9;
  logic clk = 0, rst_n = 0, arm = 0, start = 0, stop = 0, busy, valid, overflow;
  logic signed [W-1:0] value;
  int checks = 0, failures = 0;

  tdc #(.W(W)) dut (.clk, .rst_n, .arm, .start, .stop, .busy, .valid, .overflow, .value);
  always #5 clk = ~clk;

  task automatic measure(int t_start, int t_stop, bit expect_ovf);
    int waited;
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    for (int c = 0; c < 300; c++) begin
      start = (c >= t_start) && (c < t_start + 20);
      stop  = (c >= t_stop)  && (c < t_stop + 20) && !expect_ovf;
      @(negedge clk);
    end
    start = 0; stop = 0;
    waited = 0;
    while (!valid && waited < 1000) begin @(negedge clk); waited++; end
    checks++;
    if (expect_ovf) begin
      if (!(valid && overflow)) begin failures++; $display("FAIL overflow expected"); end
    end else if (!valid || overflow || value != W'(t_stop - t_start)) begin
      failures++; $display("FAIL start=%0d stop=%0d value=%0d", t_start, t_stop, value);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    measure(10, 10, 0);
    measure(10, 17, 0);
    measure(50, 3, 0);
    for (int i = 0; i < 20; i++) measure(5 + $urandom % 200, 5 + $urandom % 200, 0);
    measure(10, 0, 1);
    // a stop edge before arming does not count: stop held high from the start
    @(negedge clk); stop = 1; arm = 1; @(negedge clk); arm = 0;
    repeat (5) @(negedge clk); start = 1; repeat (5) @(negedge clk); stop = 0; @(negedge clk); stop = 1;
    repeat (5) @(negedge clk); start = 0; stop = 0;
    checks++;
    if (!valid || value != 6) begin failures++; $display("FAIL level-at-arm value=%0d", value); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
