// tb_coinc_cell: the 3-fold rule and the detune overlap requirement.
// Part 1: random neighbour/centre levels against a cycle model (centre and at
// least two neighbours; overlap run length >= detune -> trig next cycle).
// Part 2: the coincidence gate. Three 180-tick (13 ns) pulses, the second and
// third delayed by dt; with detune D the cell must fire exactly when the
// overlap 180-dt is at least D+1 ticks.
module tb_coinc_cell;
  logic clk = 0, rst_n = 0, center = 0, trig;
  logic [5:0] nbr = 0;
  logic [7:0] detune = 0;
  int checks = 0, failures = 0;

  coinc_cell #(.DETUNE_W(8)) dut (.clk, .rst_n, .center, .nbr, .detune, .trig);
  always #5 clk = ~clk;

  function automatic bit rule(logic c, logic [5:0] n);
    return c && ($countones(n) >= 2);
  endfunction

  initial begin
    int run, exp_trig, fired;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // part 1
    for (int dsel = 0; dsel < 3; dsel++) begin
      detune = 8'(dsel * 3);
      run = 0; exp_trig = 0;
      for (int c = 0; c < 400; c++) begin
        @(negedge clk);
        if (c > 0) begin
          checks++;
          if (trig !== exp_trig[0]) begin failures++; $display("FAIL p1 c=%0d trig=%b exp=%0d", c, trig, exp_trig); end
        end
        if ($urandom % 6 == 0) center = ~center;
        if ($urandom % 3 == 0) nbr = 6'($urandom);
        // model of the clock edge that follows
        exp_trig = rule(center, nbr) && (run >= detune);
        run = rule(center, nbr) ? run + 1 : 0;
      end
      center = 0; nbr = 0;
      repeat (2) @(posedge clk);
    end
    // part 2: gate width
    for (int di = 0; di < 3; di++) begin
      for (int dt = 0; dt < 180; dt += 7) begin
        detune = 8'(di == 0 ? 0 : (di == 1 ? 103 : 138));
        fired = 0;
        for (int c = 0; c < 180 + dt + 5; c++) begin
          @(negedge clk);
          center = (c < 180);
          nbr[0] = (c >= dt && c < 180 + dt);
          nbr[3] = (c >= dt && c < 180 + dt);
          if (trig) fired = 1;
        end
        center = 0; nbr = 0;
        checks++;
        if (fired != ((180 - dt) >= detune + 1)) begin
          failures++; $display("FAIL gate detune=%0d dt=%0d fired=%0d", detune, dt, fired);
        end
      end
    end
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
