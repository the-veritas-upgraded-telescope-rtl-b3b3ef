// tb_ctrl_regs: register file behind the control bus (12 pixels). Checks reset
// values, write/read-back of pixel words and every setting register, that the
// configuration outputs follow the writes, the one-cycle TDC arm pulse, the
// read-only monitoring registers, and the one-cycle read latency.
module tb_ctrl_regs;
  import l2trig_pkg::*;
  localparam int NPIX = 12;
  logic clk = 0, rst_n = 0;
  bus_req_t req = '0;
  bus_rsp_t rsp;
  logic [NPIX-1:0] pix_en;
  logic [7:0] pix_delay [NPIX], detune, tdc_sel [2];
  logic [15:0] prescale, l2_count = 16'd321;
  logic tdc_arm, mom_busy = 1;
  logic [31:0] gate_len;
  logic [8:0] mon_pix [3];
  logic [5:0] mon_mask [3];
  logic [23:0] rate [NPIX], mom [6];
  logic [1:0] tdc_valid = 2'b10, tdc_ovf = 2'b00;
  logic [15:0] tdc_value [2];
  int checks = 0, failures = 0;

  ctrl_regs #(.NPIX(NPIX), .GATE_RESET(32'd1000)) dut (.clk, .rst_n, .req, .rsp, .pix_en, .pix_delay, .detune,
    .prescale, .tdc_sel, .tdc_arm, .gate_len, .mon_pix, .mon_mask, .rate, .tdc_valid, .tdc_ovf,
    .tdc_value, .l2_count, .mom_busy, .mom);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); req = '{wr: 1, rd: 0, addr: a, wdata: d}; @(negedge clk); req = '0;
  endtask

  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); req = '{wr: 0, rd: 1, addr: a, wdata: 0};
    @(negedge clk); req = '0;
    chk(rsp.rvalid == 1, "rvalid one cycle after rd");
    d = rsp.rdata;
    @(negedge clk);
    chk(rsp.rvalid == 0, "rvalid for one cycle");
  endtask

  initial begin
    logic [31:0] d;
    bit armed;
    for (int p = 0; p < NPIX; p++) rate[p] = 24'(1000 + p * 7);
    for (int i = 0; i < 6; i++) mom[i] = 24'(-i * 5);
    tdc_value[0] = 16'hfff9; tdc_value[1] = 16'd42;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(pix_en == '1 && pix_delay[3] == 0 && detune == 0 && prescale == 1 && gate_len == 1000, "reset values");
    for (int p = 0; p < NPIX; p++) wr(A_PIXEL + 12'(p), {16'b0, 8'(p * 11), 7'b0, 1'(p % 3 != 0)});
    for (int p = 0; p < NPIX; p++) begin
      chk(pix_en[p] == (p % 3 != 0) && pix_delay[p] == 8'(p * 11), $sformatf("pixel %0d outputs", p));
      rd(A_PIXEL + 12'(p), d);
      chk(d == {16'b0, 8'(p * 11), 7'b0, 1'(p % 3 != 0)}, $sformatf("pixel %0d readback %h", p, d));
      rd(A_RATE + 12'(p), d);
      chk(d == 1000 + p * 7, "rate readback");
    end
    wr(A_DETUNE, 32'd77);    chk(detune == 77, "detune");
    wr(A_PRESCALE, 32'd9);   chk(prescale == 9, "prescale");
    wr(A_GATE, 32'd123456);  chk(gate_len == 123456, "gate");
    wr(A_TDCSEL, 32'h2110);  chk(tdc_sel[0] == 8'h10 && tdc_sel[1] == 8'h21, "tdc select");
    for (int g = 0; g < 3; g++) begin
      wr(A_MONSEL + 12'(g), {10'b0, 6'(g + 5), 7'b0, 9'(g * 3 + 1)});
      chk(mon_pix[g] == 9'(g * 3 + 1) && mon_mask[g] == 6'(g + 5), "monitor select");
      rd(A_MONSEL + 12'(g), d);
      chk(d == {10'b0, 6'(g + 5), 7'b0, 9'(g * 3 + 1)}, "monitor readback");
    end
    rd(A_DETUNE, d);   chk(d == 77, "detune readback");
    rd(A_PRESCALE, d); chk(d == 9, "prescale readback");
    rd(A_GATE, d);     chk(d == 123456, "gate readback");
    rd(A_TDCSEL, d);   chk(d == 32'h2110, "tdcsel readback");
    rd(A_STATUS, d);   chk(d == {15'b0, 1'b1, 16'd321}, "status");
    rd(A_TDC, d);      chk(d == {1'b0, 1'b0, 14'b0, 16'hfff9}, "tdc0 readback");
    rd(A_TDC + 1, d);  chk(d == {1'b1, 1'b0, 14'b0, 16'd42}, "tdc1 readback");
    for (int i = 0; i < 6; i++) begin rd(A_MOMENT + 12'(i), d); chk(d == 32'(-i * 5), "moment readback"); end
    // arm pulse
    @(negedge clk); req = '{wr: 1, rd: 0, addr: A_CMD, wdata: 1}; @(negedge clk); req = '0;
    chk(tdc_arm == 1, "arm pulse high");
    @(negedge clk);
    chk(tdc_arm == 0, "arm pulse one cycle");
    // a write outside all registers changes nothing
    wr(12'h7ff, 32'hffffffff);
    chk(detune == 77 && prescale == 9 && pix_delay[0] == 0, "stray write ignored");
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
