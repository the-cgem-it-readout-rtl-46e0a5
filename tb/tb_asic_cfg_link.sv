// tb_asic_cfg_link: a behavioural SPI slave per TIGER captures mosi on rising
// sclk and returns a reply frame on miso. Checks the frame received by the
// selected TIGER only, the reply captured by the master, and the sclk period
// (18 clocks of 6 ns = 108 ns, i.e. at most 10 MHz).
`timescale 1ns/1ps
module tb_asic_cfg_link;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        cmd_valid, cmd_ready, rsp_valid, sclk, mosi, miso;
  logic [0:0]  cmd_tiger;
  logic [31:0] cmd_data, rsp_data;
  logic [1:0]  cs_n;

  asic_cfg_link dut (.clk, .rst_n, .cmd_valid, .cmd_tiger, .cmd_data, .cmd_ready, .rsp_valid,
    .rsp_data, .sclk, .mosi, .cs_n, .miso);

  // slaves
  logic [31:0] rx [2];
  int          nbits [2];
  logic [31:0] reply [2];
  int          bitpos [2];
  always @(posedge sclk) for (int t = 0; t < 2; t++) if (!cs_n[t]) begin
    rx[t] = {rx[t][30:0], mosi};
    nbits[t]++;
  end
  // miso: slave t drives bit (31 - bitpos) while selected, advancing on falling sclk
  always @(negedge sclk) for (int t = 0; t < 2; t++) if (!cs_n[t]) bitpos[t]++;
  always_comb begin
    miso = 1'b0;
    for (int t = 0; t < 2; t++) if (!cs_n[t] && bitpos[t] < 32) miso = reply[t][31 - bitpos[t]];
  end
  always @(negedge cs_n[0]) bitpos[0] = 0;
  always @(negedge cs_n[1]) bitpos[1] = 0;

  // sclk period
  int last_rise = -1, nper = 0, per_ok = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge sclk) begin
    if (last_rise >= 0 && cyc - last_rise < 40) begin
      nper++;
      if (cyc - last_rise == 18) per_ok++;
    end
    last_rise = cyc;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd_tiger = 0; cmd_data = 0;
    nbits = '{0, 0}; rx = '{0, 0}; bitpos = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 6; k++) begin
      logic [31:0] d;
      int t;
      t = k % 2;
      d = $urandom;
      reply[t] = $urandom;
      nbits = '{0, 0};
      last_rise = -1;
      while (!cmd_ready) @(negedge clk);
      @(negedge clk);
      cmd_valid = 1; cmd_tiger = 1'(t); cmd_data = d;
      @(negedge clk) cmd_valid = 0;
      while (!rsp_valid) @(negedge clk);
      check(rx[t] == d, $sformatf("TIGER %0d received frame %h (%h)", t, d, rx[t]));
      check(nbits[t] == 32 && nbits[1-t] == 0, "only the selected TIGER is clocked");
      check(rsp_data == reply[t], $sformatf("reply %h (%h)", reply[t], rsp_data));
    end
    check(nper > 100 && per_ok == nper, $sformatf("sclk period 18 clocks (%0d/%0d)", per_ok, nper));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
