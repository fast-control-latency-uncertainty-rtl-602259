// tb_tdc -- self-checking testbench of the TDC.
//
// work_clk has the 24 ns period; pll_x2_4phase makes the four df_clk phases.
// hit_src_clk is work_clk delayed by D. For delays in the middle of each
// 3 ns bin (and random delays kept 400 ps away from bin edges) it checks
// that every code v is a thermometer code with at most one transition whose
// position gives bin floor(D / 3 ns): the number of bits equal to v[0] must
// be (bin - 3) mod 8, with 0 read as 8. It also checks that v_valid comes
// exactly once every two work-clock cycles.
`timescale 1ns/1ps
module tb_tdc;
  localparam int unsigned T = 24000;

  logic       rst_n = 1'b0;
  logic       work_clk = 1'b0;
  logic       hit_src_clk = 1'b0;
  logic [3:0] df_clk;
  logic [7:0] v;
  logic       v_valid;
  int unsigned dly = 1500;
  int checks = 0, failures = 0;

  initial forever #(T / 2 * 1ps) work_clk = ~work_clk;

  always @(posedge work_clk) begin
    fork
      begin
        automatic int unsigned d = dly;
        #(d * 1ps) hit_src_clk <= 1'b1;
        #((T / 2) * 1ps) hit_src_clk <= 1'b0;
      end
    join_none
  end

  pll_x2_4phase #(.PERIOD_PS(T)) u_pll (.clk_in(work_clk), .df_clk(df_clk));
  tdc dut (.rst_n, .work_clk, .df_clk, .hit_src_clk, .v, .v_valid);

  function automatic int transitions(logic [7:0] x);
    int n = 0;
    for (int k = 1; k < 8; k++) if (x[k] != x[k-1]) n++;
    return n;
  endfunction

  function automatic int same_as_first(logic [7:0] x);
    int n = 0;
    for (int k = 0; k < 8; k++) if (x[k] == x[0]) n++;
    return n;
  endfunction

  task automatic measure(input int unsigned d);
    int bin, exp_same, gap, last, nvalid;
    dly = d;
    repeat (8) @(posedge work_clk);
    bin = int'(d % T) / 3000;
    exp_same = (bin + 5) % 8;
    if (exp_same == 0) exp_same = 8;
    nvalid = 0; last = -1; gap = 0;
    for (int c = 0; c < 40; c++) begin
      @(posedge work_clk); #1ps;
      if (v_valid) begin
        checks++;
        if (transitions(v) > 1 || same_as_first(v) != exp_same) begin
          failures++;
          $display("FAIL d=%0d v=%b expected %0d bits equal to v[0]", d, v, exp_same);
        end
        if (last >= 0) begin
          checks++;
          if (c - last != 2) begin
            failures++;
            $display("FAIL v_valid spacing %0d", c - last);
          end
        end
        last = c;
        nvalid++;
      end
    end
    checks++;
    if (nvalid != 20) begin failures++; $display("FAIL %0d valids in 40 cycles", nvalid); end
  endtask

  initial begin
    #(100ns) rst_n = 1'b1;
    for (int b = 0; b < 8; b++) measure(b * 3000 + 1500);
    for (int i = 0; i < 30; i++) begin
      int unsigned d;
      d = $urandom_range(T - 1);
      if (d % 3000 < 400 || d % 3000 > 2600) d = (d / 3000) * 3000 + 1500;
      measure(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2ms);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
