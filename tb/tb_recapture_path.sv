// tb_recapture_path -- self-checking testbench of the re-capture path.
//
// ref_clk has the 24 ns period. rx_clk is ref_clk delayed by D and rxd
// carries a word counter that changes 1 ns after each rx_clk rising edge.
// phi is ref_clk delayed by P (phi_180 its inverse). For random D, P and rf
// (kept away from coincident edges) the testbench predicts stable_data at
// every ref_clk edge from the edge times alone: the aligned word at time t is
// the one that entered at the last rx_clk edge before t, the sample is taken
// at the last falling edge of phi (rf = 0) or phi_180 (rf = 1) before the
// ref_clk edge.
`timescale 1ns/1ps
module tb_recapture_path;
  localparam longint T = 24000;

  logic ref_clk = 1'b0, rst_n = 1'b0;
  logic rx_clk = 1'b0, phi = 1'b0, phi_180;
  logic [15:0] rxd = '0, stable_data;
  logic rf = 1'b0;
  logic [15:0] word = '0;
  int unsigned D = 5000, P = 3000;
  int checks = 0, failures = 0;

  initial forever #(T / 2 * 1ps) ref_clk = ~ref_clk;

  always @(posedge ref_clk) begin
    word <= word + 16'd1;
    fork
      begin
        automatic int unsigned d = D;
        automatic logic [15:0] w = word;
        #(d * 1ps) rx_clk <= 1'b1;
        #(1ns) rxd <= w;
        #((T / 2 - 1000) * 1ps) rx_clk <= 1'b0;
      end
      begin
        automatic int unsigned p = P;
        #(p * 1ps) phi <= 1'b1;
        #((T / 2) * 1ps) phi <= 1'b0;
      end
    join_none
  end
  assign phi_180 = ~phi;

  recapture_path dut (.rst_n, .rx_clk, .rxd, .phi, .phi_180, .ref_clk, .rf, .stable_data);

  // rxd value present at absolute time t (ps): the counter value k sent at
  // the ref_clk edge T/2 + k*T reaches rxd at T/2 + k*T + D + 1 ns.
  function automatic longint rxd_word_at(longint t);
    return (t - D - 1000 - T / 2) / T;
  endfunction

  function automatic longint expected_at(longint tj);
    longint t_rx, t_s, edge_off;
    // last falling edge of the chosen clock before tj
    edge_off = rf ? longint'(P) : longint'(P) + T / 2;
    t_s = ((tj - T / 2 - edge_off) / T) * T + T / 2 + edge_off;
    if (t_s >= tj) t_s -= T;
    // aligned register: value captured at the last rx_clk rising edge before t_s
    t_rx = ((t_s - T / 2 - D) / T) * T + T / 2 + D;
    if (t_rx >= t_s) t_rx -= T;
    return rxd_word_at(t_rx - 1);
  endfunction

  task automatic run(int cycles);
    longint tj, e;
    repeat (6) @(posedge ref_clk);
    for (int c = 0; c < cycles; c++) begin
      @(posedge ref_clk);
      tj = longint'($time / 1ps);
      #1ps;
      e = expected_at(tj);
      checks++;
      if (stable_data != 16'(e)) begin
        failures++;
        $display("FAIL D=%0d P=%0d rf=%0d t=%0d got %0d expected %0d", D, P, rf, tj, stable_data, 16'(e));
      end
    end
  endtask

  function automatic bit near(int unsigned a, int unsigned b);
    int unsigned x = (a + 2 * T - b) % (T / 2);
    return x < 700 || x > T / 2 - 700;
  endfunction

  initial begin
    #(50ns) rst_n = 1'b1;
    for (int i = 0; i < 40; i++) begin
      D = $urandom_range(T - 1);
      P = $urandom_range(T - 1);
      rf = 1'($urandom_range(1));
      if (near(D, P) || near(D + 1000, P) || near(P, 0) || near(D, 0) || near(D + 1000, 0)) continue;
      run(20);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1ms);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
