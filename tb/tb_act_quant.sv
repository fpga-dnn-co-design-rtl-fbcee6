// tb_act_quant: checks the activation IP (requantizing shift with rounding,
// then ReLU / ReLU4 / ReLU8) against a reference written with integer
// arithmetic, for edge values and 20000 random accumulators, shifts and modes.
`timescale 1ns/1ps
module tb_act_quant;
  import tile_arch_pkg::*;

  logic signed [31:0] acc;
  logic [4:0]         shift;
  act_mode_e          mode;
  logic [7:0]         q;
  int checks = 0, failures = 0;

  act_quant dut (.acc, .shift, .mode, .q);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_q(input longint a, input int s, input act_mode_e m);
    longint r, cap;
    // round half up: floor((a + 2^(s-1)) / 2^s)
    if (s == 0) r = a;
    else begin
      longint num = a + (longint'(1) << (s - 1));
      longint den = longint'(1) << s;
      r = (num >= 0) ? num / den : -((-num + den - 1) / den);
    end
    cap = (m == ACT_RELU4) ? 64 : (m == ACT_RELU8) ? 128 : 255;
    if (r < 0) r = 0;
    if (r > cap) r = cap;
    return int'(r);
  endfunction

  task automatic try(input int a, input int s, input act_mode_e m);
    acc = a; shift = 5'(s); mode = m;
    #1;
    checks++;
    if (int'(q) != ref_q(longint'(a), s, m)) begin
      failures++;
      if (failures < 10) $display("acc=%0d shift=%0d mode=%0d: q=%0d expected %0d",
                                  a, s, m, q, ref_q(longint'(a), s, m));
    end
  endtask

  initial begin
    act_mode_e modes [3] = '{ACT_RELU, ACT_RELU4, ACT_RELU8};
    foreach (modes[i]) begin
      try(0, 0, modes[i]); try(-1, 0, modes[i]); try(63, 0, modes[i]); try(64, 0, modes[i]);
      try(65, 0, modes[i]); try(300, 0, modes[i]); try(127, 1, modes[i]); try(129, 1, modes[i]);
      try(-2147483647 - 1, 31, modes[i]); try(2147483647, 31, modes[i]);
      try(2147483647, 0, modes[i]); try(1023, 4, modes[i]); try(1032, 4, modes[i]);
    end
    for (int n = 0; n < 20000; n++) begin
      int a;
      a = (n % 2) ? int'($urandom) : (int'($urandom % 40000) - 20000);
      try(a, int'($urandom % 32), modes[$urandom % 3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
