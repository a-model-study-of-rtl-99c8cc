// tb_ldo_pmos_array: test of the PMOS array model.
// Random gate patterns and voltages. The expected current is counted here
// bit by bit: devices with a low gate, times the per-device conductance for
// 3.5 mA from 128 devices at a 0.3 V drop, times (vin - vout). It is checked
// to a relative error of 1e-9. Also checked: full load at 0.7 V gives
// 3.5 mA, and there is no current when vout > vin.
`timescale 1ns/1ps
module tb_ldo_pmos_array;
  localparam int N = 128;
  logic [N-1:0] gate_n;
  real vin = 1.0, vout = 0.7, iout, iexp;
  int checks = 0, failures = 0;

  ldo_pmos_array dut (.gate_n(gate_n), .vin(vin), .vout(vout), .iout(iout));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_close(real got, real want, string what);
    real tol;
    tol = 1.0e-9 * ((want < 0.0 ? -want : want) + 1.0e-6);
    checks++;
    if (got - want > tol || want - got > tol) begin
      failures++;
      $display("%s: got %e A, expected %e A", what, got, want);
    end
  endtask

  initial begin
    gate_n = '0; vin = 1.0; vout = 0.7; #1;
    check_close(iout, 3.5e-3, "all on at 0.7 V");
    gate_n = '1; #1;
    check_close(iout, 0.0, "all off");
    for (int i = 0; i < 300; i++) begin
      int cnt;
      for (int w = 0; w < N / 32; w++) gate_n[w*32 +: 32] = $urandom;
      vin  = 1.0;
      vout = real'($urandom_range(0, 1000)) * 1.0e-3;
      cnt = 0;
      for (int j = 0; j < N; j++) if (gate_n[j] == 1'b0) cnt++;
      iexp = real'(cnt) * (3.5e-3 / 128.0 / 0.3) * (vin - vout);
      #1;
      check_close(iout, iexp, $sformatf("pattern %0d (%0d on)", i, cnt));
    end
    gate_n = '0; vout = 1.05; #1;
    check_close(iout, 0.0, "vout above vin");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
