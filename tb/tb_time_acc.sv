// tb_time_acc: a chain of four VTC stages plus a reference chain at 0 V, as
// in one column of four stacked macros. Checks that the stop time equals
// the sum of the stage delays T0 + TK * v / VDD, that the reference chain
// gives 4 * T0, and that nothing is released while en is low.
module tb_time_acc;
  import aidac_pkg::*;
  localparam int N = 4;
  localparam int unsigned T0 = 13000, TK = 100000;
  logic en;
  volt_t v [N];
  logic  vld [N+1], rvld [N+1];
  tfs_t  t [N+1], rt [N+1];
  int checks = 0, failures = 0;

  assign vld[0] = en;  assign t[0] = '0;
  assign rvld[0] = en; assign rt[0] = '0;
  for (genvar k = 0; k < N; k++) begin : g
    time_acc #(.T0_FS(T0), .TK_FS(TK)) u (
      .en(en), .start(vld[k]), .t_in(t[k]), .v(v[k]), .stop(vld[k+1]), .t_out(t[k+1]));
    time_acc #(.T0_FS(T0), .TK_FS(TK)) r (
      .en(en), .start(rvld[k]), .t_in(rt[k]), .v('0), .stop(rvld[k+1]), .t_out(rt[k+1]));
  end

  initial begin
    en = 0;
    for (int k = 0; k < N; k++) v[k] = VDD;
    #1;
    checks++;
    if (vld[N] || rvld[N]) begin failures++; $display("FAIL pulse while disabled"); end
    for (int n = 0; n < 50; n++) begin
      longint unsigned exp;
      en = 1;
      exp = 0;
      for (int k = 0; k < N; k++) begin
        v[k] = (n == 0) ? VDD : volt_t'($urandom_range(int'(VDD)));
        // delay of one stage: intrinsic part plus v / VDD of the full-scale gain
        exp += T0 + (longint'(v[k]) * TK) / (longint'(1) << VFRAC);
      end
      #1;
      checks += 3;
      if (!vld[N]) begin failures++; $display("FAIL no stop pulse"); end
      if (t[N] !== tfs_t'(exp)) begin failures++; $display("FAIL t=%0d exp %0d", t[N], exp); end
      if (rt[N] !== tfs_t'(N * T0)) begin failures++; $display("FAIL ref t=%0d", rt[N]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
