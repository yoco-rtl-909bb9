// tb_row_driver: a chain of three row drivers as between three macros.
// Checks the reset switch, transparent load through the chain, holding
// when le is low, and the EN gating of the local outputs.
module tb_row_driver;
  localparam int W = 8, N = 3;
  logic s, le, en;
  logic [W-1:0] d;
  logic [W-1:0] post [N];
  logic [W-1:0] loc  [N];
  int checks = 0, failures = 0;

  for (genvar k = 0; k < N; k++) begin : g
    row_driver #(.WIDTH(W)) u (
      .s(s), .le(le), .en(en), .d(k == 0 ? d : post[k == 0 ? 0 : k-1]),
      .to_post(post[k]), .to_local(loc[k])
    );
  end

  task automatic expect_all(input logic [W-1:0] p, input logic [W-1:0] l, input string what);
    for (int k = 0; k < N; k++) begin
      checks += 2;
      if (post[k] !== p) begin failures++; $display("FAIL %s post[%0d]=%h exp %h", what, k, post[k], p); end
      if (loc[k]  !== l) begin failures++; $display("FAIL %s local[%0d]=%h exp %h", what, k, loc[k], l); end
    end
  endtask

  initial begin
    s = 1; le = 0; en = 1; d = 8'hA5;
    #1 expect_all(8'h00, 8'h00, "reset");
    s = 0; #1 expect_all(8'h00, 8'h00, "reset held");
    for (int n = 0; n < 20; n++) begin
      logic [W-1:0] v;
      v = W'($urandom);
      d = v; le = 1; en = 1;
      #1 expect_all(v, v, "load");
      le = 0; d = ~v;
      #1 expect_all(v, v, "hold");
      en = 0;
      #1 expect_all(v, 8'h00, "gated");
    end
    s = 1; #1 s = 0; en = 1;
    #1 expect_all(8'h00, 8'h00, "second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
