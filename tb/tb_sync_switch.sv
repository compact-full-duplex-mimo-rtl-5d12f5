// tb_sync_switch: checks the NSP index switching rule for all four pass/fail
// combinations, results arriving together and one after the other, the
// one-cycle decision latency and that a failed window leaves tau unchanged.
module tb_sync_switch;
  import fdx_pkg::*;
  localparam int D_W = 18;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic r1v = 0, r2v = 0, p1 = 0, p2 = 0;
  logic [D_W-1:0] t1h = 0, t2h = 0;
  logic upd, fail, locked;
  logic [1:0] sc;
  logic [D_W-1:0] tau1, tau2;
  int checks = 0, failures = 0;

  sync_switch #(.D_W(D_W)) dut (
    .clk(clk), .rst_n(rst_n), .res1_valid(r1v), .tau_hat1(t1h), .pass1(p1),
    .res2_valid(r2v), .tau_hat2(t2h), .pass2(p2), .upd_valid(upd), .fail_valid(fail),
    .sel_case(sc), .tau1(tau1), .tau2(tau2), .locked(locked));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [D_W-1:0] exp1, exp2;
  initial begin
    exp1 = 0; exp2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!locked, "not locked after reset");
    for (int it = 0; it < 400; it++) begin
      logic a1, a2, split;
      logic [D_W-1:0] x1, x2;
      a1 = 1'($urandom); a2 = 1'($urandom); split = (it % 3) == 0;
      x1 = D_W'($urandom % 153600); x2 = D_W'($urandom % 153600);
      // reference model of the switching rule
      if (a1 && a2)      begin exp1 = x1; exp2 = x2; end
      else if (a1)       begin exp1 = x1; exp2 = x1; end
      else if (a2)       begin exp1 = x2; exp2 = x2; end
      @(negedge clk);
      if (split) begin
        r2v = 1; t2h = x2; p2 = a2;
        @(negedge clk);
        r2v = 0;
        check(!upd && !fail, "no decision with one result");
      end
      r1v = 1; t1h = x1; p1 = a1;
      if (!split) begin r2v = 1; t2h = x2; p2 = a2; end
      @(negedge clk);
      r1v = 0; r2v = 0;
      // decision visible one cycle after the last result
      check(upd == (a1 | a2), "upd pulse");
      check(fail == !(a1 | a2), "fail pulse");
      check(tau1 == exp1 && tau2 == exp2, $sformatf("tau %0d/%0d exp %0d/%0d case %b%b", tau1, tau2, exp1, exp2, a1, a2));
      if (a1 | a2) check(sc == (a1 && a2 ? 2'd1 : a1 ? 2'd2 : 2'd3), "case code");
      @(negedge clk);
      check(!upd && !fail, "single-cycle pulses");
    end
    check(locked, "locked after updates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
