// tb_higraph_ctrl: drives the controller's status inputs by hand. Checks the
// scatter -> apply sequence, that scatter does not end while the pipeline is
// busy or a reader has work, that apply waits for the apply units, the stop
// when no vertex is left active, the stop at max_iter, and the immediate done
// when started with nothing active.
module tb_higraph_ctrl;
  import higraph_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, any_active, fetch_done, pipe_busy, apply_done;
  logic scatter_go, apply_go, done;
  logic [15:0] max_iter, iter;
  phase_e phase;
  int checks = 0, failures = 0;

  higraph_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one iteration; the reader and the pipeline stay busy for a while
  task automatic one_iter(bit active_after);
    int n;
    n = 0;
    while (!scatter_go && n < 20) begin @(negedge clk); n++; end
    check(scatter_go && phase == PH_SCATTER, "scatter_go");
    fetch_done = 0; pipe_busy = 1;
    repeat (5) begin @(negedge clk); check(phase == PH_SCATTER && !apply_go, "held in scatter"); end
    fetch_done = 1;
    repeat (3) begin @(negedge clk); check(phase == PH_SCATTER, "held while pipeline busy"); end
    pipe_busy = 0;
    n = 0;
    while (!apply_go && n < 20) begin @(negedge clk); n++; end
    check(apply_go && phase == PH_APPLY, "apply_go");
    apply_done = 0;
    repeat (4) begin @(negedge clk); check(phase == PH_APPLY, "held in apply"); end
    any_active = active_after;
    apply_done = 1;
    @(negedge clk);
  endtask

  initial begin
    start = 0; any_active = 0; fetch_done = 1; pipe_busy = 0; apply_done = 1; max_iter = 10;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // nothing active: done at once
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check(done && phase == PH_IDLE, "done with nothing active");
    // three iterations, then nothing active
    any_active = 1;
    start = 1; @(negedge clk); start = 0;
    one_iter(1); check(!done && iter == 1, "iteration 1");
    one_iter(1); check(!done && iter == 2, "iteration 2");
    one_iter(0); check(done && iter == 3 && phase == PH_IDLE, "stops when nothing active");
    // max_iter = 2 with vertices always active
    max_iter = 2; any_active = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    one_iter(1);
    one_iter(1); check(done && iter == 2 && phase == PH_IDLE, "stops at max_iter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
