// tb_replay_engine: random edge lists (including empty ones and lists much
// longer than a row) with random output backpressure. The pieces of each
// list must cover Off..nOff-1 exactly, in order, each 1..M edges long and
// inside one row of M edges, carrying the list's property. One piece leaves
// per cycle when the output is always ready, and a new list is taken in the
// cycle the previous one's last piece leaves.
module tb_replay_engine;
  import higraph_pkg::*;
  localparam int M = 8, LW = $clog2(M + 1);
  localparam int IW = PROP_W + 2*OFF_W, OW = PROP_W + LW + OFF_W;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, extra_piece, busy;
  logic [IW-1:0] in_data;
  logic [OW-1:0] out_data;
  int checks = 0, failures = 0, extras = 0;
  int exp_off[$], exp_end[$], exp_prop[$];
  int cur_off, n_pieces;

  replay_engine #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lists = 0, cycles = 0;
    bit taken = 0;
    in_valid = 0; in_data = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // timing: list Off=3, nOff=3+2M+1 (pieces 5, 8, 4 long) with output
    // always ready must take exactly 3 cycles of out_valid, then the next list
    @(negedge clk); in_valid = 1; in_data = {prop_t'(7), off_t'(3 + 2*M + 1), off_t'(3)};
    #1 check(in_ready, "idle engine takes a list");
    @(negedge clk); in_data = {prop_t'(9), off_t'(40), off_t'(38)};
    #1 check(!in_ready, "busy engine holds the next list");
    check(out_valid && out_data[OFF_W +: LW] == LW'(5) && out_data[OFF_W-1:0] == 3, "piece 1");
    @(negedge clk); #1 check(out_data[OFF_W +: LW] == LW'(8) && out_data[OFF_W-1:0] == 8, "piece 2");
    @(negedge clk); #1 check(out_data[OFF_W +: LW] == LW'(4) && in_ready, "last piece, next list taken");
    @(negedge clk); in_valid = 0;
    #1 check(out_valid && out_data[OFF_W-1:0] == 38 && out_data[OFF_W +: LW] == 2
             && out_data[OFF_W+LW +: PROP_W] == 9, "next list without a bubble");
    @(negedge clk);
    // random lists
    cur_off = -1;
    for (int cyc = 0; cyc < 20000 && (lists < 2000 || exp_off.size() != 0); cyc++) begin
      if (!in_valid && lists < 2000 && $urandom % 2) begin
        automatic int o = $urandom % 1000;
        automatic int l = ($urandom % 5 == 0) ? 0 : $urandom % (3 * M);
        in_valid = 1;
        in_data = {prop_t'(lists), off_t'(o + l), off_t'(o)};
      end
      out_ready = $urandom % 4 != 0;
      #1;
      if (extra_piece) extras++;
      if (out_valid && out_ready) begin
        automatic int po = out_data[OFF_W-1:0];
        automatic int pl = out_data[OFF_W +: LW];
        check(exp_off.size() != 0, "piece expected");
        if (exp_off.size() != 0) begin
          check(po == exp_off[0], "piece offset contiguous");
          check(pl >= 1 && pl <= M && (po / M) == ((po + pl - 1) / M), "piece within one row");
          check(po + pl <= exp_end[0], "piece inside list");
          check(out_data[OFF_W+LW +: PROP_W] == prop_t'(exp_prop[0]), "property");
          exp_off[0] = po + pl;
          if (po + pl == exp_end[0]) begin
            void'(exp_off.pop_front()); void'(exp_end.pop_front()); void'(exp_prop.pop_front());
          end
        end
      end
      if (in_valid && in_ready) begin
        if (in_data[OFF_W +: OFF_W] != in_data[OFF_W-1:0]) begin
          exp_off.push_back(int'(in_data[OFF_W-1:0]));
          exp_end.push_back(int'(in_data[OFF_W +: OFF_W]));
          exp_prop.push_back(int'(in_data[2*OFF_W +: PROP_W]));
        end
        lists++;
        taken = 1;
      end
      @(negedge clk);
      if (taken) in_valid = 0;
      taken = 0;
      cycles++;
    end
    check(exp_off.size() == 0 && lists == 2000, "all lists replayed");
    check(extras > 0, "lists were split");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
