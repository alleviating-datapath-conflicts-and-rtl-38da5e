// tb_offset_access: N = 4 channels over a 64-vertex Offset Array filled with
// random non-decreasing offsets. Random active vertices (vertex 63 included,
// whose nOff wraps to part 0 of the next row) enter on random channels with
// random output backpressure. Each vertex must leave exactly once on channel
// ID mod 4 with its property, Off = Offset[ID] and nOff = Offset[ID+1].
// Arbiter conflicts and shared reads must both occur.
module tb_offset_access;
  import higraph_pkg::*;
  localparam int N = 4, V_MAX = 64, OW = PROP_W + 2*OFF_W, HAW = $clog2(V_MAX + 1);
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready, blocked, shared;
  logic [N-1:0][ACT_W-1:0] in_data;
  logic [N-1:0][OW-1:0] out_data;
  logic host_we, busy;
  logic [HAW-1:0] host_addr;
  off_t host_wdata;
  int offs[V_MAX+1];
  int pending[int];            // prop (unique tag) -> vertex id
  int checks = 0, failures = 0, nblock = 0, nshare = 0, sent = 0, got = 0;

  offset_access #(.N(N), .V_MAX(V_MAX), .DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = '0; out_ready = '1; host_we = 0; host_addr = 0; host_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    offs[0] = 0;
    for (int i = 1; i <= V_MAX; i++) offs[i] = offs[i-1] + $urandom % 40;
    for (int i = 0; i <= V_MAX; i++) begin
      host_we = 1; host_addr = HAW'(i); host_wdata = off_t'(offs[i]);
      @(negedge clk);
    end
    host_we = 0;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      for (int i = 0; i < N; i++) begin
        // a few hot vertices so neighbouring channels often want the same rows
        automatic int id = ($urandom % 2) ? 60 + $urandom % 4 : $urandom % V_MAX;
        in_valid[i] = (cyc < 5000) && ($urandom % 2);
        in_data[i]  = {prop_t'(sent + i), vid_t'(id)};
      end
      out_ready = N'($urandom) | N'($urandom);
      #1;
      for (int c = 0; c < N; c++) begin
        nblock += blocked[c]; nshare += shared[c];
        if (out_valid[c] && out_ready[c]) begin
          automatic int tag = out_data[c][2*OFF_W +: PROP_W];
          check(pending.exists(tag), "vertex expected once");
          if (pending.exists(tag)) begin
            automatic int id = pending[tag];
            check(id % N == c, "left on channel ID mod N");
            check(out_data[c][OFF_W-1:0] == off_t'(offs[id]) &&
                  out_data[c][OFF_W +: OFF_W] == off_t'(offs[id+1]), $sformatf("Off/nOff of %0d", id));
            pending.delete(tag);
            got++;
          end
        end
      end
      for (int i = 0; i < N; i++)
        if (in_valid[i] && in_ready[i]) begin
          pending[int'(in_data[i][VID_W +: PROP_W])] = int'(in_data[i][VID_W-1:0]);
        end
      sent += N;
      @(negedge clk);
    end
    check(pending.size() == 0 && got > 1000, $sformatf("all vertices served (%0d)", got));
    check(nblock > 0 && nshare > 0, $sformatf("conflicts %0d and shared reads %0d", nblock, nshare));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
