// tb_odd_even_arbiter: random requests and rows (from a small row set so
// that shared addresses happen). Checked against the rules, not against a
// copy of the logic: priority parity alternates every cycle, every
// requesting channel of the priority parity is granted, no port is given
// two different rows, a losing request really had a conflicting neighbour,
// and each enabled port reads the row of the channel it serves.
module tb_odd_even_arbiter;
  localparam int N = 8, ROW_W = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, grant, port_en, blocked, shared;
  logic [N-1:0][ROW_W-1:0] row_lo, row_hi, port_row;
  logic odd_first, prev_odd;
  int checks = 0, failures = 0, n_block = 0, n_share = 0;

  odd_even_arbiter #(.N(N), .ROW_W(ROW_W)) dut (.*);
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
    req = 0; row_lo = '0; row_hi = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    prev_odd = odd_first;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check(odd_first != prev_odd, "priority alternates");
      prev_odd = odd_first;
      req = N'($urandom);
      for (int c = 0; c < N; c++) begin
        automatic int id = $urandom % 3;      // small row set: rows 0..2
        row_lo[c] = ROW_W'(id);
        row_hi[c] = (c == N-1) ? ROW_W'(id + 1) : ROW_W'(id);
      end
      #1;
      for (int c = 0; c < N; c++) begin
        automatic bit prio = ((c % 2) == 1) == odd_first;
        automatic int l = (c + N - 1) % N, r = (c + 1) % N;
        check(!grant[c] || req[c], "grant only with req");
        if (prio) check(grant[c] == req[c], "priority always granted");
        // port c used by c (row_lo[c]) and by l (row_hi[l])
        if (grant[c] && grant[l]) check(row_lo[c] == row_hi[l], "no port given two rows");
        if (req[c] && !grant[c]) begin
          check((req[l] && row_hi[l] != row_lo[c]) || (req[r] && row_lo[r] != row_hi[c]),
                "loser had a real conflict");
          n_block++;
        end
        check(blocked[c] == (req[c] && !grant[c]), "blocked flag");
        if (shared[c]) n_share++;
        check(port_en[c] == (grant[c] || grant[l]), "port enable");
        if (grant[c]) check(port_row[c] == row_lo[c], "port row (own)");
        else if (grant[l]) check(port_row[c] == row_hi[l], "port row (neighbour)");
      end
    end
    check(n_block > 0 && n_share > 0, "conflicts and shared reads both seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
