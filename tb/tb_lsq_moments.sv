// Self-checking testbench for lsq_moments (order 2): three point sets sent
// back to back, with unused points mixed in and an empty set; every sum is
// compared with sums formed here in 64-bit arithmetic. Also checks that done
// comes 2 cycles after the last point.
module tb_lsq_moments;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_use = 0, in_last = 0;
  logic signed [10:0] in_x, in_y;
  logic done;
  logic signed [63:0] sx [5], sxy [3];
  int checks = 0, failures = 0, sets = 0;
  longint ex [$][5], exy [$][3];
  longint cx [5], cxy [3];
  longint t_last [$];

  lsq_moments #(.K(2), .XW(11), .YW(11), .AW(64)) dut (.clk, .rst_n, .in_valid, .in_use, .in_last, .in_x, .in_y, .done, .sx, .sxy);

  task automatic send(int x, int y, bit use_it, bit last);
    longint p;
    in_valid = 1; in_use = use_it; in_last = last; in_x = 11'(x); in_y = 11'(y);
    if (use_it) begin
      p = 1;
      for (int k = 0; k < 5; k++) begin
        cx[k] += p;
        if (k < 3) cxy[k] += p * y;
        p *= x;
      end
    end
    if (last) begin ex.push_back(cx); exy.push_back(cxy); cx = '{default: 0}; cxy = '{default: 0}; t_last.push_back(longint'($time)); end
    @(negedge clk);
  endtask

  always @(posedge clk) if (rst_n && done) begin
    checks++;
    // the point is sampled at the edge 5 time units after it is driven; done
    // is set one edge later and seen here at the edge after that
    if ((longint'($time) - t_last[0] - 5) / 10 != 2) begin failures++; $display("done seen %0d edges after the last point", (longint'($time) - t_last[0] - 5) / 10); end
    void'(t_last.pop_front());
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (sx[k] != ex[0][k]) begin failures++; $display("set %0d sx[%0d] %0d exp %0d", sets, k, sx[k], ex[0][k]); end
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (sxy[k] != exy[0][k]) begin failures++; $display("set %0d sxy[%0d] %0d exp %0d", sets, k, sxy[k], exy[0][k]); end
    end
    void'(ex.pop_front()); void'(exy.pop_front());
    sets++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cx = '{default: 0}; cxy = '{default: 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 2000; i++) send($urandom_range(0, 479), $urandom_range(0, 639), $urandom_range(0, 3) != 0, i == 1999);
    for (int i = 0; i < 500; i++) send(int'($urandom_range(0, 1000)) - 500, int'($urandom_range(0, 1000)) - 500, 1, i == 499);
    send(7, 7, 0, 1);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (sets != 3) begin failures++; $display("sets %0d", sets); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
