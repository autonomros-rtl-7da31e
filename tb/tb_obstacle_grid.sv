// Self-checking testbench for obstacle_grid. Streams frames of camera-frame
// points through a camera-to-car transform (camera looking forward, 250 mm
// above ground) and compares each published grid byte and the in-box count
// with a model of the four steps computed here. Covers: points left, right,
// above, below, in front of and beyond the box; a cell that saturates at 255;
// a short frame whose last point must wait for the previous readout
// (in_ready low); back-to-back frames through the two banks.
module tb_obstacle_grid;
  import autonomros_pkg::*;
  localparam int GX = 18, GY = 13, NC = GX * GY;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [31:0] tmat [12];
  logic in_valid = 0, in_ready;
  point_t in_pt;
  logic grid_valid, grid_last;
  logic [7:0] grid_idx, grid_data;
  logic [31:0] box_count;
  int checks = 0, failures = 0, stalls = 0, sat_seen = 0;

  obstacle_grid dut (.clk, .rst_n, .tmat, .in_valid, .in_ready, .in_pt,
                     .grid_valid, .grid_idx, .grid_data, .grid_last, .box_count);

  int exp_grid [$][NC];
  int exp_cnt [$];
  int cur [NC];
  int cur_cnt = 0;

  task automatic model(point_t p);
    longint c [3];
    longint xr, yr;
    for (int r = 0; r < 3; r++)
      c[r] = ((longint'(tmat[4*r]) * p.x_mm + longint'(tmat[4*r+1]) * p.y_mm + longint'(tmat[4*r+2]) * p.z_mm) >>> 16)
             + longint'(tmat[4*r+3]);
    xr = c[0] - 100 * 256;
    yr = c[1] + 13 * 64 * 256 / 2;
    if (xr >= 0 && xr < 18 * 64 * 256 && yr >= 0 && yr < 13 * 64 * 256 && c[2] >= 20 * 256 && c[2] <= 300 * 256) begin
      int idx;
      idx = int'(xr / (64 * 256)) * 13 + int'(yr / (64 * 256));
      if (cur[idx] < 255) cur[idx]++;
      cur_cnt++;
    end
    if (p.last) begin
      exp_grid.push_back(cur); exp_cnt.push_back(cur_cnt);
      cur = '{default: 0}; cur_cnt = 0;
    end
  endtask

  // drive on falling edges; hold a point while in_ready is low
  task automatic send(point_t p);
    in_valid = 1; in_pt = p;
    @(posedge clk);
    while (!in_ready) begin stalls++; @(posedge clk); end
    model(p);
    @(negedge clk);
    in_valid = 0;
  endtask

  // camera-frame point for a car-frame position (mm)
  function automatic point_t cam_pt(int fwd, int left, int up, bit last);
    point_t p;
    p.x_mm = -left * 256 + $signed(32'($urandom_range(0, 255)));
    p.y_mm = -(up - 250) * 256 + $signed(32'($urandom_range(0, 255)));
    p.z_mm = (fwd - 50) * 256 + $signed(32'($urandom_range(0, 255)));
    p.rgb = 24'($urandom); p.last = last;
    return p;
  endfunction

  int rd_frame = 0, rd_cnt = 0;
  always @(posedge clk) if (rst_n && grid_valid) begin
    checks++;
    if (exp_grid.size() == 0) begin failures++; $display("grid without frame"); end
    else begin
      if (int'(grid_data) != exp_grid[0][grid_idx] || grid_idx != 8'(rd_cnt)) begin
        failures++;
        if (failures < 10) $display("frame %0d cell %0d got %0d exp %0d", rd_frame, grid_idx, grid_data, exp_grid[0][grid_idx]);
      end
      if (grid_data == 8'hFF) sat_seen++;
      rd_cnt++;
      if (grid_last) begin
        checks++;
        if (rd_cnt != NC) begin failures++; $display("readout length %0d", rd_cnt); end
        void'(exp_grid.pop_front());
        rd_cnt = 0; rd_frame++;
      end
    end
  end
  always @(posedge clk) if (rst_n && grid_last) begin
    // box_count is updated with the bank swap, before the readout ends
    checks++;
    if (int'(box_count) != exp_cnt[0]) begin failures++; $display("box count %0d exp %0d", box_count, exp_cnt[0]); end
    void'(exp_cnt.pop_front());
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    tmat = '{32'sd0, 32'sd0, 32'sd65536, 32'sd12800,
             -32'sd65536, 32'sd0, 32'sd0, 32'sd0,
             32'sd0, -32'sd65536, 32'sd0, 32'sd64000};
    cur = '{default: 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // frame 0: random points around and inside the box, plus a saturating cell
    for (int i = 0; i < 1500; i++)
      send(cam_pt($urandom_range(0, 1400) - 50, $urandom_range(0, 1000) - 500, $urandom_range(0, 400) - 20, 1'b0));
    for (int i = 0; i < 300; i++) send(cam_pt(500, 10, 100, 1'b0));
    send(cam_pt(300, 0, 100, 1'b1));
    // frame 1: short frame, its last point must wait for readout of frame 0
    for (int i = 0; i < 20; i++) send(cam_pt($urandom_range(100, 1200), $urandom_range(0, 800) - 400, 150, 1'b0));
    send(cam_pt(150, 0, 50, 1'b1));
    // frame 2 and 3: long frames back to back
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < 800; i++)
        send(cam_pt($urandom_range(0, 1400), $urandom_range(0, 1000) - 500, $urandom_range(0, 400), i == 799));
    repeat (400) @(negedge clk);
    checks++;
    if (rd_frame != 4) begin failures++; $display("frames published %0d", rd_frame); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    checks++;
    if (sat_seen == 0) begin failures++; $display("no saturated cell seen"); end
    $display("stall cycles %0d, saturated cells %0d", stalls, sat_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
