// tb_cu_matrix: self-checking test of one computation-unit matrix.
//
// Three kernels are streamed through the matrix, each with its own windows:
// a random kernel (normal windows), an all-zero kernel (every window must be
// bypassed) and a random kernel whose windows are partly all-zero data (those
// are bypassed). Every output is compared with a window sum computed here,
// out_c = sum_{r,s} k[r][s] * d[s][r+c] + p_c (16-bit wrap). The interval
// between consecutive normal windows is checked against the 4-cycle rate
// (two 3x3 outputs every 4 cycles), and the first output latency against
// LAT+1 = 7 cycles after the window enters the array.
module tb_cu_matrix;
  import hapm_pkg::*;

  localparam int CU_X = 2, CU_Y = 3, CU_H = 4;
  localparam int NWIN = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   coef_we, data_we, data_last, psum_we, out_re;
  logic [CU_Y*8-1:0]      coef_wdata;
  logic [CU_H*8-1:0]      data_wdata;
  psum_t                  psum_wdata, out_rdata;
  logic                   coef_ready, data_ready, psum_ready, out_valid, win_start, win_bypass;

  cu_matrix dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // stimulus queues
  logic [CU_Y*8-1:0] cq[$];
  logic [CU_H*8:0]   dq[$];    // {last, word}
  psum_t             pq[$];
  psum_t             eq[$];
  int                exp_bypass = 0;

  function automatic psum_t window_sum(logic [CU_Y*8-1:0] k [CU_Y], logic [CU_H*8-1:0] d [CU_Y],
                                       int c, psum_t p);
    int s32;
    s32 = 0;
    for (int s = 0; s < CU_Y; s++)
      for (int r = 0; r < CU_Y; r++)
        s32 += int'($signed(k[s][r*8 +: 8])) * int'($signed(d[s][(r+c)*8 +: 8]));
    return psum_t'(s32 + int'(p));
  endfunction

  task automatic make_kernel(bit zero_kernel, int zero_every);
    logic [CU_Y*8-1:0] k [CU_Y];
    logic [CU_H*8-1:0] d [CU_Y];
    bit   zw;
    for (int s = 0; s < CU_Y; s++) begin
      k[s] = zero_kernel ? '0 : CU_Y*8'($urandom);
      cq.push_back(k[s]);
    end
    for (int w = 0; w < NWIN; w++) begin
      zw = (zero_every > 0) && (w % zero_every == 1);
      for (int s = 0; s < CU_Y; s++) begin
        d[s] = zw ? '0 : CU_H*8'($urandom);
        dq.push_back({(w == NWIN-1) ? 1'b1 : 1'b0, d[s]});
      end
      for (int c = 0; c < CU_X; c++) begin
        psum_t p;
        p = psum_t'($urandom_range(0, 2000)) - 16'sd1000;
        pq.push_back(p);
        eq.push_back(window_sum(k, d, c, p));
      end
      if (zero_kernel || zw) exp_bypass++;
    end
  endtask

  // feeder: a word is held on each bus until the matrix accepts it
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (!coef_we || coef_ready) begin
        coef_we <= (cq.size() > 0);
        if (cq.size() > 0) coef_wdata <= cq.pop_front();
      end
      if (!data_we || data_ready) begin
        data_we <= (dq.size() > 0);
        if (dq.size() > 0) {data_last, data_wdata} <= dq.pop_front();
      end
      if (!psum_we || psum_ready) begin
        psum_we <= (pq.size() > 0);
        if (pq.size() > 0) psum_wdata <= pq.pop_front();
      end
    end
  end

  // checker
  int outs = 0, starts = 0, bypasses = 0, last_start = -1, rate_ok = 0, first_start = -1, first_out = -1;
  assign out_re = out_valid;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      psum_t e;
      e = eq.pop_front();
      checks++;
      if (out_rdata !== e) begin
        failures++;
        $display("output %0d: got %0d expected %0d", outs, out_rdata, e);
      end
      if (first_out < 0) first_out = cycle;
      outs++;
    end
    if (rst_n && win_start) begin
      if (first_start < 0) first_start = cycle;
      if (starts > 0 && starts < NWIN && last_start >= 0) begin
        checks++;
        if (cycle - last_start != CU_Y + 1) begin
          failures++;
          $display("window %0d started %0d cycles after the previous", starts, cycle - last_start);
        end else rate_ok++;
      end
      last_start = cycle;
      starts++;
    end
    if (rst_n && win_bypass) bypasses++;
  end

  initial begin
    coef_we = 0; data_we = 0; psum_we = 0; data_last = 0;
    coef_wdata = '0; data_wdata = '0; psum_wdata = '0;
    make_kernel(0, 0);
    make_kernel(1, 0);
    make_kernel(0, 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (outs == 3 * NWIN * CU_X);
    repeat (5) @(posedge clk);
    checks++;
    if (bypasses != exp_bypass) begin
      failures++; $display("bypassed %0d windows, expected %0d", bypasses, exp_bypass);
    end
    checks++;
    // window enters the array at first_start; column 0 is written LAT=6 cycles
    // later and visible to the reader one cycle after that
    if (first_out - first_start != 2 * CU_Y + 1) begin
      failures++; $display("first output after %0d cycles", first_out - first_start);
    end
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    $display("windows computed=%0d bypassed=%0d rate checks passed=%0d", starts, bypasses, rate_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
