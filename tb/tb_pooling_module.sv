// tb_pooling_module: self-checking test of the pooling module with a Block RAM.
//
// A random 3-channel 8x8 tensor with a one-element zero border (10x10) is
// pooled 2x2 with stride 2: max pooling into a 4x4 output with a border, and
// average pooling into a 4x4 output without one. Every output byte, border
// included, is compared with values computed here, and the run time is
// checked against 2*P*P + 1 cycles per output.
module tb_pooling_module;
  import hapm_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock
  always #5 clk = ~clk;
  logic start, busy, done;
  pool_cfg_t cfg;
  bram_req_t ram_a, ram_b;
  bram_rsp_t ram_a_rdata, ram_b_rdata;

  pooling_module dut (.*);
  block_ram #(.DEPTH(1024)) u_ram (.clk, .a(ram_a), .b(ram_b), .a_rdata(ram_a_rdata), .b_rdata(ram_b_rdata));

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) if (busy) cycles++;

  logic signed [7:0] x [3][10][10];

  function automatic logic [7:0] rd_byte(int a);
    logic [31:0] w;
    w = u_ram.mem[a / 4];
    return w[8 * (a % 4) +: 8];
  endfunction

  task automatic run(logic avg, int opad);
    int ob, ow, m, s;
    logic signed [7:0] e, got;
    ob = 1024; ow = 4 + 2 * opad;
    for (int w = 0; w < 1024; w++) u_ram.mem[w] = '0;
    for (int c = 0; c < 3; c++)
      for (int i = 0; i < 10; i++)
        for (int j = 0; j < 10; j++) begin
          x[c][i][j] = (i == 0 || j == 0 || i == 9 || j == 9) ? 8'sd0 : 8'($urandom);
          u_ram.mem[((c * 10 + i) * 10 + j) / 4][8 * (((c * 10 + i) * 10 + j) % 4) +: 8] = x[c][i][j];
        end
    cfg = '0;
    cfg.in_base = '0; cfg.in_w = 8'd10; cfg.in_h = 8'd10; cfg.in_pad = 2'd1; cfg.n_ch = 10'd3;
    cfg.out_base = BYTE_AW'(ob); cfg.out_w = 8'(ow); cfg.out_h = 8'(ow); cfg.out_pad = 2'(opad);
    cfg.pool = 4'd2; cfg.avg = avg; cfg.avg_shift = 4'd2;
    cycles = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done); @(posedge clk);
    for (int c = 0; c < 3; c++)
      for (int i = 0; i < ow; i++)
        for (int j = 0; j < ow; j++) begin
          if (i < opad || j < opad || i >= 4 + opad || j >= 4 + opad) e = 0;
          else begin
            m = -128; s = 0;
            for (int di = 0; di < 2; di++)
              for (int dj = 0; dj < 2; dj++) begin
                int v;
                v = int'(x[c][1 + 2 * (i - opad) + di][1 + 2 * (j - opad) + dj]);
                s += v;
                if (v > m) m = v;
              end
            e = avg ? 8'(s >>> 2) : 8'(m);
          end
          got = rd_byte(ob + (c * ow + i) * ow + j);
          checks++;
          if (got !== e) begin
            failures++;
            if (failures < 10) $display("avg=%0d c%0d (%0d,%0d): got %0d expected %0d", avg, c, i, j, got, e);
          end
        end
    checks++;
    if (cycles != 3 * 16 * 9) begin failures++; $display("took %0d cycles", cycles); end
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(1'b0, 1);
    run(1'b1, 0);
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
