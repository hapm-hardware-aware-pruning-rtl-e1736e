// tb_adder_module: self-checking test of the adder module with a Block RAM.
//
// Two random tensors of 8-bit values are written into the RAM, the module
// adds them into a third area, once without and once with ReLU, and every
// byte is compared with a saturating sum worked out here. The words around
// the destination must stay untouched, and the run must take 2 cycles per
// word.
module tb_adder_module;
  import hapm_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a reset edge before the first clock
  always #5 clk = ~clk;
  logic start, busy, done;
  add_cfg_t cfg;
  bram_req_t ram_a, ram_b;
  bram_rsp_t ram_a_rdata, ram_b_rdata;

  adder_module dut (.*);
  block_ram #(.DEPTH(1024)) u_ram (.clk, .a(ram_a), .b(ram_b), .a_rdata(ram_a_rdata), .b_rdata(ram_b_rdata));

  int checks = 0, failures = 0, cycles = 0, sat_n = 0;
  always @(posedge clk) if (busy) cycles++;

  task automatic run(int n, logic relu);
    logic signed [8:0] s;
    logic signed [7:0] a8, b8, e, got;
    for (int w = 0; w < 1024; w++) u_ram.mem[w] = $urandom;
    cfg = '{a_base: 16'd0, b_base: 16'd256, c_base: 16'd512, n_words: 16'(n), relu: relu};
    cycles = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done); @(posedge clk);
    for (int w = 0; w < n; w++)
      for (int l = 0; l < 4; l++) begin
        a8 = u_ram.mem[w][8*l +: 8]; b8 = u_ram.mem[256 + w][8*l +: 8];
        s  = 9'(a8) + 9'(b8);
        if (s > 127 || s < -128) sat_n++;
        e  = (relu && s < 0) ? 8'sd0 : (s > 127) ? 8'sd127 : (s < -128) ? -8'sd128 : 8'(s);
        got = u_ram.mem[512 + w][8*l +: 8];
        checks++;
        if (got !== e) begin
          failures++;
          if (failures < 10) $display("word %0d lane %0d: got %0d expected %0d", w, l, got, e);
        end
      end
    checks++;
    if (cycles != 2 * n) begin failures++; $display("took %0d cycles for %0d words", cycles, n); end
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(100, 1'b0);
    run(77, 1'b1);
    // a word past the end must not be written: fill it with a marker first
    u_ram.mem[512 + 77] = 32'hDEAD_BEEF;
    cfg.n_words = 16'd77;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done); @(posedge clk);
    checks++;
    if (u_ram.mem[512 + 77] !== 32'hDEAD_BEEF) begin failures++; $display("wrote past the end"); end
    checks++;
    if (sat_n == 0) begin failures++; $display("saturation never exercised"); end
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
