// tb_block_ram: self-checking test of the dual-port Block RAM.
//
// Random reads and byte-masked writes on both ports (never both ports writing
// the same word in a cycle) against a reference array kept here. Checks the
// one-cycle read latency and read-first behaviour: data read on the edge
// where the word is written is the old contents. Uses a 1024-word RAM.
module tb_block_ram;
  import hapm_pkg::*;

  localparam int DEPTH = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  bram_req_t a, b;
  bram_rsp_t a_rdata, b_rdata;

  block_ram #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] ref_mem [DEPTH];
  logic [31:0] ea, eb;
  logic        ca, cb;

  task automatic rand_req(output bram_req_t r, input int avoid);
    r.en    = ($urandom_range(0, 4) != 0);
    r.we    = ($urandom_range(0, 1) == 1) ? 4'($urandom) : 4'h0;
    r.addr  = 16'($urandom_range(0, DEPTH - 1));
    if (r.we != 0 && int'(r.addr) == avoid) r.addr = 16'((avoid + 1) % DEPTH);
    r.wdata = $urandom;
  endtask

  initial begin
    a = BRAM_IDLE; b = BRAM_IDLE;
    // clear through the ports
    for (int i = 0; i < DEPTH; i += 2) begin
      @(negedge clk);
      a = '{en: 1'b1, we: 4'hF, addr: 16'(i), wdata: '0};
      b = '{en: 1'b1, we: 4'hF, addr: 16'(i + 1), wdata: '0};
      ref_mem[i] = '0; ref_mem[i + 1] = '0;
    end
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      rand_req(a, -1);
      rand_req(b, (a.en && a.we != 0) ? int'(a.addr) : -1);
      if (b.en && a.en && b.we != 0 && b.addr == a.addr) b.we = 4'h0;
      ca = a.en; cb = b.en;
      ea = ref_mem[a.addr]; eb = ref_mem[b.addr];
      for (int k = 0; k < 4; k++) begin
        if (a.en && a.we[k]) ref_mem[a.addr][8*k +: 8] = a.wdata[8*k +: 8];
        if (b.en && b.we[k]) ref_mem[b.addr][8*k +: 8] = b.wdata[8*k +: 8];
      end
      @(posedge clk); #1;
      if (ca) begin checks++; if (a_rdata !== ea) begin failures++; if (failures < 10) $display("A: got %h expected %h", a_rdata, ea); end end
      if (cb) begin checks++; if (b_rdata !== eb) begin failures++; if (failures < 10) $display("B: got %h expected %h", b_rdata, eb); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
