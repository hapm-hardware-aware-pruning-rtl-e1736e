// tb_hapm_top: end-to-end test of the accelerator at its default size
// (24 matrices of 2x3 PEs, 240 KB Block RAM, default four-layer network).
//
// The testbench plays the processor, the AXI CDMA and the DDR memory:
//  - it clears the activation area and loads an 8x8x3 input image (with its
//    zero border, 10x10x3) through the CDMA's Block RAM ports;
//  - it starts the accelerator through the AXI4-Lite control register;
//  - as the CDMA it accepts the register writes of the layer translator and,
//    when the byte count is written, copies the kernels and biases of that
//    layer from its DDR model into the Block RAM, then raises its interrupt;
//  - it waits for the accelerator's interrupt and compares every byte of the
//    four layer outputs (conv, conv, residual add, 2x2 max pool) with a model
//    of the network computed here:
//      conv: sat8(relu?(wrap16(bias + sum k*x) >>> 5)), add: sat8(relu(a+b)),
//      pool: max of each 2x2 window.
// Some kernels are all zero so the Dynamic Sparsity Bypass is used. Counted
// mechanisms (each must occur): CDMA copies, bypassed windows, computed
// windows, partial sums reloaded from the scratch area (multi-channel
// accumulation), each layer type, Block RAM ownership changes, the interrupt.
// Cycles the controller waits for room in the data buffers are reported.
// A second start runs the network again and must give the same result.
module tb_hapm_top;
  import hapm_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic [3:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready, irq;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] m_awaddr, m_wdata;
  logic        m_awvalid, m_awready, m_wvalid, m_wready, m_bvalid, m_bready, cdma_irq;
  logic [3:0]  m_wstrb;
  logic [1:0]  m_bresp;
  bram_req_t   cdma_a, cdma_b;
  bram_rsp_t   cdma_a_rdata, cdma_b_rdata;
  logic [23:0] win_start, win_bypass;
  logic        feed_stall;

  hapm_top dut (.*);

  localparam logic [31:0] CDMA = 32'h7E20_0000, BRAM = 32'hC000_0000;

  int checks = 0, failures = 0;

  // ---------------- DDR model: kernels and biases of the two convolutions
  logic [31:0] ddr [2][2048];
  logic signed [7:0] ref_b [16384];     // activation area model, bytes 0..0x3FFF

  function automatic void make_layer(int li, int nif, int nof, int zero_every);
    int nk;
    nk = 3 * nif * nof;
    for (int w = 0; w < 2048; w++) ddr[li][w] = '0;
    for (int f = 0; f < nof; f++)
      for (int g = 0; g < nif; g++)
        for (int j = 0; j < 3; j++)
          for (int r = 0; r < 3; r++)
            ddr[li][(f * nif + g) * 3 + j][8 * r +: 8] =
              ((f * nif + g) % zero_every == 2) ? 8'd0 : 8'($urandom_range(0, 12)) - 8'd6;
    for (int f = 0; f < nof; f++)
      ddr[li][nk + f / 2][16 * (f % 2) +: 16] = 16'($urandom_range(0, 600)) - 16'd300;
  endfunction

  function automatic void conv_ref(int li, int in_b, int nif, int nof, int out_b, bit relu);
    int acc, v;
    logic signed [7:0] k8, x8;
    logic signed [15:0] b16, a16;
    for (int f = 0; f < nof; f++)
      for (int ox = 0; ox < 8; ox++)
        for (int oy = 0; oy < 8; oy++) begin
          b16 = ddr[li][3 * nif * nof + f / 2][16 * (f % 2) +: 16];
          acc = int'(b16);
          for (int g = 0; g < nif; g++)
            for (int r = 0; r < 3; r++)
              for (int j = 0; j < 3; j++) begin
                k8 = ddr[li][(f * nif + g) * 3 + j][8 * r +: 8];
                x8 = ref_b[in_b + (g * 10 + ox + j) * 10 + oy + r];
                acc += int'(k8) * int'(x8);
              end
          a16 = 16'(acc);
          v = int'(a16) >>> 5;
          if (relu && v < 0) v = 0;
          if (v > 127) v = 127;
          if (v < -128) v = -128;
          ref_b[out_b + (f * 10 + ox + 1) * 10 + oy + 1] = 8'(v);
        end
  endfunction

  // ---------------- CDMA model (registers and copy engine on ports a/b)
  logic [31:0] sa, da, btt;
  int          copy_i, copy_n, copy_l, cdma_copies = 0;
  logic        copying;
  assign m_bresp = 2'b00;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_awready <= 0; m_wready <= 0; m_bvalid <= 0; cdma_irq <= 0; copying <= 0;
      sa <= '0; da <= '0; btt <= '0; copy_i <= 0; copy_n <= 0; copy_l <= 0;
    end else begin
      m_awready <= m_awvalid && m_wvalid && !m_awready && !m_bvalid;
      m_wready  <= m_awvalid && m_wvalid && !m_awready && !m_bvalid;
      if (m_awready) begin
        m_bvalid <= 1;
        case (m_awaddr - CDMA)
          32'h18: sa <= m_wdata;
          32'h20: da <= m_wdata;
          32'h28: begin
            btt <= m_wdata; copying <= 1; copy_i <= 0; copy_n <= int'(m_wdata) / 4;
            copy_l <= int'(sa - 32'h1000_0000) / 32'h1000;
          end
          32'h04: if (m_wdata[12]) cdma_irq <= 0;
          default: ;
        endcase
      end
      if (m_bvalid && m_bready) m_bvalid <= 0;
      if (copying) begin
        if (copy_i + 2 >= copy_n) begin copying <= 0; cdma_irq <= 1; cdma_copies++; end
        copy_i <= copy_i + 2;
      end
    end
  end

  // RAM port drive: preload task or copy engine
  bram_req_t pre_a, pre_b;
  always_comb begin
    cdma_a = pre_a; cdma_b = pre_b;
    if (copying) begin
      cdma_a = '{en: 1'b1, we: 4'hF, addr: 16'((da - BRAM) / 4 + 32'(copy_i)), wdata: ddr[copy_l][copy_i]};
      cdma_b = BRAM_IDLE;
      if (copy_i + 1 < copy_n)
        cdma_b = '{en: 1'b1, we: 4'hF, addr: 16'((da - BRAM) / 4 + 32'(copy_i + 1)), wdata: ddr[copy_l][copy_i + 1]};
    end
  end

  // ---------------- processor
  task automatic axi_write(logic [3:0] a, logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  // ---------------- mechanism counters
  int n_bypass = 0, n_window = 0, n_reload = 0, n_stall = 0, n_own = 0, n_irq = 0;
  int n_conv = 0, n_add = 0, n_pool = 0, cycles = 0;
  bram_owner_e last_owner;
  always @(posedge clk) if (rst_n) begin
    n_bypass += $countones(win_bypass);
    n_window += $countones(win_start);
    if (dut.u_conv.st == dut.u_conv.S_PRD && dut.u_conv.rk == 0) n_reload++;
    if (feed_stall) n_stall++;
    if (dut.owner != last_owner) n_own++;
    last_owner = dut.owner;
    if (dut.conv_start) n_conv++;
    if (dut.add_start)  n_add++;
    if (dut.pool_start) n_pool++;
    if (dut.u_lt.busy_r) cycles++;
  end

  task automatic compare(string what, int from, int to);
    logic [31:0] w;
    logic signed [7:0] got;
    int bad;
    bad = 0;
    for (int a = from; a < to; a++) begin
      w = dut.u_ram.mem[a / 4];
      got = w[8 * (a % 4) +: 8];
      checks++;
      if (got !== ref_b[a]) begin
        failures++; bad++;
        if (bad < 5) $display("%s byte 0x%0h: got %0d expected %0d", what, a, got, ref_b[a]);
      end
    end
  endtask

  initial begin
    int v;
    s_awaddr = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_wdata = 0; s_arvalid = 0;
    s_bready = 1; s_rready = 1; pre_a = BRAM_IDLE; pre_b = BRAM_IDLE; last_owner = OWN_NONE;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // data: input 8x8x3 with border at byte 0, all else zero
    for (int a = 0; a < 16384; a++) ref_b[a] = 0;
    for (int g = 0; g < 3; g++)
      for (int x = 1; x < 9; x++)
        for (int y = 1; y < 9; y++) ref_b[(g * 10 + x) * 10 + y] = 8'($urandom_range(0, 40)) - 8'd20;
    make_layer(0, 3, 24, 7);
    make_layer(1, 24, 24, 5);

    // load the activation area through the CDMA ports (the model owns them
    // while the accelerator is idle)
    @(negedge clk);
    dut.u_lt.owner = OWN_CDMA;
    for (int w = 0; w < 4096; w += 2) begin
      pre_a = '{en: 1'b1, we: 4'hF, addr: 16'(w),
                wdata: {ref_b[4*w+3], ref_b[4*w+2], ref_b[4*w+1], ref_b[4*w]}};
      pre_b = '{en: 1'b1, we: 4'hF, addr: 16'(w + 1),
                wdata: {ref_b[4*w+7], ref_b[4*w+6], ref_b[4*w+5], ref_b[4*w+4]}};
      @(negedge clk);
    end
    pre_a = BRAM_IDLE; pre_b = BRAM_IDLE;
    dut.u_lt.owner = OWN_NONE;

    // reference network
    conv_ref(0, 'h0000, 3, 24, 'h0400, 1'b1);
    conv_ref(1, 'h0400, 24, 24, 'h1000, 1'b0);
    for (int a = 0; a < 2400; a++) begin
      v = int'(ref_b['h0400 + a]) + int'(ref_b['h1000 + a]);
      if (v < 0) v = 0;
      if (v > 127) v = 127;
      ref_b['h2000 + a] = 8'(v);
    end
    for (int c = 0; c < 24; c++)
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          v = -128;
          for (int di = 0; di < 2; di++)
            for (int dj = 0; dj < 2; dj++)
              if (int'(ref_b['h2000 + (c * 10 + 1 + 2 * i + di) * 10 + 1 + 2 * j + dj]) > v)
                v = int'(ref_b['h2000 + (c * 10 + 1 + 2 * i + di) * 10 + 1 + 2 * j + dj]);
          ref_b['h3000 + (c * 4 + i) * 4 + j] = 8'(v);
        end

    for (int run = 0; run < 2; run++) begin
      cycles = 0;
      axi_write(4'h0, 32'h1);
      wait (irq);
      n_irq++;
      $display("run %0d: network done in %0d cycles", run, cycles);
      compare("conv0", 'h0400, 'h0400 + 2400);
      compare("conv1", 'h1000, 'h1000 + 2400);
      compare("add",   'h2000, 'h2000 + 2400);
      compare("pool",  'h3000, 'h3000 + 384);
      axi_write(4'h4, 32'h2);
      checks++;
      if (irq) begin failures++; $display("interrupt not cleared"); end
    end

    $display("CDMA copies=%0d windows=%0d bypassed=%0d psum reloads=%0d conv=%0d add=%0d pool=%0d owner changes=%0d irq=%0d feed stalls=%0d",
             cdma_copies, n_window, n_bypass, n_reload, n_conv, n_add, n_pool, n_own, n_irq, n_stall);
    checks++; if (cdma_copies == 0) begin failures++; $display("no CDMA copy"); end
    checks++; if (n_bypass == 0)    begin failures++; $display("no bypassed window"); end
    checks++; if (n_window == 0)    begin failures++; $display("no window computed"); end
    checks++; if (n_reload == 0)    begin failures++; $display("no partial sums reloaded"); end
    checks++; if (n_conv == 0 || n_add == 0 || n_pool == 0) begin failures++; $display("a layer type never ran"); end
    checks++; if (n_own == 0)       begin failures++; $display("Block RAM owner never changed"); end
    checks++; if (n_irq == 0)       begin failures++; $display("no interrupt"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
