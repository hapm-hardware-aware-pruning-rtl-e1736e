// tb_layer_translator: self-checking test of the layer translator.
//
// The processor side is an AXI4-Lite master task; the CDMA is modelled by a
// register file that takes writes with random ready delays and raises its
// interrupt some cycles after the byte count (BTT) is written, until the
// status register is cleared; the principal modules answer a start with done
// after a random number of cycles. The default layer table (two convolutions,
// an addition, a pooling layer) is run twice. Checked: the five CDMA register
// writes of each convolution (addresses and values), that the Block RAM
// belongs to the CDMA only from the write of its destination address until its
// interrupt, that each module is started once
// per layer of its type with that layer's configuration and owns the RAM
// while it runs, the status register (busy, done, layer index), the
// interrupt and its clearing.
module tb_layer_translator;
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
  bram_owner_e owner;
  logic        conv_start, conv_done, add_start, add_done, pool_start, pool_done;
  conv_cfg_t   conv_cfg;
  add_cfg_t    add_cfg;
  pool_cfg_t   pool_cfg;

  layer_translator dut (.*);

  localparam logic [31:0] CDMA = 32'h7E20_0000, BRAM = 32'hC000_0000;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- CDMA register model
  logic [31:0] cq_addr[$], cq_data[$];
  logic        got_aw, got_w;
  logic [31:0] aw_l, w_l;
  int          irq_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_awready <= 0; m_wready <= 0; m_bvalid <= 0; got_aw <= 0; got_w <= 0;
      cdma_irq <= 0; irq_cnt <= -1; aw_l <= '0; w_l <= '0;
    end else begin
      m_awready <= !got_aw && ($urandom_range(0, 2) == 0);
      m_wready  <= !got_w && ($urandom_range(0, 2) == 0);
      if (m_awvalid && m_awready) begin got_aw <= 1; aw_l <= m_awaddr; m_awready <= 0; end
      if (m_wvalid && m_wready)   begin got_w <= 1;  w_l <= m_wdata;   m_wready <= 0; end
      if (got_aw && got_w && !m_bvalid) begin
        m_bvalid <= 1;
        cq_addr.push_back(aw_l); cq_data.push_back(w_l);
        if (aw_l == CDMA + 32'h28) irq_cnt <= int'($urandom_range(5, 40));
        if (aw_l == CDMA + 32'h04 && w_l[12]) cdma_irq <= 0;
      end
      if (m_bvalid && m_bready) begin m_bvalid <= 0; got_aw <= 0; got_w <= 0; end
      if (irq_cnt > 0) irq_cnt <= irq_cnt - 1;
      if (irq_cnt == 0) begin cdma_irq <= 1; irq_cnt <= -1; end
    end
  end
  assign m_bresp = 2'b00;

  // ---------------- principal modules
  int cnt_conv, cnt_add, cnt_pool, wait_c;
  logic [1:0] running;   // 1 conv, 2 add, 3 pool
  int   layer_seen;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      conv_done <= 0; add_done <= 0; pool_done <= 0; running <= 0; wait_c <= 0;
      cnt_conv <= 0; cnt_add <= 0; cnt_pool <= 0; layer_seen <= 0;
    end else begin
      conv_done <= 0; add_done <= 0; pool_done <= 0;
      if (conv_start || add_start || pool_start) begin
        running <= conv_start ? 2'd1 : add_start ? 2'd2 : 2'd3;
        wait_c  <= int'($urandom_range(1, 20));
        if (conv_start) cnt_conv <= cnt_conv + 1;
        if (add_start)  cnt_add  <= cnt_add + 1;
        if (pool_start) cnt_pool <= cnt_pool + 1;
      end else if (running != 0) begin
        if (wait_c == 0) begin
          conv_done <= (running == 1); add_done <= (running == 2); pool_done <= (running == 3);
          running <= 0;
        end else wait_c <= wait_c - 1;
      end
    end
  end

  // ownership and configuration checks on every start / while running
  int owner_bad = 0, cdma_owned = 0;
  always @(posedge clk) if (rst_n) begin
    if (running == 1 && owner != OWN_CONV) owner_bad++;
    if (running == 2 && owner != OWN_ADD)  owner_bad++;
    if (running == 3 && owner != OWN_POOL) owner_bad++;
    if (owner == OWN_CDMA) begin
      cdma_owned++;
      if (cq_addr.size() == 0 || (cq_addr[cq_addr.size() - 1] != CDMA + 32'h28 &&
                                 cq_addr[cq_addr.size() - 1] != CDMA + 32'h20)) owner_bad++;
    end
    if (conv_start) begin
      check(conv_cfg == DEFAULT_NET[layer_seen].conv && DEFAULT_NET[layer_seen].kind == L_CONV, "conv layer config");
      layer_seen = (layer_seen + 1) % DEFAULT_N_LAYERS;
    end
    if (add_start) begin
      check(add_cfg == DEFAULT_NET[layer_seen].add && DEFAULT_NET[layer_seen].kind == L_ADD, "add layer config");
      layer_seen = (layer_seen + 1) % DEFAULT_N_LAYERS;
    end
    if (pool_start) begin
      check(pool_cfg == DEFAULT_NET[layer_seen].pool && DEFAULT_NET[layer_seen].kind == L_POOL, "pool layer config");
      layer_seen = (layer_seen + 1) % DEFAULT_N_LAYERS;
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

  task automatic axi_read(logic [3:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
  endtask

  logic [31:0] r;
  int n_conv_layers;
  initial begin
    s_awaddr = 0; s_araddr = 0; s_awvalid = 0; s_wvalid = 0; s_wdata = 0; s_arvalid = 0;
    s_bready = 1; s_rready = 1;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    n_conv_layers = 0;
    for (int l = 0; l < DEFAULT_N_LAYERS; l++) if (DEFAULT_NET[l].kind == L_CONV) n_conv_layers++;
    for (int run = 0; run < 2; run++) begin
      check(!irq, "irq low before start");
      axi_write(4'h0, 32'h1);
      axi_read(4'h4, r);
      check(r[0] == 1'b1, "busy after start");
      fork
        begin wait (irq); end
        begin repeat (20000) @(posedge clk); end
      join_any
      disable fork;
      check(irq, "interrupt at the end");
      axi_read(4'h4, r);
      check(r[1:0] == 2'b10, "status done, not busy");
      axi_read(4'h8, r);
      check(r == DEFAULT_N_LAYERS - 1, "layer index at last layer");
      axi_write(4'h4, 32'h2);
      @(posedge clk);
      check(!irq, "interrupt cleared");
    end
    // CDMA register writes: 5 per convolution layer, twice
    check(cq_addr.size() == 2 * 5 * n_conv_layers, $sformatf("%0d CDMA writes", cq_addr.size()));
    for (int run = 0; run < 2; run++)
      for (int l = 0; l < DEFAULT_N_LAYERS; l++) if (DEFAULT_NET[l].kind == L_CONV && cq_addr.size() >= 5) begin
        logic [31:0] ea [5], ed [5];
        ea = '{CDMA + 32'h00, CDMA + 32'h18, CDMA + 32'h20, CDMA + 32'h28, CDMA + 32'h04};
        ed = '{32'h1000, DEFAULT_NET[l].ddr_addr, BRAM + 32'(DEFAULT_NET[l].conv.coef_base) * 4,
               32'(DEFAULT_NET[l].cdma_bytes), 32'h1000};
        for (int k = 0; k < 5; k++) begin
          check(cq_addr[0] == ea[k] && cq_data[0] == ed[k],
                $sformatf("CDMA write %0d: %h <= %h", k, cq_addr[0], cq_data[0]));
          void'(cq_addr.pop_front()); void'(cq_data.pop_front());
        end
      end
    check(cnt_conv == 2 * n_conv_layers, "convolution starts");
    check(cnt_add + cnt_pool + cnt_conv == 2 * DEFAULT_N_LAYERS, "module starts");
    check(owner_bad == 0, $sformatf("%0d cycles of wrong Block RAM owner", owner_bad));
    check(cdma_owned > 0, "the CDMA owned the Block RAM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
