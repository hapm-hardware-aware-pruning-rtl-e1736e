// layer_translator: sequences the layers of the network over the principal
// modules and is the accelerator's link to the processor and the CDMA.
//
// The processor writes 1 to bit 0 of the control register (AXI4-Lite slave,
// offset 0x0) to start an inference. The translator then walks its layer
// table (parameter LAYERS). For a layer whose coefficients live in DDR
// (coef_ext) it first programs the AXI CDMA through its AXI4-Lite master -
// CDMACR (0x00) = interrupt on completion, SA (0x18) = DDR address, DA (0x20)
// = Block RAM address of the kernels, BTT (0x28) = byte count, which starts
// the copy - gives the Block RAM to the CDMA just before writing BTT, waits for the
// CDMA interrupt and clears it (CDMASR 0x04). It then gives the Block RAM to the module of the
// layer type (convolution controller, adder or pooling), starts it with the
// layer's configuration and waits for its done pulse. After the last layer it
// sets the done bit of the status register (offset 0x4: bit 0 busy, bit 1
// done, write 1 to bit 1 to clear) and raises irq while done is set.
// Offset 0x8 reads the index of the current layer.
// The paper gives the roles (memory-mapped start register, interrupt at the
// end, CDMA for coefficients too large for the Block RAM, selection of the
// module per layer); the register map, the layer-table format and the CDMA
// register offsets (those of the AXI CDMA in simple mode) are this design's.
// Only write transactions are used on the master port.
// Lint notes: only word addresses and the used register bits are decoded,
// so low address bits and upper write-data bits are unused; rst_n also
// disables the AXI response assertion (reported as a synchronous use).
module layer_translator
  import hapm_pkg::*;
#(
  parameter int unsigned N_LAYERS = DEFAULT_N_LAYERS,
  parameter layer_t      LAYERS [N_LAYERS] = DEFAULT_NET,
  parameter logic [31:0] CDMA_BASE = 32'h7E20_0000,  // CDMA register base
  parameter logic [31:0] BRAM_BASE = 32'hC000_0000   // Block RAM seen by the CDMA
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave (processor)
  input  logic [3:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [3:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic        irq,
  // AXI4-Lite master (CDMA registers), write channels
  output logic [31:0] m_awaddr,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  input  logic        cdma_irq,
  // principal modules
  output bram_owner_e owner,
  output logic        conv_start,
  output conv_cfg_t   conv_cfg,
  input  logic        conv_done,
  output logic        add_start,
  output add_cfg_t    add_cfg,
  input  logic        add_done,
  output logic        pool_start,
  output pool_cfg_t   pool_cfg,
  input  logic        pool_done
);

  localparam int unsigned LW = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LAYER, S_MWR, S_MRESP, S_CDMA_WAIT, S_RUN, S_WAIT} state_e;

  state_e        st;
  logic [LW-1:0] li;
  logic [2:0]    wi;            // CDMA register write index
  logic          busy_r, done_r, go;
  layer_t        cur;
  logic          aw_done, w_done;

  assign cur = LAYERS[li];

  // ------------------------------------------------------------ slave
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign s_bresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;
  assign irq       = done_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0; go <= 1'b0;
    end else begin
      go <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_awready) begin
        s_bvalid <= 1'b1;
        if (s_awaddr[3:2] == 2'd0 && s_wdata[0] && !busy_r) go <= 1'b1;
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[3:2])
          2'd0:    s_rdata <= '0;
          2'd1:    s_rdata <= {30'd0, done_r, busy_r};
          2'd2:    s_rdata <= 32'(li);
          default: s_rdata <= '0;
        endcase
      end
    end
  end

  // ------------------------------------------------------------ CDMA writes
  always_comb begin
    unique case (wi)
      3'd0:    begin m_awaddr = CDMA_BASE + 32'h00; m_wdata = 32'h0000_1000; end  // IOC_IrqEn
      3'd1:    begin m_awaddr = CDMA_BASE + 32'h18; m_wdata = cur.ddr_addr; end
      3'd2:    begin m_awaddr = CDMA_BASE + 32'h20; m_wdata = BRAM_BASE + 32'(cur.conv.coef_base) * 4; end
      3'd3:    begin m_awaddr = CDMA_BASE + 32'h28; m_wdata = 32'(cur.cdma_bytes); end
      default: begin m_awaddr = CDMA_BASE + 32'h04; m_wdata = 32'h0000_1000; end  // clear IOC_Irq
    endcase
  end
  assign m_wstrb   = 4'hF;
  assign m_awvalid = (st == S_MWR) && !aw_done;
  assign m_wvalid  = (st == S_MWR) && !w_done;
  assign m_bready  = (st == S_MRESP);

  // ------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; li <= '0; wi <= '0; busy_r <= 1'b0; done_r <= 1'b0;
      aw_done <= 1'b0; w_done <= 1'b0; owner <= OWN_NONE;
      conv_start <= 1'b0; add_start <= 1'b0; pool_start <= 1'b0;
      conv_cfg <= '0; add_cfg <= '0; pool_cfg <= '0;
    end else begin
      conv_start <= 1'b0; add_start <= 1'b0; pool_start <= 1'b0;
      if (s_awready && s_awaddr[3:2] == 2'd1 && s_wdata[1]) done_r <= 1'b0;
      unique case (st)
        S_IDLE: if (go) begin
          busy_r <= 1'b1; done_r <= 1'b0; li <= '0;
          st <= S_LAYER;
        end
        S_LAYER: begin
          owner <= OWN_NONE;
          wi    <= '0;
          st    <= (cur.kind == L_CONV && cur.coef_ext) ? S_MWR : S_RUN;
        end
        S_MWR: begin
          if (m_awvalid && m_awready) aw_done <= 1'b1;
          if (m_wvalid && m_wready)   w_done  <= 1'b1;
          if ((aw_done || m_awready) && (w_done || m_wready)) st <= S_MRESP;
        end
        S_MRESP: if (m_bvalid) begin
          aw_done <= 1'b0; w_done <= 1'b0;
          wi <= wi + 3'd1;
          // the RAM goes to the CDMA before BTT is written, which starts the copy
          if (wi == 3'd2) owner <= OWN_CDMA;
          if (wi == 3'd3) st <= S_CDMA_WAIT;
          else if (wi == 3'd4) st <= S_RUN;
          else st <= S_MWR;
        end
        S_CDMA_WAIT: if (cdma_irq) begin
          owner <= OWN_NONE;
          st    <= S_MWR;          // wi = 4: clear the interrupt
        end
        S_RUN: begin
          unique case (cur.kind)
            L_CONV:  begin owner <= OWN_CONV; conv_start <= 1'b1; conv_cfg <= cur.conv; end
            L_ADD:   begin owner <= OWN_ADD;  add_start  <= 1'b1; add_cfg  <= cur.add;  end
            default: begin owner <= OWN_POOL; pool_start <= 1'b1; pool_cfg <= cur.pool; end
          endcase
          st <= S_WAIT;
        end
        S_WAIT: if ((cur.kind == L_CONV && conv_done) || (cur.kind == L_ADD && add_done) ||
                    (cur.kind == L_POOL && pool_done)) begin
          owner <= OWN_NONE;
          if (li == LW'(N_LAYERS - 1)) begin
            busy_r <= 1'b0; done_r <= 1'b1;
            st <= S_IDLE;
          end else begin
            li <= li + 1'b1;
            st <= S_LAYER;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_bresp_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (m_bvalid && m_bready) |-> (m_bresp == 2'b00));

endmodule
