// block_ram: the accelerator's on-chip memory, 240 KB of true dual-port RAM.
//
// DEPTH words of 32 bits (61440 words = 240 KB, the size given for the FPGA's
// Block RAM), two identical ports A and B. Each port takes a request struct
// (en, byte write enables, word address, write data): with en and we = 0 it
// reads, and the word appears on rdata one clock later; with we != 0 the
// enabled bytes are written. A read of a word written on the same edge returns
// the old contents (read-first). Two writes to the same word in one cycle are
// not arbitrated (port B wins); the modules that share the RAM never issue
// them. The port width, latency and read-first behaviour are this design's
// choices; the paper states only the size and that the RAM has two ports to
// the multiplexer. Written as an array so synthesis maps it to Block RAM.
module block_ram
  import hapm_pkg::*;
#(
  parameter int unsigned DEPTH = 61440
) (
  input  logic      clk,
  input  bram_req_t a,
  input  bram_req_t b,
  output bram_rsp_t a_rdata,
  output bram_rsp_t b_rdata
);

  logic [BRAM_DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a.en) begin
      a_rdata <= mem[a.addr];
      for (int i = 0; i < 4; i++)
        if (a.we[i]) mem[a.addr][8*i +: 8] <= a.wdata[8*i +: 8];
    end
    if (b.en) begin
      b_rdata <= mem[b.addr];
      for (int i = 0; i < 4; i++)
        if (b.we[i]) mem[b.addr][8*i +: 8] <= b.wdata[8*i +: 8];
    end
  end

  a_addr_range: assert property (@(posedge clk) a.en |-> 32'(a.addr) < DEPTH);
  b_addr_range: assert property (@(posedge clk) b.en |-> 32'(b.addr) < DEPTH);

endmodule
