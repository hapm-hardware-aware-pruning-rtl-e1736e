// tb_bram_mux: self-checking test of the Block RAM multiplexer.
//
// Every owner value is selected in turn while all four requesters drive
// random requests; the RAM side must carry exactly the chosen owner's two
// requests, or idle requests for OWN_NONE. Requests from non-owners are held
// at zero while rst_n is low, so the ownership assertion is not tested here.
module tb_bram_mux;
  import hapm_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bram_owner_e owner;
  bram_req_t cdma_a, cdma_b, conv_a, conv_b, add_a, add_b, pool_a, pool_b, ram_a, ram_b;

  bram_mux dut (.*);

  int checks = 0, failures = 0;
  bram_req_t ea, eb;

  initial begin
    owner = OWN_NONE;
    {cdma_a, cdma_b, conv_a, conv_b, add_a, add_b, pool_a, pool_b} = '0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      owner  = bram_owner_e'(i % 5);
      cdma_a = bram_req_t'({$urandom, $urandom}); cdma_b = bram_req_t'({$urandom, $urandom});
      conv_a = bram_req_t'({$urandom, $urandom}); conv_b = bram_req_t'({$urandom, $urandom});
      add_a  = bram_req_t'({$urandom, $urandom}); add_b  = bram_req_t'({$urandom, $urandom});
      pool_a = bram_req_t'({$urandom, $urandom}); pool_b = bram_req_t'({$urandom, $urandom});
      case (owner)
        OWN_CDMA: begin ea = cdma_a; eb = cdma_b; end
        OWN_CONV: begin ea = conv_a; eb = conv_b; end
        OWN_ADD:  begin ea = add_a;  eb = add_b;  end
        OWN_POOL: begin ea = pool_a; eb = pool_b; end
        default:  begin ea = BRAM_IDLE; eb = BRAM_IDLE; end
      endcase
      #1;
      checks++;
      if (ram_a !== ea || ram_b !== eb) begin
        failures++;
        if (failures < 10) $display("owner %0d: wrong request routed", owner);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
