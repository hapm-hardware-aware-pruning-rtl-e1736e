// tb_pe: self-checking test of the processing element.
//
// Drives random control (en, first, sel_psum) and random operands for 2000
// cycles and compares psum_out after every clock edge with a reference
// accumulator kept here: acc = (first ? 0 : acc) + (sel_psum ? psum_in :
// coef*data), updated only when en is high, 16-bit wrap. Also checks that the
// result appears one cycle after the operands (single-cycle PE).
module tb_pe;
  import hapm_pkg::*;

  logic  clk = 0, rst_n = 0;
  logic  en, first, sel_psum;
  coef_t coef;
  act_t  data;
  psum_t psum_in, psum_out;
  always #5 clk = ~clk;

  pe dut (.*);

  int checks = 0, failures = 0;
  int n_first = 0, n_psum = 0, n_hold = 0;
  psum_t model;

  initial begin
    en = 0; first = 0; sel_psum = 0; coef = '0; data = '0; psum_in = '0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en       = ($urandom_range(0, 3) != 0);
      first    = ($urandom_range(0, 4) == 0);
      sel_psum = ($urandom_range(0, 2) == 0);
      coef     = coef_t'($urandom);
      data     = act_t'($urandom);
      psum_in  = psum_t'($urandom);
      if (en) begin
        model = (first ? psum_t'(0) : model) + (sel_psum ? psum_in : psum_t'(coef * data));
        if (first) n_first++;
        if (sel_psum) n_psum++;
      end else n_hold++;
      @(posedge clk); #1;
      checks++;
      if (psum_out !== model) begin
        failures++;
        if (failures < 10) $display("cycle %0d: got %0d expected %0d", i, psum_out, model);
      end
    end
    checks++;
    if (n_first == 0 || n_psum == 0 || n_hold == 0) begin
      failures++; $display("a control case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
