// Test of the evaluation unit model: random analog codes and configuration
// bits, compared with the readout inequality evaluated here in real
// arithmetic; plus the thresholded cases b+ and b- with exact margins.
module tb_eval_unit;
  import epp_pkg::*;
  logic [ACODE_W-1:0] a_plus, a_minus, a_tl, a_th; eval_cfg_t cfg; logic b;
  eval_unit dut (.*);
  int checks = 0, failures = 0;
  function automatic logic ref_b(int ap, int am, int tl, int th, logic [3:0] c);
    real l, r;   // c = {cc, ca, ac, aa}
    l = (tl + c[1] * ap + c[2] * am) / (1.0 + c[1] + c[2]);
    r = (th + c[3] * ap + c[0] * am) / (1.0 + c[3] + c[0]);
    return l > r;
  endfunction
  initial begin
    for (int n = 0; n < 3000; n++) begin
      a_plus = 16'($urandom_range(0, 16000)); a_minus = 16'($urandom_range(0, 16000));
      a_tl = 16'($urandom_range(0, 8000)); a_th = 16'($urandom_range(0, 8000));
      cfg = eval_cfg_t'(4'($urandom));
      #1; checks++;
      if (b !== ref_b(a_plus, a_minus, a_tl, a_th, cfg)) begin
        failures++; $display("FAIL %0d %0d %0d %0d %b -> %b", a_plus, a_minus, a_tl, a_th, cfg, b);
      end
    end
    // b+ : a+ - a- > a_th - a_tl
    cfg = eval_cfg_t'(4'b0011); a_tl = 100; a_th = 300; a_minus = 50;
    a_plus = 250; #1 checks++; if (b !== 1'b0) failures++;
    a_plus = 251; #1 checks++; if (b !== 1'b1) failures++;
    cfg = eval_cfg_t'(4'b1100); a_plus = 50;
    a_minus = 250; #1 checks++; if (b !== 1'b0) failures++;
    a_minus = 251; #1 checks++; if (b !== 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
