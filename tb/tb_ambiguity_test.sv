// tb_ambiguity_test: exhaustive check of the shift-sum ambiguity test.
//
// Every pair (m1, m2) of 7-bit costs is applied, with in_ok toggling, and
// the accept decision one clock later is compared with
// m1 <= floor(m2/2)+floor(m2/4)+floor(m2/8)+floor(m2/32), m2 not all ones.
// A few hand-worked values of the threshold are checked as well
// (T(81) = 40+20+10+2 = 72, T(10) = 5+2+1+0 = 8).
module tb_ambiguity_test;
  import elas_pkg::*;
  localparam int CW = 7;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ok = 0;
  logic [CW-1:0] in_m1 = '0, in_m2 = '0;
  logic [DISP_W-1:0] in_d = '0;
  logic out_valid;
  disp_t out_disp;

  int checks = 0, failures = 0;
  disp_t expq[$];

  ambiguity_test #(.CW(CW)) dut (.*);

  always #5 clk = ~clk;

  function automatic int t(int m2);
    return m2 / 2 + m2 / 4 + m2 / 8 + m2 / 32;
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0 || out_disp != expq[0]) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d/%0d", out_disp.valid, out_disp.d);
      end
      if (expq.size() != 0) void'(expq.pop_front());
    end
  end

  initial begin
    checks += 2;
    if (t(81) != 72) failures++;
    if (t(10) != 8) failures++;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m2 = 0; m2 < (1 << CW); m2++)
      for (int m1 = 0; m1 < (1 << CW); m1++) begin
        disp_t e;
        @(negedge clk);
        in_valid = 1;
        in_ok    = ((m1 + m2) % 7 != 0);
        in_m1    = CW'(m1);
        in_m2    = CW'(m2);
        in_d     = DISP_W'($urandom);
        e.valid  = in_ok && (m2 != (1 << CW) - 1) && (m1 <= t(m2));
        e.d      = e.valid ? in_d : '0;
        expq.push_back(e);
      end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
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
