// tb_snn_dot9: self-checking test of the 3x3 binary-kernel dot product.
// Drives corner cases (all +1, all -1, extreme activations) and random
// slices/kernels, and compares with a sum computed bit by bit from the
// kernel index convention (bit 8 = top-left weight, 1 = +1).
module tb_snn_dot9;
  import snn_pkg::*;
  localparam int ACT_W = 16;

  logic signed [ACT_W-1:0] act [KSIZE];
  bkernel_t                kernel;
  logic signed [ACT_W+3:0] dot;
  int checks = 0, failures = 0;

  snn_dot9 #(.ACT_W(ACT_W)) dut (.act(act), .kernel(kernel), .dot(dot));

  function automatic int ref_dot(input int a [KSIZE], input bkernel_t k);
    int s = 0;
    for (int i = 0; i < KSIZE; i++) s += k[8-i] ? a[i] : -a[i];
    return s;
  endfunction

  task automatic check(input int a [KSIZE], input bkernel_t k);
    int exp;
    for (int i = 0; i < KSIZE; i++) act[i] = ACT_W'(a[i]);
    kernel = k;
    #1;
    exp = ref_dot(a, k);
    checks++;
    if (int'(dot) != exp) begin
      failures++;
      $display("FAIL kernel=%03h dot=%0d expected=%0d", k, dot, exp);
    end
  endtask

  initial begin
    int a [KSIZE];
    // figure example kernel 275 = 1 0001 0011
    for (int i = 0; i < KSIZE; i++) a[i] = i + 1;
    check(a, 9'd275);          // +1 -2 -3 -4 +5 -6 -7 +8 +9 = 1
    if (int'(dot) != 1) begin failures++; $display("FAIL kernel 275 example"); end
    checks++;
    check(a, 9'h1FF);
    check(a, 9'h000);
    for (int i = 0; i < KSIZE; i++) a[i] = -32768;
    check(a, 9'h000);
    check(a, 9'h1FF);
    for (int i = 0; i < KSIZE; i++) a[i] = 32767;
    check(a, 9'h1FF);
    check(a, 9'h000);
    repeat (2000) begin
      for (int i = 0; i < KSIZE; i++) a[i] = int'($signed(16'($urandom)));
      check(a, 9'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
