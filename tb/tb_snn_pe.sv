// tb_snn_pe: self-checking test of one processing engine.
// The testbench plays the controller: for each input channel it steps the
// pre-computing stage over the 32 subset kernels of a random subset while
// the accumulator stage consumes the previous channel's LUT bank with random
// kernel IDs, both in the same cycles. After the last channel the 128
// output-buffer entries are read and compared with a direct convolution:
// sum over channels of dot(slice_c, subset[id(o, c)]). Two rounds are run
// back to back to check that the line buffer is cleared by the drain.
module tb_snn_pe;
  import snn_pkg::*;
  localparam int TAU = 5, NACC = 4, LBW = 128, ACT_W = 16, ACC_W = 32;
  localparam int NK = 1 << TAU, SEG = LBW / NACC, MAXC = 8;

  logic clk = 0, rst_n = 0;
  logic pc_en = 0, pc_bank = 0, acc_en = 0, acc_bank = 0, acc_last = 0;
  logic [TAU-1:0] pc_kidx = '0;
  logic [4:0] acc_addr = '0;
  bkernel_t kernel;
  logic signed [ACT_W-1:0] slice [KSIZE];
  logic [TAU-1:0] ids [NACC];
  logic [6:0] ob_raddr = '0;
  logic signed [ACC_W-1:0] ob_rdata;

  bkernel_t subset [NK];
  int acts [MAXC][KSIZE];
  int wid [MAXC][LBW];
  int checks = 0, failures = 0;

  snn_pe #(.TAU(TAU), .NACC(NACC), .LBW(LBW), .ACT_W(ACT_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  assign kernel = subset[pc_kidx];

  function automatic int ref_dot(input int c, input bkernel_t k);
    int s = 0;
    for (int i = 0; i < KSIZE; i++) s += k[8-i] ? acts[c][i] : -acts[c][i];
    return s;
  endfunction

  task automatic run_round(input int n);
    for (int k = 0; k < NK; k++) subset[k] = 9'($urandom);
    for (int c = 0; c < n; c++) begin
      for (int i = 0; i < KSIZE; i++) acts[c][i] = int'($signed(16'($urandom)));
      for (int o = 0; o < LBW; o++) wid[c][o] = int'($urandom % NK);
    end
    for (int ph = 0; ph <= n; ph++) begin
      for (int k = 0; k < 32; k++) begin
        @(negedge clk);
        pc_en = (ph < n); pc_bank = ph[0]; pc_kidx = TAU'(k);
        if (ph < n) for (int i = 0; i < KSIZE; i++) slice[i] = ACT_W'(acts[ph][i]);
        acc_en = (ph > 0); acc_bank = ~ph[0]; acc_addr = 5'(k); acc_last = (ph == n);
        if (ph > 0) for (int a = 0; a < NACC; a++) ids[a] = TAU'(wid[ph-1][a*SEG+k]);
      end
    end
    @(negedge clk); pc_en = 0; acc_en = 0; acc_last = 0;
    for (int o = 0; o < LBW; o++) begin
      longint exp = 0;
      for (int c = 0; c < n; c++) exp += longint'(ref_dot(c, subset[wid[c][o]]));
      ob_raddr = 7'(o);
      @(negedge clk);
      checks++;
      if (longint'(ob_rdata) != exp) begin
        failures++; $display("FAIL n=%0d out channel %0d: %0d vs %0d", n, o, ob_rdata, exp);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < KSIZE; i++) slice[i] = '0;
    for (int a = 0; a < NACC; a++) ids[a] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_round(3);
    run_round(1);
    run_round(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
