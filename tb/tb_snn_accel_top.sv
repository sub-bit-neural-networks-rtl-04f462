// tb_snn_accel_top: end-to-end test of the accelerator array.
// Loads a random kernel subset, runs several rounds of a 3x3 convolution
// with random activations and kernel IDs, reads every output channel of
// every PE and compares it with a direct convolution computed here:
//   out[p][o] = sum_c sum_{r,x} (+/-) strip_c[r][p+x], sign from bit 8-(3r+x)
//               of subset[id(c, o)].
// Rounds are run with gap-free input supply (then the round must take
// exactly (num_cin+1)*32 cycles) and with random gaps in the strip and
// kernel-ID streams. The test counts the mechanisms of the design and fails
// if one never happened: strip stall, kernel-ID stall, overlapped stages on
// opposite LUT banks, strip prefetch while busy, drain into the output
// buffer followed by a new round on a cleared line buffer, subset reload.
module tb_snn_accel_top;
  import snn_pkg::*;
  localparam int NPE = 4, TAU = 5, NACC = 4, LBW = 128, ACT_W = 16, ACC_W = 32;
  localparam int NCOL = NPE + 2, NK = 1 << TAU, SEG = LBW / NACC, MAXC = 8;
  localparam int WATCHDOG = 40000;

  logic clk = 0, rst_n = 0;
  logic ks_we = 0;
  logic [TAU-1:0] ks_waddr = '0;
  bkernel_t ks_wdata = '0;
  logic start = 0;
  logic [9:0] num_cin = '0;
  logic busy, done, stall;
  logic s_valid = 0, s_ready;
  logic signed [ACT_W-1:0] s_data [3][NCOL];
  logic w_valid = 0, w_ready;
  logic [TAU-1:0] w_ids [NACC];
  logic [6:0] ob_raddr = '0;
  logic signed [ACC_W-1:0] ob_rdata [NPE];

  snn_accel_top #(.NPE(NPE)) dut (.*);

  bkernel_t subset [NK];
  int strips [MAXC][3][NCOL];
  int wid [MAXC][LBW];
  int checks = 0, failures = 0, n_cycles;
  int n_strip_stall = 0, n_w_stall = 0, n_overlap = 0, n_prefetch = 0, n_rounds_after_drain = 0, n_reload = 0;
  int rounds_done = 0;
  bit gaps = 0;

  always #5 clk = ~clk;

  // mechanism counters (observed through hierarchy, for coverage only)
  always @(posedge clk) if (rst_n) begin
    if (stall && dut.u_ctrl.need_strip && !dut.u_ctrl.strip_avail) n_strip_stall++;
    if (stall && dut.u_ctrl.acc_cycle && !w_valid) n_w_stall++;
    if (dut.pc_en && dut.acc_en && dut.pc_bank != dut.acc_bank) n_overlap++;
    if (busy && s_valid && s_ready) n_prefetch++;
    if (busy) n_cycles++;
  end

  function automatic longint ref_out(input int n, input int p, input int o);
    longint s = 0;
    for (int c = 0; c < n; c++) begin
      bkernel_t k = subset[wid[c][o]];
      for (int r = 0; r < 3; r++)
        for (int x = 0; x < 3; x++)
          s += k[8-(3*r+x)] ? longint'(strips[c][r][p+x]) : -longint'(strips[c][r][p+x]);
    end
    return s;
  endfunction

  task automatic load_subset();
    for (int k = 0; k < NK; k++) begin
      subset[k] = 9'($urandom);
      @(negedge clk); ks_we = 1; ks_waddr = TAU'(k); ks_wdata = subset[k];
    end
    @(negedge clk); ks_we = 0;
    n_reload++;
  endtask

  task automatic feed_strips(input int n);
    for (int c = 0; c < n; c++) begin
      if (gaps && c > 0) repeat ($urandom % 80) @(negedge clk);
      for (int r = 0; r < 3; r++) for (int x = 0; x < NCOL; x++) s_data[r][x] = ACT_W'(strips[c][r][x]);
      s_valid = 1;
      do @(posedge clk); while (!s_ready);
      @(negedge clk); s_valid = 0;
    end
  endtask

  task automatic feed_ids(input int n);
    for (int c = 0; c < n; c++)
      for (int k = 0; k < SEG; k++) begin
        if (gaps && ($urandom % 4 == 0)) repeat (1 + $urandom % 3) @(negedge clk);
        for (int a = 0; a < NACC; a++) w_ids[a] = TAU'(wid[c][a*SEG+k]);
        w_valid = 1;
        do @(posedge clk); while (!w_ready);
        @(negedge clk); w_valid = 0;
      end
  endtask

  task automatic run_round(input int n, input bit with_gaps);
    gaps = with_gaps;
    for (int c = 0; c < n; c++) begin
      for (int r = 0; r < 3; r++) for (int x = 0; x < NCOL; x++) strips[c][r][x] = int'($signed(16'($urandom)));
      for (int o = 0; o < LBW; o++) wid[c][o] = int'($urandom % NK);
    end
    n_cycles = 0;
    // the first strip is offered together with start, so it is prefetched
    // by the time the first pre-computing cycle needs it
    fork
      feed_strips(n);
      begin
        @(negedge clk); start = 1; num_cin = 10'(n);
        @(negedge clk); start = 0;
        feed_ids(n);
      end
    join
    while (!done) @(posedge clk);
    @(negedge clk);
    if (!with_gaps) begin
      checks++;
      if (n_cycles != (n + 1) * 32) begin
        failures++; $display("FAIL round of %0d channels took %0d cycles, expected %0d", n, n_cycles, (n + 1) * 32);
      end
    end
    for (int o = 0; o < LBW; o++) begin
      ob_raddr = 7'(o);
      @(negedge clk);
      for (int p = 0; p < NPE; p++) begin
        longint exp = ref_out(n, p, o);
        checks++;
        if (longint'(ob_rdata[p]) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d PE %0d channel %0d: %0d vs %0d", n, p, o, ob_rdata[p], exp);
        end
      end
    end
    if (rounds_done > 0) n_rounds_after_drain++;
    rounds_done++;
  endtask

  initial begin
    for (int r = 0; r < 3; r++) for (int x = 0; x < NCOL; x++) s_data[r][x] = '0;
    for (int a = 0; a < NACC; a++) w_ids[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_subset();
    run_round(1, 0);
    run_round(3, 0);
    run_round(4, 1);
    load_subset();
    run_round(2, 1);
    run_round(MAXC, 0);
    checks += 6;
    if (n_strip_stall == 0) begin failures++; $display("FAIL no strip stall happened"); end
    if (n_w_stall == 0) begin failures++; $display("FAIL no kernel-ID stall happened"); end
    if (n_overlap == 0) begin failures++; $display("FAIL stages never overlapped"); end
    if (n_prefetch == 0) begin failures++; $display("FAIL no strip prefetch happened"); end
    if (n_rounds_after_drain == 0) begin failures++; $display("FAIL no round after a drain"); end
    if (n_reload < 2) begin failures++; $display("FAIL subset never reloaded"); end
    $display("mechanisms: strip_stall=%0d id_stall=%0d overlap=%0d prefetch=%0d rounds_after_drain=%0d subset_loads=%0d",
             n_strip_stall, n_w_stall, n_overlap, n_prefetch, n_rounds_after_drain, n_reload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
