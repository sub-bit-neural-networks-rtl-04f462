// tb_snn_workload_layers: whole 3x3 convolution layers on the default array.
// Runs two complete binarized layers of networks evaluated for sub-bit
// models, with 0.56-bit weights (32-kernel subsets), stride 1, zero padding 1:
//   - CIFAR-10 ResNet-20, first stage: 16 -> 16 channels, 32x32 pixels;
//   - ImageNet ResNet-18, first stage: 64 -> 64 channels, 56x56 pixels;
//   - ImageNet ResNet-18, last stage:  512 -> 512 channels, 7x7 pixels.
// The layer is tiled into rounds: one output row, up to 64 output columns
// and up to 128 output channels per round; the strips carry the zero
// padding. Every output value is compared with a direct convolution, and
// every round must take exactly (c_in+1)*32 cycles (inputs are supplied
// without gaps). Activations are random 8-bit values, kernel IDs random.
module tb_snn_workload_layers;
  import snn_pkg::*;
  localparam int NPE = NPE_DEF, TAU = TAU_DEF, NACC = NACC_DEF, LBW = LBW_DEF;
  localparam int ACT_W = ACT_W_DEF, ACC_W = ACC_W_DEF;
  localparam int NCOL = NPE + 2, NK = 1 << TAU, SEG = LBW / NACC;
  localparam int MAXCH = 512, MAXHW = 56;

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

  snn_accel_top dut (.*);

  bkernel_t subset [NK];
  int fmap [MAXCH][MAXHW][MAXHW];     // [c][y][x]
  int wid  [MAXCH][MAXCH];            // [cout][cin]
  int checks = 0, failures = 0, n_cycles = 0, n_rounds = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (busy) n_cycles++;

  function automatic int act_at(input int c, input int y, input int x, input int h, input int w);
    if (y < 0 || y >= h || x < 0 || x >= w) return 0;
    return fmap[c][y][x];
  endfunction

  function automatic longint ref_out(input int cin, input int h, input int w,
                                     input int o, input int y, input int x);
    longint s = 0;
    for (int c = 0; c < cin; c++) begin
      bkernel_t k = subset[wid[o][c]];
      for (int r = 0; r < 3; r++)
        for (int q = 0; q < 3; q++)
          s += k[8-(3*r+q)] ? longint'(act_at(c, y+r-1, x+q-1, h, w))
                            : -longint'(act_at(c, y+r-1, x+q-1, h, w));
    end
    return s;
  endfunction

  task automatic feed_strips(input int cin, input int h, input int w, input int y, input int x0);
    for (int c = 0; c < cin; c++) begin
      for (int r = 0; r < 3; r++)
        for (int q = 0; q < NCOL; q++)
          s_data[r][q] = ACT_W'(act_at(c, y+r-1, x0+q-1, h, w));
      s_valid = 1;
      do @(posedge clk); while (!s_ready);
      @(negedge clk); s_valid = 0;
    end
  endtask

  task automatic feed_ids(input int cin, input int cout, input int g);
    for (int c = 0; c < cin; c++)
      for (int k = 0; k < SEG; k++) begin
        for (int a = 0; a < NACC; a++) begin
          int o;
          o = g*LBW + a*SEG + k;
          w_ids[a] = (o < cout) ? TAU'(wid[o][c]) : '0;
        end
        w_valid = 1;
        do @(posedge clk); while (!w_ready);
        @(negedge clk); w_valid = 0;
      end
  endtask

  task automatic run_layer(input string name, input int cin, input int cout, input int h, input int w);
    int layer_fail;
    layer_fail = failures;
    for (int k = 0; k < NK; k++) begin
      subset[k] = 9'($urandom);
      @(negedge clk); ks_we = 1; ks_waddr = TAU'(k); ks_wdata = subset[k];
    end
    @(negedge clk); ks_we = 0;
    for (int c = 0; c < cin; c++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) fmap[c][y][x] = int'($urandom % 256) - 128;
    for (int o = 0; o < cout; o++)
      for (int c = 0; c < cin; c++) wid[o][c] = int'($urandom % NK);
    for (int y = 0; y < h; y++)
      for (int x0 = 0; x0 < w; x0 += NPE)
        for (int g = 0; g*LBW < cout; g++) begin
          n_cycles = 0;
          fork
            feed_strips(cin, h, w, y, x0);
            begin
              @(negedge clk); start = 1; num_cin = 10'(cin);
              @(negedge clk); start = 0;
              feed_ids(cin, cout, g);
            end
          join
          while (!done) @(posedge clk);
          @(negedge clk);
          checks++;
          if (n_cycles != (cin + 1) * 32) begin
            failures++;
            $display("FAIL %s round took %0d cycles, expected %0d", name, n_cycles, (cin + 1) * 32);
          end
          n_rounds++;
          for (int oo = 0; oo < LBW && g*LBW + oo < cout; oo++) begin
            ob_raddr = 7'(oo);
            @(negedge clk);
            for (int p = 0; p < NPE && x0 + p < w; p++) begin
              longint exp;
              exp = ref_out(cin, h, w, g*LBW + oo, y, x0 + p);
              checks++;
              if (longint'(ob_rdata[p]) != exp) begin
                failures++;
                if (failures < 10)
                  $display("FAIL %s out(c=%0d,y=%0d,x=%0d) = %0d, expected %0d",
                           name, g*LBW + oo, y, x0 + p, ob_rdata[p], exp);
              end
            end
          end
        end
    $display("%s: %0d x %0d x %0d -> %0d channels done, %0d failures",
             name, cin, h, w, cout, failures - layer_fail);
  endtask

  initial begin
    for (int r = 0; r < 3; r++) for (int q = 0; q < NCOL; q++) s_data[r][q] = '0;
    for (int a = 0; a < NACC; a++) w_ids[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer("ResNet-20 stage-1 3x3 layer", 16, 16, 32, 32);
    run_layer("ResNet-18 stage-1 3x3 layer", 64, 64, 56, 56);
    run_layer("ResNet-18 stage-4 3x3 layer", 512, 512, 7, 7);
    $display("rounds run: %0d", n_rounds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
