// tb_snn_precompute: self-checking test of the pre-computing stage.
// For random slices and kernels it checks the LUT write port: enable, bank
// and address follow the controller inputs, data is the slice/kernel dot
// product computed independently.
module tb_snn_precompute;
  import snn_pkg::*;
  localparam int TAU = 5, ACT_W = 16;

  logic en, bank;
  logic [TAU-1:0] kidx;
  bkernel_t kernel;
  logic signed [ACT_W-1:0] slice [KSIZE];
  logic lut_we, lut_wbank;
  logic [TAU-1:0] lut_waddr;
  logic signed [ACT_W+3:0] lut_wdata;
  int checks = 0, failures = 0;

  snn_precompute #(.TAU(TAU), .ACT_W(ACT_W)) dut (.*);

  initial begin
    repeat (1000) begin
      int exp;
      exp = 0;
      en = 1'($urandom); bank = 1'($urandom); kidx = TAU'($urandom); kernel = 9'($urandom);
      for (int i = 0; i < KSIZE; i++) slice[i] = ACT_W'($urandom);
      for (int i = 0; i < KSIZE; i++) exp += kernel[8-i] ? int'(slice[i]) : -int'(slice[i]);
      #1;
      checks++;
      if (lut_we != en || lut_wbank != bank || lut_waddr != kidx || int'(lut_wdata) != exp) begin
        failures++;
        $display("FAIL en=%0d bank=%0d kidx=%0d data=%0d exp=%0d", lut_we, lut_wbank, lut_waddr, lut_wdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
