// tb_snn_accumulator: self-checking test of the 4-lane accumulator stage.
// Random kernel IDs, LUT data and line-buffer partial sums are applied; the
// test checks that the IDs address the LUT, that each lane adds the
// sign-extended lookup to its partial sum, that the sum is written back
// normally, and that on the last channel it goes to the output buffer while
// the line buffer place is cleared.
module tb_snn_accumulator;
  import snn_pkg::*;
  localparam int TAU = 5, NACC = 4, DW = 20, ACC_W = 32;

  logic en, last;
  logic [TAU-1:0] ids [NACC];
  logic [TAU-1:0] lut_raddr [NACC];
  logic signed [DW-1:0] lut_rdata [NACC];
  logic signed [ACC_W-1:0] lb_rdata [NACC];
  logic lb_we, ob_we;
  logic signed [ACC_W-1:0] lb_wdata [NACC];
  logic signed [ACC_W-1:0] ob_wdata [NACC];
  int checks = 0, failures = 0, n_last = 0;

  snn_accumulator #(.TAU(TAU), .NACC(NACC), .DW(DW), .ACC_W(ACC_W)) dut (.*);

  initial begin
    repeat (1000) begin
      en = 1'($urandom); last = ($urandom % 4) == 0;
      for (int a = 0; a < NACC; a++) begin
        ids[a] = TAU'($urandom);
        lut_rdata[a] = DW'($urandom);
        lb_rdata[a] = $signed($urandom) >>> 4;
      end
      #1;
      if (last && en) n_last++;
      checks++;
      if (lb_we != en || ob_we != (en && last)) begin
        failures++; $display("FAIL enables lb_we=%0d ob_we=%0d", lb_we, ob_we);
      end
      for (int a = 0; a < NACC; a++) begin
        longint s;
        s = longint'(lb_rdata[a]) + longint'(lut_rdata[a]);
        checks++;
        if (lut_raddr[a] != ids[a]) begin failures++; $display("FAIL lane %0d address", a); end
        if (longint'(ob_wdata[a]) != s) begin failures++; $display("FAIL lane %0d sum %0d vs %0d", a, ob_wdata[a], s); end
        if (last ? (lb_wdata[a] != 0) : (longint'(lb_wdata[a]) != s)) begin
          failures++; $display("FAIL lane %0d write-back %0d (last=%0d)", a, lb_wdata[a], last);
        end
      end
    end
    checks++;
    if (n_last == 0) begin failures++; $display("FAIL drain never exercised"); end
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
