// snn_controller: sequencing of the two-stage PE pipeline.
//
// A round computes LBW output channels for NPE output pixels from num_cin
// input channels. It runs num_cin+1 phases of PHASE cycles each, where
// PHASE = max(2**TAU, LBW/NACC) (32 in the paper's configuration: both
// stages take 32 cycles, as its figure shows):
//   phase p < num_cin : pre-computing stage fills LUT bank p%2 with input
//                       channel p (kernel ID = cycle, for 2**TAU cycles);
//   phase p >= 1      : accumulator stage consumes LUT bank (p-1)%2 for
//                       input channel p-1 (LB position = cycle, for
//                       LBW/NACC cycles);
//   phase num_cin     : is also the last accumulation, which drains the line
//                       buffer into the output buffer and clears it.
// So the stages overlap: while channel p is pre-computed, channel p-1 is
// accumulated, and a round takes (num_cin+1)*PHASE cycles when nothing
// stalls.
//
// Flow control (this design's choice; the paper does not describe the
// feeding of the PEs): a new activation strip is needed in the first cycle
// of every pre-computing phase (strip_avail), and NACC kernel IDs are needed
// in every accumulation cycle (w_valid). If either is missing the whole
// array holds for that cycle (stall). w_ready and strip_take say which
// inputs were consumed.
//
// Interface: start/num_cin begin a round (ignored while busy or if num_cin
// is 0); busy stays high until the round ends; done pulses for one cycle
// after the last accumulation cycle.
module snn_controller
  import snn_pkg::*;
#(
  parameter int unsigned TAU     = TAU_DEF,
  parameter int unsigned NACC    = NACC_DEF,
  parameter int unsigned LBW     = LBW_DEF,
  parameter int unsigned MAX_CIN = MAX_CIN_DEF,
  localparam int unsigned SEG    = LBW / NACC,
  localparam int unsigned NK     = 1 << TAU,
  localparam int unsigned PHASE  = (NK > SEG) ? NK : SEG,
  localparam int unsigned CW     = $clog2(MAX_CIN + 1),
  localparam int unsigned PW     = clog2_min1(PHASE),
  localparam int unsigned AW     = clog2_min1(SEG)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [CW-1:0]   num_cin,
  output logic            busy,
  output logic            done,
  // inputs availability
  input  logic            strip_avail,
  output logic            strip_take,
  input  logic            w_valid,
  output logic            w_ready,
  // pre-computing stage
  output logic            pc_en,
  output logic [TAU-1:0]  pc_kidx,
  output logic            pc_bank,
  // accumulator stage
  output logic            acc_en,
  output logic [AW-1:0]   acc_addr,
  output logic            acc_bank,
  output logic            acc_last,
  // status
  output logic            stall
);

  logic [CW-1:0] phase_q, ncin_q;
  logic [PW-1:0] cyc_q;
  logic          pc_phase, acc_phase, pc_cycle, acc_cycle;
  logic          need_strip, advance, phase_end;

  always_comb begin
    pc_phase   = busy && (phase_q < ncin_q);
    acc_phase  = busy && (phase_q != '0);
    pc_cycle   = pc_phase  && (32'(cyc_q) < NK);
    acc_cycle  = acc_phase && (32'(cyc_q) < SEG);
    need_strip = pc_phase && (cyc_q == '0);
    advance    = busy && (!need_strip || strip_avail) && (!acc_cycle || w_valid);
    stall      = busy && !advance;
    phase_end  = advance && (32'(cyc_q) == PHASE - 1);

    strip_take = need_strip && advance;
    w_ready    = acc_cycle && advance;
    pc_en      = pc_cycle && advance;
    pc_kidx    = TAU'(cyc_q);
    pc_bank    = phase_q[0];
    acc_en     = acc_cycle && advance;
    acc_addr   = AW'(cyc_q);
    acc_bank   = ~phase_q[0];
    acc_last   = (phase_q == ncin_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      phase_q <= '0;
      cyc_q   <= '0;
      ncin_q  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && num_cin != '0) begin
          busy    <= 1'b1;
          phase_q <= '0;
          cyc_q   <= '0;
          ncin_q  <= num_cin;
        end
      end else if (advance) begin
        if (phase_end) begin
          cyc_q <= '0;
          if (phase_q == ncin_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            phase_q <= phase_q + 1'b1;
          end
        end else begin
          cyc_q <= cyc_q + 1'b1;
        end
      end
    end
  end

  // The two LUT banks used in one cycle are never the same one.
  always_ff @(posedge clk) begin
    if (pc_en && acc_en) assert (pc_bank != acc_bank)
      else $error("pre-compute and accumulate stages on the same LUT bank");
  end
  // The configured channel count must fit MAX_CIN.
  always_ff @(posedge clk) begin
    if (start && !busy) assert (32'(num_cin) <= MAX_CIN)
      else $error("num_cin exceeds MAX_CIN");
  end

endmodule
