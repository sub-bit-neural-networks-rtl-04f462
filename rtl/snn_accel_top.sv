// snn_accel_top: accelerator for 3x3 convolution layers of sub-bit neural
// networks (SNNs).
//
// In an SNN layer every 3x3 binary kernel is one of only 2**TAU kernels of a
// per-layer subset and is stored as a TAU-bit kernel ID. Instead of
// convolving every (output, input) channel pair, each PE convolves its 3x3
// activation slice with the 2**TAU subset kernels once per input channel
// and afterwards only looks results up by kernel ID and adds them.
//
// The array has NPE PEs (64) working on NPE adjacent output pixels of one
// output row. They share the subset memory, the kernel-ID stream and one
// controller, and differ only in their activation slice, which the slice
// buffer cuts out of a 3-row strip. A round produces LBW (128) output
// channels for the NPE pixels from num_cin input channels in
// (num_cin+1)*32 cycles when inputs arrive without gaps.
//
// How to run a round:
//   1. load the layer's kernel subset through ks_we/ks_waddr/ks_wdata;
//   2. pulse start with num_cin;
//   3. supply one activation strip per input channel, in channel order, on
//      s_valid/s_ready (s_data[row][col], rows y-1..y+1, columns x0-1 ..
//      x0+NPE; padding, if any, is part of the strip);
//   4. supply the kernel IDs on w_valid/w_ready: for input channel c,
//      SEG = LBW/NACC beats, beat k carrying in w_ids[a] the ID of output
//      channel a*SEG + k;
//   5. after done, read output channel ob_raddr of all PEs at once on
//      ob_rdata[p] (one cycle later). The values stay until the next round
//      finishes.
// Larger layers are covered by repeating rounds over output rows, pixel
// groups and 128-channel output groups. Scaling factors, batch
// normalisation and activation functions are outside this array.
//
// Follows the paper: the two-stage PE with pre-computing unit, double-buffered
// LUT, 4 accumulators and 128-wide line buffer, 32 cycles per stage, 64 PEs,
// overlapped 3x3 slices. This design's choices: number formats, strip and
// kernel-ID handshakes, pixel-to-PE mapping, output-buffer read port.
module snn_accel_top
  import snn_pkg::*;
#(
  parameter int unsigned NPE     = NPE_DEF,
  parameter int unsigned TAU     = TAU_DEF,
  parameter int unsigned NACC    = NACC_DEF,
  parameter int unsigned LBW     = LBW_DEF,
  parameter int unsigned ACT_W   = ACT_W_DEF,
  parameter int unsigned ACC_W   = ACC_W_DEF,
  parameter int unsigned MAX_CIN = MAX_CIN_DEF,
  localparam int unsigned NCOL   = NPE + 2,
  localparam int unsigned CW     = $clog2(MAX_CIN + 1),
  localparam int unsigned RAW    = clog2_min1(LBW)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // kernel subset load
  input  logic                     ks_we,
  input  logic [TAU-1:0]           ks_waddr,
  input  bkernel_t                 ks_wdata,
  // round control
  input  logic                     start,
  input  logic [CW-1:0]            num_cin,
  output logic                     busy,
  output logic                     done,
  output logic                     stall,
  // activation strips
  input  logic                     s_valid,
  output logic                     s_ready,
  input  logic signed [ACT_W-1:0]  s_data [3][NCOL],
  // kernel IDs
  input  logic                     w_valid,
  output logic                     w_ready,
  input  logic [TAU-1:0]           w_ids [NACC],
  // results
  input  logic [RAW-1:0]           ob_raddr,
  output logic signed [ACC_W-1:0]  ob_rdata [NPE]
);

  localparam int unsigned SEG = LBW / NACC;
  localparam int unsigned AW  = clog2_min1(SEG);

  logic                     strip_avail, strip_take;
  logic                     pc_en, pc_bank, acc_en, acc_bank, acc_last;
  logic [TAU-1:0]           pc_kidx;
  logic [AW-1:0]            acc_addr;
  bkernel_t                 kernel;
  logic signed [ACT_W-1:0]  slice [NPE][KSIZE];

  snn_controller #(.TAU(TAU), .NACC(NACC), .LBW(LBW), .MAX_CIN(MAX_CIN)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (start),
    .num_cin     (num_cin),
    .busy        (busy),
    .done        (done),
    .strip_avail (strip_avail),
    .strip_take  (strip_take),
    .w_valid     (w_valid),
    .w_ready     (w_ready),
    .pc_en       (pc_en),
    .pc_kidx     (pc_kidx),
    .pc_bank     (pc_bank),
    .acc_en      (acc_en),
    .acc_addr    (acc_addr),
    .acc_bank    (acc_bank),
    .acc_last    (acc_last),
    .stall       (stall)
  );

  snn_subset_mem #(.TAU(TAU)) u_subset (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (ks_we),
    .waddr (ks_waddr),
    .wdata (ks_wdata),
    .raddr (pc_kidx),
    .rdata (kernel)
  );

  snn_slice_buffer #(.NPE(NPE), .ACT_W(ACT_W)) u_slices (
    .clk     (clk),
    .rst_n   (rst_n),
    .s_valid (s_valid),
    .s_ready (s_ready),
    .s_data  (s_data),
    .avail   (strip_avail),
    .take    (strip_take),
    .slice   (slice)
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    snn_pe #(
      .TAU(TAU), .NACC(NACC), .LBW(LBW), .ACT_W(ACT_W), .ACC_W(ACC_W)
    ) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .pc_en    (pc_en),
      .pc_kidx  (pc_kidx),
      .pc_bank  (pc_bank),
      .kernel   (kernel),
      .slice    (slice[p]),
      .acc_en   (acc_en),
      .acc_addr (acc_addr),
      .acc_bank (acc_bank),
      .acc_last (acc_last),
      .ids      (w_ids),
      .ob_raddr (ob_raddr),
      .ob_rdata (ob_rdata[p])
    );
  end

endmodule
