// svm_processor: ADMM-based SVM processor with on-chip training, the digital
// core of an epileptic-seizure detector.
//
// It joins the training-data memory, the ADMM trainer (PE array, shared Jacobi
// EVD unit, index generator, two data caches) and the decision block. A host
// (in the chip, the feature extractor) writes labelled training vectors of R
// reduced features into the training-data memory, starts training, and then
// streams feature vectors to be classified; each classification yields one
// decision bit for the stimulator.
//
// Interface and timing:
//   ld_en/ld_addr/ld_label/ld_x  write one training vector per clock while the
//                                trainer is idle (writes during training are
//                                dropped and counted in ld_dropped);
//   train_start                  one-clock pulse; train_busy stays high until
//                                train_done pulses; beta/iterations/converged
//                                are valid from then on;
//   feat_valid/feat_data/feat_last  one feature per clock, R per vector;
//   dec_valid/decision/score     one clock after feat_last.
//   train_kernel/gamma           sampled with train_start: train an RBF-kernel
//                                model through the Nystrom stage (landmarks =
//                                training vectors 0 .. R-1, raw features);
//   kin_valid/kin_x              classify one raw vector with the kernel
//                                model (idle only); kdec_valid/kdecision/
//                                kscore follow R (kernel + 1) + 2 clocks later.
// The training memory words keep the layout described in admm_trainer. The
// chip's feature extractor, clock generator, power management and the ADMM and
// inference SRAM banks are not part of this RTL.
module svm_processor
  import svm_pkg::*;
#(
  parameter int unsigned N          = 256,
  parameter int unsigned R          = 16,
  parameter int unsigned PE_ROWS    = 4,
  parameter int unsigned PE_COLS    = 8,
  parameter int unsigned MAX_ITER   = 64,
  parameter int unsigned EPS        = 66,
  parameter int unsigned MAX_SWEEPS = 16,
  localparam int unsigned D     = R + 1,
  localparam int unsigned AW    = $clog2(N),
  localparam int unsigned ROW_W = D * FIX_W + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // training data load
  input  logic          ld_en,
  input  logic [AW-1:0] ld_addr,
  input  logic          ld_label,
  input  fix_t          ld_x [R],
  output logic [15:0]   ld_dropped,
  // training control and result
  input  logic          train_start,
  output logic          train_busy,
  output logic          train_done,
  output logic [15:0]   iterations,
  output logic          converged,
  output logic [31:0]   evd_rotations,
  output logic [31:0]   train_cycles,
  output fix_t          beta [D],
  // inference
  input  logic          feat_valid,
  input  fix_t          feat_data,
  input  logic          feat_last,
  output logic          dec_valid,
  output logic          decision,
  output fix_t          score,
  // kernel (Nystrom) mode
  input  logic          train_kernel,
  input  fix_t          gamma,
  output logic          kernel_model,
  output fix_t          alpha [R],
  input  logic          kin_valid,
  input  fix_t          kin_x [R],
  output logic          kdec_valid,
  output logic          kdecision,
  output fix_t          kscore
);

  logic [AW-1:0]    tr_raddr, tr_waddr, m_waddr;
  logic             tr_we, m_we;
  logic [ROW_W-1:0] tr_wdata, m_wdata, m_rdata, ld_row;

  always_comb begin
    ld_row = '0;
    ld_row[ROW_W-1] = ld_label;
    for (int k = 0; k < int'(R); k++) ld_row[k*FIX_W +: FIX_W] = ld_x[k];
    ld_row[R*FIX_W +: FIX_W] = FIX_ONE;          // the ones column of X~
  end

  // memory port: trainer while busy, host load otherwise
  assign m_we    = train_busy ? tr_we    : ld_en;
  assign m_waddr = train_busy ? tr_waddr : ld_addr;
  assign m_wdata = train_busy ? tr_wdata : ld_row;

  ram_1r1w #(.WIDTH(ROW_W), .DEPTH(N)) u_train_mem (
    .clk, .raddr(tr_raddr), .rdata(m_rdata), .we(m_we), .waddr(m_waddr), .wdata(m_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ld_dropped <= '0;
    else if (ld_en && train_busy) ld_dropped <= ld_dropped + 1'b1;
  end

  admm_trainer #(
    .N(N), .R(R), .PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS),
    .MAX_ITER(MAX_ITER), .EPS(EPS), .MAX_SWEEPS(MAX_SWEEPS)
  ) u_trainer (
    .clk, .rst_n,
    .start(train_start), .busy(train_busy), .done(train_done),
    .tm_raddr(tr_raddr), .tm_rdata(m_rdata), .tm_we(tr_we), .tm_waddr(tr_waddr),
    .tm_wdata(tr_wdata),
    .beta, .iterations, .converged, .evd_rotations, .cycles(train_cycles),
    .kernel_en(train_kernel), .gamma, .kernel_model, .alpha,
    .kin_valid, .kin_x, .kdec_valid, .kdecision, .kscore
  );

  decision_block #(.R(R)) u_decision (
    .clk, .rst_n, .beta,
    .in_valid(feat_valid), .in_data(feat_data), .in_last(feat_last),
    .out_valid(dec_valid), .decision, .score
  );

endmodule
