// xrel_top -- X-Rel approximate TMR system for four benchmark applications.
//
// Each benchmark (a short FIR filter, a long FIR filter, a matrix multiply and
// a 3x3 smoothing filter) is built three times as an approximate module and
// its three outputs OM1..OM3 are combined by an X-Rel voter:
//
//   inputs --+--> module 1 --OM1--(xor noise 1)--+
//            +--> module 2 --OM2--(xor noise 2)--+--> xrel_voter --> register --> y
//            +--> module 3 --OM3--(xor noise 3)--+
//
// From the N-bit width and the quality bound Q_DUBV the voter's relaxed low
// bits K are derived (xrel_pkg::k_from_qdubv); the voter votes only the N-K
// upper bits and passes OM1's K low bits through.  The same K then sets how
// much the modules may be approximated: each module's multipliers drop the
// same number of input LSBs, chosen by xrel_pkg::mul_trunc_var so that the
// module's mean squared output error stays within the paper's variance bound
// v_UB = N/(N-1)*(2^K-1)^2.  This follows the paper's flow and constraint;
// the uniform choice replaces its per-node ILP solution (not published).
// xrel_pkg::mul_trunc_worst gives a stricter per-sample alternative.
// The three replicas are identical.
//
// The *_noise inputs are bit-flip masks XORed onto each module output before
// the voter, the points where the paper's evaluation places its noise
// sources; tie them to zero in normal use.  Running all four benchmarks side
// by side in one top, the masks as ports and the output register are this
// design's choices.
//
// Timing (clk rising edge, rst_n asynchronous active low):
//  * FIR (fs_*, fl_*): a sample and its noise masks are taken at an edge with
//    *_valid = 1; the voted result appears with *_ovalid one edge later.
//  * MM (mm_*) and SMT (sm_*): operands and masks are held while *_valid = 1
//    at an edge; the voted result and *_ovalid are registered at that edge.
module xrel_top
  import xrel_pkg::*;
#(
  parameter int unsigned N             = 16,
  parameter int unsigned QDUBV_MPCT    = 12_500,
  parameter int unsigned K             = k_from_qdubv(N, QDUBV_MPCT),
  parameter int unsigned DW            = 8,
  parameter int unsigned CW            = 8,
  parameter int unsigned FIR_S_TAPS    = 8,
  parameter int unsigned FIR_L_TAPS    = 64,
  parameter int unsigned MM_DIM        = 8,
  parameter bit          ZERO_ON_ERROR = 1'b0,
  parameter int unsigned FIR_S_MJ      = mul_trunc_var(DW, CW, FIR_S_TAPS, N, K),
  parameter int unsigned FIR_L_MJ      = mul_trunc_var(DW, CW, FIR_L_TAPS, N, K),
  parameter int unsigned MM_MJ         = mul_trunc_var(DW, DW, MM_DIM, N, K),
  parameter int unsigned SMT_MJ        = mul_trunc_var(DW, CW, 9, N, K)
) (
  input  logic          clk,
  input  logic          rst_n,
  // short FIR filter
  input  logic          fs_valid,
  input  logic [DW-1:0] fs_x,
  input  logic [CW-1:0] fs_coef  [FIR_S_TAPS],
  input  logic [N-1:0]  fs_noise [3],
  output logic          fs_ovalid,
  output logic [N-1:0]  fs_y,
  output logic          fs_err,
  output vote_status_e  fs_status,
  // long FIR filter
  input  logic          fl_valid,
  input  logic [DW-1:0] fl_x,
  input  logic [CW-1:0] fl_coef  [FIR_L_TAPS],
  input  logic [N-1:0]  fl_noise [3],
  output logic          fl_ovalid,
  output logic [N-1:0]  fl_y,
  output logic          fl_err,
  output vote_status_e  fl_status,
  // matrix multiply
  input  logic          mm_valid,
  input  logic [DW-1:0] mm_a     [MM_DIM][MM_DIM],
  input  logic [DW-1:0] mm_b     [MM_DIM][MM_DIM],
  input  logic [N-1:0]  mm_noise [3][MM_DIM][MM_DIM],
  output logic          mm_ovalid,
  output logic [N-1:0]  mm_c      [MM_DIM][MM_DIM],
  output logic          mm_err    [MM_DIM][MM_DIM],
  output vote_status_e  mm_status [MM_DIM][MM_DIM],
  // 3x3 smoothing filter
  input  logic          sm_valid,
  input  logic [DW-1:0] sm_win   [9],
  input  logic [CW-1:0] sm_w     [9],
  input  logic [N-1:0]  sm_noise [3],
  output logic          sm_ovalid,
  output logic [N-1:0]  sm_y,
  output logic          sm_err,
  output vote_status_e  sm_status
);

  // ------------------------------------------------------------ short FIR
  logic [N-1:0] fs_om [3];
  logic [N-1:0] fs_nq [3];
  logic         fs_vq;
  logic [N-1:0] fs_vy;
  logic         fs_verr;
  vote_status_e fs_vst;

  for (genvar r = 0; r < 3; r++) begin : g_fs
    fir_filter #(
      .TAPS(FIR_S_TAPS), .DW(DW), .CW(CW), .N(N),
      .MUL_J({FIR_S_TAPS{trunc_t'(FIR_S_MJ)}}), .ADD_J('0)
    ) u_mod (
      .clk(clk), .rst_n(rst_n), .in_valid(fs_valid), .x_in(fs_x),
      .coef(fs_coef), .y(fs_om[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs_vq <= 1'b0;
      for (int r = 0; r < 3; r++) fs_nq[r] <= '0;
    end else begin
      fs_vq <= fs_valid;
      if (fs_valid) fs_nq <= fs_noise;
    end
  end

  xrel_voter #(.N(N), .K(K), .ZERO_ON_ERROR(ZERO_ON_ERROR)) u_fs_voter (
    .om1(fs_om[0] ^ fs_nq[0]), .om2(fs_om[1] ^ fs_nq[1]), .om3(fs_om[2] ^ fs_nq[2]),
    .out(fs_vy), .error(fs_verr), .status(fs_vst)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs_ovalid <= 1'b0; fs_y <= '0; fs_err <= 1'b0; fs_status <= VOTE_AGREE;
    end else begin
      fs_ovalid <= fs_vq;
      if (fs_vq) begin
        fs_y <= fs_vy; fs_err <= fs_verr; fs_status <= fs_vst;
      end
    end
  end

  // ------------------------------------------------------------- long FIR
  logic [N-1:0] fl_om [3];
  logic [N-1:0] fl_nq [3];
  logic         fl_vq;
  logic [N-1:0] fl_vy;
  logic         fl_verr;
  vote_status_e fl_vst;

  for (genvar r = 0; r < 3; r++) begin : g_fl
    fir_filter #(
      .TAPS(FIR_L_TAPS), .DW(DW), .CW(CW), .N(N),
      .MUL_J({FIR_L_TAPS{trunc_t'(FIR_L_MJ)}}), .ADD_J('0)
    ) u_mod (
      .clk(clk), .rst_n(rst_n), .in_valid(fl_valid), .x_in(fl_x),
      .coef(fl_coef), .y(fl_om[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fl_vq <= 1'b0;
      for (int r = 0; r < 3; r++) fl_nq[r] <= '0;
    end else begin
      fl_vq <= fl_valid;
      if (fl_valid) fl_nq <= fl_noise;
    end
  end

  xrel_voter #(.N(N), .K(K), .ZERO_ON_ERROR(ZERO_ON_ERROR)) u_fl_voter (
    .om1(fl_om[0] ^ fl_nq[0]), .om2(fl_om[1] ^ fl_nq[1]), .om3(fl_om[2] ^ fl_nq[2]),
    .out(fl_vy), .error(fl_verr), .status(fl_vst)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fl_ovalid <= 1'b0; fl_y <= '0; fl_err <= 1'b0; fl_status <= VOTE_AGREE;
    end else begin
      fl_ovalid <= fl_vq;
      if (fl_vq) begin
        fl_y <= fl_vy; fl_err <= fl_verr; fl_status <= fl_vst;
      end
    end
  end

  // ------------------------------------------------------ matrix multiply
  logic [N-1:0] mm_om [3][MM_DIM][MM_DIM];

  for (genvar r = 0; r < 3; r++) begin : g_mm
    matmul #(
      .DIM(MM_DIM), .DW(DW), .N(N),
      .MUL_J({MM_DIM{trunc_t'(MM_MJ)}}), .ADD_J('0)
    ) u_mod (
      .a(mm_a), .b(mm_b), .c(mm_om[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mm_ovalid <= 1'b0;
    else        mm_ovalid <= mm_valid;
  end

  for (genvar i = 0; i < MM_DIM; i++) begin : g_mm_row
    for (genvar j = 0; j < MM_DIM; j++) begin : g_mm_col
      logic [N-1:0] vy;
      logic         verr;
      vote_status_e vst;

      xrel_voter #(.N(N), .K(K), .ZERO_ON_ERROR(ZERO_ON_ERROR)) u_voter (
        .om1(mm_om[0][i][j] ^ mm_noise[0][i][j]),
        .om2(mm_om[1][i][j] ^ mm_noise[1][i][j]),
        .om3(mm_om[2][i][j] ^ mm_noise[2][i][j]),
        .out(vy), .error(verr), .status(vst)
      );

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          mm_c[i][j] <= '0; mm_err[i][j] <= 1'b0; mm_status[i][j] <= VOTE_AGREE;
        end else if (mm_valid) begin
          mm_c[i][j] <= vy; mm_err[i][j] <= verr; mm_status[i][j] <= vst;
        end
      end
    end
  end

  // ------------------------------------------------- 3x3 smoothing filter
  logic [N-1:0] sm_om [3];
  logic [N-1:0] sm_vy;
  logic         sm_verr;
  vote_status_e sm_vst;

  for (genvar r = 0; r < 3; r++) begin : g_sm
    smooth3x3 #(
      .DW(DW), .CW(CW), .N(N),
      .MUL_J({9{trunc_t'(SMT_MJ)}}), .ADD_J('0)
    ) u_mod (
      .win(sm_win), .w(sm_w), .y(sm_om[r])
    );
  end

  xrel_voter #(.N(N), .K(K), .ZERO_ON_ERROR(ZERO_ON_ERROR)) u_sm_voter (
    .om1(sm_om[0] ^ sm_noise[0]), .om2(sm_om[1] ^ sm_noise[1]), .om3(sm_om[2] ^ sm_noise[2]),
    .out(sm_vy), .error(sm_verr), .status(sm_vst)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sm_ovalid <= 1'b0; sm_y <= '0; sm_err <= 1'b0; sm_status <= VOTE_AGREE;
    end else begin
      sm_ovalid <= sm_valid;
      if (sm_valid) begin
        sm_y <= sm_vy; sm_err <= sm_verr; sm_status <= sm_vst;
      end
    end
  end

endmodule
