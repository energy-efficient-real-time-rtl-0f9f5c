// sleeplite_pkg -- shared constants, types and helper functions of the
// quantized SleepLiteCNN sleep-stage classifier.
//
// The network sees a 30 s window of single-lead ECG sampled at 128 Hz
// (3840 samples) and is re-evaluated every 10 s (1280 new samples). The layer
// shapes (filters 5/45/25, kernels 10/10/30, conv strides 2/1/1, pools 2/2/4)
// follow the published architecture. The number formats (int8 tensors read as
// Q0.7, 32-bit accumulators), the stage encoding and the parameter address
// map are this design's own choices.
package sleeplite_pkg;

  // ---- sampling and windowing ------------------------------------------------
  localparam int unsigned FS_HZ    = 128;
  localparam int unsigned WIN_SEC  = 30;
  localparam int unsigned STEP_SEC = 10;
  localparam int unsigned WIN_LEN  = FS_HZ * WIN_SEC;   // 3840
  localparam int unsigned STEP_LEN = FS_HZ * STEP_SEC;  // 1280

  // ---- number formats --------------------------------------------------------
  localparam int unsigned SAMPLE_W = 16;  // ECG sample, signed
  localparam int unsigned DATA_W   = 8;   // activations and parameters, signed
  localparam int unsigned ACC_W    = 32;  // multiply-accumulate width
  localparam int unsigned PRM_AW   = 16;  // global parameter address width

  // ---- sleep stages ----------------------------------------------------------
  typedef enum logic [1:0] {
    STAGE_WAKE  = 2'd0,
    STAGE_REM   = 2'd1,
    STAGE_LIGHT = 2'd2,
    STAGE_DEEP  = 2'd3
  } sleep_stage_e;
  localparam int unsigned N_CLASSES = 4;

  // ---- shape arithmetic (valid padding) --------------------------------------
  function automatic int unsigned conv_len(int unsigned l_in, int unsigned k,
                                           int unsigned s);
    return (l_in - k) / s + 1;
  endfunction

  function automatic int unsigned pool_len(int unsigned l_in, int unsigned p,
                                           int unsigned s);
    return (l_in - p) / s + 1;
  endfunction

  // Saturate a wide signed value to the signed DATA_W range.
  function automatic logic signed [DATA_W-1:0] sat_data(logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = (1 <<< (DATA_W - 1)) - 1;
    localparam logic signed [ACC_W-1:0] MINV = -(1 <<< (DATA_W - 1));
    if (v > MAXV)      return MAXV[DATA_W-1:0];
    else if (v < MINV) return MINV[DATA_W-1:0];
    else               return v[DATA_W-1:0];
  endfunction

  // ---- layer geometry --------------------------------------------------------
  localparam int unsigned C1_F = 5,  C1_K = 10, C1_S = 2;
  localparam int unsigned P1_P = 2,  P1_S = 2;
  localparam int unsigned C2_F = 45, C2_K = 10, C2_S = 1;
  localparam int unsigned P2_P = 2,  P2_S = 2;
  localparam int unsigned C3_F = 25, C3_K = 30, C3_S = 1;
  localparam int unsigned P3_P = 4;

  // ---- parameter counts of each layer (weights then biases) -----------------
  function automatic int unsigned conv_prm(int unsigned c, int unsigned f,
                                           int unsigned k);
    return f * k * c + f;
  endfunction

endpackage
