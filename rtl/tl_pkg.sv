// tl_pkg: types and constants shared by the spatial GEMM accelerator.
//
// The accelerator computes C[m,n] = sum_k A[m,k] * B[n,k] (GEMM) on a 2-D array
// of processing elements (PEs), or, in the unicast dataflow DF_UMM, the batched
// matrix-vector product C[m,n] = sum_k A[m,k,n] * B[m,k]. Which tensor moves how (systolic, stationary,
// multicast) is chosen per tensor at elaboration time; the enums below name
// those choices. flow_e is the per-tensor dataflow of one PE port, dataflow_e
// the whole-array dataflow named by the letters for A, B and C (S = systolic,
// T = stationary, M = multicast or reduction tree), with the loops M, N, K
// mapped to space and time as listed at each value.
package tl_pkg;

  // Per-tensor dataflow of a PE port (internal module selection).
  typedef enum logic [1:0] {
    FLOW_SYSTOLIC   = 2'd0,  // modules (a)/(b): register and forward to neighbour
    FLOW_STATIONARY = 2'd1,  // modules (c)/(d): double-buffered stationary value
    FLOW_DIRECT     = 2'd2   // modules (e)/(f): multicast/unicast in, reduction-tree out
  } flow_e;

  // Whole-array dataflow for GEMM.
  //  DF_STS: PE(r,c) <- (k=r, n=c), t = m+k+n. A systolic W->E, B stationary, C systolic N->S.
  //  DF_SST: PE(r,c) <- (m=r, n=c), t = m+n+k. A systolic W->E, B systolic N->S, C stationary.
  //  DF_MTM: PE(r,c) <- (n=r, k=c), t = m.     A multicast per column, B stationary,
  //          C reduced by one adder tree per row.
  //  DF_UMM: batched GEMV, PE(r,c) <- (n=r, k=c), t = m. A[m,k,n] unicast (one bank
  //          per PE), B[m,k] multicast per column, C reduced by one tree per row.
  typedef enum logic [1:0] {
    DF_STS = 2'd0,
    DF_SST = 2'd1,
    DF_MTM = 2'd2,
    DF_UMM = 2'd3
  } dataflow_e;

  // Which tensor a host access addresses.
  typedef enum logic [1:0] {
    TENSOR_A = 2'd0,
    TENSOR_B = 2'd1,
    TENSOR_C = 2'd2
  } tensor_e;

  // Control of a stationary input module (c): shift the load chain / swap buffers.
  typedef struct packed {
    logic load;
    logic swap;
  } stat_ctrl_t;

  // Control of a stationary output module (d): end the stage / shift results out.
  typedef struct packed {
    logic capture;
    logic shift;
  } out_ctrl_t;

  function automatic flow_e a_flow(dataflow_e df);
    return (df == DF_MTM || df == DF_UMM) ? FLOW_DIRECT : FLOW_SYSTOLIC;
  endfunction

  function automatic flow_e b_flow(dataflow_e df);
    case (df)
      DF_SST:  return FLOW_SYSTOLIC;
      DF_UMM:  return FLOW_DIRECT;
      default: return FLOW_STATIONARY;
    endcase
  endfunction

  function automatic flow_e c_flow(dataflow_e df);
    case (df)
      DF_STS:  return FLOW_SYSTOLIC;
      DF_SST:  return FLOW_STATIONARY;
      default: return FLOW_DIRECT;
    endcase
  endfunction

  // Number of A banks: one per PE row, one per column bus for multicast, or one
  // per PE for unicast.
  function automatic int a_banks(dataflow_e df, int rows, int cols);
    case (df)
      DF_MTM:  return cols;
      DF_UMM:  return rows * cols;
      default: return rows;
    endcase
  endfunction

  // Number of C banks: one per column, or one per row reduction tree.
  function automatic int c_banks(dataflow_e df, int rows, int cols);
    return (df == DF_MTM || df == DF_UMM) ? rows : cols;
  endfunction

  // Ceiling log2 with a minimum of 1 (for address widths).
  function automatic int clog2_min1(int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
