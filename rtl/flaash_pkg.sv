// flaash_pkg: types and default sizes shared by the sparse tensor contraction
// accelerator.
//
// A tensor operand is stored in compressed sparse fiber (CSF) form: its nonzero
// entries are kept as (index, value) pairs, fiber after fiber, with the index
// counted along the contraction mode. A separate array of fiber pointers marks
// where each fiber starts; fiber f occupies entries [ptr[f], ptr[f+1]).
// A job is one dot product: the pointer bounds of one A fiber, of one B fiber,
// and the address of the result entry in the dense result tensor C.
//
// The paper gives no number format or widths. This design uses signed 16-bit
// integer values, 16-bit fiber indices and a 32-bit accumulator that wraps.
// Memory sizes are chosen so that every workload the paper evaluates fits.
package flaash_pkg;

  // widths of one nonzero entry
  parameter int unsigned IDX_W = 16;   // index along the contraction mode
  parameter int unsigned VAL_W = 16;   // signed value
  parameter int unsigned ACC_W = 32;   // signed accumulator / result value

  // default sizes of the main configuration
  parameter int unsigned N_SDPE_DEF    = 8;     // SDPE count used for the paper's results
  parameter int unsigned OP_DEPTH_DEF  = 4096;  // entries per operand memory (A and B)
  parameter int unsigned RES_DEPTH_DEF = 1024;  // entries of the dense result memory (C)
  parameter int unsigned PTR_DEPTH_DEF = 256;   // fiber pointers per operand

  typedef logic [IDX_W-1:0]        idx_t;
  typedef logic signed [VAL_W-1:0] val_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // one nonzero tensor element as returned by tensor memory
  typedef struct packed {
    idx_t idx;
    val_t val;
  } elem_t;

  // pointers into the operand memories and addresses into the result
  // memory; memory depth parameters must stay below 2**PTR_W
  parameter int unsigned PTR_W = 16;
  typedef logic [PTR_W-1:0] ptr_t;

  // one dot product job (Eq. 3 of the paper: bounds of the two fibers and
  // the destination of the result)
  typedef struct packed {
    ptr_t a_start;
    ptr_t a_end;
    ptr_t b_start;
    ptr_t b_end;
    ptr_t dest;
  } job_t;

  // one finished dot product on its way to the result memory
  typedef struct packed {
    ptr_t dest;
    acc_t data;
  } result_t;

  // which operand memory a request addresses
  typedef enum logic {SEL_A = 1'b0, SEL_B = 1'b1} op_sel_e;

endpackage
