// sat_pkg: configuration types and constants shared by the accelerator blocks.
//
// A training layer is run as a sequence of tasks. Each task is described by a
// configuration word (cfg_word_t) that the host writes into the controller
// before starting it: a matrix multiplication on the systolic engine in
// weight-stationary (WS) or output-stationary (OS) dataflow with a given number
// N of values per group, or a weight-update pass through the optimizer lanes
// with optional N:M reduction of the new weights. The field layout is this
// implementation's own; the design only states that per-layer configuration
// words select sparsity, dataflow and where the sparse reduction engine runs.
package sat_pkg;

  typedef enum logic [1:0] {
    OP_END = 2'd0,   // end of the task list
    OP_MM  = 2'd1,   // matrix multiplication on the systolic engine
    OP_WU  = 2'd2    // weight update (optimizer lanes, optional reduction)
  } op_e;

  typedef enum logic {
    DF_OS = 1'b0,    // output stationary
    DF_WS = 1'b1     // weight stationary
  } dataflow_e;

  // read sequences of the systolic data generator (see sys_data_gen)
  localparam logic [2:0] GEN_OS_W = 3'd0, GEN_OS_N = 3'd1, GEN_WS_W = 3'd2,
                         GEN_PRE  = 3'd3, GEN_LIN  = 3'd4;

  typedef struct packed {
    op_e         op;
    dataflow_e   df;        // OP_MM: dataflow
    logic [2:0]  n;         // values per group (1..N); dense = N with index k
    logic [2:0]  sore_n;    // OP_WU: values kept per M-group by the reduction engine
    logic        sore_en;   // OP_WU: feed new FP16 weights to the reduction engine
    logic [11:0] cnt;       // OP_MM OS: groups G; OP_MM WS: blocks of interleaved rows; OP_WU: words per lane
    logic        in_half;   // input / optimizer buffer half read by this task
    logic        out_half;  // output buffer half written by this task
    logic [11:0] out_base;  // first output buffer address
    logic [11:0] sore_base; // first output buffer address for reduced weights
    logic [31:0] s;         // OP_WU: gradient scale (FP32)
    logic [31:0] mu;        // OP_WU: momentum (FP32)
    logic [31:0] lr;        // OP_WU: signed learning rate (FP32), negative for descent
  } cfg_word_t;

endpackage
