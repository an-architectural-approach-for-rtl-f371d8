// fps_pkg -- constants and types shared by the functional processor system.
//
// The system takes a program that is a sequence of high-level functions,
// classifies every function by the kind of unit it needs (maths, DSP, string,
// graphics, multimedia), queues it by priority and feeds it to one of eight
// heterogeneous Functional Processor Units (FPUs). Results come back out of
// order and are put back in program order before being stored.
//
// Eight FPUs and the five function classes come from the architecture; the
// first four FPU roles (graphics, arithmetic, DSP, string) are the ones the
// architecture names. All widths, the number of priority levels, the word
// layouts and the remaining FPU roles are this design's own choices.
package fps_pkg;

  localparam int NUM_FPU   = 8;   // FPU1..FPU8
  localparam int NUM_CLASS = 5;   // classes with a decision box in fine decoding
  localparam int NUM_PRIO  = 4;   // priority levels, 0 is the highest
  localparam int DATA_W    = 32;  // operand / result width
  localparam int SEQ_W     = 8;   // program-order sequence number (256 functions)
  localparam int CODE_W    = 8;   // library function code
  localparam int PRIO_W    = $clog2(NUM_PRIO);
  localparam int FPU_W     = $clog2(NUM_FPU);

  // Function class, i.e. the kind of FPU a function needs.
  typedef enum logic [2:0] {
    CLS_MATHS      = 3'd0,
    CLS_DSP        = 3'd1,
    CLS_STRING     = 3'd2,
    CLS_GRAPHICS   = 3'd3,
    CLS_MULTIMEDIA = 3'd4
  } fn_class_e;

  // Role of each FPU. Index 0 is FPU1.
  typedef fn_class_e fpu_class_map_t [NUM_FPU];
  localparam fpu_class_map_t FPU_CLASS = '{
    CLS_GRAPHICS,   // FPU1
    CLS_MATHS,      // FPU2
    CLS_DSP,        // FPU3
    CLS_STRING,     // FPU4
    CLS_MULTIMEDIA, // FPU5
    CLS_MATHS,      // FPU6
    CLS_DSP,        // FPU7
    CLS_GRAPHICS    // FPU8
  };

  // Kind of a word of the stored program.
  typedef enum logic [1:0] {
    W_SKIP = 2'd0,   // process data, not a function
    W_FUNC = 2'd1,   // a function record
    W_END  = 2'd2,   // end of program
    W_RSVD = 2'd3    // treated as W_SKIP
  } word_kind_e;

  // A function as it appears in the program.
  typedef struct packed {
    logic [2:0]        fn_class;  // raw class code, may be out of range
    logic [CODE_W-1:0] code;      // which library function
    logic [PRIO_W-1:0] prio;      // priority class
    logic              dyn;       // 1: priority may be changed later
    logic              has_dep;   // 1: takes the result of function 'dep'
    logic [SEQ_W-1:0]  dep;       // program-order index of the producer
    logic [DATA_W-1:0] operand;   // immediate argument
  } func_rec_t;

  typedef struct packed {
    word_kind_e kind;
    func_rec_t  rec;
  } prog_word_t;

  // Function identifier: class letter plus running index within the class.
  typedef struct packed {
    fn_class_e        cls;
    logic [SEQ_W-1:0] idx;
  } fid_t;

  // A decoded function travelling through queues, scheduler and FPUs.
  typedef struct packed {
    logic [SEQ_W-1:0]   seq;       // program order (temporal locate)
    fid_t               fid;
    logic [NUM_FPU-1:0] fpu_mask;  // FPUs able to run it (FPU locate)
    logic [CODE_W-1:0]  code;
    logic [PRIO_W-1:0]  prio;
    logic               dyn;
    logic               resume;    // 1: it has run before (woken or yielded)
    logic [DATA_W-1:0]  op_a;      // immediate argument
    logic [DATA_W-1:0]  op_b;      // forwarded producer result, 0 if none
  } job_t;

  typedef enum logic [1:0] {
    RSP_DONE  = 2'd0,  // function finished, result valid
    RSP_IO    = 2'd1,  // function waits for I/O, FPU released
    RSP_YIELD = 2'd2   // function gave up the FPU (system call)
  } rsp_kind_e;

  typedef struct packed {
    rsp_kind_e         kind;
    logic [DATA_W-1:0] result;
    logic [PRIO_W-1:0] new_prio;  // for RSP_YIELD, used if the job is dynamic
  } fpu_rsp_t;

  // Live status of the front end, for the host.
  typedef struct packed {
    logic [NUM_FPU-1:0] fpu_busy;     // FPUs running a function
    logic               stall;        // queue head waits for an FPU of its class
    logic               dep_wait;     // fine decoding holds a function for its producer
    logic               window_wait;  // fine decoding holds for a reorder-buffer slot
    logic               dec_busy;     // functional decoder still reading the program
    logic               reorder;      // a result arrived ahead of an older one
    logic [7:0]         queued;       // functions in the priority queues
    logic [7:0]         io_waiting;   // functions waiting for I/O completion
    logic [7:0]         io_held;      // functions in the I/O queue, woken ones included
    logic [SEQ_W:0]     committed;    // functions integrated so far
  } fps_status_t;

  // FPUs whose role is the given class.
  function automatic logic [NUM_FPU-1:0] class_mask(fn_class_e c);
    logic [NUM_FPU-1:0] m;
    for (int i = 0; i < NUM_FPU; i++) m[i] = (FPU_CLASS[i] == c);
    return m;
  endfunction

endpackage
