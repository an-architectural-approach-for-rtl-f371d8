// fps_tb_pkg -- reference behaviour shared by the testbenches.
//
// The FPUs are not part of the RTL. For simulation every function code is
// given a made-up meaning that depends on the FPU class, and a few code bits
// select behaviour the scheduler must handle:
//   code[7]   the function needs one I/O transfer on its first run
//   code[6]   the function gives up its FPU once on its first run, asking for
//             priority code[1:0]
//   code[3:0] run time: 1 + code[3:0] cycles
// ref_result() is the result the behavioural FPU returns, worked out here
// independently of the RTL.
package fps_tb_pkg;
  import fps_pkg::*;

  function automatic logic [DATA_W-1:0] ref_result(fn_class_e c, logic [CODE_W-1:0] code,
                                                   logic [DATA_W-1:0] a, logic [DATA_W-1:0] b);
    unique case (c)
      CLS_MATHS:      return a + b + DATA_W'(code);
      CLS_DSP:        return (a * 3) ^ b ^ DATA_W'(code);
      CLS_STRING:     return {a[7:0], a[15:8], a[23:16], a[31:24]} ^ b;
      CLS_GRAPHICS:   return a ^ {b[15:0], b[31:16]};
      default:        return a - b - DATA_W'(code);
    endcase
  endfunction

  function automatic fn_class_e class_of(logic [2:0] raw);
    return (raw < 3'(NUM_CLASS)) ? fn_class_e'(raw) : CLS_MATHS;
  endfunction

endpackage
