// tb_util.svh: check counting shared by the testbenches.
//
// `CHECK(cond, msg) counts one check and, when cond is false, counts a
// failure and prints msg with the simulation time. Interface: the including
// module must declare `int checks` and `int failures`; each testbench ends by
// printing both in its TB_RESULT line. No timing of its own: the check is
// evaluated where the macro is placed. A testing convenience of this design.
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL: %s (t=%0t)", msg, $time); \
    end \
  end
