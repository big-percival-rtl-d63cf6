// tb_check.svh: check counting shared by the testbenches. Each testbench
// declares "int checks, failures;" before using these macros.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH

`define CHECK_EQ(GOT, EXP, WHAT) \
  begin \
    checks++; \
    if ((GOT) !== (EXP)) begin \
      failures++; \
      $display("FAIL %s: got %h expected %h", WHAT, GOT, EXP); \
    end \
  end

`define CHECK_TRUE(COND, WHAT) \
  begin \
    checks++; \
    if (!(COND)) begin \
      failures++; \
      $display("FAIL %s", WHAT); \
    end \
  end

`define TB_FINISH \
  begin \
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); \
    $finish; \
  end

`endif
