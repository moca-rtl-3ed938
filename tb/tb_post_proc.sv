// tb_post_proc: self-checking test of the post-processing unit.
// Random and corner accumulator values with random shift and ReLU settings,
// compared with a reference computed in plain integer arithmetic
// (floor division by 2**shift, ReLU, clamp to [-128, 127]).
module tb_post_proc;
  import moca_pkg::*;
  acc_row_t in_row;
  logic [4:0] shift;
  logic relu;
  line_t out_line;
  int checks = 0, failures = 0;

  post_proc dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_val(int v, int sh, bit r);
    longint q;
    q = longint'(v);
    // floor division by 2**sh
    if (q >= 0) q = q / (longint'(1) << sh);
    else        q = -((-q + (longint'(1) << sh) - 1) / (longint'(1) << sh));
    if (r && q < 0) q = 0;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return int'(q);
  endfunction

  initial begin
    for (int t = 0; t < 3000; t++) begin
      shift = (t < 100) ? 5'd0 : 5'($urandom);
      relu  = $urandom % 2;
      for (int n = 0; n < DIM; n++) begin
        case ($urandom % 4)
          0: in_row[n] = acc_t'($urandom);
          1: in_row[n] = acc_t'(int'($urandom % 600) - 300);
          2: in_row[n] = (n % 2) ? 32'sh7fffffff : 32'sh80000000;
          default: in_row[n] = acc_t'(int'($urandom % 100000) - 50000);
        endcase
      end
      #1;
      for (int n = 0; n < DIM; n++) begin
        checks++;
        if (int'(out_line[n]) != ref_val(int'(in_row[n]), int'(shift), relu)) begin
          failures++;
          if (failures < 10) $display("FAIL in=%0d sh=%0d relu=%0d got=%0d", in_row[n], shift, relu, out_line[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
