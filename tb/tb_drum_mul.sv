// tb_drum_mul -- self-checking test of the DRUMk multiplier.
//
// 1. For DRUM4..DRUM7, every signed 8 x 8 product is formed and the
//    root-mean-square error against the exact product is compared with the
//    RMSE table of the paper (385.4, 198.1, 101.3, 13.1), within 0.2.
// 2. For the 32-bit DRUM7 instance, random and corner operands are compared
//    with a reference model written here independently (magnitude, bit
//    length by repeated halving, window, shift back, sign).
module tb_drum_mul;
  int checks = 0, failures = 0;

  logic [31:0] a, b;
  logic [63:0] p4, p5, p6, p7;
  drum_mul #(.N(32), .K(4)) u4 (.a, .b, .p(p4));
  drum_mul #(.N(32), .K(5)) u5 (.a, .b, .p(p5));
  drum_mul #(.N(32), .K(6)) u6 (.a, .b, .p(p6));
  drum_mul #(.N(32), .K(7)) u7 (.a, .b, .p(p7));

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_drum(longint x, longint y, int k);
    longint mx, my, tx, ty, r;
    int sx, sy, lx, ly;
    mx = (x < 0) ? -x : x;
    my = (y < 0) ? -y : y;
    lx = 0; for (longint t = mx; t > 1; t = t / 2) lx++;
    ly = 0; for (longint t = my; t > 1; t = t / 2) ly++;
    sx = (lx >= k) ? lx - k + 1 : 0;
    sy = (ly >= k) ? ly - k + 1 : 0;
    tx = (sx > 0) ? ((mx >> sx) | 1) : mx;
    ty = (sy > 0) ? ((my >> sy) | 1) : my;
    r  = (tx * ty) << (sx + sy);
    return ((x < 0) != (y < 0)) ? -r : r;
  endfunction

  function automatic real sq(longint d);
    real r = real'(d);
    return r * r;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  real se [4];
  real rmse;
  real table_rmse [4] = '{385.4, 198.1, 101.3, 13.1};
  longint exact, got;

  initial begin
    for (int i = 0; i < 4; i++) se[i] = 0.0;
    for (int x = -128; x < 128; x++) begin
      for (int y = -128; y < 128; y++) begin
        a = 32'(x); b = 32'(y);
        #1;
        exact = longint'(x) * longint'(y);
        se[0] += sq(longint'(signed'(p4)) - exact);
        se[1] += sq(longint'(signed'(p5)) - exact);
        se[2] += sq(longint'(signed'(p6)) - exact);
        se[3] += sq(longint'(signed'(p7)) - exact);
      end
    end
    for (int i = 0; i < 4; i++) begin
      rmse = $sqrt(se[i] / 65536.0);
      $display("DRUM%0d RMSE over signed 8x8 = %0.2f (table %0.1f)", i + 4, rmse, table_rmse[i]);
      check($sformatf("RMSE DRUM%0d", i + 4), rmse > table_rmse[i] - 0.2 && rmse < table_rmse[i] + 0.2);
    end
    // corner and random 32-bit operands against the reference model
    for (int n = 0; n < 2000; n++) begin
      case (n)
        0: begin a = 0; b = 12345; end
        1: begin a = 32'h7fff_ffff; b = 32'h7fff_ffff; end
        2: begin a = 32'h8000_0001; b = 3; end
        3: begin a = 127; b = -128; end
        default: begin
          a = $urandom;
          b = $urandom >> ($urandom % 32);
          if ($urandom % 2) b = -b;
        end
      endcase
      #1;
      got = longint'(signed'(p7));
      check($sformatf("DRUM7 %0d * %0d", signed'(a), signed'(b)),
            got == ref_drum(longint'(signed'(a)), longint'(signed'(b)), 7));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
