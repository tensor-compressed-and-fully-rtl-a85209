// tb_bme: self-checking test of the Block Matrix computation Engine.
// Random SMX blocks of INT4/INT8/INT12 are decomposed into 4-bit slice beats
// (one per slice pair, as the TCU issues them) with random transposition and
// exponents; the 4x4 accumulators are compared with a real-number block
// product. It checks the beat count (INT8xINT8 = 4 beats), the one-cycle
// operand forwarding to the east/south neighbours, and the shift chain.
module tb_bme;
  import pinta_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  beat_t a_in, w_in, a_out, w_out;
  logic shift_en;
  fp32_t [3:0] psum_in, psum_out;
  fp32_t [3:0][3:0] acc;
  int checks = 0, failures = 0;

  bme dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  smx_block_t ab, wb;
  real ref_c [4][4];
  real scl   [4][4];

  function automatic beat_t mk(smx_block_t b, int s, int n, logic tr);
    beat_t r;
    r.valid = 1'b1; r.trans = tr; r.top = (s == n - 1); r.slice = 2'(s); r.exp = b.exp;
    for (int e = 0; e < 16; e++) r.nib[e] = b.m[e][4*s +: 4];
    return r;
  endfunction

  task automatic clear_acc();
    shift_en = 1; psum_in = '0;
    repeat (4) @(negedge clk);
    shift_en = 0;
  endtask

  initial begin
    a_in = '0; w_in = '0; shift_en = 0; psum_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int run = 0; run < 60; run++) begin
      int pa, pw, na, nw, nbeats;
      logic ta, tw;
      pa = $urandom_range(2); pw = $urandom_range(2);
      if (run < 10) begin pa = 1; pw = 1; end
      na = pa + 1; nw = pw + 1;
      ta = 1'($urandom); tw = 1'($urandom);
      ab = '0; wb = '0;
      ab.exp = 8'($urandom_range(20) - 10);
      wb.exp = 8'($urandom_range(20) - 10);
      for (int e = 0; e < 16; e++) begin
        int va, vw;
        va = int'($urandom_range((1 << (4*na)) - 1)) - (1 << (4*na - 1));
        vw = int'($urandom_range((1 << (4*nw)) - 1)) - (1 << (4*nw - 1));
        ab.m[e] = 12'(va); wb.m[e] = 12'(vw);
      end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          ref_c[i][j] = 0.0; scl[i][j] = 0.0;
          for (int k = 0; k < 4; k++) begin
            int x, y; real t;
            x = elem_val(ta ? ab.m[4*k+i] : ab.m[4*i+k], pa);
            y = elem_val(tw ? wb.m[4*k+j] : wb.m[4*j+k], pw);
            t = real'(x * y) * pow2(int'(ab.exp) + int'(wb.exp));
            ref_c[i][j] += t; scl[i][j] += rabs(t);
          end
        end
      clear_acc();
      nbeats = 0;
      for (int sa = 0; sa < na; sa++)
        for (int sw = 0; sw < nw; sw++) begin
          a_in = mk(ab, sa, na, ta);
          w_in = mk(wb, sw, nw, tw);
          @(negedge clk);
          nbeats++;
          // forwarding: a_out/w_out carry this beat one cycle later
          checks++;
          if (a_out != a_in || w_out != w_in) begin failures++; $display("FAIL forwarding"); end
        end
      a_in = '0; w_in = '0;
      @(negedge clk);
      checks++;
      if (nbeats != na * nw || (pa == 1 && pw == 1 && nbeats != 4)) begin
        failures++; $display("FAIL beat count %0d", nbeats);
      end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (!close(fp2r(acc[i][j]), ref_c[i][j], scl[i][j], 1.0e-6, 1.0e-30)) begin
            failures++;
            $display("FAIL run %0d C[%0d][%0d] got %g exp %g (pa %0d pw %0d ta %0d tw %0d)",
                     run, i, j, fp2r(acc[i][j]), ref_c[i][j], pa, pw, ta, tw);
          end
        end
    end
    // shift chain: one shift moves column j to j+1 and exposes column 3
    begin
      fp32_t [3:0][3:0] acc_prev;
      acc_prev = acc;
      shift_en = 1;
      for (int i = 0; i < 4; i++) psum_in[i] = 32'(i + 1) << 23 | 32'h3f800000;
      checks++;
      for (int i = 0; i < 4; i++) if (psum_out[i] != acc_prev[i][3]) begin
        failures++; $display("FAIL psum_out row %0d", i);
      end
      @(negedge clk);
      shift_en = 0;
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (acc[i][0] != psum_in[i] || acc[i][1] != acc_prev[i][0] || acc[i][3] != acc_prev[i][2]) begin
          failures++; $display("FAIL shift row %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
