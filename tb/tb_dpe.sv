// tb_dpe: self-checking test of the Dot-Product Engine. Random slice beats
// (signed and unsigned slices, varying exponents) are accumulated and
// compared with a real-number model; small integer cases are checked
// exactly; the psum shift path and the hold behaviour (no enable) are checked.
module tb_dpe;
  import pinta_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  logic en, shift_en, a_signed, w_signed;
  logic [3:0][3:0] a_nib, w_nib;
  logic signed [11:0] e_o;
  fp32_t psum_in, acc;
  int checks = 0, failures = 0;
  real ref_v, scale;

  dpe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nv(logic [3:0] n, logic s);
    return s ? int'($signed(n)) : int'(n);
  endfunction

  task automatic chk(real expv, real sc, string what);
    checks++;
    if (!close(fp2r(acc), expv, sc, 1.0e-6, 1.0e-30)) begin
      failures++;
      $display("FAIL %s: got %g expected %g", what, fp2r(acc), expv);
    end
  endtask

  initial begin
    en = 0; shift_en = 0; a_signed = 0; w_signed = 0; a_nib = '0; w_nib = '0;
    e_o = '0; psum_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (acc != 32'h0) begin failures++; $display("FAIL reset"); end

    // exact small integer case: [1,2,3,4].[5,6,7,8] = 70, then -8*-8*4 = 256
    en = 1; a_nib = {4'd4, 4'd3, 4'd2, 4'd1}; w_nib = {4'd8, 4'd7, 4'd6, 4'd5};
    @(negedge clk);
    checks++; if (acc != 32'h428c0000) begin failures++; $display("FAIL exact 70: %h", acc); end
    a_nib = {4{4'h8}}; w_nib = {4{4'h8}}; a_signed = 1; w_signed = 1;
    @(negedge clk);
    checks++; if (acc != 32'h43a30000) begin failures++; $display("FAIL exact 326: %h", acc); end
    // unsigned 15*15*4 = 900 with e_o = -2 -> 225 ; total 551
    a_nib = {4{4'hf}}; w_nib = {4{4'hf}}; a_signed = 0; w_signed = 0; e_o = -12'sd2;
    @(negedge clk);
    checks++; if (acc != 32'h4409c000) begin failures++; $display("FAIL exact 551: %h", acc); end
    // mixed: signed -1 * unsigned 15 = -15 x4 = -60 at e_o=0 -> 491
    a_nib = {4{4'hf}}; w_nib = {4{4'hf}}; a_signed = 1; w_signed = 0; e_o = 12'sd0;
    @(negedge clk);
    checks++; if (acc != 32'h43f58000) begin failures++; $display("FAIL exact 491: %h", acc); end
    // hold
    en = 0;
    repeat (3) @(negedge clk);
    checks++; if (acc != 32'h43f58000) begin failures++; $display("FAIL hold"); end
    // shift loads psum_in
    shift_en = 1; psum_in = 32'h3fc00000;  // 1.5
    @(negedge clk);
    shift_en = 0;
    checks++; if (acc != 32'h3fc00000) begin failures++; $display("FAIL shift %h", acc); end

    // random accumulation, several runs
    for (int run = 0; run < 40; run++) begin
      shift_en = 1; psum_in = '0; en = 0;
      @(negedge clk);
      shift_en = 0;
      ref_v = 0.0; scale = 0.0;
      for (int t = 0; t < 24; t++) begin
        int s, ev; real term;
        en = 1;
        a_nib = 16'($urandom); w_nib = 16'($urandom);
        a_signed = 1'($urandom); w_signed = 1'($urandom);
        ev = $urandom_range(40);
        e_o = 12'(ev - 20);
        s = 0;
        for (int k = 0; k < 4; k++) begin
          int av, wv;
          av = nv(a_nib[k], a_signed);
          wv = nv(w_nib[k], w_signed);
          s = s + av * wv;
        end
        term = real'(s) * pow2(int'(e_o));
        ref_v += term; scale += rabs(term);
        @(negedge clk);
      end
      en = 0;
      chk(ref_v, scale, "random accumulate");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
