// tb_jack_unit: end-to-end test of the Jack unit at its only configuration.
//
// Random operations in all seven modes are streamed through the unit, mostly
// back to back, with occasional idle cycles and frequent mode switches.
// Directed operations force the corner mechanisms: exponent overflow and
// flush to zero, INT16 saturation, products shifted out completely,
// cancellation and carry-out in the adder tree. Every result is checked
// bit-exactly against the reference model, its latency (2 cycles after the
// completing beat) is checked, and FP/MX results are also checked against the
// exact real-valued dot product within the truncation error bound. Each
// mechanism is counted; one that never happened counts as a failure.
module tb_jack_unit;
  import jack_pkg::*;
  import jack_ref_pkg::*;

  localparam int NOPS = 20000;

  logic        clk = 0, rst_n = 0;
  jack_mode_e  mode;
  logic        int_signed, in_valid;
  logic [31:0] sig_x, sig_w;
  logic [63:0] exp_x, exp_w;
  logic [15:0] sign_x, sign_w;
  logic [7:0]  shared_exp_x, shared_exp_w;
  logic        out_valid, out_int, out_sat, out_flush;
  logic [15:0] out_data;

  jack_unit dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  typedef struct { res_t r; real x; longint c; jack_mode_e m; } exp_t;
  exp_t q [$];

  // mechanism counters
  int n_mode [7];
  int n_switch, n_twobeat, n_backtoback, n_idle;
  int n_int_sat, n_fp_ovf, n_fp_flush, n_shift, n_shift_out, n_carry, n_cancel, n_neg, n_zero;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic op_t gen_op(jack_mode_e m, int kind);
    op_t op;
    op.mode = m;
    op.int_signed = (kind == 2) ? 1'b1 : 1'($urandom_range(0, 3) != 0);
    op.shx = 8'($urandom_range(90, 170));
    op.shw = 8'($urandom_range(90, 170));
    for (int i = 0; i < 16; i++) begin
      op.sx[i] = 1'($urandom); op.sw[i] = 1'($urandom);
      op.xs[i] = 8'($urandom); op.ws[i] = 8'($urandom);
      case (m)
        MODE_BF16: begin
          op.xs[i][7] = 1'b1; op.ws[i][7] = 1'b1;
          op.ex[i] = 8'($urandom_range(110, 140));
          op.ew[i] = 8'($urandom_range(110, 140));
          if (kind == 1) begin op.ex[i] = 8'(250 + i % 4); op.ew[i] = 8'd250; end   // overflow
          if (kind == 3) begin op.ex[i] = 8'($urandom_range(1, 20)); op.ew[i] = 8'($urandom_range(1, 20)); end // flush
        end
        MODE_FP8, MODE_MXFP8: begin
          op.xs[i] = {4'h0, 1'b1, 3'($urandom)}; op.ws[i] = {4'h0, 1'b1, 3'($urandom)};
          op.ex[i] = 8'($urandom_range(1, 15)); op.ew[i] = 8'($urandom_range(1, 15));
          if (kind == 1 && m == MODE_MXFP8) begin op.shx = 8'd200; op.shw = 8'd190; end
        end
        MODE_INT8, MODE_MXINT8: begin
          if (kind == 2) begin op.xs[i] = 8'h80; op.ws[i] = 8'h80; end                  // saturation
          op.ex[i] = 0; op.ew[i] = 0;
        end
        default: begin
          op.xs[i] = {4'h0, 4'($urandom)}; op.ws[i] = {4'h0, 4'($urandom)};
          op.ex[i] = 0; op.ew[i] = 0;
        end
      endcase
      // zero elements (FP zero is significand 0 with exponent 0)
      if (kind == 0 && $urandom_range(0, 15) == 0) begin
        op.xs[i] = 0;
        if (mode_is_fp(m)) op.ex[i] = 0;
      end
    end
    // cancellation: second half repeats the first half with opposite sign
    if (kind == 4 && mode_is_fp(m)) begin
      for (int i = 0; i < n_of(m) / 2; i++) begin
        int j = i + n_of(m) / 2;
        op.xs[j] = op.xs[i]; op.ws[j] = op.ws[i]; op.ex[j] = op.ex[i]; op.ew[j] = op.ew[i];
        op.sx[j] = !op.sx[i]; op.sw[j] = op.sw[i];
      end
      op.xs[0] = op.xs[0] ^ 8'h01;
    end
    return op;
  endfunction

  task automatic drive(op_t op, int gap);
    exp_t e;
    int nb = mode_is_wide(op.mode) ? 1 : 2;
    repeat (gap) begin
      @(negedge clk);
      in_valid = 0;
      sig_x = 32'($urandom); sig_w = 32'($urandom);
    end
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      in_valid = 1;
      mode = op.mode;
      int_signed = op.int_signed;
      shared_exp_x = op.shx; shared_exp_w = op.shw;
      exp_x = '0; exp_w = '0; sign_x = '0; sign_w = '0;
      for (int i = 0; i < 16; i++) begin sign_x[i] = op.sx[i]; sign_w[i] = op.sw[i]; end
      for (int c = 0; c < 4; c++) begin
        if (nb == 1) begin
          sig_x[8*c +: 8] = op.xs[c];
          sig_w[8*c +: 8] = op.ws[c];
          exp_x[8*c +: 8] = op.ex[c];
          exp_w[8*c +: 8] = op.ew[c];
        end else begin
          sig_x[8*c +: 8] = {op.xs[4*c + 2*b + 1][3:0], op.xs[4*c + 2*b][3:0]};
          sig_w[8*c +: 8] = {op.ws[4*c + 2*b + 1][3:0], op.ws[4*c + 2*b][3:0]};
        end
      end
      if (nb == 2)
        for (int i = 0; i < 16; i++) begin
          exp_x[4*i +: 4] = op.ex[i][3:0];
          exp_w[4*i +: 4] = op.ew[i][3:0];
        end
    end
    e.r = jack_ref(op);
    e.x = jack_real(op);
    e.c = cycle;        // edges so far; the unit takes the beat at the next edge
    e.m = op.mode;
    q.push_back(e);
  endtask

  // output monitor, sampling between clock edges
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      real got, tol, unit;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e = q.pop_front();
        checks++;
        if (out_data != e.r.data || out_int != e.r.is_int || out_sat != e.r.sat || out_flush != e.r.flush) begin
          failures++;
          if (failures < 20)
            $display("FAIL mode=%s got %h int=%0d sat=%0d fl=%0d exp %h int=%0d sat=%0d fl=%0d sum=%0d emax=%0d",
                     e.m.name(), out_data, out_int, out_sat, out_flush, e.r.data, e.r.is_int, e.r.sat, e.r.flush,
                     e.r.sum, e.r.emax);
        end
        checks++;
        if (cycle - e.c != 2) begin
          failures++;
          $display("FAIL latency %0d", cycle - e.c);
        end
        // real-valued tolerance check (FP and MX results in range)
        if (!e.r.is_int && !e.r.sat && !e.r.flush) begin
          got  = bf16_real(out_data);
          unit = pow2(e.r.emax - 127 - e.r.frac);
          tol  = unit * ((e.m == MODE_BF16) ? 1200.0 : mode_is_fp(e.m) ? 17.0 : 0.0)
               + ((got < 0) ? -got : got) / 64.0 + 1e-30;
          checks++;
          if (((got - e.x) > tol) || ((e.x - got) > tol)) begin
            failures++;
            if (failures < 20) $display("FAIL real mode=%s got %g exact %g tol %g", e.m.name(), got, e.x, tol);
          end
        end
        // mechanism counters
        if (e.r.is_int && e.r.sat) n_int_sat++;
        if (!e.r.is_int && e.r.sat) n_fp_ovf++;
        if (e.r.flush) n_fp_flush++;
        if (e.r.max_shift > 0) n_shift++;
        if (e.r.max_shift >= 9) n_shift_out++;
        if (!e.r.is_int && e.r.sum != 0 && e.r.lead > e.r.frac + 1) n_carry++;
        if (mode_is_fp(e.m) && e.r.sum != 0 && e.r.lead < e.r.frac) n_cancel++;
        if (e.r.sum < 0) n_neg++;
        if (e.r.sum == 0) n_zero++;
      end
    end
  end

  initial begin
    op_t op;
    jack_mode_e m, prev;
    int kind, gap;
    in_valid = 0; mode = MODE_BF16; int_signed = 1;
    sig_x = 0; sig_w = 0; exp_x = 0; exp_w = 0; sign_x = 0; sign_w = 0;
    shared_exp_x = 0; shared_exp_w = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    prev = MODE_BF16;
    m = MODE_BF16;
    for (int t = 0; t < NOPS; t++) begin
      if ($urandom_range(0, 7) == 0) m = jack_mode_e'($urandom_range(0, 6));
      kind = 0;
      case ($urandom_range(0, 39))
        0: kind = 1;
        1: kind = 2;
        2: kind = 3;
        3, 4: kind = 4;
        default: kind = 0;
      endcase
      op = gen_op(m, kind);
      gap = ($urandom_range(0, 9) == 0) ? $urandom_range(1, 3) : 0;
      if (gap > 0) n_idle++;
      else if (t > 0 && mode_is_wide(m) && mode_is_wide(prev)) n_backtoback++;
      if (t > 0 && m != prev) n_switch++;
      if (!mode_is_wide(m)) n_twobeat++;
      n_mode[int'(m)]++;
      drive(op, gap);
      prev = m;
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end

    $display("ops per mode: BF16 %0d FP8 %0d INT8 %0d INT4 %0d MXINT8 %0d MXINT4 %0d MXFP8 %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4], n_mode[5], n_mode[6]);
    $display("mode switches %0d, two-beat ops %0d, back-to-back 8-bit ops %0d, idle gaps %0d",
             n_switch, n_twobeat, n_backtoback, n_idle);
    $display("INT16 saturation %0d, FP overflow %0d, flush to zero %0d", n_int_sat, n_fp_ovf, n_fp_flush);
    $display("aligned shifts %0d, products shifted out %0d, carry-out %0d, cancellation %0d, negative %0d, zero %0d",
             n_shift, n_shift_out, n_carry, n_cancel, n_neg, n_zero);
    for (int i = 0; i < 7; i++) begin checks++; if (n_mode[i] == 0) failures++; end
    begin
      automatic int cnt [13] = '{n_switch, n_twobeat, n_backtoback, n_idle, n_int_sat, n_fp_ovf, n_fp_flush,
                       n_shift, n_shift_out, n_carry, n_cancel, n_neg, n_zero};
      for (int i = 0; i < 13; i++) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
