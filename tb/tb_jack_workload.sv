// tb_jack_workload: long dot products as a CNN layer presents them to the
// Jack unit.
//
// Each output of a 7x7 depthwise convolution (the second layer of a
// ConvNeXt-T style network) is a 49-term dot product. In each of the seven
// modes the testbench splits every output into unit operations (13 in the
// 8-bit modes, 4 in the 4-bit modes, zero padded), streams them back to back
// and adds the 16-bit results in a real-valued accumulator. That accumulator
// stands in for the one that would follow the unit. MX modes use blocks of
// 32 elements sharing one exponent per operand, so a block spans 8 operations
// (8-bit) or 2 (4-bit). Data are random, in the ranges a trained layer
// would use; the layer shape is that of the standard ConvNeXt-T network.
// Checks: every unit result matches the reference model bit-exactly; each
// accumulated output is within 2^-6 of the exact dot product, relative to
// the sum of the product magnitudes (the 7-bit truncation of each partial
// result bounds this by about 2^-7); INT8 and INT4 outputs are exact. The
// average normalised error per mode is printed.
module tb_jack_workload;
  import jack_pkg::*;
  import jack_ref_pkg::*;

  localparam int TAPS = 49;
  localparam int OUTS = 48;   // outputs per mode

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
  res_t q [$];
  real  acc;          // accumulator of the current output
  int   n_results;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      res_t r;
      r = q.pop_front();
      checks++;
      if (out_data != r.data) begin
        failures++;
        if (failures < 10) $display("FAIL unit result %h exp %h", out_data, r.data);
      end
      acc += out_int ? real'($signed(out_data)) : bf16_real(out_data);
      n_results++;
    end
  end

  task automatic drive(op_t op);
    int nb = mode_is_wide(op.mode) ? 1 : 2;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      in_valid = 1;
      mode = op.mode; int_signed = op.int_signed;
      shared_exp_x = op.shx; shared_exp_w = op.shw;
      exp_x = '0; exp_w = '0;
      for (int i = 0; i < 16; i++) begin sign_x[i] = op.sx[i]; sign_w[i] = op.sw[i]; end
      for (int c = 0; c < 4; c++) begin
        if (nb == 1) begin
          sig_x[8*c +: 8] = op.xs[c]; sig_w[8*c +: 8] = op.ws[c];
          exp_x[8*c +: 8] = op.ex[c]; exp_w[8*c +: 8] = op.ew[c];
        end else begin
          sig_x[8*c +: 8] = {op.xs[4*c + 2*b + 1][3:0], op.xs[4*c + 2*b][3:0]};
          sig_w[8*c +: 8] = {op.ws[4*c + 2*b + 1][3:0], op.ws[4*c + 2*b][3:0]};
        end
      end
      if (nb == 2)
        for (int i = 0; i < 16; i++) begin
          exp_x[4*i +: 4] = op.ex[i][3:0]; exp_w[4*i +: 4] = op.ew[i][3:0];
        end
    end
    q.push_back(jack_ref(op));
  endtask

  // one element of a layer: random value in the mode's format
  task automatic gen_elem(jack_mode_e m, output bit [7:0] s, output bit [7:0] e, output bit sg);
    sg = 1'($urandom);
    case (m)
      MODE_BF16: begin s = {1'b1, 7'($urandom)}; e = 8'($urandom_range(121, 129)); end
      MODE_FP8, MODE_MXFP8: begin s = {4'h0, 1'b1, 3'($urandom)}; e = 8'($urandom_range(3, 9)); end
      MODE_INT8, MODE_MXINT8: begin s = 8'($urandom_range(0, 127)) - 8'd64; e = 0; end
      default: begin s = {4'h0, 4'($urandom)}; e = 0; end
    endcase
  endtask

  initial begin
    automatic jack_mode_e modes [7] = '{MODE_BF16, MODE_FP8, MODE_INT8, MODE_INT4,
                                        MODE_MXINT8, MODE_MXINT4, MODE_MXFP8};
    op_t op, blk;
    bit [7:0] xs [64], ws [64], xe [64], we [64];
    bit       xsg [64], wsg [64];
    bit [7:0] shx [2], shw [2];
    real exact, mag, err, xv, wv, err_sum;
    int per, nops, base;
    in_valid = 0; mode = MODE_BF16; int_signed = 1;
    sig_x = 0; sig_w = 0; exp_x = 0; exp_w = 0; sign_x = 0; sign_w = 0;
    shared_exp_x = 0; shared_exp_w = 0;
    acc = 0.0; n_results = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    foreach (modes[mi]) begin
      automatic jack_mode_e m = modes[mi];
      per = mode_is_wide(m) ? 4 : 16;
      nops = (TAPS + per - 1) / per;
      err_sum = 0.0;
      for (int o = 0; o < OUTS; o++) begin
        for (int i = 0; i < 64; i++) begin
          gen_elem(m, xs[i], xe[i], xsg[i]);
          gen_elem(m, ws[i], we[i], wsg[i]);
          if (i >= TAPS) begin xs[i] = 0; xe[i] = 0; end
        end
        for (int b = 0; b < 2; b++) begin
          shx[b] = 8'($urandom_range(118, 124));
          shw[b] = 8'($urandom_range(118, 124));
        end
        // exact dot product and magnitude sum from the element values
        exact = 0.0; mag = 0.0;
        for (int i = 0; i < TAPS; i++) begin
          op.mode = m; op.int_signed = 1;
          op.xs[0] = xs[i]; op.ws[0] = ws[i]; op.ex[0] = xe[i]; op.ew[0] = we[i];
          op.sx[0] = xsg[i]; op.sw[0] = wsg[i];
          op.shx = shx[i / 32]; op.shw = shw[i / 32];
          for (int k = 1; k < 16; k++) begin op.xs[k] = 0; op.ws[k] = 0; op.ex[k] = 0; op.ew[k] = 0; end
          xv = jack_real(op);
          exact += xv;
          mag += (xv < 0) ? -xv : xv;
        end
        // stream the operations
        acc = 0.0; n_results = 0;
        for (int p = 0; p < nops; p++) begin
          blk.mode = m; blk.int_signed = 1;
          base = p * per;
          blk.shx = shx[base / 32]; blk.shw = shw[base / 32];
          for (int k = 0; k < 16; k++) begin
            if (k < per) begin
              blk.xs[k] = xs[base + k]; blk.ws[k] = ws[base + k];
              blk.ex[k] = xe[base + k]; blk.ew[k] = we[base + k];
              blk.sx[k] = xsg[base + k]; blk.sw[k] = wsg[base + k];
            end else begin
              blk.xs[k] = 0; blk.ws[k] = 0; blk.ex[k] = 0; blk.ew[k] = 0; blk.sx[k] = 0; blk.sw[k] = 0;
            end
          end
          drive(blk);
        end
        @(negedge clk) in_valid = 0;
        repeat (3) @(posedge clk);
        checks++;
        if (n_results != nops) begin failures++; $display("FAIL %0d results of %0d", n_results, nops); end
        err = acc - exact;
        if (err < 0) err = -err;
        err = (mag > 0) ? err / mag : 0.0;
        err_sum += err;
        checks++;
        if (mode_is_int(m) ? (acc != exact) : (err > 1.0 / 64.0)) begin
          failures++;
          $display("FAIL mode=%s output %0d: got %g exact %g", m.name(), o, acc, exact);
        end
      end
      $display("%s: %0d outputs of %0d taps, %0d operations each, mean normalised error %g",
               m.name(), OUTS, TAPS, nops, err_sum / OUTS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
