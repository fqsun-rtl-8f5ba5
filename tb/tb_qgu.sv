// tb_qgu: self-checking test of the Quantum Gate Unit.
//
// For each of the six opcodes it applies random amplitudes x, y, z, random
// target/control bits and a random angle's sin/cos, holds them for the
// gate's latency and compares y', z' with a reference worked out here from
// the gate matrices (Q1.30 fixed point, products truncated like the
// hardware). It also checks that the multiplier gates are not ready one
// cycle early (latency 2 cycles) and that S and CX respond in the same cycle.
module tb_qgu;
  import fqsun_pkg::*;
  localparam int W = 32;
  localparam int F = W - 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  gate_e gate;
  logic state, ctrl;
  logic signed [W-1:0] cos_h, sin_h, x_re, x_im, y_re, y_im, z_re, z_im;
  logic signed [W-1:0] yo_re, yo_im, zo_re, zo_im;

  int checks = 0, failures = 0;

  qgu #(.W(W)) dut (.*);

  function automatic longint fm(longint a, longint b);
    return (a * b) >>> F;
  endfunction

  function automatic logic signed [W-1:0] rnd_amp();
    return W'($signed($urandom) >>> 2);   // |v| < 0.5
  endfunction

  // reference: new column contributions of matrix g = [[a,b],[c,d]]
  task automatic reference(output longint ryr, ryi, rzr, rzi);
    longint k, c, s;
    k = longint'(0.70710678118654752 * (2.0 ** F));
    c = cos_h; s = sin_h;
    ryr = y_re; ryi = y_im; rzr = z_re; rzi = z_im;
    unique case (gate)
      G_H: begin
        // column (1/sqrt2)[1, 1] for bit 0, [1, -1] for bit 1 (y is the diagonal)
        ryr = state ? y_re - fm(x_re, k) : y_re + fm(x_re, k);
        ryi = state ? y_im - fm(x_im, k) : y_im + fm(x_im, k);
        rzr = z_re + fm(x_re, k);
        rzi = z_im + fm(x_im, k);
      end
      G_S: if (!state) begin ryr = y_re + x_re; ryi = y_im + x_im; end
           else        begin ryr = y_re - x_im; ryi = y_im + x_re; end
      G_CX: if (!ctrl) begin ryr = y_re + x_re; ryi = y_im + x_im; end
            else       begin rzr = z_re + x_re; rzi = z_im + x_im; end
      G_RX: begin  // [[c, -is], [-is, c]]
        ryr = y_re + fm(x_re, c); ryi = y_im + fm(x_im, c);
        rzr = z_re + fm(x_im, s); rzi = z_im - fm(x_re, s);
      end
      G_RY: begin  // [[c, -s], [s, c]]
        ryr = y_re + fm(x_re, c); ryi = y_im + fm(x_im, c);
        if (!state) begin rzr = z_re + fm(x_re, s); rzi = z_im + fm(x_im, s); end
        else        begin rzr = z_re - fm(x_re, s); rzi = z_im - fm(x_im, s); end
      end
      G_RZ: begin  // diag(c - is, c + is)
        if (!state) begin
          ryr = y_re + fm(x_re, c) + fm(x_im, s); ryi = y_im + fm(x_im, c) - fm(x_re, s);
        end else begin
          ryr = y_re + fm(x_re, c) - fm(x_im, s); ryi = y_im + fm(x_im, c) + fm(x_re, s);
        end
      end
      default: ;
    endcase
  endtask

  function automatic bit same(longint r, logic signed [W-1:0] v);
    return W'(r) == v;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ryr, ryi, rzr, rzi;
    gate_e glist[6] = '{G_H, G_S, G_CX, G_RX, G_RY, G_RZ};
    real th;
    int lat;
    int early_diff = 0;
    gate = G_H; state = 0; ctrl = 0;
    {cos_h, sin_h, x_re, x_im, y_re, y_im, z_re, z_im} = '0;
    repeat (3) @(posedge clk);
    foreach (glist[gi]) begin
      for (int t = 0; t < 300; t++) begin
        @(negedge clk);
        gate  = glist[gi];
        state = 1'($urandom);
        ctrl  = 1'($urandom);
        th    = 6.283185307179586 * ($urandom % 100000) / 100000.0;
        cos_h = W'(longint'($cos(th / 2) * (2.0 ** F)));
        sin_h = W'(longint'($sin(th / 2) * (2.0 ** F)));
        x_re = rnd_amp(); x_im = rnd_amp();
        y_re = rnd_amp(); y_im = rnd_amp();
        z_re = rnd_amp(); z_im = rnd_amp();
        reference(ryr, ryi, rzr, rzi);
        lat = (gate == G_S || gate == G_CX) ? 0 : 2;
        if (lat > 0) begin
          @(negedge clk);   // one cycle after the operands: not yet valid
          if (!(same(ryr, yo_re) && same(ryi, yo_im) && same(rzr, zo_re) && same(rzi, zo_im)))
            early_diff++;
          @(negedge clk);
        end else begin
          #1;
        end
        checks++;
        if (!(same(ryr, yo_re) && same(ryi, yo_im) && same(rzr, zo_re) && same(rzi, zo_im))) begin
          failures++;
          if (failures < 10)
            $display("FAIL gate=%s st=%0d ctl=%0d y'=(%0d,%0d) exp (%0d,%0d) z'=(%0d,%0d) exp (%0d,%0d)",
                     gate.name(), state, ctrl, yo_re, yo_im, W'(ryr), W'(ryi),
                     zo_re, zo_im, W'(rzr), W'(rzi));
        end
      end
    end
    // the multiplying gates (4 of 6, 300 vectors each) must show their latency
    checks++;
    if (early_diff < 1000) begin
      failures++;
      $display("FAIL latency: only %0d of 1200 early samples differed", early_diff);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
