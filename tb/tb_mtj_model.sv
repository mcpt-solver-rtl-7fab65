// tb_mtj_model -- checks the stochastic MTJ model: switching only towards the
// target, switching rate against the programmed code for full pulses, a lower
// rate for pulses cut to a fifth, and deterministic forced writes.
// Pulse lengths in ps; the 5 ns write is the paper's, the rate tolerances
// (+-0.04 over 2000 pulses) are this bench's.
module tb_mtj_model;
  timeunit 1ps; timeprecision 1ps;

  logic       wr_en = 0, wr_data = 0, force_en = 0, force_data = 0;
  logic [7:0] p_code = 0;
  logic       state;
  int         checks = 0, failures = 0;

  mtj_model #(.T_WR_PS(5000)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Force a start state, apply one pulse of len ps, return whether it switched.
  task automatic pulse(input bit from, input bit to, input int len, output bit sw);
    force_data = from; force_en = 1; #10; force_en = 0; #10;
    wr_data = to; wr_en = 1; #(len); wr_en = 0; #10;
    sw = (state != from);
  endtask

  function automatic bit near(real got, real want, real tol);
    return (got > want - tol) && (got < want + tol);
  endfunction

  initial begin : watchdog
    #(200_000_000);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit sw; int n, late;
    int codes[3] = '{32, 128, 224};
    // forced writes
    force_data = 1; force_en = 1; #5; check(state == 1, "force 1"); force_en = 0; #5;
    force_data = 0; force_en = 1; #5; check(state == 0, "force 0"); force_en = 0; #5;
    // code 0 never switches
    n = 0; p_code = 0;
    repeat (300) begin pulse(0, 1, 5000, sw); n += sw; end
    check(n == 0, $sformatf("p=0 switched %0d", n));
    // already in target: no change even at full strength
    n = 0; p_code = 255;
    repeat (100) begin pulse(1, 1, 5000, sw); n += (state != 1); end
    check(n == 0, "write to same state changed it");
    // rates
    for (int i = 0; i < 3; i++) begin
      p_code = codes[i]; n = 0;
      repeat (2000) begin pulse(0, 1, 5000, sw); n += sw; end
      check(near(real'(n) / 2000.0, real'(codes[i]) / 256.0, 0.04),
            $sformatf("0->1 rate code %0d: %0d/2000", codes[i], n));
      n = 0;
      repeat (2000) begin pulse(1, 0, 5000, sw); n += sw; end
      check(near(real'(n) / 2000.0, real'(codes[i]) / 256.0, 0.04),
            $sformatf("1->0 rate code %0d: %0d/2000", codes[i], n));
    end
    // a pulse cut to 1 ns switches only if the drawn instant falls inside it
    p_code = 255; n = 0;
    late = 0;
    repeat (2000) begin
      pulse(0, 1, 1000, sw); n += sw;
      #5000 late += (state != sw);   // nothing may switch once the pulse ended
    end
    check(near(real'(n) / 2000.0, 0.2, 0.04), $sformatf("short pulse rate %0d/2000", n));
    check(late == 0, $sformatf("%0d switches after the pulse ended", late));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
