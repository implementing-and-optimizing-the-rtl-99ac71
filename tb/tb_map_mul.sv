// tb_map_mul: self-checking test of the Q x K^T multiplier node.
// Random operands (small enough that the exact product fits a double) are
// checked against floor(a*b / 2^16) computed in real arithmetic, and the
// join handshake (valid only with both inputs, each input's ready only with
// the other valid and the output ready) is checked for random valid/ready.
module tb_map_mul;
  import sdpa_pkg::*;
  logic a_valid, a_ready, b_valid, b_ready, out_valid, out_ready;
  fx_t  a_data, b_data, out_data;
  int   checks = 0, failures = 0;

  map_mul dut (.*);

  function automatic fx_t rnd_small();
    return fx_t'($signed($urandom) >>> 11);   // about +-2^20
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      real  ra, rb;
      longint exp_v;
      a_valid   = 1'($urandom);
      b_valid   = 1'($urandom);
      out_ready = 1'($urandom);
      a_data    = rnd_small();
      b_data    = rnd_small();
      #1;
      ra = real'(a_data);
      rb = real'(b_data);
      exp_v = longint'($floor(ra * rb / 65536.0));
      checks++;
      if (out_data !== fx_t'(exp_v)) begin
        failures++;
        if (failures < 10) $display("product %0d*%0d got %0d want %0d", a_data, b_data, out_data, exp_v);
      end
      checks++;
      if (out_valid !== (a_valid && b_valid) || a_ready !== (out_ready && b_valid)
          || b_ready !== (out_ready && a_valid)) begin
        failures++;
        if (failures < 10) $display("handshake mismatch");
      end
      #1;
    end
    // Known values: 1.5 * -2.25 = -3.375, 0.5 * 0.5 = 0.25
    a_data = 32'sd98304; b_data = -32'sd147456; #1; checks++;
    if (out_data !== -32'sd221184) failures++;
    a_data = 32'sd32768; b_data = 32'sd32768; #1; checks++;
    if (out_data !== 32'sd16384) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
