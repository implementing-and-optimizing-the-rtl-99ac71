// tb_map_div: self-checking test of the final divider node o = l / r.
// Random operands are checked against the quotient computed in real
// arithmetic and truncated toward zero; division by zero and quotients too
// large for the format must saturate. The join handshake is checked too.
module tb_map_div;
  import sdpa_pkg::*;
  logic x_valid, x_ready, y_valid, y_ready, out_valid, out_ready;
  fx_t  x_data, y_data, out_data;
  int   checks = 0, failures = 0;

  map_div dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      real q;
      x_valid   = 1'($urandom);
      y_valid   = 1'($urandom);
      out_ready = 1'($urandom);
      x_data    = fx_t'($signed($urandom) >>> 8);
      y_data    = fx_t'($signed($urandom) >>> 12);
      if (y_data == 0) y_data = 1;
      #1;
      q = real'(x_data) * 65536.0 / real'(y_data);
      checks++;
      if (q < 2147483647.0 && q > -2147483648.0) begin
        if (out_data !== fx_t'($rtoi(q))) begin
          failures++;
          if (failures < 10) $display("%0d/%0d got %0d want %0d", x_data, y_data, out_data, $rtoi(q));
        end
      end else if (out_data !== (q > 0 ? FX_MAX : FX_MIN)) begin
        failures++;
        if (failures < 10) $display("no saturation for %0d/%0d", x_data, y_data);
      end
      checks++;
      if (out_valid !== (x_valid && y_valid) || x_ready !== (out_ready && y_valid)
          || y_ready !== (out_ready && x_valid)) failures++;
      #1;
    end
    // 3 / 2 = 1.5; -1 / 4 = -0.25; x / 0 saturates
    x_data = 32'sd196608; y_data = 32'sd131072; #1; checks++;
    if (out_data !== 32'sd98304) failures++;
    x_data = -32'sd65536; y_data = 32'sd262144; #1; checks++;
    if (out_data !== -32'sd16384) failures++;
    x_data = 32'sd5; y_data = 0; #1; checks++;
    if (out_data !== 32'sh7fffffff) failures++;
    x_data = 32'sd1000000000; y_data = 32'sd1; #1; checks++;
    if (out_data !== 32'sh7fffffff) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
