// tb_mx_max_tree -- self-checking test of the 32-input largest-value tree.
// Each vector of 32 FP32 words is checked against a linear scan that keeps
// the largest magnitude among words whose exponent is not 8'hFF. The output
// must also be one of the inputs (or 0 when every input is special).
module tb_mx_max_tree;
  import mx_ref_pkg::*;

  localparam int N = 32;
  logic [31:0] v [N];
  logic [31:0] ev;
  int checks = 0, failures = 0;

  mx_max_tree #(.N(N)) dut (.v(v), .ev(ev));

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(string tag);
    logic [30:0] exp;
    bit member;
    #1;
    exp = ref_max(v, N);
    member = (ev == 32'h0);
    for (int i = 0; i < N; i++) if (v[i] == ev) member = 1;
    checks++;
    if (ev[30:0] !== exp || !member) begin
      failures++;
      $display("FAIL %s ev=%h expected magnitude %h member=%0d", tag, ev, exp, member);
    end
  endtask

  initial begin
    // Paper example: V1 (exponent 171) wins over V2..V4; others zero.
    foreach (v[i]) v[i] = 32'h0;
    v[0] = 32'h55B0_0000; v[1] = 32'h5460_0000; v[2] = 32'h15A0_0000; v[3] = 32'hC7A0_0000;
    run("example");
    checks++;
    if (ev !== 32'h55B0_0000) begin failures++; $display("FAIL example ev=%h", ev); end
    // Maximum in the last slot and in every other slot.
    for (int pos = 0; pos < N; pos++) begin
      foreach (v[i]) v[i] = {1'b0, 8'(60 + i % 7), 23'($urandom)};
      v[pos] = {1'($urandom), 8'd200, 23'($urandom)};
      run("position");
      checks++;
      if (ev !== v[pos]) begin failures++; $display("FAIL position %0d", pos); end
    end
    // All special -> 0; specials mixed in are ignored.
    foreach (v[i]) v[i] = {1'($urandom), 8'hFF, 23'($urandom)};
    run("all-special");
    v[17] = 32'h3F80_0000;
    run("one-finite");
    // Random vectors.
    for (int t = 0; t < 3000; t++) begin
      foreach (v[i]) begin
        v[i] = $urandom;
        if ($urandom % 6 == 0) v[i][30:23] = 8'hFF;
        if (t % 2 == 0) v[i][30:23] = 8'(120 + $urandom % 4);
      end
      run("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
