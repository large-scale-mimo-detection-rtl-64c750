// Self-checking testbench of recip_unit: random positive inputs over the
// whole range, compared with 1/x computed in floating point (relative error
// below 0.2 %, or saturation where 1/x exceeds the output range); also checks
// the one-clock latency and that a zero input saturates.
module tb_recip_unit;
  localparam int IN_W = 16, IN_FB = 12, OUT_W = 15, OUT_FB = 12;
  logic clk = 0;
  logic [IN_W-1:0]  in_val;
  logic [OUT_W-1:0] out_val;

  recip_unit #(.IN_W(IN_W), .IN_FB(IN_FB), .OUT_W(OUT_W), .OUT_FB(OUT_FB)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int v);
    real exp, got, maxo;
    in_val <= IN_W'(v);
    @(posedge clk);   // registered here
    #1;
    got  = real'(out_val) / real'(1 << OUT_FB);
    maxo = real'((1 << OUT_W) - 1) / real'(1 << OUT_FB);
    checks++;
    if (v == 0) begin
      if (out_val != '1) begin failures++; $display("FAIL zero input: %0d", out_val); end
    end else begin
      exp = real'(1 << IN_FB) / real'(v);
      if (exp >= maxo) begin
        if (out_val != '1) begin failures++; $display("FAIL no saturation for %0d", v); end
      end else if (got > exp * 1.002 + 1.0/4096 || got < exp * 0.998 - 1.0/4096) begin
        failures++;
        if (failures < 10) $display("FAIL 1/%f: got %f expected %f", real'(v)/4096.0, got, exp);
      end
    end
  endtask

  initial begin
    in_val = '0;
    @(posedge clk);
    one(0);
    one(4096);      // 1.0
    one(2048);      // 0.5
    one(8192);      // 2.0
    one(1);         // tiny: saturates
    for (int k = 0; k < 2000; k++) one(int'($urandom_range(1, 65535)));
    for (int k = 0; k < 500; k++) one(int'($urandom_range(1024, 16384)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
