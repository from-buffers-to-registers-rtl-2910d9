// tb_skew_buffer: drives a random vector every cycle into a 5-lane skew buffer and checks
// that lane r delivers, in every cycle, exactly what entered lane r r cycles earlier
// (lane 0 without delay), after reset has cleared the shift registers to zero.
module tb_skew_buffer;
  localparam int D  = 5;
  localparam int DW = 8;
  logic          clk = 1'b0, rst = 1'b1;
  logic [DW-1:0] d_i [D], d_o [D];
  logic [DW-1:0] hist [64][D];
  int checks = 0, failures = 0;

  skew_buffer #(.D(D), .DW(DW)) dut (.clk, .rst, .d_i, .d_o);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    for (int r = 0; r < D; r++) d_i[r] = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    // after reset every delayed lane outputs 0
    for (int r = 1; r < D; r++) begin
      checks++;
      if (d_o[r] != '0) begin failures++; $display("FAIL: lane %0d not cleared", r); end
    end
    for (int t = 0; t < 60; t++) begin
      for (int r = 0; r < D; r++) begin
        d_i[r] = DW'($urandom);
        hist[t][r] = d_i[r];
      end
      #1;
      for (int r = 0; r < D; r++) begin
        if (t >= r) begin
          checks++;
          if (d_o[r] != hist[t - r][r]) begin
            failures++;
            $display("FAIL: t=%0d lane %0d got %h expected %h", t, r, d_o[r], hist[t - r][r]);
          end
        end
      end
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
