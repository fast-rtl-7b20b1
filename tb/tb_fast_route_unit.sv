// tb_fast_route_unit: exhaustive test of the routing switch (5 inputs).
module tb_fast_route_unit;
  logic join_seg, left_lsb, left_alu, ret_in, to_right, ret_out, left_active;
  int checks = 0, failures = 0;

  fast_route_unit dut (.*);

  initial begin
    for (int v = 0; v < 16; v++) begin
      {join_seg, left_lsb, left_alu, ret_in} = 4'(v);
      #1;
      checks++;
      if (join_seg) begin
        if (to_right !== left_lsb || ret_out !== ret_in || left_active !== 1'b0) begin
          failures++; $display("joined mode wrong for %b", 4'(v));
        end
      end else begin
        if (to_right !== ret_in || ret_out !== left_alu || left_active !== 1'b1) begin
          failures++; $display("split mode wrong for %b", 4'(v));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
