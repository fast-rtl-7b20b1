// tb_row_decoder: every address, enabled and disabled, at the default size.
module tb_row_decoder;
  localparam int ROWS = 128;
  logic            en;
  logic [6:0]      addr;
  logic [ROWS-1:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.ROWS(ROWS)) dut (.*);

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < ROWS; a++) begin
        en = 1'(e); addr = 7'(a);
        #1;
        checks++;
        if (wl !== (e ? (128'd1 << a) : 128'd0)) begin
          failures++; $display("addr %0d en %0d: wl wrong", a, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
