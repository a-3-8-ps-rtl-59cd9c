// tb_clk_mux -- checks that the slave clock multiplexer passes exactly the
// selected input and gives a low output for a select value past the last
// slave. Random input patterns are applied for every select value and the
// output is compared with the bit picked out independently by the bench.
`timescale 1ps / 10fs
module tb_clk_mux;
  localparam int N  = 7;
  localparam int SW = 3;
  logic [N-1:0]  clk_in;
  logic [SW-1:0] sel;
  logic          clk_out;
  int checks = 0, failures = 0;

  clk_mux #(.N(N), .SW(SW)) dut (.clk_in(clk_in), .sel(sel), .clk_out(clk_out));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 64; rep++) begin
      for (int s = 0; s < (1 << SW); s++) begin
        logic expect_v;
        clk_in = N'($urandom);
        sel    = SW'(s);
        #10;
        expect_v = (s < N) ? ((clk_in >> s) & 1'b1) : 1'b0;
        checks++;
        if (clk_out !== expect_v) begin
          failures++;
          $display("mismatch sel=%0d in=%b out=%b", s, clk_in, clk_out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
