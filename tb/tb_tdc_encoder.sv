// tb_tdc_encoder -- checks the thermometer-to-binary encoder.
// The bench plays hit events into the encoder as the sampled line would show
// them: empty samples, one sample with the rising edge k taps in (with a
// bubble pair near the edge for most events), full samples, the falling
// edge, empty samples again. For each event exactly one `valid` must appear,
// two cycles after the edge sample, carrying k. Edge positions are random
// over the whole line; the first and last tap are included.
`timescale 1ps / 10fs
module tb_tdc_encoder;
  localparam int TAPS = 160;
  localparam int CW   = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [TAPS-1:0] therm = '0;
  logic [CW-1:0]   code;
  logic            valid;
  int checks = 0, failures = 0;
  int exp_q[$];
  int exp_cyc[$];
  int cyc = 0, n_valid = 0, n_events = 0;

  tdc_encoder dut (.clk(clk), .rst_n(rst_n), .therm(therm), .code(code), .valid(valid));

  always #3200 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [TAPS-1:0] ones(int n);
    logic [TAPS-1:0] v = '0;
    for (int i = 0; i < n && i < TAPS; i++) v[i] = 1'b1;
    return v;
  endfunction

  // Output monitor.
  always @(posedge clk) if (rst_n) begin
    if (valid) begin
      n_valid++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected valid, code %0d", code);
      end else begin
        int e, ec;
        e  = exp_q.pop_front();
        ec = exp_cyc.pop_front();
        if (code != CW'(e) || cyc != ec) begin
          failures++;
          $display("event: code %0d at cycle %0d, expected %0d at cycle %0d", code, cyc, e, ec);
        end
      end
    end
  end

  task automatic put(input logic [TAPS-1:0] v);
    @(negedge clk) therm = v;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (3) put('0);
    for (int ev = 0; ev < 300; ev++) begin
      int k;
      logic [TAPS-1:0] v;
      k = (ev == 0) ? 1 : (ev == 1) ? TAPS - 1 : 1 + int'($urandom % (TAPS - 1));
      v = ones(k);
      if (k >= 3 && k <= TAPS - 2 && ev % 4 != 3) begin
        v[k - 2] = 1'b0;   // bubble below the edge
        v[k]     = 1'b1;   // and its partner above it
      end
      @(negedge clk) therm = v;
      // Sampled by the encoder at the next edge; valid is set at the edge
      // after that and seen by the monitor one edge later still, when the
      // cycle counter (read before its own update) has advanced by two.
      exp_q.push_back(k);
      exp_cyc.push_back(cyc + 2);
      n_events++;
      repeat (3) put('1);
      put(~ones(k));
      repeat (3) put('0);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_valid != n_events) begin
      failures++;
      $display("%0d events, %0d valid outputs", n_events, n_valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
