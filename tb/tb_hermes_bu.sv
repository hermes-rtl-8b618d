// tb_hermes_bu: self-checking test of the Butterfly Unit.
// Streams one random butterfly per cycle (random Butterfly/Swap mode) into
// the BU with a 62-bit NTT prime, and compares every output with a
// reference computed with 128-bit arithmetic and the % operator. Also checks
// the 4-cycle latency and back-to-back throughput.
module tb_hermes_bu;
  import hermes_pkg::*;

  localparam logic [63:0] Q   = 64'h2000000000460001;
  localparam int          NUM = 2000;
  localparam int          LAT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  bu_mode_e mode;
  coef_t x1, x2, w, wpre, y1, y2;

  hermes_bu dut (.clk, .rst_n, .in_valid, .mode, .q(Q), .x1, .x2, .w, .wpre,
                 .out_valid, .y1, .y2);

  int checks = 0, failures = 0;
  coef_t exp1 [$], exp2 [$];
  int    t_in [$];
  int    cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic coef_t rnd_mod();
    logic [127:0] r;
    r = {$urandom, $urandom, $urandom, $urandom};
    return coef_t'(r % 128'(Q));
  endfunction

  initial begin
    in_valid = 0; mode = BU_BFLY; x1 = 0; x2 = 0; w = 0; wpre = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < NUM; n++) begin
      logic [127:0] t;
      coef_t a, b, ww;
      a  = (n < 4) ? Q - 1 : rnd_mod();
      b  = (n < 4) ? Q - 1 - coef_t'(n) : rnd_mod();
      ww = (n == 1) ? 0 : rnd_mod();
      mode = ($urandom_range(0, 3) == 0) ? BU_SWAP : BU_BFLY;
      x1 = a; x2 = b; w = ww;
      wpre = coef_t'(({ww, 64'd0}) / 128'(Q));
      in_valid = 1;
      t = (128'(b) * 128'(ww)) % 128'(Q);
      if (mode == BU_BFLY) begin
        exp1.push_back(coef_t'((128'(a) + t) % 128'(Q)));
        exp2.push_back(coef_t'((128'(a) + 128'(Q) - t) % 128'(Q)));
      end else begin
        exp1.push_back(b);
        exp2.push_back(a);
      end
      t_in.push_back(cyc);
      @(posedge clk);
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    if (exp1.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", exp1.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      coef_t e1, e2; int ti;
      if (exp1.size() == 0) begin
        failures++; $display("FAIL: unexpected output");
      end else begin
        e1 = exp1.pop_front(); e2 = exp2.pop_front(); ti = t_in.pop_front();
        checks += 2;
        if (y1 !== e1 || y2 !== e2) begin
          failures++;
          if (failures < 10) $display("FAIL: y1=%h exp %h  y2=%h exp %h", y1, e1, y2, e2);
        end
        checks++;
        if (cyc - ti != LAT) begin
          failures++;
          if (failures < 10) $display("FAIL: latency %0d", cyc - ti);
        end
      end
    end
  end

  initial begin
    repeat (NUM + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
