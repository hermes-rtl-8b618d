// tb_hermes_tf_mem: self-checking test of the per-NTTU twiddle memory.
// Loads random words (including indices beyond DEPTH, which must be
// ignored), then reads both ports with independent random addresses every
// cycle and checks the data one cycle later against a shadow array.
module tb_hermes_tf_mem;
  import hermes_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int          NUM   = 2000;

  logic clk = 0;
  always #5 clk = ~clk;

  logic ld_valid; logic [31:0] ld_idx; tw_t ld_data;
  logic [$clog2(DEPTH)-1:0] rd_idx [2];
  tw_t rd_data [2];

  hermes_tf_mem #(.DEPTH(DEPTH)) dut (.clk, .ld_valid, .ld_idx, .ld_data, .rd_idx, .rd_data);

  tw_t shadow [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    ld_valid = 0; ld_idx = 0; ld_data = '0; rd_idx[0] = 0; rd_idx[1] = 0;
    @(posedge clk);
    for (int unsigned k = 0; k < DEPTH; k++) begin
      ld_valid = 1; ld_idx = k;
      ld_data = {$urandom, $urandom, $urandom, $urandom};
      shadow[k] = ld_data;
      @(posedge clk);
    end
    // out-of-range loads are dropped
    for (int unsigned k = DEPTH; k < 2 * DEPTH; k++) begin
      ld_valid = 1; ld_idx = k; ld_data = '1;
      @(posedge clk);
    end
    ld_valid = 0;
    for (int n = 0; n < NUM; n++) begin
      logic [$clog2(DEPTH)-1:0] a0, a1;
      a0 = $urandom_range(0, DEPTH - 1);
      a1 = $urandom_range(0, DEPTH - 1);
      rd_idx[0] = a0; rd_idx[1] = a1;
      @(posedge clk);
      #1;
      checks += 2;
      if (rd_data[0] !== shadow[a0]) begin failures++; if (failures < 10) $display("FAIL port0 @%0d", a0); end
      if (rd_data[1] !== shadow[a1]) begin failures++; if (failures < 10) $display("FAIL port1 @%0d", a1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NUM + 3 * DEPTH + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
