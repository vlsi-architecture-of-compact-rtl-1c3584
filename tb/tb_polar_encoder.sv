// tb_polar_encoder -- compares the recursive XOR encoder with the
// generator-matrix form x_k = XOR{u_i : i contains k} for unit vectors,
// all-ones and random inputs; checks the one-clock register latency.
// Also checks the polar_enc_comb sizes used by the decoder (2 .. 128).
module tb_polar_encoder;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  logic [255:0] d_i = 0, x_o;
  logic [127:0] u128, x128; logic [7:0] u8, x8; logic [1:0] u2, x2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  polar_encoder dut (.*);
  polar_enc_comb #(.N(128)) e128 (.u_i(u128), .x_o(x128));
  polar_enc_comb #(.N(8))   e8   (.u_i(u8),   .x_o(x8));
  polar_enc_comb #(.N(2))   e2   (.u_i(u2),   .x_o(x2));

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [255:0] d;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      if (t < 256) begin d = '0; d[t] = 1'b1; end
      else if (t == 256) d = '1;
      else d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(negedge clk); valid_i = 1; d_i = d;
      u128 = d[127:0]; u8 = d[7:0]; u2 = d[1:0];
      @(negedge clk); valid_i = 0; d_i = '0;
      checks++;
      if (!valid_o || x_o !== polar_encode_ref(d)) begin
        failures++; if (failures < 5) $display("t=%0d mismatch", t);
      end
      checks++;
      if (x128 !== polar_encode_ref({128'b0, u128}, 128)) failures++;
      checks++;
      if ({x8, x2} !== {polar_encode_ref({248'b0, u8}, 8)[7:0], polar_encode_ref({254'b0, u2}, 2)[1:0]}) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
