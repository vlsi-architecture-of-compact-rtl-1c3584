// tb_vlc_tx_array -- checks the transmitter bank at its default size.
// First a single transmitter is started and every other one must stay idle
// (LED at the idle level, no activity). Then every transmitter is driven by
// its own process with its own random IDs and random start times, so the
// frames overlap in arbitrary ways; each LED stream is captured and compared
// with the codeword built by the reference models (frame with CRC-16,
// x^4+x^3+1 prescrambling, information-index insertion, generator-matrix
// encoding). The number of clocks in which several transmitters were active
// at once is counted and must be non-zero.
module tb_vlc_tx_array;
  import tb_ref_pkg::*;
  localparam int T = 8;
  logic clk = 0, rst_n = 0;
  logic [T-1:0] start_i = '0, ready_o, led_o, active_o, sof_o;
  logic [T-1:0][7:0] ftype_i = '0;
  logic [T-1:0][127:0] id_i = '0;
  int checks = 0, failures = 0, overlap = 0, done = 0;
  always #5 clk = ~clk;
  vlc_tx_array dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if ($countones(active_o) > 1) overlap++;

  function automatic logic [255:0] ref_cw(input logic [7:0] ft, input logic [127:0] id);
    logic [157:0] fr, msg; logic [255:0] seq;
    fr = {6'b101010, ft, id, crc16_ref({ft, id})};
    seq = scr_seq_ref(4'b1111, 158);
    for (int k = 0; k < 158; k++) msg[k] = fr[157 - k] ^ seq[k];
    return polar_encode_ref(insert_ref(msg, vlc_pkg::FROZEN_MASK));
  endfunction

  task automatic send(input int t, input logic [7:0] ft, input logic [127:0] id);
    logic [255:0] got; int n;
    while (!ready_o[t]) @(negedge clk);
    start_i[t] = 1; ftype_i[t] = ft; id_i[t] = id;
    @(negedge clk); start_i[t] = 0;
    while (!active_o[t]) @(negedge clk);
    n = 0;
    while (active_o[t]) begin got[n[7:0]] = led_o[t]; n++; @(negedge clk); end
    checks++;
    if (n != 256 || got !== ref_cw(ft, id)) begin
      failures++; $display("transmitter %0d: wrong codeword (%0d bits)", t, n);
    end
  endtask

  initial begin
    int others_busy;
    repeat (3) @(posedge clk); rst_n = 1;
    // one transmitter alone
    others_busy = 0;
    fork
      send(3, 8'h5A, rand128());
      repeat (450) begin
        @(negedge clk);
        if ((active_o & ~(T'(1) << 3)) != 0 || (led_o | (T'(1) << 3)) != '1) others_busy++;
      end
    join
    checks++; if (others_busy != 0) begin failures++; $display("idle transmitters moved"); end
    // all transmitters, independent streams
    for (int t = 0; t < T; t++) begin
      fork
        automatic int tt = t;
        begin
          repeat ($urandom_range(300)) @(negedge clk);
          for (int f = 0; f < 3; f++) begin
            send(tt, 8'($urandom), rand128());
            repeat ($urandom_range(40)) @(negedge clk);
          end
          done++;
        end
      join_none
    end
    wait (done == T);
    $display("clocks with more than one transmitter active: %0d", overlap);
    checks++; if (overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
