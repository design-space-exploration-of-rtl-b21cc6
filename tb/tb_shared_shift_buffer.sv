// tb_shared_shift_buffer: self-checking test of the shared shift buffer.
// Client 2 is selected; it pushes random 64-bit words and pops random
// field widths (4, 10 or 13 bits) while a queue of bits kept here predicts
// every popped field and the fill level. A request from an unselected
// client must have no effect, and the buffer must hold up to 676 bits.
module tb_shared_shift_buffer;
  import saber_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sbuf_req_t req [4];
  sbuf_rsp_t rsp;
  logic      clear = 1'b0;
  logic [1:0] sel = 2'd2;
  bit q [$];

  shared_shift_buffer dut (.clk, .rst_n, .clear, .sel, .req, .rsp);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 4; c++) req[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Fill to the full 676 bits: ten words, then a 36-bit push.
    for (int k = 0; k < 11; k++) begin
      logic [63:0] v;
      int nb;
      v  = {$urandom, $urandom};
      nb = (k == 10) ? 36 : 64;
      req[2] = '0;
      req[2].push = 1'b1;
      req[2].push_bits = 7'(nb);
      req[2].push_data = v;
      for (int b = 0; b < nb; b++) q.push_back(v[b]);
      @(negedge clk);
    end
    req[2] = '0;
    // An unselected client is ignored.
    req[1].pop = 1'b1;
    req[1].pop_bits = 7'd13;
    @(negedge clk);
    req[1] = '0;
    check(rsp.count == 676, $sformatf("fill %0d, want 676", rsp.count));
    // Random traffic.
    for (int it = 0; it < 3000; it++) begin
      int widths [3] = '{4, 10, 13};
      int pw;
      logic [63:0] want, v;
      pw = widths[$urandom % 3];
      req[2] = '0;
      if (q.size() >= pw) begin
        want = '0;
        for (int b = 0; b < pw; b++) want[b] = q[b];
        check((rsp.data & ((64'd1 << pw) - 1)) == want, $sformatf("popped field %0d", it));
        req[2].pop = 1'b1;
        req[2].pop_bits = 7'(pw);
        for (int b = 0; b < pw; b++) void'(q.pop_front());
      end
      if (q.size() + 64 <= 676 && ($urandom % 4 != 0)) begin
        v = {$urandom, $urandom};
        req[2].push = 1'b1;
        req[2].push_bits = 7'd64;
        req[2].push_data = v;
        for (int b = 0; b < 64; b++) q.push_back(v[b]);
      end
      @(negedge clk);
      check(int'(rsp.count) == q.size(), $sformatf("fill %0d, model %0d", rsp.count, q.size()));
    end
    req[2] = '0;
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    check(rsp.count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
