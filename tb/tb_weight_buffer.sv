// tb_weight_buffer: streams several weight bursts through the prefetch buffer against a
// memory with random request back-pressure and random 1..5 cycle read latency, while the
// consumer (the linear unit) takes words with random stalls. Checks:
//  * words come out in address order base, base+1, ..., base+count-1, with the right data;
//  * exactly count words per burst and busy drops after the last one;
//  * the buffer never has more than DEPTH words requested-but-not-consumed (credit rule),
//    so a response can never be dropped;
//  * with an always-ready consumer and memory, one word per cycle is sustained.
module tb_weight_buffer;
  localparam int AW = 12, DW = 24, CW = 8, DEPTH = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic start = 0, busy, req_valid, req_ready = 0, rsp_valid, out_valid, out_ready = 0;
  logic [AW-1:0] base = '0, req_addr;
  logic [CW-1:0] count = '0;
  logic [DW-1:0] rsp_data, out_data;
  weight_buffer #(.AW(AW), .DW(DW), .CW(CW), .DEPTH(DEPTH)) dut (.*);

  function automatic logic [DW-1:0] wval(logic [AW-1:0] a); return DW'(a) * 24'h00_0b_07 ^ 24'h5a5a5a; endfunction
  typedef struct { logic [DW-1:0] d; int due; } rsp_t;
  rsp_t pipe [$];
  int due_last = 0, owed = 0;
  bit fast = 0;
  // model outputs are updated with non-blocking assignments so the DUT samples them race-free
  int t = 0;
  initial begin rsp_valid = 0; rsp_data = '0; end
  always @(posedge clk) if (rst_n) begin
    t++;
    if (rsp_valid) void'(pipe.pop_front());
    if (req_valid && req_ready) begin
      rsp_t r; int lat;
      lat = fast ? 1 : $urandom_range(1, 5);
      due_last = (t + lat > due_last) ? t + lat : due_last;
      r.d = wval(req_addr); r.due = due_last; pipe.push_back(r);
      owed++;
    end
    if (out_valid && out_ready) owed--;
    rsp_valid <= (pipe.size() > 0) && (pipe[0].due <= t + 1);
    rsp_data  <= (pipe.size() > 0) ? pipe[0].d : '0;
    checks++;
    if (owed > DEPTH) begin failures++; $display("FAIL %0d words owed > DEPTH", owed); end
  end
  always @(negedge clk) begin
    req_ready <= fast || ($urandom_range(0, 2) != 0);
    out_ready <= fast || ($urandom_range(0, 3) != 0);
  end

  task automatic burst(int b, int n, output int cycles);
    int got = 0, t0;
    @(negedge clk); start = 1; base = AW'(b); count = CW'(n);
    @(negedge clk); start = 0; t0 = cyc;
    while (got < n) begin
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != wval(AW'(b + got))) begin failures++; $display("FAIL word %0d of burst %0d: %h exp %h", got, b, out_data, wval(AW'(b + got))); end
        got++;
      end
      @(negedge clk);
    end
    cycles = cyc - t0;
    repeat (8) @(negedge clk);
    checks++;
    if (busy || out_valid) begin failures++; $display("FAIL extra words / still busy after burst"); end
  endtask

  initial begin
    int cycles;
    repeat (2) @(negedge clk); rst_n = 1;
    burst(16, 40, cycles);
    burst(300, 1, cycles);
    burst(1000, 77, cycles);
    fast = 1; repeat (2) @(negedge clk);
    burst(50, 64, cycles);
    checks++;
    if (cycles > 64 + 4) begin failures++; $display("FAIL full-rate burst took %0d cycles", cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
