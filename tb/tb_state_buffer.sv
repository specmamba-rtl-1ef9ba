// tb_state_buffer: exercises the off-chip state path on its own. A memory model with random
// request back-pressure and random 1..5 cycle latency sits on the read side; the write side
// has random ready. Checks:
//  * a load burst returns G-lane state vectors in address order with the right lane packing
//    (lane g in bits [g*16 +: 16]), exactly ld_count of them, under random ld_ready stalls;
//  * stores are written in order with their address and packed data, with random write
//    back-pressure, and loads and stores can overlap;
//  * the buffer never owes more than DEPTH responses (no response can be dropped);
//  * idle is high only when nothing is pending on either side.
module tb_state_buffer;
  import specmamba_pkg::*;
  localparam int AW = 10, G = 4, DW = G*FX_W + 8, CW = 8, DEPTH = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic ld_start = 0, ld_valid, ld_ready = 0, st_valid = 0, st_ready, idle;
  logic [AW-1:0] ld_base = '0, st_addr = '0, rd_req_addr, wr_addr;
  logic [CW-1:0] ld_count = '0;
  fx_t ld_data [G], st_data [G];
  logic rd_req_valid, rd_req_ready = 0, rd_rsp_valid, wr_valid, wr_ready = 0;
  logic [DW-1:0] rd_rsp_data, wr_data;
  state_buffer #(.AW(AW), .DW(DW), .G(G), .CW(CW), .DEPTH(DEPTH)) dut (.*);

  function automatic logic [DW-1:0] sval(logic [AW-1:0] a);
    logic [DW-1:0] v;
    for (int g = 0; g < G; g++) v[g*FX_W +: FX_W] = 16'(a * 13 + g * 1001);
    v[DW-1 -: 8] = 8'hee;   // padding above the state lanes must be ignored
    return v;
  endfunction

  typedef struct { logic [DW-1:0] d; int due; } rsp_t;
  rsp_t pipe [$];
  int t = 0, due_last = 0, owed = 0;
  initial begin rd_rsp_valid = 0; rd_rsp_data = '0; end
  always @(posedge clk) if (rst_n) begin
    t++;
    if (rd_rsp_valid) void'(pipe.pop_front());
    if (rd_req_valid && rd_req_ready) begin
      rsp_t r; int lat;
      lat = $urandom_range(1, 5);
      due_last = (t + lat > due_last) ? t + lat : due_last;
      r.d = sval(rd_req_addr); r.due = due_last; pipe.push_back(r); owed++;
    end
    if (ld_valid && ld_ready) owed--;
    checks++;
    if (owed > DEPTH) begin failures++; $display("FAIL %0d responses owed", owed); end
    rd_rsp_valid <= (pipe.size() > 0) && (pipe[0].due <= t + 1);
    rd_rsp_data  <= (pipe.size() > 0) ? pipe[0].d : '0;
  end
  always @(negedge clk) begin
    rd_req_ready <= ($urandom_range(0, 2) != 0);
    wr_ready     <= ($urandom_range(0, 2) != 0);
    ld_ready     <= ($urandom_range(0, 3) != 0);
  end

  // write side scoreboard
  typedef struct { logic [AW-1:0] a; logic [G*FX_W-1:0] d; } wr_t;
  wr_t wq [$];
  int n_wr = 0;
  always @(posedge clk) if (rst_n && wr_valid && wr_ready) begin
    checks++; n_wr++;
    if (wq.size() == 0 || wq[0].a != wr_addr || wq[0].d != wr_data[G*FX_W-1:0]) begin
      failures++; $display("FAIL write %0d: addr %0d", n_wr, wr_addr);
    end
    if (wq.size() > 0) void'(wq.pop_front());
  end

  // store producer (runs alongside loads)
  bit storing = 0;
  int n_st = 0;
  always @(negedge clk) if (rst_n) begin
    #1;
    if (st_valid && st_ready) begin
      wr_t w; w.a = st_addr;
      for (int g = 0; g < G; g++) w.d[g*FX_W +: FX_W] = st_data[g];
      wq.push_back(w); n_st++;
    end
    if (!st_valid || st_ready) begin
      st_valid = storing && ($urandom_range(0, 1) == 0);
      st_addr  = AW'($urandom);
      for (int g = 0; g < G; g++) st_data[g] = fx_t'($urandom);
    end
  end

  task automatic load(int b, int n);
    int got = 0;
    @(negedge clk); ld_start = 1; ld_base = AW'(b); ld_count = CW'(n);
    @(negedge clk); ld_start = 0;
    while (got < n) begin
      #2;
      if (ld_valid && ld_ready) begin
        logic [DW-1:0] e;
        e = sval(AW'(b + got));
        checks++;
        for (int g = 0; g < G; g++)
          if (ld_data[g] != fx_t'(e[g*FX_W +: FX_W])) begin failures++; $display("FAIL load %0d lane %0d", got, g); end
        got++;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    for (int g = 0; g < G; g++) st_data[g] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    checks++; if (!idle) begin failures++; $display("FAIL not idle after reset"); end
    load(100, 30);
    storing = 1;
    load(7, 50);
    load(500, 1);
    repeat (50) @(negedge clk);
    storing = 0;
    checks++; if (idle && wq.size() > 0) begin failures++; $display("FAIL idle with stores pending"); end
    wait (idle && !st_valid);
    repeat (10) @(negedge clk);
    checks++; if (!idle || wq.size() != 0 || n_st < 20) begin failures++; $display("FAIL stores not drained (%0d left, %0d sent)", wq.size(), n_st); end
    checks++; if (ld_valid) begin failures++; $display("FAIL extra load data"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
