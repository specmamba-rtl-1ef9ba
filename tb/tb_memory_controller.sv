// tb_memory_controller: random traffic from all three clients (weight reads, state reads,
// state writes) against an off-chip model with random ready and random 1..6 cycle read
// latency (responses in order). Checks every cycle:
//  * priority: a pending state write always wins, a pending state read beats a weight read;
//  * never more than OUTST reads outstanding;
//  * every response goes back to the client that issued it, in issue order, with the data
//    held at that address;
//  * every accepted write lands in memory.
module tb_memory_controller;
  import specmamba_pkg::*;
  localparam int AW = 8, DW = 32, OUTST = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic w_req_valid = 0, w_req_ready, w_rsp_valid, s_req_valid = 0, s_req_ready, s_rsp_valid;
  logic s_wr_valid = 0, s_wr_ready, mem_req_valid, mem_req_ready = 0, mem_req_we, mem_rsp_valid;
  logic [AW-1:0] w_req_addr = '0, s_req_addr = '0, s_wr_addr = '0, mem_req_addr;
  logic [DW-1:0] w_rsp_data, s_rsp_data, s_wr_data = '0, mem_req_wdata, mem_rsp_data;
  memory_controller #(.AW(AW), .DW(DW), .OUTST(OUTST)) dut (.*);

  // off-chip model: reads 0..127 are fixed, writes go to 128..255
  logic [DW-1:0] mem [256];
  typedef struct { logic [DW-1:0] d; int due; } rsp_t;
  rsp_t pipe [$];
  int inflight = 0;
  // model outputs are updated with non-blocking assignments so the DUT samples them race-free
  int due_last = 0, t = 0;
  initial begin mem_rsp_valid = 0; mem_rsp_data = '0; end
  always @(posedge clk) if (rst_n) begin
    t++;
    if (mem_rsp_valid) begin void'(pipe.pop_front()); inflight--; end
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_we) mem[mem_req_addr] <= mem_req_wdata;
      else begin
        rsp_t r;
        int lat;
        lat = $urandom_range(1, 6);
        due_last = (t + lat > due_last) ? t + lat : due_last;
        r.d = mem[mem_req_addr]; r.due = due_last;
        pipe.push_back(r); inflight++;
      end
    end
    mem_rsp_valid <= (pipe.size() > 0) && (pipe[0].due <= t + 1);
    mem_rsp_data  <= (pipe.size() > 0) ? pipe[0].d : '0;
  end
  always @(negedge clk) mem_req_ready <= ($urandom_range(0, 3) != 0);

  // checks at the active edge
  logic [DW-1:0] w_exp [$], s_exp [$];
  logic [DW-1:0] wr_exp [logic [AW-1:0]];
  int n_w = 0, n_s = 0, n_wr = 0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (s_wr_valid && mem_req_ready && !(s_wr_ready && mem_req_we)) begin failures++; $display("FAIL write not prioritised"); end
    if (w_req_ready && w_req_valid && s_req_valid) begin failures++; $display("FAIL weight read beat state read"); end
    if (inflight > OUTST) begin failures++; $display("FAIL %0d reads outstanding", inflight); end
    if (w_req_valid && w_req_ready) w_exp.push_back(mem[w_req_addr]);
    if (s_req_valid && s_req_ready) s_exp.push_back(mem[s_req_addr]);
    if (s_wr_valid && s_wr_ready) begin wr_exp[s_wr_addr] = s_wr_data; n_wr++; end
    if (w_rsp_valid && s_rsp_valid) begin failures++; $display("FAIL both clients answered"); end
    if (w_rsp_valid) begin
      checks++; n_w++;
      if (w_exp.size() == 0 || w_exp[0] != w_rsp_data) begin failures++; $display("FAIL weight data"); end
      if (w_exp.size() > 0) void'(w_exp.pop_front());
    end
    if (s_rsp_valid) begin
      checks++; n_s++;
      if (s_exp.size() == 0 || s_exp[0] != s_rsp_data) begin failures++; $display("FAIL state data"); end
      if (s_exp.size() > 0) void'(s_exp.pop_front());
    end
  end

  // clients: random valid, hold request until accepted
  always @(negedge clk) if (rst_n) begin
    if (!w_req_valid || w_req_ready) begin w_req_valid <= ($urandom_range(0, 1) == 0); w_req_addr <= AW'($urandom_range(0, 63)); end
    if (!s_req_valid || s_req_ready) begin s_req_valid <= ($urandom_range(0, 3) == 0); s_req_addr <= AW'($urandom_range(64, 127)); end
    if (!s_wr_valid || s_wr_ready) begin
      s_wr_valid <= ($urandom_range(0, 4) == 0);
      s_wr_addr <= AW'($urandom_range(128, 255)); s_wr_data <= DW'($urandom);
    end
  end

  initial begin
    for (int a = 0; a < 256; a++) mem[a] = DW'(a * 32'h01010101 + 32'h5a);
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3000) @(negedge clk);
    // let everything drain: stop issuing by forcing valid low at a quiet point
    wait (!w_req_valid && !s_req_valid && !s_wr_valid);
    repeat (40) @(negedge clk);
    checks++;
    if (n_w < 200 || n_s < 100 || n_wr < 100) begin failures++; $display("FAIL too little traffic %0d %0d %0d", n_w, n_s, n_wr); end
    foreach (wr_exp[a]) begin
      checks++;
      if (mem[a] != wr_exp[a]) begin failures++; $display("FAIL write to %0d lost", a); end
    end
    $display("traffic: weight=%0d state=%0d writes=%0d", n_w, n_s, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
