// tb_natsa_chan_ctrl: six requesters share one channel model through the
// controller. Each requester issues random reads and masked writes, holding
// its request until the response; read data are checked against a shadow
// copy of the memory. With all six requesting all the time the responses
// must come round robin, and each access must take LAT+2 cycles.
module tb_natsa_chan_ctrl;
  import natsa_pkg::*;
  localparam int NP = 6;
  localparam int LAT = 2;
  logic clk = 0, rst_n = 0;
  logic     [NP-1:0] pu_req_valid, pu_rsp_valid;
  mem_req_t [NP-1:0] pu_req;
  vec_t pu_rsp_rdata, ch_rsp_rdata;
  logic ch_req_valid, ch_rsp_valid;
  mem_req_t ch_req;
  int checks = 0, failures = 0;
  word_t shadow [4096];
  logic  all_busy = 0;
  int    last_port = -1, rr_breaks = 0, rr_checked = 0;

  natsa_chan_ctrl #(.NPORT(NP)) dut (.*);
  hbm_chan_model #(.WORDS(4096), .LAT(LAT)) u_mem (
    .clk(clk), .req_valid(ch_req_valid), .req(ch_req), .rsp_valid(ch_rsp_valid), .rsp_rdata(ch_rsp_rdata));

  always #5 clk = ~clk;

  initial begin
    #3000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // round-robin order while every port requests
  always @(posedge clk) if (rst_n && all_busy && (pu_rsp_valid != '0)) begin
    int p;
    p = $clog2(pu_rsp_valid);
    if (last_port >= 0) begin
      rr_checked++;
      if (p != (last_port + 1) % NP) rr_breaks++;
    end
    last_port = p;
  end

  // one requester per port; each owns the addresses p*512 .. p*512+511
  for (genvar p = 0; p < NP; p++) begin : g_req
    int done_ops = 0;
    initial begin
      pu_req_valid[p] = 1'b0;
      pu_req[p] = '0;
      wait (rst_n);
      for (int op = 0; op < 300; op++) begin
        int unsigned a;
        logic w;
        a = p * 512 + $urandom_range(0, 500);
        w = (op >= 150) ? 1'b0 : ($urandom_range(0, 2) == 0);
        @(negedge clk);
        pu_req[p].we    = w;
        pu_req[p].addr  = a;
        pu_req[p].mask  = 4'($urandom);
        for (int k = 0; k < VEC; k++) pu_req[p].wdata[k] = $urandom;
        pu_req_valid[p] = 1'b1;
        do @(posedge clk); while (!pu_rsp_valid[p]);
        #1;
        if (w) begin
          for (int k = 0; k < VEC; k++) if (pu_req[p].mask[k]) shadow[a + k] = pu_req[p].wdata[k];
        end else begin
          checks++;
          for (int k = 0; k < VEC; k++)
            if (pu_rsp_rdata[k] !== shadow[a + k]) begin
              failures++;
              $display("FAIL port %0d addr %0d lane %0d", p, a, k);
              break;
            end
        end
        if (op < 150 || op > 297) begin end
        pu_req_valid[p] = (op >= 150 && op < 299);  // back-to-back in the second half
        done_ops++;
      end
      pu_req_valid[p] = 1'b0;
    end
  end

  initial begin
    int t0, t1;
    for (int a = 0; a < 4096; a++) begin shadow[a] = 32'(a * 7 + 1); u_mem.mem[a] = shadow[a]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // all ports active together in the second half
    wait (g_req[0].done_ops >= 160 && g_req[NP-1].done_ops >= 160);
    all_busy = 1;
    t0 = $time;
    wait (g_req[0].done_ops >= 280 && g_req[NP-1].done_ops >= 280);
    all_busy = 0;
    wait (g_req[0].done_ops == 300 && g_req[1].done_ops == 300 && g_req[2].done_ops == 300 &&
          g_req[3].done_ops == 300 && g_req[4].done_ops == 300 && g_req[5].done_ops == 300);
    repeat (20) @(posedge clk);
    checks++;
    if (rr_checked < 100 || rr_breaks > 2) begin
      failures++;
      $display("FAIL round robin: %0d breaks in %0d", rr_breaks, rr_checked);
    end
    // timing of one isolated access: LAT+2 cycles from request to response
    @(negedge clk);
    pu_req[2] = '0; pu_req[2].addr = 32'd1030; pu_req_valid[2] = 1;
    t0 = $time;
    do @(posedge clk); while (!pu_rsp_valid[2]);
    t1 = $time;
    @(negedge clk) pu_req_valid[2] = 0;
    checks++;
    if ((t1 - t0) / 10 != LAT + 2) begin
      failures++;
      $display("FAIL latency %0d cycles", (t1 - t0) / 10);
    end
    $display("round robin checked %0d, breaks %0d", rr_checked, rr_breaks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
