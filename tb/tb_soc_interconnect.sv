// tb_soc_interconnect: self-checking test of the crossbar.
// Four masters issue random reads and writes to the word-interleaved memory region,
// the register window and the peripheral space; slave models grant at random and
// answer one cycle later from their own storage. Checked: every slave sees only
// addresses it owns (bank = word address modulo the number of banks), each master
// gets rvalid exactly one cycle after its grant with the data last written to that
// address anywhere in the system, contended slaves grant in round-robin order, and
// different slaves are served in the same cycle.
module tb_soc_interconnect;
  import trik_pkg::*;
  localparam int NM = 4, NB = 4, BW = 16, NS = NB + 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  // reset is asserted with an edge, so that asynchronously reset flops are already
  // reset when the first clock edge arrives
  initial #1 rst_n = 0;
  bus_req_t mreq [NM];
  bus_rsp_t mrsp [NM];
  bus_req_t sreq [NS];
  bus_rsp_t srsp [NS];

  logic [31:0] refm [logic [31:0]];
  logic [31:0] smem [NS][logic [31:0]];
  logic        s_busy [NS];
  logic        s_valid_q [NS];
  logic [31:0] s_data_q [NS];
  logic        m_exp_v [NM], m_exp_r [NM];
  logic [31:0] m_exp_d [NM];
  int          wait_cnt [NM];
  int max_wait = 0, n_parallel = 0, n_grants = 0, n_contended = 0;
  int last_win [NS];
  bit run = 0;

  soc_interconnect #(.NumMasters(NM), .NumBanks(NB), .BankWords(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .slv_req_o(sreq), .slv_rsp_i(srsp));

  always #5 clk = ~clk;

  task automatic expect_ok(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s @%0t", what, $time);
    end
  endtask

  function automatic int owner(input logic [31:0] a);
    if (a >= MemBase && a < MemBase + NB * BW * 4) return int'(a[3:2]);
    if ((a & CtrlRegMask) == CtrlRegBase) return NB;
    return NB + 1;
  endfunction

  // slave models
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      srsp[s].gnt    = sreq[s].req && !s_busy[s];
      srsp[s].rvalid = s_valid_q[s];
      srsp[s].rdata  = s_data_q[s];
    end
  end

  always @(posedge clk) begin
    int ng;
    ng = 0;
    for (int s = 0; s < NS; s++) begin
      s_valid_q[s] <= 1'b0;
      if (sreq[s].req && srsp[s].gnt) begin
        ng++;
        expect_ok("slave owns address", owner(sreq[s].addr) == s);
        s_valid_q[s] <= 1'b1;
        if (sreq[s].we) begin
          smem[s][sreq[s].addr] = sreq[s].wdata;
          s_data_q[s] <= '0;
        end else begin
          s_data_q[s] <= smem[s].exists(sreq[s].addr) ? smem[s][sreq[s].addr] : 32'h0;
        end
      end
    end
    if (ng > 1) n_parallel++;
    // round-robin order: the winner is the first requester after the previous winner
    for (int s = 0; s < NS; s++) begin
      int nreq, expw;
      nreq = 0; expw = -1;
      for (int k = 1; k <= NM; k++) begin
        int m;
        m = (last_win[s] + k) % NM;
        if (mreq[m].req && owner(mreq[m].addr) == s) begin
          nreq++;
          if (expw < 0) expw = m;
        end
      end
      if (sreq[s].req && srsp[s].gnt) begin
        if (nreq > 1) begin
          n_contended++;
          expect_ok("round-robin winner", mrsp[expw].gnt);
        end
        last_win[s] = expw;
      end
    end
    // masters
    for (int m = 0; m < NM; m++) begin
      if (rst_n) begin
        expect_ok("master rvalid timing", mrsp[m].rvalid == m_exp_v[m]);
        if (m_exp_v[m] && m_exp_r[m]) expect_ok("master read data", mrsp[m].rdata == m_exp_d[m]);
      end
      m_exp_v[m] <= mreq[m].req && mrsp[m].gnt;
      m_exp_r[m] <= mreq[m].req && mrsp[m].gnt && !mreq[m].we;
      if (mreq[m].req && mrsp[m].gnt) begin
        n_grants++;
        wait_cnt[m] = 0;
        if (mreq[m].we) refm[mreq[m].addr] = mreq[m].wdata;
        else m_exp_d[m] <= refm.exists(mreq[m].addr) ? refm[mreq[m].addr] : 32'h0;
      end else if (mreq[m].req) begin
        wait_cnt[m]++;
        if (wait_cnt[m] > max_wait) max_wait = wait_cnt[m];
      end
    end
  end

  function automatic logic [31:0] rand_addr();
    case ($urandom_range(5))
      0:       return CtrlRegBase + 32'(4 * $urandom_range(3));
      1:       return 32'h1A10_0000 + 32'(4 * $urandom_range(3));
      default: return MemBase + 32'(4 * $urandom_range(NB * BW - 1));
    endcase
  endfunction

  always @(negedge clk) begin
    for (int s = 0; s < NS; s++) s_busy[s] = ($urandom_range(4) == 0);
    for (int m = 0; m < NM; m++) begin
      if (!run) mreq[m] = '0;
      else if (!(mreq[m].req && !mrsp[m].gnt)) begin
        mreq[m].req   = ($urandom_range(3) != 0);
        mreq[m].we    = $urandom_range(1) == 1;
        mreq[m].be    = 4'hF;
        mreq[m].addr  = rand_addr();
        mreq[m].wdata = $urandom();
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NS; s++) begin
      last_win[s] = NM - 1;
      s_valid_q[s] = 0;
      s_data_q[s]  = 0;
    end
    for (int m = 0; m < NM; m++) begin
      m_exp_v[m] = 0; m_exp_r[m] = 0; m_exp_d[m] = 0; wait_cnt[m] = 0;
      mreq[m] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run = 1;
    repeat (5000) @(negedge clk);
    run = 0;
    repeat (3) @(negedge clk);
    expect_ok("bounded wait (round robin)", max_wait <= 6 * NM);
    expect_ok("parallel service", n_parallel > 100);
    expect_ok("contention exercised", n_contended > 100);
    expect_ok("traffic flowed", n_grants > 5000);
    $display("grants=%0d parallel_cycles=%0d max_wait=%0d", n_grants, n_parallel, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
