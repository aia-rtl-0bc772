// tb_global_buffer: the global buffer (crossbar and banks) at reduced size,
// four banks of 16 words. Five masters hammer the word-interleaved banks with
// random reads and byte-masked writes over a small address range, so bank
// conflicts are frequent. Each master holds its request until granted and
// has one access in flight. The test checks: read data against a reference
// memory updated in grant order; rvalid exactly one cycle after each grant;
// never two grants to one bank in a cycle; the round-robin bound (a master
// that keeps requesting is granted within N_MASTERS cycles); and that
// conflicts did occur.
module tb_global_buffer;
  import aia_pkg::*;
  localparam int NM = 5, NB = 4, BW = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  int checks = 0, failures = 0, conflicts = 0, grants = 0;
  logic [31:0] ref_mem [NB*BW];
  logic [31:0] exp_rd [NM];
  logic        exp_v [NM];
  int          wait_cnt [NM];

  global_buffer #(.N_MASTERS(NM), .N_BANKS(NB), .BANK_BYTES(BW * 4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_rsp_o(m_rsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic mem_req_t rand_req(input bit write);
    mem_req_t r;
    r.req   = 1'b1;
    r.we    = write;
    r.be    = write ? 4'($urandom) : 4'hF;
    r.addr  = 32'h2000_0000 | 32'(($urandom % (NB * BW)) * 4);
    r.wdata = $urandom;
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) begin m_req[m] = '0; exp_v[m] = 0; wait_cnt[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill the memory through master 0
    for (int i = 0; i < NB * BW; i++) begin
      #1;
      m_req[0] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'h2000_0000 + 32'(i * 4), wdata: $urandom};
      ref_mem[i] = m_req[0].wdata;
      #1 check(m_rsp[0].gnt, "fill grant");
      @(posedge clk);
    end
    #1 m_req[0] = '0;
    @(posedge clk);
    for (int cyc = 0; cyc < 20000; cyc++) begin
      #1;
      for (int m = 0; m < NM; m++) if (!m_req[m].req && ($urandom % 4) != 0) m_req[m] = rand_req(1'($urandom));
      #1;
      begin
        automatic int nreq [NB] = '{default: 0};
        automatic int ngnt [NB] = '{default: 0};
        for (int m = 0; m < NM; m++) begin
          automatic int b = int'(m_req[m].addr[3:2]);
          if (m_req[m].req) nreq[b]++;
          if (m_rsp[m].gnt) begin
            check(m_req[m].req, "grant without request");
            ngnt[b]++;
          end
          // rvalid one cycle after grant
          check(m_rsp[m].rvalid == exp_v[m], $sformatf("rvalid m=%0d", m));
          if (exp_v[m] && !m_req_was_write(m))
            check(m_rsp[m].rdata == exp_rd[m], $sformatf("rdata m=%0d got %h exp %h", m, m_rsp[m].rdata, exp_rd[m]));
        end
        for (int b = 0; b < NB; b++) begin
          check(ngnt[b] == ((nreq[b] > 0) ? 1 : 0), "one grant per requested bank");
          if (nreq[b] > 1) conflicts++;
        end
      end
      // book-keeping at the edge
      for (int m = 0; m < NM; m++) begin
        automatic int w = int'(m_req[m].addr[31:2]) & (NB * BW - 1);
        exp_v[m] = m_rsp[m].gnt;
        wr_q[m]  = m_req[m].we;
        if (m_rsp[m].gnt) begin
          grants++;
          exp_rd[m] = ref_mem[w];
          if (m_req[m].we)
            for (int b = 0; b < 4; b++) if (m_req[m].be[b]) ref_mem[w][b*8 +: 8] = m_req[m].wdata[b*8 +: 8];
          wait_cnt[m] = 0;
        end else if (m_req[m].req) begin
          wait_cnt[m]++;
          check(wait_cnt[m] < NM, $sformatf("master %0d starved", m));
        end
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < NM; m++) if (exp_v[m]) m_req[m] = '0;
    end
    check(conflicts > 1000, "bank conflicts happened");
    $display("grants=%0d conflicts=%0d", grants, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic wr_q [NM];
  function automatic bit m_req_was_write(input int m);
    return wr_q[m];
  endfunction
endmodule
