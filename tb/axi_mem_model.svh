// axi_mem_model.svh: behavioural AXI4 slave memory included inside a
// testbench module. It serves the signals `mreq` (axi_req_t, from the
// design) and `mrsp` (axi_rsp_t, to the design) with random ready stalls
// and a random response delay of 1..MEM_DLY cycles per transaction,
// modelling the network-on-chip latency between the controller and the
// sensor registers. Bursts (INCR/FIXED) are supported; responses of each
// channel come back in order. Unwritten locations read as a function of
// their address. `mem_outst_max` records the most reads in flight. Nothing
// is sampled while the including testbench holds `rst_n` low.
  logic [63:0] amem [logic [31:0]];
  function automatic logic [63:0] amem_val(logic [31:0] a);
    return amem.exists(a >> 3) ? amem[a >> 3] : {~(a & ~32'h7), a & ~32'h7};
  endfunction
  typedef struct { int ready; logic [AXI_IDWO-1:0] id; logic [31:0] addr; logic [7:0] len; logic [1:0] burst; } mtx_t;
  mtx_t m_rq [$], m_aw [$], m_bq [$];
  int m_cyc = 0, m_rbeat = 0, m_wbeat = 0, m_last_r = 0, m_last_b = 0;
  int mem_outst = 0, mem_outst_max = 0;
  logic m_aw_rdy = 1, m_ar_rdy = 1, m_w_rdy = 1;
  always @(negedge clk) begin
    m_aw_rdy = ($urandom_range(0, 3) != 0);
    m_ar_rdy = ($urandom_range(0, 3) != 0);
    m_w_rdy  = ($urandom_range(0, 3) != 0);
  end
  logic m_r_valid = 0, m_b_valid = 0, m_aw_pend = 0;
  axi_r_t m_r = '0;
  axi_b_t m_b = '0;
  always_comb begin
    mrsp.aw_ready = m_aw_rdy;
    mrsp.ar_ready = m_ar_rdy;
    mrsp.w_ready  = m_w_rdy && m_aw_pend;
    mrsp.r_valid  = m_r_valid;
    mrsp.r        = m_r;
    mrsp.b_valid  = m_b_valid;
    mrsp.b        = m_b;
  end
  always @(posedge clk) if (rst_n) begin
    m_cyc <= m_cyc + 1;
    // R channel
    if (mrsp.r_valid && mreq.r_ready) begin
      if (mrsp.r.last) begin void'(m_rq.pop_front()); m_rbeat = 0; mem_outst--; end
      else m_rbeat++;
    end
    // B channel
    if (mrsp.b_valid && mreq.b_ready) void'(m_bq.pop_front());
    // W channel
    if (mreq.w_valid && mrsp.w_ready) begin
      logic [31:0] a;
      logic [63:0] v;
      a = (m_aw[0].burst == AXI_BURST_FIXED) ? m_aw[0].addr : m_aw[0].addr + 8 * m_wbeat;
      v = amem_val(a);
      for (int b = 0; b < 8; b++) if (mreq.w.strb[b]) v[8*b +: 8] = mreq.w.data[8*b +: 8];
      amem[a >> 3] = v;
      if (mreq.w.last) begin
        mtx_t t;
        t = m_aw.pop_front();
        t.ready = m_cyc + $urandom_range(1, MEM_DLY);
        if (t.ready < m_last_b) t.ready = m_last_b;
        m_last_b = t.ready;
        m_bq.push_back(t);
        m_wbeat = 0;
      end else m_wbeat++;
    end
    if (mreq.aw_valid && mrsp.aw_ready) begin
      mtx_t t;
      t.id = mreq.aw.id; t.addr = mreq.aw.addr; t.len = mreq.aw.len; t.burst = mreq.aw.burst; t.ready = 0;
      m_aw.push_back(t);
    end
    if (mreq.ar_valid && mrsp.ar_ready) begin
      mtx_t t;
      t.id = mreq.ar.id; t.addr = mreq.ar.addr; t.len = mreq.ar.len; t.burst = mreq.ar.burst;
      t.ready = m_cyc + $urandom_range(1, MEM_DLY);
      if (t.ready < m_last_r) t.ready = m_last_r;
      m_last_r = t.ready;
      m_rq.push_back(t);
      mem_outst++;
      if (mem_outst > mem_outst_max) mem_outst_max = mem_outst;
    end
  end
  always @(negedge clk) begin
    m_aw_pend = (m_aw.size() > 0);
    m_r_valid = (m_rq.size() > 0) && (m_rq[0].ready <= m_cyc);
    m_b_valid = (m_bq.size() > 0) && (m_bq[0].ready <= m_cyc);
    if (m_r_valid) begin
      logic [31:0] a;
      a = (m_rq[0].burst == AXI_BURST_FIXED) ? m_rq[0].addr : m_rq[0].addr + 8 * m_rbeat;
      m_r = '{id: m_rq[0].id, data: amem_val(a), resp: AXI_RESP_OKAY, last: (m_rbeat == m_rq[0].len)};
    end else m_r = '0;
    if (m_b_valid) m_b = '{id: m_bq[0].id, resp: AXI_RESP_OKAY};
    else m_b = '0;
  end
