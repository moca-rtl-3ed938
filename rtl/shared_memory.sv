// shared_memory: the shared last-level cache that all accelerator tiles
// contend for, with its port to DRAM.
//
// LINES lines of 16 bytes (2 MB at the default), split into BANKS banks
// (8 at the default) interleaved on the low bits of the line address, so
// consecutive lines sit in consecutive banks. Every tile has its own
// valid/ready request port. Each bank is a direct-mapped, write-back,
// write-allocate cache and serves one hit per cycle; when several tiles want
// the same bank, a round-robin arbiter picks one. A hit is granted (ready
// high) at once and read data returns one cycle later (resp.valid), so each
// tile sees its reads in order. A miss is not granted: the bank writes the
// dirty victim back to DRAM if needed, reads the missing line, and then
// serves the still-waiting request as a hit. Each bank handles one miss at a
// time; the banks share the single DRAM port, which takes one request per
// cycle (round-robin among banks) and returns read data in order after any
// latency. `conflicts` counts request-cycles that were not granted, through
// a busy bank or a miss in progress.
//
// After reset every bank clears its tags, one line per cycle (LINES/BANKS
// cycles); requests wait until then.
//
// The 2 MB capacity, 8 banks and the DRAM behind them are the evaluated
// shared L2; the direct mapping, write-back policy, round-robin arbitration,
// one-miss-per-bank and 1-cycle hit latency are this design's choices.
module shared_memory
  import moca_pkg::*;
#(
  parameter int unsigned PORTS = N_TILES,
  parameter int unsigned BANKS = L2_BANKS,
  parameter int unsigned LINES = L2_LINES
) (
  input  logic      clk,
  input  logic      rst_n,
  input  mem_req_t  req   [PORTS],
  output logic      ready [PORTS],
  output mem_resp_t resp  [PORTS],
  output logic [31:0] conflicts,
  // DRAM port: one line per request, read data returned in order
  output mem_req_t  dram_req,
  input  logic      dram_ready,
  input  mem_resp_t dram_resp
);
  localparam int unsigned BW = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1;
  localparam int unsigned BL = LINES / BANKS;            // lines per bank
  localparam int unsigned IW = $clog2(BL);
  localparam int unsigned SB = (BANKS > 1) ? BW : 0;     // address bits used by the bank
  localparam int unsigned TW = MEM_AW - SB - IW;         // tag bits

  typedef struct packed {
    logic          valid;
    logic          dirty;
    logic [TW-1:0] tag;
  } meta_t;

  typedef enum logic [2:0] {B_INIT, B_RUN, B_WB, B_RD, B_FILL} bstate_e;

  // bank selected by each port
  logic [BW-1:0] bank_of [PORTS];
  for (genvar p = 0; p < PORTS; p++) begin : g_sel
    assign bank_of[p] = (BANKS > 1) ? BW'(req[p].addr % BANKS) : '0;
  end

  logic [PORTS-1:0] grant  [BANKS];     // one-hot grant per bank
  line_t            brd_q  [BANKS];     // line read by each bank last cycle
  logic [PORTS-1:0] rd_q;               // port had a read granted last cycle
  logic [BW-1:0]    rbank_q [PORTS];    // bank that port's read went to

  // DRAM requests of the banks
  logic [BANKS-1:0]  d_want, d_write, d_gnt, d_fill;
  logic [MEM_AW-1:0] d_addr [BANKS];

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    line_t            mem  [BL];
    meta_t            meta [BL];
    bstate_e          st;
    logic [PW-1:0]    ptr;              // highest-priority port this cycle
    logic [PORTS-1:0] want;
    logic             any, hit;
    logic [PW-1:0]    win;
    logic [PW:0]      cand;             // port examined by the arbiter
    logic [IW-1:0]    idx, m_idx;
    logic [TW-1:0]    tag, m_tag, v_tag;
    meta_t            cur;

    always_comb begin
      for (int p = 0; p < PORTS; p++) want[p] = req[p].valid && bank_of[p] == BW'(b);
      any = 1'b0;
      win = '0;
      for (int i = 0; i < PORTS; i++) begin
        cand = {1'b0, ptr} + (PW+1)'(i);
        if (cand >= (PW+1)'(PORTS)) cand = cand - (PW+1)'(PORTS);
        if (!any && want[cand[PW-1:0]]) begin
          any = 1'b1;
          win = cand[PW-1:0];
        end
      end
      idx = IW'(req[win].addr >> SB);
      tag = TW'(req[win].addr >> (SB + IW));
      cur = meta[idx];
      hit = st == B_RUN && any && cur.valid && cur.tag == tag;
      grant[b] = hit ? (PORTS'(1) << win) : '0;
    end

    // DRAM request of this bank: victim write-back, then line read
    assign d_want[b]  = st == B_WB || st == B_RD;
    assign d_write[b] = st == B_WB;
    if (BANKS > 1) begin : g_addr
      assign d_addr[b] = {(st == B_WB) ? v_tag : m_tag, m_idx, BW'(b)};
    end else begin : g_addr1
      assign d_addr[b] = {(st == B_WB) ? v_tag : m_tag, m_idx};
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st    <= B_INIT;
        ptr   <= '0;
        m_idx <= '0;
        m_tag <= '0;
        v_tag <= '0;
      end else begin
        case (st)
          B_INIT: begin
            m_idx <= m_idx + 1'b1;
            if (m_idx == IW'(BL - 1)) st <= B_RUN;
          end
          B_RUN: begin
            if (hit) ptr <= (win == PW'(PORTS-1)) ? '0 : win + 1'b1;
            else if (any) begin
              m_idx <= idx;
              m_tag <= tag;
              v_tag <= cur.tag;
              st    <= (cur.valid && cur.dirty) ? B_WB : B_RD;
            end
          end
          B_WB:    if (d_gnt[b]) st <= B_RD;
          B_RD:    if (d_gnt[b]) st <= B_FILL;
          B_FILL:  if (d_fill[b]) st <= B_RUN;
          default: st <= B_RUN;
        endcase
      end
    end

    // data and tag arrays (not reset: the B_INIT sweep clears the tags)
    always_ff @(posedge clk) begin
      if (st == B_INIT) meta[m_idx] <= '0;
      if (hit && req[win].write) begin
        mem[idx]  <= req[win].wdata;
        meta[idx] <= '{valid: 1'b1, dirty: 1'b1, tag: tag};
      end
      if (st == B_FILL && d_fill[b]) begin
        mem[m_idx]  <= dram_resp.rdata;
        meta[m_idx] <= '{valid: 1'b1, dirty: 1'b0, tag: m_tag};
      end
      // a hit reads its line; a miss reads the victim for the write-back
      if (st == B_RUN && any) brd_q[b] <= mem[idx];
    end
  end

  // ---- DRAM port: round-robin over banks, read data returned in order ----
  logic [BW-1:0] dptr, dwin;
  logic          dany;
  logic [BW:0]   dcand;
  always_comb begin
    dany = 1'b0;
    dwin = '0;
    for (int i = 0; i < BANKS; i++) begin
      dcand = {1'b0, dptr} + (BW+1)'(i);
      if (dcand >= (BW+1)'(BANKS)) dcand = dcand - (BW+1)'(BANKS);
      if (!dany && d_want[dcand[BW-1:0]]) begin
        dany = 1'b1;
        dwin = dcand[BW-1:0];
      end
    end
    dram_req.valid = dany;
    dram_req.write = d_write[dwin];
    dram_req.addr  = d_addr[dwin];
    dram_req.wdata = brd_q[dwin];
    d_gnt = (dany && dram_ready) ? (BANKS'(1) << dwin) : '0;
  end

  // banks waiting for read data, oldest first (each has at most one read)
  logic [BW-1:0] rfifo [BANKS];
  logic [BW:0]   rcnt;
  logic          rpush, rpop;
  assign rpush  = dany && dram_ready && !d_write[dwin];
  assign rpop   = dram_resp.valid && rcnt != 0;
  assign d_fill = rpop ? (BANKS'(1) << rfifo[0]) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dptr <= '0;
      rcnt <= '0;
    end else begin
      if (dany && dram_ready) dptr <= (dwin == BW'(BANKS-1)) ? '0 : dwin + 1'b1;
      rcnt <= rcnt + (BW+1)'(rpush) - (BW+1)'(rpop);
    end
  end

  always_ff @(posedge clk) begin
    if (rpop)
      for (int i = 0; i < BANKS - 1; i++) rfifo[i] <= rfifo[i+1];
    if (rpush) rfifo[BW'(rpop ? rcnt - 1'b1 : rcnt)] <= dwin;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!dram_resp.valid || rcnt != 0);   // no unrequested DRAM data
  end

  // ---- tile side ----
  logic [31:0] waiting;
  always_comb begin
    waiting = '0;
    for (int p = 0; p < PORTS; p++) begin
      ready[p] = grant[bank_of[p]][p];
      if (req[p].valid && !ready[p]) waiting = waiting + 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= '0;
      conflicts <= '0;
    end else begin
      for (int p = 0; p < PORTS; p++) rd_q[p] <= req[p].valid && ready[p] && !req[p].write;
      conflicts <= conflicts + waiting;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < PORTS; p++) rbank_q[p] <= bank_of[p];
  end

  for (genvar p = 0; p < PORTS; p++) begin : g_resp
    assign resp[p].valid = rd_q[p];
    assign resp[p].rdata = brd_q[rbank_q[p]];
  end
endmodule
