// fase_dcache: write-back, set-associative L1 data cache extended with FaSe
// (fast selective flushing): one FaSe state bit per line in the tag array,
// a one-bit CLSF flag, and FaSe control, which runs the scflush instruction.
//
// Geometry (defaults): 64 sets x 8 ways x 64-byte lines = 32 KiB, 32-bit
// physical addresses, 20-bit tags, 64-bit core words. These are the evaluated
// configuration. The baseline cache around the FaSe additions is this
// design's own, deliberately simple blocking cache (the paper modifies an
// existing cache and does not describe it):
//  * one core request at a time; a hit answers 3 clocks after acceptance
//    (tag read, data read, response);
//  * a miss picks an invalid way, else a pseudo-random one (16-bit LFSR),
//    writes the victim back if it is dirty, refills the whole line from the
//    memory port and replays the request;
//  * coherence bits use M/E/S/I (11/10/01/00). A load refill enters E, or S
//    when memory answers "shared"; a store refill enters E and the replayed
//    store moves it to M. A store hit on E or S moves the line to M without a
//    memory transaction (single-core model: no probes, upgrades are granted).
// FaSe hooks: every core access (hit, and the refill that brings a line in)
// is reported to FaSe control, which sets the line's FaSe bit; the report
// says whether the coherence bits changed, which is what sets the CLSF flag
// when csr.scf is 1. During a flush FaSe control owns the tag array and asks
// the cache to write back dirty lines, which it does through the same path
// as a miss write-back.
//
// Interfaces. Core: req_valid/req_ready handshake with store flag, address,
// write data and byte mask; resp_valid pulses once per request with load
// data. Flush: flush_req is held until the single-clock flush_done; requests
// are not accepted while a flush runs. Memory: one line per transfer;
// mem_req_valid/mem_req_ready carries a read or a write of a 64-byte line,
// mem_resp_valid answers each request once (read data and the "shared" bit
// for a read, an acknowledgement for a write).
module fase_dcache
  import fase_pkg::*;
#(
  parameter int unsigned SETS     = DEF_SETS,
  parameter int unsigned WAYS     = DEF_WAYS,
  localparam int unsigned SET_W   = $clog2(SETS),
  localparam int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W   = PADDR_BITS - SET_W - OFFSET_BITS,
  localparam int unsigned WSEL_W  = $clog2(LINE_WORDS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  ready,          // tag array initialised
  // core request / response
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_store,
  input  logic [PADDR_BITS-1:0] req_addr,
  input  logic [XLEN-1:0]       req_wdata,
  input  logic [WORD_BYTES-1:0] req_wmask,
  output logic                  resp_valid,
  output logic [XLEN-1:0]       resp_rdata,
  // FaSe
  input  logic                  scf,
  input  logic                  flush_req,
  input  flush_mode_e           flush_mode,
  output logic                  flush_busy,
  output logic                  flush_done,
  output logic                  clsf_flag,
  output logic                  evt_line_flush,
  output logic                  evt_line_wb,
  output logic                  evt_line_nullify,
  output logic                  evt_clsf_nullify,
  // memory side
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_write,
  output logic [PADDR_BITS-1:0] mem_req_addr,
  output logic [LINE_BITS-1:0]  mem_req_wdata,
  input  logic                  mem_resp_valid,
  input  logic [LINE_BITS-1:0]  mem_resp_rdata,
  input  logic                  mem_resp_shared
);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_TAG, S_DATA,
    S_WB_LATCH, S_WB_REQ, S_WB_WAIT,
    S_REFILL_REQ, S_REFILL_WAIT, S_FLUSH
  } state_e;

  state_e state;

  // latched request
  logic                  q_store;
  logic [TAG_W-1:0]      q_tag;
  logic [SET_W-1:0]      q_set;
  logic [WSEL_W-1:0]     q_word;
  logic [XLEN-1:0]       q_wdata;
  logic [WORD_BYTES-1:0] q_wmask;
  logic [WAY_W-1:0]      q_way;
  coh_e                  q_coh;
  // write-back bookkeeping
  logic [TAG_W-1:0]      wb_tag;
  logic [SET_W-1:0]      wb_set_q;
  logic [LINE_BITS-1:0]  wb_buf;
  logic                  wb_for_flush;
  logic [15:0]           lfsr;

  // tag array
  logic                  init_done;
  logic                  t_rd_en;
  logic [SET_W-1:0]      t_rd_set;
  logic [TAG_W-1:0]      t_rd_tag [WAYS];
  coh_e                  t_rd_coh [WAYS];
  logic [WAYS-1:0]       t_rd_fase;
  logic                  t_meta_we;
  logic [SET_W-1:0]      t_meta_set;
  logic [WAY_W-1:0]      t_meta_way;
  logic [TAG_W-1:0]      t_meta_tag;
  coh_e                  t_meta_coh;
  logic                  t_fase_we;
  logic [SET_W-1:0]      t_fase_set;
  logic [WAYS-1:0]       t_fase_mask;
  logic                  t_fase_val;
  // data array
  logic                  d_rd_en;
  logic [SET_W-1:0]      d_rd_set;
  logic [WAY_W-1:0]      d_rd_way;
  logic [LINE_BITS-1:0]  d_rd_line;
  logic                  d_wr_en;
  logic [SET_W-1:0]      d_wr_set;
  logic [WAY_W-1:0]      d_wr_way;
  logic [LINE_BITS-1:0]  d_wr_line;
  logic [LINE_BYTES-1:0] d_wr_mask;
  // FaSe control
  logic                  c_acc_valid, c_acc_coh_change;
  logic                  c_flush_req;
  logic                  c_rd_en;
  logic [SET_W-1:0]      c_rd_set;
  logic                  c_inv_we;
  logic [SET_W-1:0]      c_inv_set;
  logic [WAY_W-1:0]      c_inv_way;
  logic                  c_wb_req, c_wb_ack;
  logic [SET_W-1:0]      c_wb_set;
  logic [WAY_W-1:0]      c_wb_way;
  // cache-side metadata write
  logic                  m_we;
  logic [TAG_W-1:0]      m_tag;
  coh_e                  m_coh;

  fase_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_BITS(TAG_W)) u_tags (
    .clk, .rst_n, .init_done,
    .rd_en(t_rd_en), .rd_set(t_rd_set),
    .rd_tag(t_rd_tag), .rd_coh(t_rd_coh), .rd_fase(t_rd_fase),
    .meta_we(t_meta_we), .meta_set(t_meta_set), .meta_way(t_meta_way),
    .meta_tag(t_meta_tag), .meta_coh(t_meta_coh),
    .fase_we(t_fase_we), .fase_set(t_fase_set),
    .fase_way_mask(t_fase_mask), .fase_val(t_fase_val)
  );

  fase_data_array #(.SETS(SETS), .WAYS(WAYS)) u_data (
    .clk,
    .rd_en(d_rd_en), .rd_set(d_rd_set), .rd_way(d_rd_way), .rd_line(d_rd_line),
    .wr_en(d_wr_en), .wr_set(d_wr_set), .wr_way(d_wr_way),
    .wr_line(d_wr_line), .wr_mask(d_wr_mask)
  );

  fase_control #(.SETS(SETS), .WAYS(WAYS)) u_ctrl (
    .clk, .rst_n,
    .acc_valid(c_acc_valid), .acc_set(q_set), .acc_way(q_way),
    .acc_coh_change(c_acc_coh_change), .scf, .clsf_flag,
    .flush_req(c_flush_req), .flush_mode, .flush_busy, .flush_done,
    .rd_en(c_rd_en), .rd_set(c_rd_set), .rd_coh(t_rd_coh), .rd_fase(t_rd_fase),
    .inv_we(c_inv_we), .inv_set(c_inv_set), .inv_way(c_inv_way),
    .fase_we(t_fase_we), .fase_set(t_fase_set),
    .fase_way_mask(t_fase_mask), .fase_val(t_fase_val),
    .wb_req(c_wb_req), .wb_set(c_wb_set), .wb_way(c_wb_way), .wb_ack(c_wb_ack),
    .evt_line_flush, .evt_line_wb, .evt_line_nullify, .evt_clsf_nullify
  );

  // ---------------------------------------------------------------- lookup
  logic [WAYS-1:0]  hit_vec;
  logic [WAY_W-1:0] hit_way;
  logic [WAY_W-1:0] victim_way;

  always_comb begin
    hit_vec     = '0;
    hit_way     = '0;
    victim_way  = lfsr[WAY_W-1:0];
    for (int w = WAYS - 1; w >= 0; w--) begin
      hit_vec[w] = (t_rd_coh[w] != COH_I) && (t_rd_tag[w] == q_tag);
      if (hit_vec[w]) hit_way = WAY_W'(w);
      if (t_rd_coh[w] == COH_I) begin
        victim_way  = WAY_W'(w);
      end
    end
  end

  // ----------------------------------------------------------- state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      lfsr         <= 16'hACE1;
      wb_for_flush <= 1'b0;
      q_store      <= 1'b0;
      q_tag        <= '0;
      q_set        <= '0;
      q_word       <= '0;
      q_wdata      <= '0;
      q_wmask      <= '0;
      q_way        <= '0;
      q_coh        <= COH_I;
      wb_tag       <= '0;
      wb_set_q     <= '0;
    end else begin
      unique case (state)
        S_INIT: if (init_done) state <= S_IDLE;
        S_IDLE: begin
          if (flush_req) begin
            state <= S_FLUSH;
          end else if (req_valid) begin
            q_store <= req_store;
            q_tag   <= req_addr[PADDR_BITS-1 -: TAG_W];
            q_set   <= req_addr[OFFSET_BITS +: SET_W];
            q_word  <= req_addr[$clog2(WORD_BYTES) +: WSEL_W];
            q_wdata <= req_wdata;
            q_wmask <= req_wmask;
            state   <= S_LOOKUP;
          end
        end
        S_LOOKUP: state <= S_TAG;
        S_TAG: begin
          if (|hit_vec) begin
            q_way <= hit_way;
            q_coh <= t_rd_coh[hit_way];
            state <= S_DATA;
          end else begin
            q_way <= victim_way;
            lfsr  <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
            if (t_rd_coh[victim_way] == COH_M) begin
              wb_tag       <= t_rd_tag[victim_way];
              wb_set_q     <= q_set;
              wb_for_flush <= 1'b0;
              state        <= S_WB_LATCH;
            end else begin
              state <= S_REFILL_REQ;
            end
          end
        end
        S_DATA:     state <= S_IDLE;
        S_WB_LATCH: state <= S_WB_REQ;
        S_WB_REQ:   if (mem_req_ready) state <= S_WB_WAIT;
        S_WB_WAIT:  if (mem_resp_valid) state <= wb_for_flush ? S_FLUSH : S_REFILL_REQ;
        S_REFILL_REQ:  if (mem_req_ready) state <= S_REFILL_WAIT;
        S_REFILL_WAIT: if (mem_resp_valid) state <= S_LOOKUP;
        S_FLUSH: begin
          if (flush_done) begin
            state <= S_IDLE;
          end else if (c_wb_req) begin
            wb_tag       <= t_rd_tag[c_wb_way];
            wb_set_q     <= c_wb_set;
            wb_for_flush <= 1'b1;
            state        <= S_WB_LATCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_WB_LATCH) wb_buf <= d_rd_line;
  end

  // ------------------------------------------------------------- datapath
  always_comb begin
    ready       = init_done;
    req_ready   = (state == S_IDLE) && !flush_req;
    c_flush_req = (state == S_IDLE) && flush_req;

    // data array read: hit (S_TAG -> S_DATA), victim write-back, flush
    d_rd_en  = 1'b0;
    d_rd_set = q_set;
    d_rd_way = hit_way;
    if (state == S_TAG) begin
      d_rd_en  = 1'b1;
      d_rd_way = (|hit_vec) ? hit_way : victim_way;
    end else if (state == S_FLUSH && c_wb_req) begin
      d_rd_en  = 1'b1;
      d_rd_set = c_wb_set;
      d_rd_way = c_wb_way;
    end

    // data array write: store hit or refill
    d_wr_en   = 1'b0;
    d_wr_set  = q_set;
    d_wr_way  = q_way;
    d_wr_line = {LINE_WORDS{q_wdata}};
    d_wr_mask = LINE_BYTES'(q_wmask) << (q_word * WORD_BYTES);
    if (state == S_DATA && q_store) begin
      d_wr_en = 1'b1;
    end else if (state == S_REFILL_WAIT && mem_resp_valid) begin
      d_wr_en   = 1'b1;
      d_wr_line = mem_resp_rdata;
      d_wr_mask = '1;
    end

    // cache-side metadata write and access report to FaSe control
    m_we             = 1'b0;
    m_tag            = q_tag;
    m_coh            = COH_M;
    c_acc_valid      = 1'b0;
    c_acc_coh_change = 1'b0;
    if (state == S_DATA) begin
      c_acc_valid = 1'b1;
      if (q_store && q_coh != COH_M) begin
        m_we             = 1'b1;
        c_acc_coh_change = 1'b1;
      end
    end else if (state == S_REFILL_WAIT && mem_resp_valid) begin
      m_we             = 1'b1;
      m_coh            = (mem_resp_shared && !q_store) ? COH_S : COH_E;
      c_acc_valid      = 1'b1;
      c_acc_coh_change = 1'b1;
    end

    // tag array ports: FaSe control owns them during a flush
    if (flush_busy) begin
      t_rd_en    = c_rd_en;
      t_rd_set   = c_rd_set;
      t_meta_we  = c_inv_we;
      t_meta_set = c_inv_set;
      t_meta_way = c_inv_way;
      t_meta_tag = '0;
      t_meta_coh = COH_I;
    end else begin
      t_rd_en    = (state == S_LOOKUP);
      t_rd_set   = q_set;
      t_meta_we  = m_we;
      t_meta_set = q_set;
      t_meta_way = q_way;
      t_meta_tag = m_tag;
      t_meta_coh = m_coh;
    end

    c_wb_ack = (state == S_WB_WAIT) && mem_resp_valid && wb_for_flush;

    // memory requests
    mem_req_valid = (state == S_WB_REQ) || (state == S_REFILL_REQ);
    mem_req_write = (state == S_WB_REQ);
    mem_req_addr  = (state == S_WB_REQ) ? {wb_tag, wb_set_q, OFFSET_BITS'(0)}
                                        : {q_tag, q_set, OFFSET_BITS'(0)};
    mem_req_wdata = wb_buf;

    // core response
    resp_valid = (state == S_DATA);
    resp_rdata = q_store ? '0 : d_rd_line[q_word * XLEN +: XLEN];
  end

endmodule
