// l1_cache_ctrl: controller of one private MSI L1 cache. It serves its core's loads and
// stores from the cache memory (l1_cache_mem, instantiated beside it) and keeps the cache
// coherent through the AXI/ACE interconnect.
//
// Structure, as in Fig. 3 of the design: an MSHR holding the one pending request and three
// FSMs.
//   CPU FSM   IDLE -> LOOKUP: a load hit (S or M) or a store hit on M completes at once; any
//             other case fills the MSHR (line, word, store data, chosen way, victim line) and
//             starts the AXI FSM, then waits (MISS) and completes when the fill is done.
//   AXI FSM   if a valid victim must leave: AW (write-back with BEATS W beats for M, evict
//             without data for S), wait for B, invalidate the way; then AR (read-clean for a
//             load, read-unique for a store, also used to upgrade S to M), take BEATS R beats
//             and write the line (with the store merged in) into the way in one step.
//   ACE FSM   accepts an AC snoop, looks the line up, downgrades it (READ_SHARED: M->S) or
//             invalidates it (READ_UNIQUE, MAKE_INVALID), answers on CR and, if the line was
//             M, sends it on CD as BEATS beats.
// The victim stays valid in the cache until its B response arrives, so a snoop that races
// with an eviction still finds the line. The cache memory has one write port: a snoop
// lookup has priority; the CPU and AXI FSMs wait in that cycle.
// CPU interface (after the co-simulation interface the paper describes): the core holds
// cpu_req with cpu_we/cpu_addr/cpu_wdata/cpu_be stable until cpu_ack, a one-cycle pulse with
// cpu_rdata; cpu_busy is high while a request is being served. 32-bit word accesses with byte
// enables. A hit is acknowledged 2 cycles after cpu_req is first seen.
// Paper: MSHR plus CPU, AXI and ACE FSMs; MSI protocol; size and associativity parameters
// (8 kB, 4-way). Own choices: the state sequences above, one outstanding request, the
// round-robin victim choice (first invalid way, else a rotating pointer), the CPU handshake
// details and the write-back-before-fill order.
module l1_cache_ctrl
  import rhea_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 8192,
  parameter int unsigned WAYS        = 4,
  localparam int unsigned SETS       = CACHE_BYTES / (LINE_BYTES * WAYS),
  localparam int unsigned IDX_W      = $clog2(SETS),
  localparam int unsigned TAG_W      = LADDR_W - IDX_W,
  localparam int unsigned WAY_W      = $clog2(WAYS > 1 ? WAYS : 2)
) (
  input  logic              clk,
  input  logic              rst_n,
  // CPU side
  input  logic              cpu_req,
  input  logic              cpu_we,
  input  logic [ADDR_W-1:0] cpu_addr,
  input  word_t             cpu_wdata,
  input  logic [STRB_W-1:0] cpu_be,
  output logic              cpu_ack,
  output word_t             cpu_rdata,
  output logic              cpu_busy,
  // cache memory
  output logic [IDX_W-1:0]  a_set,
  input  logic [TAG_W-1:0]  a_tag   [WAYS],
  input  msi_e              a_state [WAYS],
  input  line_t             a_data  [WAYS],
  output logic [IDX_W-1:0]  b_set,
  input  logic [TAG_W-1:0]  b_tag   [WAYS],
  input  msi_e              b_state [WAYS],
  input  line_t             b_data  [WAYS],
  output logic              wr_en,
  output logic [IDX_W-1:0]  wr_set,
  output logic [WAY_W-1:0]  wr_way,
  output logic [TAG_W-1:0]  wr_tag,
  output msi_e              wr_state,
  output logic              wr_data_en,
  output line_t             wr_data,
  // AXI/ACE towards the interconnect
  output cache_req_t        bus_req,
  input  cache_rsp_t        bus_rsp
);
  typedef enum logic [1:0] {C_IDLE, C_LOOKUP, C_MISS} cpu_state_e;
  typedef enum logic [2:0] {X_IDLE, X_AW, X_W, X_B, X_AR, X_R} axi_state_e;
  typedef enum logic [1:0] {A_IDLE, A_LOOKUP, A_CR, A_CD} ace_state_e;

  // MSHR: the one pending request and its victim
  typedef struct packed {
    logic              we;
    laddr_t            laddr;
    logic [BEAT_W-1:0] word;
    word_t             wdata;
    logic [STRB_W-1:0] be;
    logic [WAY_W-1:0]  way;
    logic              evict;
    laddr_t            v_laddr;
    logic              v_dirty;
    line_t             v_data;
  } mshr_t;

  cpu_state_e cstate;
  axi_state_e xstate;
  ace_state_e astate;
  mshr_t      mshr;

  function automatic line_t merge(line_t l, logic [BEAT_W-1:0] w, word_t d, logic [STRB_W-1:0] be);
    line_t r;
    r = l;
    for (int b = 0; b < STRB_W; b++)
      if (be[b]) r[w*DATA_W + b*8 +: 8] = d[b*8 +: 8];
    return r;
  endfunction

  // ---------------------------------------------------------------- CPU side lookup
  logic [IDX_W-1:0]  m_set;
  logic [TAG_W-1:0]  m_tag;
  logic              hit, has_inv;
  logic [WAY_W-1:0]  hit_way, inv_way, victim_ptr, pick_way;
  logic              ace_lookup;

  assign m_set = mshr.laddr[IDX_W-1:0];
  assign m_tag = mshr.laddr[LADDR_W-1:IDX_W];
  assign a_set = m_set;
  assign ace_lookup = (astate == A_LOOKUP);

  always_comb begin
    hit = 1'b0; hit_way = '0; has_inv = 1'b0; inv_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (a_state[w] != ST_I && a_tag[w] == m_tag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
      if (a_state[w] == ST_I) begin
        has_inv = 1'b1; inv_way = WAY_W'(w);
      end
    end
    pick_way = hit ? hit_way : (has_inv ? inv_way : victim_ptr);
  end

  logic cpu_load_hit, cpu_store_hit, cpu_miss, axi_done;
  assign cpu_load_hit  = (cstate == C_LOOKUP) && !ace_lookup && hit && !mshr.we;
  assign cpu_store_hit = (cstate == C_LOOKUP) && !ace_lookup && hit && mshr.we
                         && a_state[hit_way] == ST_M;
  assign cpu_miss      = (cstate == C_LOOKUP) && !ace_lookup && !cpu_load_hit && !cpu_store_hit;
  assign cpu_busy      = (cstate != C_IDLE) || cpu_ack;

  // ---------------------------------------------------------------- snoop side lookup
  laddr_t            s_laddr;
  snp_e              s_kind;
  logic              s_hit, s_dt, s_present;
  logic [WAY_W-1:0]  s_way;
  line_t             s_data;
  msi_e              s_new;
  logic [BEAT_W-1:0] s_beat;

  assign b_set = s_laddr[IDX_W-1:0];
  always_comb begin
    s_hit = 1'b0; s_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (b_state[w] != ST_I && b_tag[w] == s_laddr[LADDR_W-1:IDX_W]) begin
        s_hit = 1'b1; s_way = WAY_W'(w);
      end
    s_new = (s_kind == SNP_READ_SHARED && b_state[s_way] != ST_I) ? ST_S : ST_I;
  end

  // ---------------------------------------------------------------- AXI fill
  line_t             r_buf, r_full, fill_line;
  logic [BEAT_W-1:0] x_beat;
  logic              r_fire, b_fire;

  always_comb begin
    r_full = r_buf;
    r_full[x_beat*DATA_W +: DATA_W] = bus_rsp.r.data;
    fill_line = mshr.we ? merge(r_full, mshr.word, mshr.wdata, mshr.be) : r_full;
  end
  assign r_fire   = (xstate == X_R) && bus_rsp.r_valid && !ace_lookup;
  assign b_fire   = (xstate == X_B) && bus_rsp.b_valid && !ace_lookup;
  assign axi_done = r_fire && bus_rsp.r.last;

  // ---------------------------------------------------------------- cache memory write port
  always_comb begin
    wr_en = 1'b0; wr_set = m_set; wr_way = mshr.way; wr_tag = m_tag;
    wr_state = ST_I; wr_data_en = 1'b0; wr_data = fill_line;
    if (ace_lookup) begin
      wr_en    = s_hit;
      wr_set   = s_laddr[IDX_W-1:0];
      wr_way   = s_way;
      wr_tag   = s_laddr[LADDR_W-1:IDX_W];
      wr_state = s_new;
    end else if (cpu_store_hit) begin
      wr_en      = 1'b1;
      wr_way     = hit_way;
      wr_state   = ST_M;
      wr_data_en = 1'b1;
      wr_data    = merge(a_data[hit_way], mshr.word, mshr.wdata, mshr.be);
    end else if (b_fire) begin
      wr_en  = 1'b1;                        // victim leaves
      wr_tag = mshr.v_laddr[LADDR_W-1:IDX_W];
    end else if (axi_done) begin
      wr_en      = 1'b1;                    // fill
      wr_state   = mshr.we ? ST_M : ST_S;
      wr_data_en = 1'b1;
    end
  end

  // ---------------------------------------------------------------- bus outputs
  always_comb begin
    bus_req = '0;
    bus_req.aw_valid = (xstate == X_AW);
    bus_req.aw       = '{addr: mshr.v_laddr, op: mshr.v_dirty ? AW_WRITEBACK : AW_EVICT};
    bus_req.w_valid  = (xstate == X_W);
    bus_req.w        = '{data: line_word(mshr.v_data, x_beat), last: (x_beat == BEAT_W'(BEATS - 1))};
    bus_req.b_ready  = (xstate == X_B) && !ace_lookup;
    bus_req.ar_valid = (xstate == X_AR);
    bus_req.ar       = '{addr: mshr.laddr, op: mshr.we ? AR_READ_UNIQUE : AR_READ_CLEAN};
    bus_req.r_ready  = (xstate == X_R) && !ace_lookup;
    bus_req.ac_ready = (astate == A_IDLE);
    bus_req.cr_valid = (astate == A_CR);
    bus_req.cr       = '{data_transfer: s_dt, was_present: s_present};
    bus_req.cd_valid = (astate == A_CD);
    bus_req.cd       = '{data: line_word(s_data, s_beat), last: (s_beat == BEAT_W'(BEATS - 1))};
  end

  // ---------------------------------------------------------------- CPU FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate     <= C_IDLE;
      cpu_ack    <= 1'b0;
      cpu_rdata  <= '0;
      mshr       <= '0;
      victim_ptr <= '0;
    end else begin
      cpu_ack <= 1'b0;
      unique case (cstate)
        C_IDLE: if (cpu_req && !cpu_ack) begin
          mshr.we    <= cpu_we;
          mshr.laddr <= cpu_addr[ADDR_W-1:OFFSET_W];
          mshr.word  <= cpu_addr[OFFSET_W-1:$clog2(STRB_W)];
          mshr.wdata <= cpu_wdata;
          mshr.be    <= cpu_be;
          cstate     <= C_LOOKUP;
        end
        C_LOOKUP: begin
          if (cpu_load_hit || cpu_store_hit) begin
            cpu_ack   <= 1'b1;
            cpu_rdata <= cpu_store_hit ? mshr.wdata : line_word(a_data[hit_way], mshr.word);
            cstate    <= C_IDLE;
          end else if (cpu_miss) begin
            mshr.way     <= pick_way;
            mshr.evict   <= !hit && !has_inv;
            mshr.v_laddr <= {a_tag[pick_way], m_set};
            mshr.v_dirty <= (a_state[pick_way] == ST_M);
            mshr.v_data  <= a_data[pick_way];
            if (!hit && !has_inv) victim_ptr <= victim_ptr + 1'b1;
            cstate <= C_MISS;
          end
        end
        C_MISS: if (axi_done) begin
          cpu_ack   <= 1'b1;
          cpu_rdata <= mshr.we ? mshr.wdata : line_word(r_full, mshr.word);
          cstate    <= C_IDLE;
        end
        default: cstate <= C_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- AXI FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xstate <= X_IDLE;
      x_beat <= '0;
      r_buf  <= '0;
    end else begin
      unique case (xstate)
        X_IDLE: if (cpu_miss) xstate <= (!hit && !has_inv) ? X_AW : X_AR;
        X_AW: if (bus_rsp.aw_ready) begin
          x_beat <= '0;
          xstate <= mshr.v_dirty ? X_W : X_B;
        end
        X_W: if (bus_rsp.w_ready) begin
          x_beat <= x_beat + 1'b1;
          if (x_beat == BEAT_W'(BEATS - 1)) xstate <= X_B;
        end
        X_B: if (b_fire) xstate <= X_AR;
        X_AR: if (bus_rsp.ar_ready) begin
          x_beat <= '0;
          xstate <= X_R;
        end
        X_R: if (r_fire) begin
          r_buf  <= r_full;
          x_beat <= x_beat + 1'b1;
          if (bus_rsp.r.last) xstate <= X_IDLE;
        end
        default: xstate <= X_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- ACE FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      astate    <= A_IDLE;
      s_laddr   <= '0;
      s_kind    <= SNP_MAKE_INVALID;
      s_dt      <= 1'b0;
      s_present <= 1'b0;
      s_data    <= '0;
      s_beat    <= '0;
    end else begin
      unique case (astate)
        A_IDLE: if (bus_rsp.ac_valid) begin
          s_laddr <= bus_rsp.ac.addr;
          s_kind  <= bus_rsp.ac.snoop;
          astate  <= A_LOOKUP;
        end
        A_LOOKUP: begin
          s_present <= s_hit;
          s_dt      <= s_hit && b_state[s_way] == ST_M;
          s_data    <= b_data[s_way];
          s_beat    <= '0;
          astate    <= A_CR;
        end
        A_CR: if (bus_rsp.cr_ready) astate <= s_dt ? A_CD : A_IDLE;
        A_CD: if (bus_rsp.cd_ready) begin
          s_beat <= s_beat + 1'b1;
          if (s_beat == BEAT_W'(BEATS - 1)) astate <= A_IDLE;
        end
        default: astate <= A_IDLE;
      endcase
    end
  end

  // the core must hold its request until it is acknowledged
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    (cstate != C_IDLE) |-> cpu_req)
    else $error("l1_cache_ctrl: cpu_req dropped before cpu_ack");
endmodule
