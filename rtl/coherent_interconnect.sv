// coherent_interconnect: the AXI/ACE cache-coherent interconnect that joins N_CORES L1 cache
// controllers to main memory and keeps their caches coherent with a directory (MSI).
//
// Data path (Fig. 4 of the design):
//   AW+W arbiter -> AW FIFO + W FIFO -> AW+W FSM        (evict, write-back; B responses)
//   AR arbiter   -> AR FIFO          -> AR+CR+CD FSM    (read-clean, read-unique; AC snoops,
//   CR+CD arbiter-> CR FIFO + CD FIFO -^                  R responses)
//   both FSMs -> directory arbiter -> directory
//   both FSMs -> memory arbiter    -> memory controller -> main memory port (word wide)
// The three arbiters are round-robin. The five FIFOs (one per request/response channel) are
// sized so that they can never fill: every cache has at most one AR, one AW with one line of
// W data and one snoop answer with one line of CD data in flight. Fig. 4 draws one FIFO symbol
// per arbiter; the text counts one per channel, which is what is built here.
// The two FSMs work concurrently on different lines; each locks the line it serves (taken
// while it holds the directory grant) and the other FSM waits for that line.
// Interface: bus_req/bus_rsp, one cache_req_t/cache_rsp_t pair per cache; the main memory
// port of memory_controller; event counters for observation.
// Following the paper: the list of blocks, their names and connections, round-robin arbiters,
// one FIFO per channel, the split of work between the two FSMs. Own choices: FIFO depths,
// the line lock, the snoop and directory policies inside the FSMs.
module coherent_interconnect
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES = 16,
  parameter int unsigned L1_SETS = 32,
  parameter int unsigned L1_WAYS = 4,
  localparam int unsigned IW     = $clog2(N_CORES > 1 ? N_CORES : 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cache_req_t         bus_req [N_CORES],
  output cache_rsp_t         bus_rsp [N_CORES],
  // main memory
  output logic               mem_valid,
  input  logic               mem_ready,
  output logic               mem_we,
  output logic [WORD_AW-1:0] mem_addr,
  output word_t              mem_wdata,
  input  logic               mem_rvalid,
  input  word_t              mem_rdata,
  // event counters
  output logic [31:0]        n_writebacks,
  output logic [31:0]        n_stale_writebacks,
  output logic [31:0]        n_snoops,
  output logic [31:0]        n_data_fwd,
  output logic [31:0]        n_mem_reads
);
  localparam int unsigned D_REQ  = N_CORES;            // one request per cache
  localparam int unsigned D_DATA = N_CORES * BEATS;    // one line per cache

  // ---------------------------------------------------------------- channel unpacking
  logic [N_CORES-1:0] aw_valid, aw_ready, w_valid, w_ready, ar_valid, ar_ready;
  logic [N_CORES-1:0] cr_valid, cr_ready, cd_valid, cd_ready;
  logic [N_CORES-1:0] b_valid, r_valid, ac_valid, b_ready, r_ready, ac_ready;
  aw_chan_t   aw [N_CORES];
  ar_chan_t   ar [N_CORES];
  cr_chan_t   cr [N_CORES];
  data_chan_t w  [N_CORES];
  data_chan_t cd [N_CORES];
  data_chan_t r;
  ac_chan_t   ac;

  always_comb begin
    for (int i = 0; i < N_CORES; i++) begin
      aw_valid[i] = bus_req[i].aw_valid;  aw[i] = bus_req[i].aw;
      w_valid[i]  = bus_req[i].w_valid;   w[i]  = bus_req[i].w;
      ar_valid[i] = bus_req[i].ar_valid;  ar[i] = bus_req[i].ar;
      cr_valid[i] = bus_req[i].cr_valid;  cr[i] = bus_req[i].cr;
      cd_valid[i] = bus_req[i].cd_valid;  cd[i] = bus_req[i].cd;
      b_ready[i]  = bus_req[i].b_ready;
      r_ready[i]  = bus_req[i].r_ready;
      ac_ready[i] = bus_req[i].ac_ready;
      bus_rsp[i] = '{aw_ready: aw_ready[i], w_ready: w_ready[i], ar_ready: ar_ready[i],
                     cr_ready: cr_ready[i], cd_ready: cd_ready[i], b_valid: b_valid[i],
                     r_valid: r_valid[i], r: r, ac_valid: ac_valid[i], ac: ac};
    end
  end

  // ---------------------------------------------------------------- arbiters and FIFOs
  logic          aw_push, w_push, ar_push, cr_push, cd_push;
  logic [IW-1:0] aw_push_src, ar_push_src, cr_push_src;
  aw_chan_t      aw_push_data;
  ar_chan_t      ar_push_data;
  cr_chan_t      cr_push_data;
  data_chan_t    w_push_data, cd_push_data;
  logic aw_full, w_full, ar_full, cr_full, cd_full;
  logic aw_empty, w_empty, ar_empty, cr_empty, cd_empty;
  logic aw_pop, w_pop, ar_pop, cr_pop, cd_pop;
  logic [IW-1:0] aw_src, ar_src, cr_src;
  aw_chan_t      aw_head;
  ar_chan_t      ar_head;
  cr_chan_t      cr_head;
  data_chan_t    w_head, cd_head;

  aw_w_arbiter #(.N_CORES(N_CORES)) u_aw_w_arb (
    .clk, .rst_n, .aw_valid, .aw, .aw_ready, .w_valid, .w, .w_ready,
    .aw_fifo_full(aw_full), .aw_push, .aw_push_src, .aw_push_data,
    .w_fifo_full(w_full), .w_push, .w_push_data
  );
  ar_arbiter #(.N_CORES(N_CORES)) u_ar_arb (
    .clk, .rst_n, .ar_valid, .ar, .ar_ready, .fifo_full(ar_full),
    .push(ar_push), .push_src(ar_push_src), .push_ar(ar_push_data)
  );
  cr_cd_arbiter #(.N_CORES(N_CORES)) u_cr_cd_arb (
    .clk, .rst_n, .cr_valid, .cr, .cr_ready, .cd_valid, .cd, .cd_ready,
    .cr_fifo_full(cr_full), .cr_push, .cr_push_src, .cr_push_data,
    .cd_fifo_full(cd_full), .cd_push, .cd_push_data
  );

  sync_fifo #(.WIDTH(IW + $bits(aw_chan_t)), .DEPTH(D_REQ)) u_aw_fifo (
    .clk, .rst_n, .push(aw_push), .wdata({aw_push_src, aw_push_data}), .pop(aw_pop),
    .rdata({aw_src, aw_head}), .empty(aw_empty), .full(aw_full), .count()
  );
  sync_fifo #(.WIDTH($bits(data_chan_t)), .DEPTH(D_DATA)) u_w_fifo (
    .clk, .rst_n, .push(w_push), .wdata(w_push_data), .pop(w_pop),
    .rdata(w_head), .empty(w_empty), .full(w_full), .count()
  );
  sync_fifo #(.WIDTH(IW + $bits(ar_chan_t)), .DEPTH(D_REQ)) u_ar_fifo (
    .clk, .rst_n, .push(ar_push), .wdata({ar_push_src, ar_push_data}), .pop(ar_pop),
    .rdata({ar_src, ar_head}), .empty(ar_empty), .full(ar_full), .count()
  );
  sync_fifo #(.WIDTH(IW + $bits(cr_chan_t)), .DEPTH(D_REQ)) u_cr_fifo (
    .clk, .rst_n, .push(cr_push), .wdata({cr_push_src, cr_push_data}), .pop(cr_pop),
    .rdata({cr_src, cr_head}), .empty(cr_empty), .full(cr_full), .count()
  );
  sync_fifo #(.WIDTH($bits(data_chan_t)), .DEPTH(D_DATA)) u_cd_fifo (
    .clk, .rst_n, .push(cd_push), .wdata(cd_push_data), .pop(cd_pop),
    .rdata(cd_head), .empty(cd_empty), .full(cd_full), .count()
  );

  // ---------------------------------------------------------------- FSMs
  logic [1:0]         d_req, d_we, d_gnt;
  laddr_t             d_addr [2];
  msi_e               d_state [2];
  logic [N_CORES-1:0] d_sharers [2];
  logic               dir_req, dir_we, dir_hit, dir_overflow;
  laddr_t             dir_addr;
  msi_e               dir_wr_state, dir_rd_state;
  logic [N_CORES-1:0] dir_wr_sharers, dir_rd_sharers;

  logic [1:0] m_req, m_we, m_done;
  laddr_t     m_addr [2];
  line_t      m_wline [2];
  line_t      m_rline;

  logic   aw_lock_valid, ar_lock_valid;
  laddr_t aw_lock_line, ar_lock_line;

  aw_w_fsm #(.N_CORES(N_CORES)) u_aw_w_fsm (
    .clk, .rst_n,
    .aw_empty, .aw_src, .aw_head, .aw_pop,
    .w_empty, .w_head, .w_pop,
    .dir_req(d_req[0]), .dir_we(d_we[0]), .dir_addr(d_addr[0]), .dir_wr_state(d_state[0]),
    .dir_wr_sharers(d_sharers[0]), .dir_gnt(d_gnt[0]),
    .dir_hit, .dir_rd_state, .dir_rd_sharers,
    .lock_valid(aw_lock_valid), .lock_line(aw_lock_line),
    .other_lock_valid(ar_lock_valid), .other_lock_line(ar_lock_line),
    .mem_req(m_req[0]), .mem_we(m_we[0]), .mem_addr(m_addr[0]), .mem_wline(m_wline[0]),
    .mem_done(m_done[0]),
    .b_valid, .b_ready,
    .n_writebacks, .n_stale(n_stale_writebacks)
  );

  ar_cr_cd_fsm #(.N_CORES(N_CORES)) u_ar_fsm (
    .clk, .rst_n,
    .ar_empty, .ar_src, .ar_head, .ar_pop,
    .cr_empty, .cr_src, .cr_head, .cr_pop,
    .cd_empty, .cd_head, .cd_pop,
    .dir_req(d_req[1]), .dir_we(d_we[1]), .dir_addr(d_addr[1]), .dir_wr_state(d_state[1]),
    .dir_wr_sharers(d_sharers[1]), .dir_gnt(d_gnt[1]),
    .dir_hit, .dir_rd_state, .dir_rd_sharers,
    .lock_valid(ar_lock_valid), .lock_line(ar_lock_line),
    .other_lock_valid(aw_lock_valid), .other_lock_line(aw_lock_line),
    .mem_req(m_req[1]), .mem_we(m_we[1]), .mem_addr(m_addr[1]), .mem_wline(m_wline[1]),
    .mem_done(m_done[1]), .mem_rline(m_rline),
    .r_valid, .r, .r_ready, .ac_valid, .ac, .ac_ready,
    .n_snoops, .n_data_fwd, .n_mem_reads
  );

  // ---------------------------------------------------------------- directory
  dir_arbiter #(.N_CORES(N_CORES)) u_dir_arb (
    .clk, .rst_n, .req(d_req), .we(d_we), .addr(d_addr), .wr_state(d_state),
    .wr_sharers(d_sharers), .gnt(d_gnt),
    .dir_req, .dir_we, .dir_addr, .dir_wr_state, .dir_wr_sharers
  );
  directory #(.N_CORES(N_CORES), .SETS(L1_SETS), .L1_WAYS(L1_WAYS)) u_dir (
    .clk, .rst_n, .req(dir_req), .we(dir_we), .addr(dir_addr), .wr_state(dir_wr_state),
    .wr_sharers(dir_wr_sharers), .hit(dir_hit), .rd_state(dir_rd_state),
    .rd_sharers(dir_rd_sharers), .overflow(dir_overflow)
  );

  // ---------------------------------------------------------------- memory
  logic   mc_req, mc_we, mc_done;
  laddr_t mc_addr;
  line_t  mc_wline, mc_rline;

  mem_arbiter u_mem_arb (
    .clk, .rst_n, .req(m_req), .we(m_we), .addr(m_addr), .wline(m_wline),
    .done(m_done), .rline(m_rline),
    .mc_req, .mc_we, .mc_addr, .mc_wline, .mc_done, .mc_rline
  );
  memory_controller u_mc (
    .clk, .rst_n, .req(mc_req), .we(mc_we), .addr(mc_addr), .wline(mc_wline),
    .done(mc_done), .rline(mc_rline),
    .mem_valid, .mem_ready, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata
  );
endmodule
