// ar_cr_cd_fsm: the interconnect FSM that serves read-clean and read-unique requests from the
// AR FIFO, snoops the other holders of the line over AC, collects their CR/CD answers, and
// returns the line on R. It implements the directory side of the MSI protocol.
//
// Sequence for the request at the head of the AR FIFO (source s, line a):
//   IDLE   read the directory entry of a and lock a, unless the AW+W FSM holds it (retry).
//          read-clean,  line M at another cache : snoop that owner with READ_SHARED
//          read-unique, line M at another cache : snoop that owner with READ_UNIQUE
//          read-unique, line S                  : snoop every other sharer with MAKE_INVALID
//          otherwise                            : no snoop
//   SNOOP  raise AC to all targets at once; pop their CR answers (serialized by the CR+CD
//   CD     arbiter) and, for an answer with data, the BEATS beats of its CD line.
//   MEMWR  read-clean that got dirty data: write it to memory, since S lines are clean in MSI.
//   MEMRD  no dirty data came back: read the line from memory.
//   R      send the line to s as BEATS R beats.
//   DIR    write the new entry (read-clean: S, old holders that still hold it plus s;
//          read-unique: M, owner s), release the lock.
// Paper: "another FSM handles the read-clean and read-unique requests and their snooping
// activity sent via the AR AXI channel, which often require the interconnect to snoop one or
// more of the other cache line sharers." The state sequence, the parallel snoops and the lock
// are this design's own.
module ar_cr_cd_fsm
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES = 16,
  localparam int unsigned IW = $clog2(N_CORES > 1 ? N_CORES : 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  // AR FIFO head
  input  logic               ar_empty,
  input  logic [IW-1:0]      ar_src,
  input  ar_chan_t           ar_head,
  output logic               ar_pop,
  // CR FIFO head
  input  logic               cr_empty,
  input  logic [IW-1:0]      cr_src,
  input  cr_chan_t           cr_head,
  output logic               cr_pop,
  // CD FIFO head
  input  logic               cd_empty,
  input  data_chan_t         cd_head,
  output logic               cd_pop,
  // directory client
  output logic               dir_req,
  output logic               dir_we,
  output laddr_t             dir_addr,
  output msi_e               dir_wr_state,
  output logic [N_CORES-1:0] dir_wr_sharers,
  input  logic               dir_gnt,
  input  logic               dir_hit,
  input  msi_e               dir_rd_state,
  input  logic [N_CORES-1:0] dir_rd_sharers,
  // line locks
  output logic               lock_valid,
  output laddr_t             lock_line,
  input  logic               other_lock_valid,
  input  laddr_t             other_lock_line,
  // memory client
  output logic               mem_req,
  output logic               mem_we,
  output laddr_t             mem_addr,
  output line_t              mem_wline,
  input  logic               mem_done,
  input  line_t              mem_rline,
  // R channel
  output logic [N_CORES-1:0] r_valid,
  output data_chan_t         r,
  input  logic [N_CORES-1:0] r_ready,
  // AC channel
  output logic [N_CORES-1:0] ac_valid,
  output ac_chan_t           ac,
  input  logic [N_CORES-1:0] ac_ready,
  // event counters for observation
  output logic [31:0]        n_snoops,
  output logic [31:0]        n_data_fwd,
  output logic [31:0]        n_mem_reads
);
  typedef enum logic [2:0] {S_IDLE, S_SNOOP, S_CD, S_MEMWR, S_MEMRD, S_R, S_DIR} state_e;
  state_e             state;
  logic [IW-1:0]      src;
  ar_op_e             op;
  logic [N_CORES-1:0] e_sharers, src_bit, pend_ac, pend_cr, absent;
  snp_e               snoop;
  logic               got_data;
  line_t              buffer;
  logic [BEAT_W-1:0]  beat;
  logic               conflict;

  // decision taken on the directory read in S_IDLE
  logic [N_CORES-1:0] rd_sharers, targets, hd_src_bit;
  msi_e               rd_state;
  snp_e               snp_kind;

  assign src_bit    = N_CORES'(1) << src;
  assign hd_src_bit = N_CORES'(1) << ar_src;
  assign rd_sharers = dir_hit ? dir_rd_sharers : '0;
  assign rd_state   = dir_hit ? dir_rd_state : ST_I;
  always_comb begin
    targets  = '0;
    snp_kind = SNP_MAKE_INVALID;
    if (ar_head.op == AR_READ_CLEAN) begin
      snp_kind = SNP_READ_SHARED;
      if (rd_state == ST_M) targets = rd_sharers & ~hd_src_bit;
    end else begin
      snp_kind = (rd_state == ST_M) ? SNP_READ_UNIQUE : SNP_MAKE_INVALID;
      targets  = rd_sharers & ~hd_src_bit;
    end
  end

  assign conflict = other_lock_valid && (other_lock_line == ar_head.addr);

  assign dir_req  = (state == S_IDLE && !ar_empty) || (state == S_DIR);
  assign dir_we   = (state == S_DIR);
  assign dir_addr = (state == S_IDLE) ? ar_head.addr : lock_line;
  assign ar_pop   = (state == S_IDLE) && !ar_empty && dir_gnt && !conflict;
  always_comb begin
    if (op == AR_READ_UNIQUE) begin
      dir_wr_state   = ST_M;
      dir_wr_sharers = src_bit;
    end else begin
      dir_wr_state   = ST_S;
      dir_wr_sharers = (e_sharers & ~absent) | src_bit;
    end
  end

  assign ac_valid = (state == S_SNOOP) ? pend_ac : '0;
  assign ac       = '{addr: lock_line, snoop: snoop};
  assign cr_pop   = (state == S_SNOOP) && !cr_empty;
  assign cd_pop   = (state == S_CD) && !cd_empty;

  assign mem_req   = (state == S_MEMWR) || (state == S_MEMRD);
  assign mem_we    = (state == S_MEMWR);
  assign mem_addr  = lock_line;
  assign mem_wline = buffer;

  assign r = '{data: line_word(buffer, beat), last: (beat == BEAT_W'(BEATS - 1))};
  always_comb begin
    r_valid = '0;
    if (state == S_R) r_valid[src] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      lock_valid  <= 1'b0;
      lock_line   <= '0;
      src         <= '0;
      op          <= AR_READ_CLEAN;
      e_sharers   <= '0;
      snoop       <= SNP_MAKE_INVALID;
      pend_ac     <= '0;
      pend_cr     <= '0;
      absent      <= '0;
      got_data    <= 1'b0;
      buffer      <= '0;
      beat        <= '0;
      n_snoops    <= '0;
      n_data_fwd  <= '0;
      n_mem_reads <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (ar_pop) begin
          lock_valid <= 1'b1;
          lock_line  <= ar_head.addr;
          src        <= ar_src;
          op         <= ar_head.op;
          e_sharers  <= rd_sharers;
          snoop      <= snp_kind;
          pend_ac    <= targets;
          pend_cr    <= targets;
          absent     <= '0;
          got_data   <= 1'b0;
          beat       <= '0;
          state      <= (targets != '0) ? S_SNOOP : S_MEMRD;
        end
        S_SNOOP: begin
          pend_ac <= pend_ac & ~ac_ready;
          if (cr_pop) begin
            pend_cr  <= pend_cr & ~(N_CORES'(1) << cr_src);
            n_snoops <= n_snoops + 1;
            if (!cr_head.was_present) absent <= absent | (N_CORES'(1) << cr_src);
            if (cr_head.data_transfer) begin
              beat  <= '0;
              state <= S_CD;
            end
          end else if (pend_cr == '0 && pend_ac == '0) begin
            beat <= '0;
            if (!got_data)                state <= S_MEMRD;
            else if (op == AR_READ_CLEAN) state <= S_MEMWR;
            else                          state <= S_R;
            if (got_data) n_data_fwd <= n_data_fwd + 1;
          end
        end
        S_CD: if (cd_pop) begin
          buffer[beat*DATA_W +: DATA_W] <= cd_head.data;
          beat <= beat + 1'b1;
          if (cd_head.last) begin
            got_data <= 1'b1;
            state    <= S_SNOOP;
          end
        end
        S_MEMWR: if (mem_done) state <= S_R;
        S_MEMRD: if (mem_done) begin
          buffer      <= mem_rline;
          n_mem_reads <= n_mem_reads + 1;
          state       <= S_R;
        end
        S_R: if (r_ready[src]) begin
          beat <= beat + 1'b1;
          if (beat == BEAT_W'(BEATS - 1)) state <= S_DIR;
        end
        S_DIR: if (dir_gnt) begin
          lock_valid <= 1'b0;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cr_expected: assert property (@(posedge clk) disable iff (!rst_n)
    cr_pop |-> pend_cr[cr_src])
    else $error("ar_cr_cd_fsm: unexpected snoop response");
endmodule
