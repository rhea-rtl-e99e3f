// aw_w_fsm: the interconnect FSM that serves evict and write-back requests, which never
// need snooping.
//
// Sequence for the request at the head of the AW FIFO:
//   IDLE  read the directory entry of the line (through the directory arbiter) and lock the
//         line, unless the AR+CR+CD FSM holds it locked (then retry next cycle); pop AW.
//   DATA  (write-back only) pop the BEATS beats of the line from the W FIFO.
//   MEM   write the line to memory (through the memory arbiter) if the directory still names
//         the source as the M owner; a write-back overtaken by a snoop is stale and dropped.
//   UPD   remove the source from the sharers (line goes to I when none remain).
//   B     send the B response to the source, then release the line lock.
// Paper: "A dedicated FSM manages the evict and write-back requests issued by the L1 cache
// controllers on the AW and W channels of the AXI protocol which require no snooping action".
// The per-line lock shared with the other FSM and the stale write-back rule are this design's
// own way of keeping the two FSMs from racing on one line.
module aw_w_fsm
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES = 16,
  localparam int unsigned IW = $clog2(N_CORES > 1 ? N_CORES : 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  // AW FIFO head
  input  logic               aw_empty,
  input  logic [IW-1:0]      aw_src,
  input  aw_chan_t           aw_head,
  output logic               aw_pop,
  // W FIFO head
  input  logic               w_empty,
  input  data_chan_t         w_head,
  output logic               w_pop,
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
  // B channel
  output logic [N_CORES-1:0] b_valid,
  input  logic [N_CORES-1:0] b_ready,
  // event counters for observation
  output logic [31:0]        n_writebacks,
  output logic [31:0]        n_stale
);
  typedef enum logic [2:0] {S_IDLE, S_DATA, S_MEM, S_UPD, S_B} state_e;
  state_e             state;
  logic [IW-1:0]      src;
  msi_e               e_state;
  logic [N_CORES-1:0] e_sharers, src_bit, new_sharers;
  line_t              buffer;
  logic [BEAT_W-1:0]  beat;
  logic               conflict, owner_ok;

  assign src_bit     = N_CORES'(1) << src;
  assign new_sharers = e_sharers & ~src_bit;
  assign conflict    = other_lock_valid && (other_lock_line == aw_head.addr);
  assign owner_ok    = (e_state == ST_M) && (e_sharers == src_bit);

  assign dir_req        = (state == S_IDLE && !aw_empty) || (state == S_UPD);
  assign dir_we         = (state == S_UPD);
  assign dir_addr       = (state == S_IDLE) ? aw_head.addr : lock_line;
  assign dir_wr_state   = (new_sharers == '0) ? ST_I : e_state;
  assign dir_wr_sharers = new_sharers;
  assign aw_pop         = (state == S_IDLE) && !aw_empty && dir_gnt && !conflict;
  assign w_pop          = (state == S_DATA) && !w_empty;

  assign mem_req   = (state == S_MEM);
  assign mem_we    = 1'b1;
  assign mem_addr  = lock_line;
  assign mem_wline = buffer;

  always_comb begin
    b_valid = '0;
    if (state == S_B) b_valid[src] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      lock_valid   <= 1'b0;
      lock_line    <= '0;
      src          <= '0;
      e_state      <= ST_I;
      e_sharers    <= '0;
      beat         <= '0;
      buffer       <= '0;
      n_writebacks <= '0;
      n_stale      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (aw_pop) begin
          lock_valid <= 1'b1;
          lock_line  <= aw_head.addr;
          src        <= aw_src;
          e_state    <= dir_rd_state;
          e_sharers  <= dir_hit ? dir_rd_sharers : '0;
          beat       <= '0;
          state      <= (aw_head.op == AW_WRITEBACK) ? S_DATA : S_UPD;
        end
        S_DATA: if (w_pop) begin
          buffer[beat*DATA_W +: DATA_W] <= w_head.data;
          beat <= beat + 1'b1;
          if (w_head.last) begin
            if (owner_ok) begin
              state        <= S_MEM;
              n_writebacks <= n_writebacks + 1;
            end else begin
              state   <= S_UPD;
              n_stale <= n_stale + 1;
            end
          end
        end
        S_MEM: if (mem_done) state <= S_UPD;
        S_UPD: if (dir_gnt) state <= S_B;
        S_B: if (b_ready[src]) begin
          lock_valid <= 1'b0;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_wlast: assert property (@(posedge clk) disable iff (!rst_n)
    (w_pop && beat == BEAT_W'(BEATS - 1)) |-> w_head.last)
    else $error("aw_w_fsm: write-back burst without last on beat BEATS-1");
endmodule
