// memory_controller: connects the interconnect, which works on whole cache lines, to the
// word-wide main memory port, serializing lines into words and deserializing words into lines.
//
// A line request (req, we, addr, wline) is taken when the controller is idle and held by the
// client until done. A write sends the BEATS words of the line to memory, lowest word first; a
// read issues BEATS word reads one at a time and assembles the returned words. done is a
// one-cycle pulse; for a read rline holds the line from then until the next request.
// Main memory port (own choice): mem_valid/mem_ready request handshake with we, word address
// and data; a read returns its word later with mem_rvalid. One read is outstanding at a time.
// Timing: a line write takes BEATS accepted words plus one cycle; a read takes BEATS
// round trips of the memory plus one cycle.
// Paper: "The memory controller interfaces the on-chip interconnect with the main memory by
// serializing and deserializing cache line data." The protocol and word order are this
// design's own.
module memory_controller
  import rhea_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req,
  input  logic               we,
  input  laddr_t             addr,
  input  line_t              wline,
  output logic               done,
  output line_t              rline,
  // main memory, word granularity
  output logic               mem_valid,
  input  logic               mem_ready,
  output logic               mem_we,
  output logic [WORD_AW-1:0] mem_addr,
  output word_t              mem_wdata,
  input  logic               mem_rvalid,
  input  word_t              mem_rdata
);
  typedef enum logic [1:0] {MC_IDLE, MC_WRITE, MC_READ_REQ, MC_READ_WAIT} mc_state_e;
  mc_state_e         state;
  logic [BEAT_W-1:0] beat;
  laddr_t            laddr;
  logic              last_beat;

  assign last_beat = (beat == BEAT_W'(BEATS - 1));
  assign mem_valid = (state == MC_WRITE) || (state == MC_READ_REQ);
  assign mem_we    = (state == MC_WRITE);
  assign mem_addr  = {laddr, beat};
  assign mem_wdata = line_word(rline, beat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= MC_IDLE;
      beat  <= '0;
      laddr <= '0;
      done  <= 1'b0;
      rline <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        MC_IDLE: if (req && !done) begin
          laddr <= addr;
          beat  <= '0;
          if (we) begin
            rline <= wline;        // doubles as the write shift buffer
            state <= MC_WRITE;
          end else begin
            state <= MC_READ_REQ;
          end
        end
        MC_WRITE: if (mem_ready) begin
          beat <= beat + 1'b1;
          if (last_beat) begin
            state <= MC_IDLE;
            done  <= 1'b1;
          end
        end
        MC_READ_REQ: if (mem_ready) state <= MC_READ_WAIT;
        MC_READ_WAIT: if (mem_rvalid) begin
          rline[beat*DATA_W +: DATA_W] <= mem_rdata;
          beat <= beat + 1'b1;
          if (last_beat) begin
            state <= MC_IDLE;
            done  <= 1'b1;
          end else begin
            state <= MC_READ_REQ;
          end
        end
        default: state <= MC_IDLE;
      endcase
    end
  end
endmodule
