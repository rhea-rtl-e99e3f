// rhea_mem_subsys: single-level MSI cache-coherent memory subsystem for N_CORES cores: one
// private L1 cache (controller plus cache memory) per core, joined by the AXI/ACE coherent
// interconnect, and the main memory behind the interconnect's memory controller (Fig. 2 of
// the paper, without the optional L2 level).
//
// Each core sees the request/acknowledge interface of l1_cache_ctrl on its slice of the
// cpu_* arrays; these are the only ports besides clock and reset.
// Defaults follow the evaluated systems: 8 kB 4-way L1 caches, 32-bit interconnect data
// width (rhea_pkg), 1 GB main memory; N_CORES = 16, the largest configuration evaluated
// (2, 4 and 8 were evaluated too).
// Following the paper: one private L1 per core on a shared coherent interconnect, a main
// memory inside the subsystem, and the evaluated sizes. Own choices: the CPU port handshake
// and the main memory's word port; the optional L2 level of the paper is not part of this
// design.
module rhea_mem_subsys
  import rhea_pkg::*;
#(
  parameter int unsigned N_CORES     = 16,
  parameter int unsigned L1_BYTES    = 8192,
  parameter int unsigned L1_WAYS     = 4,
  parameter longint unsigned MEM_BYTES = 64'd1 << ADDR_W,
  localparam int unsigned L1_SETS    = L1_BYTES / (LINE_BYTES * L1_WAYS),
  localparam int unsigned IDX_W      = $clog2(L1_SETS),
  localparam int unsigned TAG_W      = LADDR_W - IDX_W,
  localparam int unsigned WAY_W      = $clog2(L1_WAYS > 1 ? L1_WAYS : 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  // cores
  input  logic [N_CORES-1:0] cpu_req,
  input  logic [N_CORES-1:0] cpu_we,
  input  logic [ADDR_W-1:0]  cpu_addr  [N_CORES],
  input  word_t              cpu_wdata [N_CORES],
  input  logic [STRB_W-1:0]  cpu_be    [N_CORES],
  output logic [N_CORES-1:0] cpu_ack,
  output word_t              cpu_rdata [N_CORES],
  output logic [N_CORES-1:0] cpu_busy
);
  cache_req_t bus_req [N_CORES];
  cache_rsp_t bus_rsp [N_CORES];
  logic               mem_valid, mem_ready, mem_we, mem_rvalid;
  logic [WORD_AW-1:0] mem_addr;
  word_t              mem_wdata, mem_rdata;

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    logic [IDX_W-1:0] a_set, b_set, wr_set;
    logic [TAG_W-1:0] a_tag [L1_WAYS];
    logic [TAG_W-1:0] b_tag [L1_WAYS];
    msi_e             a_state [L1_WAYS];
    msi_e             b_state [L1_WAYS];
    line_t            a_data [L1_WAYS];
    line_t            b_data [L1_WAYS];
    logic             wr_en, wr_data_en;
    logic [WAY_W-1:0] wr_way;
    logic [TAG_W-1:0] wr_tag;
    msi_e             wr_state;
    line_t            wr_data;

    l1_cache_ctrl #(.CACHE_BYTES(L1_BYTES), .WAYS(L1_WAYS)) u_l1_ctrl (
      .clk, .rst_n,
      .cpu_req(cpu_req[i]), .cpu_we(cpu_we[i]), .cpu_addr(cpu_addr[i]),
      .cpu_wdata(cpu_wdata[i]), .cpu_be(cpu_be[i]), .cpu_ack(cpu_ack[i]),
      .cpu_rdata(cpu_rdata[i]), .cpu_busy(cpu_busy[i]),
      .a_set, .a_tag, .a_state, .a_data, .b_set, .b_tag, .b_state, .b_data,
      .wr_en, .wr_set, .wr_way, .wr_tag, .wr_state, .wr_data_en, .wr_data,
      .bus_req(bus_req[i]), .bus_rsp(bus_rsp[i])
    );

    l1_cache_mem #(.CACHE_BYTES(L1_BYTES), .WAYS(L1_WAYS)) u_l1_mem (
      .clk, .rst_n,
      .a_set, .a_tag, .a_state, .a_data, .b_set, .b_tag, .b_state, .b_data,
      .wr_en, .wr_set, .wr_way, .wr_tag, .wr_state, .wr_data_en, .wr_data
    );
  end

  coherent_interconnect #(.N_CORES(N_CORES), .L1_SETS(L1_SETS), .L1_WAYS(L1_WAYS)) u_ic (
    .clk, .rst_n, .bus_req, .bus_rsp,
    .mem_valid, .mem_ready, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata,
    .n_writebacks(), .n_stale_writebacks(), .n_snoops(), .n_data_fwd(), .n_mem_reads()
  );

  main_memory #(.MEM_BYTES(MEM_BYTES)) u_mem (
    .clk, .rst_n, .mem_valid, .mem_ready, .mem_we, .mem_addr, .mem_wdata, .mem_rvalid, .mem_rdata
  );
endmodule
