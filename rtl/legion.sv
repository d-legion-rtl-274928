// legion: one Legion of D-Legion, a stand-alone matrix-multiplication engine.
//
// C ADiP cores (D x D each) work on the C K-tiles of a window in parallel; their
// psum tiles are reduced by four parallel element-wise accumulators and added to
// the psums kept in four psum banks (read-modify-write, row-wise). A local
// crossbar connects cores, accumulators and banks; the Legion mapper, with its
// zero-tile book, sequences everything; the NoC gateway turns incoming flits into
// weight beats, activation beats and psum read-out requests.
//
// Interface: start/wl hand over one (M, K, N, mode) workload; busy stays high
// until it is finished and done pulses once. Tile data arrive as flits
// (f_valid/f_ready, f_core, f_link, f_payload): first D weight beats, then MT*D
// activation beats per non-skipped window, in N -> K -> M order. Weight beats
// carry the column-rotated (DiP-permuted) tile rows; in MODE_PROJ2 byte (k, j)
// packs the four 2-bit weights of columns j of the four interleaved N-subtiles,
// subtile g in bits [2g+1:2g] (MODE_PROJ4: two 4-bit weights). The zero-tile book
// is written through ztb_*. Results are read back with LINK_PSUM flits while idle;
// the row appears on ps_out one cycle after the request is accepted. Result
// layout: projection modes, element (m, n) of N-subtile s = nt*R + g, column j is
// bank g, row nt*MT*D + m, element j (16-bit value sign-extended to 32 bits);
// MODE_DENSE, N-tile nt is bank nt mod 4, row (nt/4)*MT*D + m, element j (32 bit).
//
// The organisation (C cores, four accumulators, four psum banks, mapper with ZTB,
// local crossbar, gateway) is the paper's; the protocols and layouts above are
// this design's.
module legion
  import dlegion_pkg::*;
#(
  parameter int unsigned D         = 16,
  parameter int unsigned C         = 8,
  parameter int unsigned DEPTH     = 10813,
  parameter int unsigned ZTB_DEPTH = 256,
  parameter int unsigned AW        = $clog2(DEPTH),
  parameter int unsigned ZAW       = $clog2(ZTB_DEPTH)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  workload_t                    wl,
  output logic                         busy,
  output logic                         done,
  input  logic                         ztb_we,
  input  logic [ZAW-1:0]               ztb_waddr,
  input  logic [C-1:0]                 ztb_wdata,
  input  logic                         f_valid,
  output logic                         f_ready,
  input  logic [$clog2(C):0]           f_core,
  input  link_e                        f_link,
  input  logic [C-1:0][D-1:0][7:0]     f_payload,
  output logic                         ps_valid,
  output logic [D-1:0][ELEM_W-1:0]     ps_data,
  output logic                         ev_stall,
  output logic                         ev_skip,
  output logic                         ev_partial,
  output logic                         ev_zfill
);

  // gateway <-> mapper
  logic                      w_valid, w_ready, a_valid, a_ready;
  logic [C-1:0]              core_sel;
  logic [C-1:0][D-1:0][7:0]  core_data;
  logic                      rd_req;
  logic [1:0]                rq_bank;
  logic [AW-1:0]             rq_addr;

  // mapper outputs
  logic [ZAW-1:0]            ztb_raddr;
  logic [C-1:0]              ztb_rdata;
  logic                      adv, w_wr;
  logic [C-1:0]              core_on;
  mode_e                     mode;
  logic [$clog2(D)-1:0]      w_row;
  logic [NACC-1:0]           m_re, m_we, wr_bank;
  logic [AW-1:0]             m_raddr, m_waddr;
  logic                      wr_first;

  noc_gateway #(.D(D), .C(C), .AW(AW)) u_gw (
    .f_valid, .f_ready, .f_core, .f_link, .f_payload,
    .w_valid, .w_ready, .a_valid, .a_ready, .core_sel, .core_data,
    .rd_ready (!busy), .rd_req, .rd_bank (rq_bank), .rd_addr (rq_addr)
  );

  ztb #(.C(C), .DEPTH(ZTB_DEPTH)) u_ztb (
    .clk, .rst_n, .we (ztb_we), .waddr (ztb_waddr), .wdata (ztb_wdata),
    .raddr (ztb_raddr), .rdata (ztb_rdata)
  );

  legion_mapper #(.D(D), .C(C), .AW(AW), .ZAW(ZAW)) u_map (
    .clk, .rst_n, .start, .wl, .busy, .done,
    .ztb_raddr, .ztb_rdata,
    .w_valid, .w_ready, .a_valid, .a_ready,
    .adv, .core_on, .mode, .w_wr, .w_row,
    .rd_re (m_re), .rd_addr (m_raddr), .wr_we (m_we), .wr_addr (m_waddr),
    .wr_bank, .wr_first,
    .ev_stall, .ev_skip, .ev_partial, .ev_zfill
  );

  // cores
  logic [C-1:0][D-1:0][NACC-1:0][LANE_W-1:0] core_y;
  logic a_take;
  assign a_take = a_valid && a_ready;

  for (genvar c = 0; c < C; c++) begin : g_core
    adip_core #(.D(D)) u_core (
      .clk, .rst_n,
      .en      (adv),
      .core_on (core_on[c]),
      .mode    (mode),
      .a_in    ((a_take && core_sel[c]) ? core_data[c] : '0),
      .w_wr    (w_wr && core_sel[c]),
      .w_row   (w_row),
      .w_in    (core_data[c]),
      .y       (core_y[c])
    );
  end

  // crossbar, accumulators, banks
  logic [NACC-1:0][C-1:0][D-1:0][LANE_W-1:0] acc_in;
  logic [NACC-1:0][D-1:0][LANE_W-1:0]        acc_sum, acc_psum, acc_psum_q;
  logic [NACC-1:0][D-1:0][3:0]               acc_cy;
  logic [NACC-1:0][D-1:0][ELEM_W-1:0]        bank_wdata, bank_rdata;

  legion_xbar #(.D(D), .C(C)) u_xbar (
    .mode, .bank_sel (wr_bank), .core_y, .acc_in, .acc_sum, .bank_wdata,
    .bank_rdata, .acc_psum
  );

  assign acc_psum_q = wr_first ? '0 : acc_psum;

  for (genvar g = 0; g < NACC; g++) begin : g_acc
    legion_accumulator #(.D(D), .C(C)) u_acc (
      .core_in   (acc_in[g]),
      .psum_in   (acc_psum_q[g]),
      .chain_in  (g % 2 == 1 && mode == MODE_DENSE),
      .carry_in  (acc_cy[(g/2)*2]),
      .sum       (acc_sum[g]),
      .carry_out (acc_cy[g])
    );
  end

  // bank read port shared between the mapper (RMW) and read-out requests
  logic [NACC-1:0] rd_oh_q;
  logic            ps_pend;
  for (genvar b = 0; b < NACC; b++) begin : g_bank
    psum_bank #(.D(D), .DEPTH(DEPTH), .AW(AW)) u_bank (
      .clk,
      .we    (m_we[b]),
      .waddr (m_waddr),
      .wdata (bank_wdata[b]),
      .re    (busy ? m_re[b] : (rd_req && rq_bank == b[1:0])),
      .raddr (busy ? m_raddr : rq_addr),
      .rdata (bank_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps_pend <= 1'b0;
      rd_oh_q <= '0;
    end else begin
      ps_pend <= rd_req;
      if (rd_req) rd_oh_q <= NACC'(1) << rq_bank;
    end
  end

  always_comb begin
    ps_valid = ps_pend;
    ps_data  = '0;
    for (int b = 0; b < NACC; b++) if (rd_oh_q[b]) ps_data = bank_rdata[b];
  end

endmodule
