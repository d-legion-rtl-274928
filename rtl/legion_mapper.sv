// legion_mapper: Legion mapper / controller.
//
// Runs one (M, K, N, mode) workload on the Legion's C cores. Tiles follow
// eq. (1): MT = ceil(M/D), KT = ceil(K/(C*D)), NT = ceil(N/(R*D)), R = 1, 2, 4
// for MODE_DENSE, MODE_PROJ4, MODE_PROJ2. The loop order is N -> K -> M: for each
// N-tile, the KT windows (C K-tiles, one per core) are processed in turn, and in
// each window the MT*D activation rows are streamed. One window is
//   S_LOAD   D cycles: weight row i of every core written from one weight beat
//   S_STREAM MT*D cycles: one activation beat (one row per core) per cycle
//   S_PIPE   PIPE cycles of pipeline slack
// and a workload ends with S_DRAIN, D cycles for the last rows to leave the
// cores. Without stalls or zero tiles a workload takes
//   KT * NT * (D * (MT + 1) + PIPE) + D
// cycles with busy = 1, which is eq. (2) of the paper with P = PIPE.
//
// Zero-tile book: entry w (w = window sequence number) holds one bit per core.
// A window whose C tiles are all zero (fully sparse) is skipped in one S_SKIP
// cycle: no weight or activation beat is taken, no core runs and no psum is
// updated. In a partially sparse window the cores of the zero tiles are
// deactivated (core_on = 0). If every window of an N-tile is skipped, S_ZFILL
// writes zero rows for that tile so the result memory stays correct.
//
// Accumulation control: each streamed row carries {valid, first, banks, address}
// through a D+1 stage delay line matching the core latency. At stage D-1 the
// stored psum is read (unless this is the first pass of the N-tile); at stage D
// the accumulators add the C core outputs and the read psum and the banks write
// the row. The whole pipeline (cores, delay line, bank read and write) moves only
// in cycles with adv = 1: adv is 0 while a needed beat is missing (stall).
//
// The loop order, window/ZTB semantics and the skip/deactivate behaviour are the
// paper's. The state sequence, PIPE = 1, the zero fill and the delay-line
// control are this design's choices.
// The reset is asynchronous. The one assertion below also uses rst_n, in its
// disable condition (a synchronous use), so lint may report rst_n as used both
// ways. That is intended and adds no logic.
module legion_mapper
  import dlegion_pkg::*;
#(
  parameter int unsigned D        = 16,
  parameter int unsigned C        = 8,
  parameter int unsigned AW       = 14,    // psum bank address width
  parameter int unsigned ZAW      = 8,     // ZTB address width
  parameter int unsigned PIPE     = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // workload
  input  logic                 start,
  input  workload_t            wl,
  output logic                 busy,
  output logic                 done,
  // zero-tile book
  output logic [ZAW-1:0]       ztb_raddr,
  input  logic [C-1:0]         ztb_rdata,
  // beats from the NoC gateway
  input  logic                 w_valid,
  output logic                 w_ready,
  input  logic                 a_valid,
  output logic                 a_ready,
  // core control
  output logic                 adv,
  output logic [C-1:0]         core_on,
  output mode_e                mode,
  output logic                 w_wr,
  output logic [$clog2(D)-1:0] w_row,
  // psum memory / accumulator control
  output logic [NACC-1:0]      rd_re,
  output logic [AW-1:0]        rd_addr,
  output logic [NACC-1:0]      wr_we,
  output logic [AW-1:0]        wr_addr,
  output logic [NACC-1:0]      wr_bank,
  output logic                 wr_first,
  // events, one pulse each
  output logic                 ev_stall,
  output logic                 ev_skip,
  output logic                 ev_partial,
  output logic                 ev_zfill
);

  localparam int unsigned LD = $clog2(D);
  localparam int unsigned LC = $clog2(C);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_STREAM, S_PIPE, S_SKIP, S_ZFILL, S_DRAIN} st_e;

  typedef struct packed {
    logic            valid;
    logic            first;
    logic [NACC-1:0] bank;
    logic [AW-1:0]   addr;
  } row_t;

  st_e              st;
  mode_e            md;
  logic [DIM_W-1:0] m_q, rows, kt, ntn;
  logic [DIM_W-1:0] nt, kw, cnt;
  logic [ZAW-1:0]   wptr;
  logic             touched;
  logic [C-1:0]     zmask;
  row_t             dl [D+1];

  // eq. (1) for the incoming workload
  logic [DIM_W-1:0] mt_s, kt_s, nt_s;
  always_comb begin
    int unsigned lr;
    lr   = (wl.mode == MODE_PROJ2) ? 2 : (wl.mode == MODE_PROJ4) ? 1 : 0;
    mt_s = DIM_W'((32'(wl.m) + D - 1) >> LD);
    kt_s = DIM_W'((32'(wl.k) + C*D - 1) >> (LC + LD));
    nt_s = DIM_W'((32'(wl.n) + (D << lr) - 1) >> (LD + lr));
  end

  // row entering the cores this cycle
  logic             take_row, row_first;
  logic [NACC-1:0]  bc_bank;
  logic [AW-1:0]    bc_addr;

  psum_bank_ctrl #(.AW(AW)) u_bc (
    .mode (md), .nt (nt), .m (cnt), .rows (rows),
    .bank_en (bc_bank), .addr (bc_addr)
  );

  always_comb begin
    w_ready  = (st == S_LOAD);
    a_ready  = (st == S_STREAM);
    adv      = (st == S_LOAD)   ? w_valid :
               (st == S_STREAM) ? a_valid : 1'b1;
    take_row = (st == S_STREAM && a_valid) || (st == S_ZFILL);
    row_first = (st == S_ZFILL) || !touched;
    core_on  = (st == S_LOAD || st == S_STREAM) ? ~zmask : '0;
    mode     = md;
    w_wr     = (st == S_LOAD) && w_valid;
    w_row    = cnt[LD-1:0];
    ztb_raddr = (st == S_IDLE) ? '0 : ZAW'(wptr + 1'b1);
    busy     = (st != S_IDLE);
    ev_stall = (st == S_LOAD && !w_valid) || (st == S_STREAM && !a_valid);
    // psum read at stage D-1, write at stage D
    rd_re    = (adv && dl[D-1].valid && !dl[D-1].first) ? dl[D-1].bank : '0;
    rd_addr  = dl[D-1].addr;
    wr_we    = (adv && dl[D].valid) ? dl[D].bank : '0;
    wr_addr  = dl[D].addr;
    wr_bank  = dl[D].bank;
    wr_first = dl[D].first;
  end

  // next-window decision (shared by S_PIPE end, S_SKIP and S_ZFILL end)
  logic last_kw, last_nt, nz_all;
  assign last_kw = (kw + 1'b1 >= kt);
  assign last_nt = (nt + 1'b1 >= ntn);
  assign nz_all  = &ztb_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; md <= MODE_DENSE;
      m_q <= '0; rows <= '0; kt <= '0; ntn <= '0;
      nt <= '0; kw <= '0; cnt <= '0; wptr <= '0;
      touched <= 1'b0; zmask <= '0;
      done <= 1'b0; ev_skip <= 1'b0; ev_partial <= 1'b0; ev_zfill <= 1'b0;
      for (int s = 0; s <= D; s++) dl[s] <= '0;
    end else begin
      done <= 1'b0; ev_skip <= 1'b0; ev_partial <= 1'b0; ev_zfill <= 1'b0;

      if (adv) begin
        dl[0].valid <= take_row && (cnt < m_q);
        dl[0].first <= row_first;
        dl[0].bank  <= bc_bank;
        dl[0].addr  <= bc_addr;
        for (int s = 1; s <= D; s++) dl[s] <= dl[s-1];
      end

      case (st)
        S_IDLE: if (start) begin
          md   <= wl.mode;
          m_q  <= wl.m;
          rows <= DIM_W'(mt_s << LD);
          kt   <= kt_s;
          ntn  <= nt_s;
          nt <= '0; kw <= '0; cnt <= '0; wptr <= '0; touched <= 1'b0;
          zmask <= ztb_rdata;
          st <= nz_all ? S_SKIP : S_LOAD;
          ev_partial <= !nz_all && (|ztb_rdata);
        end
        S_LOAD: if (w_valid) begin
          if (cnt == DIM_W'(D-1)) begin cnt <= '0; st <= S_STREAM; end
          else cnt <= cnt + 1'b1;
        end
        S_STREAM: if (a_valid) begin
          if (cnt == rows - 1'b1) begin cnt <= '0; st <= S_PIPE; touched <= 1'b1; end
          else cnt <= cnt + 1'b1;
        end
        S_ZFILL: begin
          if (cnt == rows - 1'b1) begin cnt <= '0; st <= S_PIPE; touched <= 1'b1; end
          else cnt <= cnt + 1'b1;
        end
        S_DRAIN: begin
          if (cnt == DIM_W'(D-1)) begin cnt <= '0; st <= S_IDLE; done <= 1'b1; end
          else cnt <= cnt + 1'b1;
        end
        default: begin // S_PIPE and S_SKIP
          if (st == S_SKIP) ev_skip <= 1'b1;
          if (st == S_PIPE && cnt != DIM_W'(PIPE-1)) cnt <= cnt + 1'b1;
          else begin
            cnt <= '0;
            if (!last_kw || (touched && !last_nt)) begin
              // next window of this N-tile, or first window of the next N-tile
              if (last_kw) begin nt <= nt + 1'b1; kw <= '0; touched <= 1'b0; end
              else kw <= kw + 1'b1;
              wptr  <= wptr + 1'b1;
              zmask <= ztb_rdata;
              st    <= nz_all ? S_SKIP : S_LOAD;
              ev_partial <= !nz_all && (|ztb_rdata);
            end else if (!touched) begin
              st <= S_ZFILL;         // whole N-tile was zero
              ev_zfill <= 1'b1;
            end else begin
              st <= S_DRAIN;
            end
          end
        end
      endcase
    end
  end

  // a workload needs non-zero dimensions
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IDLE && start) |-> (wl.m != 0 && wl.k != 0 && wl.n != 0));

endmodule
