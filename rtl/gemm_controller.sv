// gemm_controller: weight-stationary GEMM sequencer of the photo-core.
//
// A GEMM Y = W X with W of (MT*M) x (KT*M) and X of (KT*M) x NVEC is run as
// in the paper: W is cut into M x M tiles; each tile is programmed into the
// MZI mesh once and then every input vector that meets it streams through
// the core, one per cycle. The next tile is moved from the weight SRAM into
// the weight buffer while the current one computes, so between tiles the
// core only waits for the 10 ns programming, unless the stream was shorter
// than the tile load (then it also waits for the load: counted as n_wait).
//
// Tile order (this design's choice): output tile i, then chunk of at most
// ACC_DEPTH input vectors (the accumulator's size), then input tile k
// fastest, so partial sums of a chunk stay in the accumulator.
// Memory layout (this design's choice): input vector n of input tile k is
// activation row in_base + k*NVEC + n; output vector n of output tile i is
// row out_base + i*NVEC + n; tile (i,k) is weight rows
// w_base + (i*KT + k)*M ... + M-1, row r holding W[i*M + r][k*M .. k*M+M-1].
//
// Two engines run at once. The loader reads M weight-SRAM rows per tile into
// the buffer (data one cycle after the read). The streamer waits for a full
// buffer, starts programming (prog_start), and when programming is done
// frees the buffer for the loader and reads the chunk's input vectors from
// the activation SRAM, tagging each for the accumulator. done pulses when
// the accumulator has written all MT*NVEC output vectors (acc_n_done).
//
// The vector unit's follow mode reads this block's count of finished vectors;
// that count restarts when a GEMM is accepted, so a follow-mode vector command
// must be issued after the GEMM command it follows. Lint notes that pos_last
// uses only some fields of its position argument; the others are not needed
// to decide whether a position is the last one.
module gemm_controller
  import adept_pkg::*;
#(
  parameter int unsigned M         = M_DEF,
  parameter int unsigned ACC_DEPTH = 1024,
  parameter int unsigned AAW       = 18,
  parameter int unsigned WAW       = 21,
  parameter int unsigned TAG_W     = 32,
  localparam int unsigned IW       = (ACC_DEPTH > 1) ? $clog2(ACC_DEPTH) : 1,
  localparam int unsigned RW       = (M > 1) ? $clog2(M) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic [15:0]      cmd_mt,        // output tiles, >= 1
  input  logic [15:0]      cmd_kt,        // input tiles, >= 1
  input  logic [AAW:0]     cmd_nvec,      // vectors, >= 1
  input  logic [AAW-1:0]   cmd_in_base,
  input  logic [AAW-1:0]   cmd_out_base,
  input  logic [WAW-1:0]   cmd_w_base,
  // weight SRAM -> weight buffer
  output logic             ws_re,
  output logic [WAW-1:0]   ws_raddr,
  output logic             wb_ld_valid,
  output logic [RW-1:0]    wb_ld_row,
  // weight buffer programming
  output logic             prog_start,
  input  logic             prog_done,
  // activation SRAM -> photo-core
  output logic             as_re,
  output logic [AAW-1:0]   as_raddr,
  output logic             pc_in_valid,
  output logic [TAG_W-1:0] pc_in_tag,
  // accumulator
  output logic             acc_clr,
  input  logic [AAW:0]     acc_n_done,
  // status
  output logic             busy,
  output logic             done,
  output logic [31:0]      n_tiles,
  output logic [31:0]      n_wait,
  output logic [31:0]      n_prog,        // cycles held for programming: ZETA + 2 per tile
  output logic [31:0]      n_vecs
);

  // tag packing for the photo-core side band: {waddr, last, first, idx}
  typedef struct packed {
    logic [AAW-1:0] waddr;
    logic           last;
    logic           first;
    logic [IW-1:0]  idx;
  } tag_t;
  localparam int unsigned TW = $bits(tag_t);

  // position in the tile sequence
  typedef struct packed {
    logic [15:0]    i;
    logic [15:0]    k;
    logic [AAW:0]   cb;        // first vector of the chunk
    logic [AAW:0]   in_kb;     // k * nvec
    logic [AAW:0]   out_ib;    // i * nvec
    logic [WAW:0]   w_ik;      // (i*kt + k) * M
  } pos_t;

  logic [15:0]    mt, kt;
  logic [AAW:0]   nvec;
  logic [AAW-1:0] in_base, out_base;
  logic [WAW-1:0] w_base;
  logic [AAW+16:0] total_out;

  function automatic logic pos_last(input pos_t p, input logic [15:0] fmt,
                                    input logic [15:0] fkt, input logic [AAW:0] fn);
    return (p.k == fkt - 1'b1) && (p.i == fmt - 1'b1) &&
           (p.cb + (AAW+1)'(ACC_DEPTH) >= fn);
  endfunction

  function automatic pos_t pos_next(input pos_t p, input logic [15:0] fkt,
                                    input logic [AAW:0] fn);
    pos_t q;
    q = p;
    if (p.k != fkt - 1'b1) begin
      q.k     = p.k + 1'b1;
      q.in_kb = p.in_kb + fn;
      q.w_ik  = p.w_ik + (WAW+1)'(M);
    end else begin
      q.k     = '0;
      q.in_kb = '0;
      if (p.cb + (AAW+1)'(ACC_DEPTH) < fn) begin          // next chunk, same i
        q.cb   = p.cb + (AAW+1)'(ACC_DEPTH);
        q.w_ik = p.w_ik - (WAW+1)'((32'(fkt) - 1) * M);
      end else begin                                      // next output tile
        q.cb     = '0;
        q.i      = p.i + 1'b1;
        q.out_ib = p.out_ib + fn;
        q.w_ik   = p.w_ik + (WAW+1)'(M);
      end
    end
    return q;
  endfunction

  // ------------------------------------------------------------- loader
  typedef enum logic [1:0] {L_IDLE, L_LOAD, L_LAND, L_FREE} lstate_e;
  lstate_e lst;
  pos_t    lp;
  logic [RW-1:0] lrow;
  logic    buf_full;   // buffer holds a tile not yet programmed

  // ----------------------------------------------------------- streamer
  typedef enum logic [2:0] {P_IDLE, P_WAIT, P_PROG, P_STREAM, P_FIN} pstate_e;
  pstate_e pst;
  pos_t    sp;
  logic [AAW:0] n, clen;

  assign cmd_ready = (pst == P_IDLE);
  assign busy      = (pst != P_IDLE);

  // weight SRAM read address of the row being loaded
  assign ws_re    = (lst == L_LOAD);
  assign ws_raddr = WAW'(w_base + lp.w_ik[WAW-1:0] + WAW'(lrow));

  logic prog_go;
  assign prog_go = (pst == P_WAIT) && buf_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst         <= L_IDLE;
      lp          <= '0;
      lrow        <= '0;
      buf_full    <= 1'b0;
      wb_ld_valid <= 1'b0;
      wb_ld_row   <= '0;
    end else begin
      wb_ld_valid <= ws_re;
      wb_ld_row   <= lrow;
      if (prog_go) buf_full <= 1'b0;
      case (lst)
        L_IDLE: if (cmd_valid && cmd_ready) begin
          lst  <= L_LOAD;
          lp   <= '0;
          lrow <= '0;
        end
        L_LOAD: begin
          lrow <= lrow + 1'b1;
          if (lrow == RW'(M - 1)) lst <= L_LAND;
        end
        L_LAND: begin
          // the last row lands in the buffer at the end of this cycle
          buf_full <= 1'b1;
          if (pos_last(lp, mt, kt, nvec)) lst <= L_IDLE;
          else begin
            lp  <= pos_next(lp, kt, nvec);
            lst <= L_FREE;
          end
        end
        L_FREE: begin
          // the buffer is free again once its tile has been programmed
          if (prog_done) begin
            lst  <= L_LOAD;
            lrow <= '0;
          end
        end
        default: lst <= L_IDLE;
      endcase
    end
  end

  // streamer
  tag_t tag_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst         <= P_IDLE;
      sp          <= '0;
      n           <= '0;
      clen        <= '0;
      mt          <= '0;
      kt          <= '0;
      nvec        <= '0;
      in_base     <= '0;
      out_base    <= '0;
      w_base      <= '0;
      total_out   <= '0;
      prog_start  <= 1'b0;
      pc_in_valid <= 1'b0;
      tag_d       <= '0;
      done        <= 1'b0;
      n_tiles     <= '0;
      n_wait      <= '0;
      n_prog      <= '0;
      n_vecs      <= '0;
    end else begin
      prog_start  <= 1'b0;
      done        <= 1'b0;
      pc_in_valid <= as_re;
      tag_d.idx   <= IW'(n - sp.cb);
      tag_d.first <= (sp.k == '0);
      tag_d.last  <= (sp.k == kt - 1'b1);
      tag_d.waddr <= out_base + AAW'(sp.out_ib) + AAW'(n);
      if (as_re) n_vecs <= n_vecs + 1;
      case (pst)
        P_IDLE: if (cmd_valid) begin
          pst       <= P_WAIT;
          sp        <= '0;
          mt        <= cmd_mt;
          kt        <= cmd_kt;
          nvec      <= cmd_nvec;
          in_base   <= cmd_in_base;
          out_base  <= cmd_out_base;
          w_base    <= cmd_w_base;
          total_out <= (AAW+17)'(cmd_mt) * (AAW+17)'(cmd_nvec);
        end
        P_WAIT: begin
          if (buf_full) begin
            prog_start <= 1'b1;
            pst        <= P_PROG;
          end else if (n_tiles != 0) begin
            n_wait <= n_wait + 1;        // core idle waiting for a tile load
          end
        end
        P_PROG: begin
          n_prog <= n_prog + 1;
          if (prog_done) begin
            pst     <= P_STREAM;
            n       <= sp.cb;
            clen    <= ((nvec - sp.cb) > (AAW+1)'(ACC_DEPTH)) ? (AAW+1)'(ACC_DEPTH)
                                                           : (nvec - sp.cb);
            n_tiles <= n_tiles + 1;
          end
        end
        P_STREAM: begin
          n <= n + 1'b1;
          if (n == sp.cb + clen - 1'b1) begin
            if (pos_last(sp, mt, kt, nvec)) pst <= P_FIN;
            else begin
              sp  <= pos_next(sp, kt, nvec);
              pst <= P_WAIT;
            end
          end
        end
        P_FIN: if ((AAW+17)'(acc_n_done) == total_out) begin
          pst  <= P_IDLE;
          done <= 1'b1;
        end
        default: pst <= P_IDLE;
      endcase
    end
  end

  // the accumulator's row count restarts as the command is taken, so a
  // follow-mode vector-unit command given in the same cycle never sees the
  // previous GEMM's count
  assign acc_clr  = (pst == P_IDLE) && cmd_valid;
  assign as_re    = (pst == P_STREAM);
  assign as_raddr = in_base + AAW'(sp.in_kb) + AAW'(n);
  assign pc_in_tag = TAG_W'(tag_d);

  initial assert (TAG_W >= TW) else $error("TAG_W too small for the tag");

endmodule
