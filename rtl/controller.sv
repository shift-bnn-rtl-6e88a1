// controller: central controller of the accelerator.
//
// It accepts one layer-stage instruction (instr_t) at a time and expands it
// into a stream of micro-operations (uop_t, one per cycle) that all SPUs
// execute in lock step. The loop nests it runs are those of the RC-dimension
// (output-map) mapping:
//
// Convolution (OP_CONV_FW, OP_CONV_BW, OP_CONV_GC) and pooling (OP_POOL):
//   for a            outer channel
//     for tile       4x4 tile of the destination map
//       for b        inner channel
//         [BW, a not first: PSUM  4 cycles, read back the partial sums]
//         for chunk  groups of up to 5 kernel columns
//           FILL     3 upward moves loading source rows into the tile
//           for ki   UP move (kj = 0) then LEFT moves (kj = 1..), one MAC each
//         [BW, GC: DRAIN 4 cycles, write the tile]
//       [FW, POOL: DRAIN 4 cycles]
//       [FW, BW, more tiles: REWIND nb*K*K GRNG steps]
//
//   FW   a = output channel, b = input channel. The partial sum stays in the
//        PE for all input channels (register-feedback mode). Weight
//        ((a*CI + b)*K + ki)*K + kj is sampled from GRNG slice 0 stepping
//        forward.
//   BW   a = channel of the incoming errors, run from last to first, b =
//        channel of the outgoing errors, also from last to first, ki/kj in
//        raster order over the 180-degree rotated kernel. GRNG slice 0 steps
//        backward, so the original weights appear exactly in reverse order
//        and the raster walk over the rotated kernel needs nothing else. The
//        partial sums are read back from the buffer before each kernel and
//        written after it (psum mode). With instr.update set, the last tile
//        also feeds the regenerated weights, eps and the stored likelihood
//        gradients to the DPU/updater, which update mu and sigma.
//   GC   the errors of the layer act as the kernel (read from aux, one per
//        cycle, as weights) sliding over the layer input; the K x K result of
//        each (a, b) pair goes to the gradient buffer at index
//        ((a*CI + b)*K + ki)*K + kj.
//   POOL max over a K x K window, results subsampled by two (stride 2).
//   A tile is followed by REWIND when another tile of the same channel a
//   follows: the GRNG is shifted the other way by the number of patterns the
//   tile used, so the next tile sees the same weights again.
//
// FC layers: PE p computes output neuron 16*t + p with its own GRNG slice.
//   OP_FC_FW  for t, for i: input neuron i broadcast to all PEs, all 16
//             slices step forward, entry t*CI + i of the WPB; DRAIN 4 cycles.
//   OP_FC_GC  for t: PE p loads error 16*t + p (2 cycles); for i: input
//             neuron i broadcast as weight, product written to the gradient
//             buffer entry t*CI + i, lane p.
//   OP_FC_BW  for t, i in reverse: all slices step backward and the updater
//             updates mu/sigma. (Errors are not propagated to the layer
//             below an FC layer.)
//
// Interface: instr is taken when instr_valid and instr_ready are both high;
// 'done' pulses for one cycle when the last micro-operation of an
// instruction has left the SPU pipeline (three cycles after issue).
//
// Follows the paper: the FW/BW kernel orders (N first then M in FW, M first
// then N in BW), the two accumulation modes, one GRNG in convolutions and
// all GRNGs in FC layers, forward/backward/idle GRNG modes, weights of the
// rotated kernel produced by backward shifting, errors used as weights in
// GC. This design's own: the instruction format, the tiling, the fill/
// drain/psum sequences, the rewind between tiles and stride-1 convolution.
// Lint notes: the width-expansion warnings are additions of map sizes
// into wider address fields, zero-extended as intended; 'dwo' (output
// width) is computed with the other sizes but not needed by any sequence.
module controller
  import sbnn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  instr_t  instr,
  input  logic    instr_valid,
  output logic    instr_ready,
  output logic    done,
  output uop_t    uop
);

  typedef enum logic [3:0] {
    P_IDLE, P_PSUM, P_FILL, P_MAC, P_DRAIN, P_REWIND,
    P_FC_LOAD, P_FC, P_FC_DRAIN, P_FLUSH
  } phase_e;

  phase_e          ph;
  instr_t          I;
  // derived sizes
  logic [DIMW-1:0] kh, kw, dh, dw, dwo;     // kernel, destination (unsubsampled), stored width
  logic [DIMW-1:0] nty, ntx, nchunk;
  logic [CHW-1:0]  na, nb;
  logic [NBAW-1:0] sp, dp, ap;              // pitches
  logic [NBAW-1:0] smap, dmap, amap;        // map sizes in bank words
  logic [WAW+3:0]  kk;                      // K*K
  logic [CHW-1:0]  nt;                      // FC: 16-output groups
  // counters
  logic [CHW-1:0]  a, b;
  logic [DIMW-1:0] ty, tx, ch, ki, kj;
  logic [WAW+3:0]  cnt;
  logic [2:0]      flush;

  logic bw, gc, fw, pool;
  assign fw   = (I.op == OP_CONV_FW);
  assign bw   = (I.op == OP_CONV_BW);
  assign gc   = (I.op == OP_CONV_GC);
  assign pool = (I.op == OP_POOL);

  assign instr_ready = (ph == P_IDLE);

  // ---------------------------------------------------------------- helpers
  function automatic logic [NBAW-1:0] pitch_of(input logic [DIMW-1:0] w);
    return NBAW'((w + DIMW'(NB_BANKS - 1)) / DIMW'(NB_BANKS));
  endfunction

  logic [DIMW-1:0] kw_chunk;   // columns in the current chunk
  logic            last_tile, last_b, last_a, first_a;
  logic [DIMW-1:0] kc0;
  always_comb begin
    kc0       = ch * DIMW'(KCHUNK);
    kw_chunk  = (kw - kc0 > DIMW'(KCHUNK)) ? DIMW'(KCHUNK) : kw - kc0;
    last_tile = (ty == nty - 1) && (tx == ntx - 1);
    last_b    = bw ? (b == 0) : (b == nb - 1);
    last_a    = bw ? (a == 0) : (a == na - 1);
    first_a   = bw ? (a == na - 1) : (a == 0);
  end

  // output-map geometry of an incoming instruction
  logic [DIMW-1:0] khv, kwv, dhv, dwv, dwov;
  always_comb begin
    khv  = (instr.op == OP_CONV_GC) ? instr.aux_h : DIMW'(instr.k);
    kwv  = (instr.op == OP_CONV_GC) ? instr.aux_w : DIMW'(instr.k);
    dhv  = instr.src_h + DIMW'(2 * instr.pad) - khv + 1'b1;
    dwv  = instr.src_w + DIMW'(2 * instr.pad) - kwv + 1'b1;
    dwov = (instr.op == OP_POOL) ? (dwv + 1'b1) >> 1 : dwv;
  end

  // ---------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE;
      I  <= '0;
      {kh, kw, dh, dw, dwo, nty, ntx, nchunk} <= '0;
      {na, nb, sp, dp, ap, smap, dmap, amap, kk, nt} <= '0;
      {a, b, ty, tx, ch, ki, kj, cnt, flush} <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (ph)
        P_IDLE: begin
          if (instr_valid) begin
            I   <= instr;
            kh  <= khv;
            kw  <= kwv;
            dh  <= dhv;
            dw  <= dwv;
            dwo <= dwov;
            nty <= (dhv + DIMW'(TILE - 1)) / DIMW'(TILE);
            ntx <= (dwv + DIMW'(TILE - 1)) / DIMW'(TILE);
            nchunk <= (kwv + DIMW'(KCHUNK - 1)) / DIMW'(KCHUNK);
            sp  <= pitch_of(instr.src_w);
            dp  <= pitch_of((instr.op == OP_FC_FW) ? instr.co : dwov);
            ap  <= pitch_of((instr.op == OP_FC_GC) ? instr.co : instr.aux_w);
            smap <= NBAW'(instr.src_h) * pitch_of(instr.src_w);
            dmap <= NBAW'((instr.op == OP_POOL) ? (dhv + 1'b1) >> 1 : dhv) * pitch_of(dwov);
            amap <= NBAW'(instr.aux_h) * pitch_of(instr.aux_w);
            kk  <= (WAW+4)'(instr.k) * (WAW+4)'(instr.k);
            nt  <= (instr.co + CHW'(NPE - 1)) / CHW'(NPE);
            unique case (instr.op)
              OP_CONV_FW, OP_CONV_GC: begin na <= instr.co; nb <= instr.ci; end
              OP_CONV_BW:             begin na <= instr.ci; nb <= instr.co; end
              default:                begin na <= instr.ci; nb <= 1; end
            endcase
            ty <= '0; tx <= '0; ch <= '0; ki <= '0; kj <= '0; cnt <= '0;
            unique case (instr.op)
              OP_CONV_BW: begin
                a  <= instr.ci - 1'b1;
                b  <= instr.co - 1'b1;
                ph <= P_FILL;
              end
              OP_FC_FW: begin a <= '0; b <= '0; ph <= P_FC; end
              OP_FC_GC: begin a <= '0; b <= '0; ph <= P_FC_LOAD; end
              OP_FC_BW: begin
                a  <= ((instr.co + CHW'(NPE - 1)) / CHW'(NPE)) - 1'b1;
                b  <= instr.ci - 1'b1;
                ph <= P_FC;
              end
              default: begin a <= '0; b <= '0; ph <= P_FILL; end
            endcase
          end
        end

        P_PSUM: begin
          cnt <= cnt + 1'b1;
          if (cnt == TILE - 1) begin cnt <= '0; ph <= P_FILL; end
        end

        P_FILL: begin
          cnt <= cnt + 1'b1;
          if (cnt == TILE - 2) begin cnt <= '0; ki <= '0; kj <= '0; ph <= P_MAC; end
        end

        P_MAC: begin
          if (kj != kw_chunk - 1) begin
            kj <= kj + 1'b1;
          end else if (ki != kh - 1) begin
            kj <= '0;
            ki <= ki + 1'b1;
          end else if (ch != nchunk - 1) begin
            ch <= ch + 1'b1;
            ph <= P_FILL;
          end else begin
            // end of one (a, tile, b) kernel
            ch <= '0;
            if (bw || gc) begin
              ph <= P_DRAIN;
            end else if (!last_b) begin
              b  <= b + 1'b1;
              ph <= P_FILL;
            end else begin
              ph <= P_DRAIN;
            end
          end
        end

        P_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == TILE - 1) begin
            cnt <= '0;
            if ((bw || gc) && !last_b) begin
              b  <= bw ? b - 1'b1 : b + 1'b1;
              ph <= (bw && !first_a) ? P_PSUM : P_FILL;
            end else if (!last_tile && (fw || bw)) begin
              ph <= P_REWIND;
            end else begin
              // next tile or next a
              b <= bw ? nb - 1'b1 : '0;
              if (!last_tile) begin
                if (tx == ntx - 1) begin tx <= '0; ty <= ty + 1'b1; end
                else tx <= tx + 1'b1;
                ph <= (bw && !first_a) ? P_PSUM : P_FILL;
              end else begin
                tx <= '0;
                ty <= '0;
                if (last_a) ph <= P_FLUSH;
                else begin
                  a  <= bw ? a - 1'b1 : a + 1'b1;
                  ph <= (bw) ? P_PSUM : P_FILL;
                end
              end
            end
          end
        end

        P_REWIND: begin
          cnt <= cnt + 1'b1;
          if (cnt == (WAW+4)'(nb) * kk - 1) begin
            cnt <= '0;
            b   <= bw ? nb - 1'b1 : '0;
            if (tx == ntx - 1) begin tx <= '0; ty <= ty + 1'b1; end
            else tx <= tx + 1'b1;
            ph <= (bw && !first_a) ? P_PSUM : P_FILL;
          end
        end

        P_FC_LOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 1) begin cnt <= '0; b <= '0; ph <= P_FC; end
        end

        P_FC: begin
          if (I.op == OP_FC_BW) begin
            if (b != 0) b <= b - 1'b1;
            else if (a != 0) begin a <= a - 1'b1; b <= I.ci - 1'b1; end
            else ph <= P_FLUSH;
          end else if (b != I.ci - 1) begin
            b <= b + 1'b1;
          end else if (I.op == OP_FC_FW) begin
            ph <= P_FC_DRAIN;
          end else if (a != nt - 1) begin
            a  <= a + 1'b1;
            ph <= P_FC_LOAD;
          end else begin
            ph <= P_FLUSH;
          end
        end

        P_FC_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == TILE - 1) begin
            cnt <= '0;
            b   <= '0;
            if (a != nt - 1) begin a <= a + 1'b1; ph <= P_FC; end
            else ph <= P_FLUSH;
          end
        end

        P_FLUSH: begin
          flush <= flush + 1'b1;
          if (flush == 3'd3) begin
            flush <= '0;
            done  <= 1'b1;
            ph    <= P_IDLE;
          end
        end

        default: ph <= P_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------ micro-operation
  logic [CHW-1:0]   src_ch, dst_ch;
  logic [DIMW-1:0]  oy0, ox0;
  logic [WAW+3:0]   widx;
  logic signed [DIMW:0] pad_s;

  always_comb begin
    src_ch = (fw || gc) ? b : a;
    dst_ch = (bw) ? b : a;
    oy0    = ty * DIMW'(TILE);
    ox0    = tx * DIMW'(TILE);
    pad_s  = (DIMW+1)'(I.pad);
    if (bw)
      widx = I.w_base + ((WAW+4)'(a) * (WAW+4)'(nb) + (WAW+4)'(b)) * kk
             + (kk - 1'b1 - ((WAW+4)'(ki) * (WAW+4)'(I.k) + (WAW+4)'(kj)));
    else if (I.op == OP_FC_FW || I.op == OP_FC_BW)
      widx = I.w_base + ((WAW+4)'(a) * (WAW+4)'(I.ci) + (WAW+4)'(b)) * (WAW+4)'(NPE);
    else
      widx = I.w_base + (((WAW+4)'(a) * (WAW+4)'(nb) + (WAW+4)'(b)) * (WAW+4)'(I.k)
             + (WAW+4)'(ki)) * (WAW+4)'(I.k) + (WAW+4)'(kj);
  end

  always_comb begin
    uop = '0;
    // default shape of the source row read
    uop.rda.sel   = I.src_sel;
    uop.rda.base  = I.src_base + NBAW'(src_ch) * smap;
    uop.rda.pitch = sp;
    uop.rda.h     = I.src_h;
    uop.rda.w     = I.src_w;
    uop.rda.x0    = $signed({1'b0, ox0}) + $signed({1'b0, kc0}) - pad_s;
    uop.wrd.addr  = widx[WAW+3:4];
    uop.wrd.lane  = widx[3:0];
    uop.wsel      = gc ? W_NB_ELEM : W_SAMP_BCAST;

    unique case (ph)
      P_PSUM: begin
        uop.rda.en    = 1'b1;
        uop.rda.sel   = I.dst_sel;
        uop.rda.base  = I.dst_base + NBAW'(dst_ch) * dmap;
        uop.rda.pitch = dp;
        uop.rda.h     = dh;
        uop.rda.w     = dw;
        uop.rda.y     = $signed({1'b0, oy0}) + $signed((DIMW+1)'(cnt));
        uop.rda.x0    = $signed({1'b0, ox0});
        uop.pe_op     = PE_PSUM;
        uop.psum_row  = cnt[1:0];
      end

      P_FILL: begin
        uop.rda.en = 1'b1;
        uop.rda.y  = $signed({1'b0, oy0}) + $signed((DIMW+1)'(cnt)) - pad_s;
        uop.shift  = SH_UP;
      end

      P_MAC: begin
        logic first;
        first = (ki == 0) && (kj == 0) && (ch == 0);
        if (kj == 0) begin
          uop.rda.en = 1'b1;
          uop.rda.y  = $signed({1'b0, oy0}) + $signed({1'b0, ki}) + (DIMW+1)'(TILE - 1) - pad_s;
          uop.shift  = SH_UP;
        end else begin
          uop.shift  = SH_LEFT;
        end
        if (pool) begin
          uop.pe_op = first ? PE_MAXF : PE_MAX;
        end else if (gc) begin
          uop.pe_op    = first ? PE_MUL : PE_MAC;
          uop.rdb.en   = 1'b1;
          uop.rdb.sel  = I.aux_sel;
          uop.rdb.base = I.aux_base + NBAW'(a) * amap;
          uop.rdb.pitch = ap;
          uop.rdb.h    = I.aux_h;
          uop.rdb.w    = I.aux_w;
          uop.rdb.y    = $signed({1'b0, ki});
          uop.rdb.x0   = $signed({1'b0, kc0}) + $signed({1'b0, kj});
        end else if (fw) begin
          uop.pe_op    = (first && b == 0) ? PE_MUL : PE_MAC;
          uop.grng_fwd = 1'b1;
          uop.wrd.en   = 1'b1;
        end else begin   // bw
          uop.pe_op    = (first && first_a) ? PE_MUL : PE_MAC;
          uop.grng_bwd = 1'b1;
          uop.wrd.en   = 1'b1;
          uop.upd      = I.update && last_tile;
        end
      end

      P_DRAIN: begin
        if (gc) begin
          uop.gbw.en   = (oy0 + DIMW'(cnt) < dh);
          uop.gbw.row  = cnt[1:0];
          uop.gbw.j0   = I.g_base + (((WAW+4)'(a) * (WAW+4)'(nb) + (WAW+4)'(b)) * (WAW+4)'(dh)
                         + (WAW+4)'(oy0) + cnt) * (WAW+4)'(dw) + (WAW+4)'(ox0);
          uop.gbw.ncol = (dw - ox0 >= DIMW'(TILE)) ? 3'(TILE) : 3'(dw - ox0);
        end else begin
          uop.nbw.en    = 1'b1;
          uop.nbw.sel   = I.dst_sel;
          uop.nbw.base  = I.dst_base + NBAW'(dst_ch) * dmap;
          uop.nbw.pitch = dp;
          uop.nbw.y     = oy0 + DIMW'(cnt);
          uop.nbw.x0    = ox0;
          uop.nbw.h     = dh;
          uop.nbw.w     = dw;
          uop.nbw.row   = cnt[1:0];
          uop.nbw.relu  = fw && I.relu;
          uop.nbw.sub   = pool;
        end
      end

      P_REWIND: begin
        if (fw) uop.grng_bwd = 1'b1;
        else    uop.grng_fwd = 1'b1;
      end

      P_FC_LOAD: begin
        uop.rda.en    = 1'b1;
        uop.rda.sel   = I.aux_sel;
        uop.rda.base  = I.aux_base;
        uop.rda.pitch = ap;
        uop.rda.h     = 1;
        uop.rda.w     = I.co;
        uop.rda.y     = '0;
        uop.rda.x0    = $signed((DIMW+1)'(a) * (DIMW+1)'(NPE)) + $signed((DIMW+1)'(cnt) * (DIMW+1)'(NB_BANKS));
        uop.shift     = cnt[0] ? SH_LOADV_HI : SH_LOADV_LO;
      end

      P_FC: begin
        uop.wrd.all  = 1'b1;
        uop.grng_all = 1'b1;
        uop.wsel     = (I.op == OP_FC_GC) ? W_NB_ELEM : W_SAMP_LANE;
        if (I.op != OP_FC_BW) begin
          uop.rdb.en    = 1'b1;
          uop.rdb.sel   = I.src_sel;
          uop.rdb.base  = I.src_base;
          uop.rdb.pitch = sp;
          uop.rdb.h     = 1;
          uop.rdb.w     = I.ci;
          uop.rdb.y     = '0;
          uop.rdb.x0    = $signed({1'b0, b});
        end
        unique case (I.op)
          OP_FC_FW: begin
            uop.shift    = SH_BCAST;
            uop.pe_op    = (b == 0) ? PE_MUL : PE_MAC;
            uop.grng_fwd = 1'b1;
            uop.wrd.en   = 1'b1;
          end
          OP_FC_GC: begin
            uop.pe_op    = PE_MUL;
            uop.gbw.en   = 1'b1;
            uop.gbw.all  = 1'b1;
            uop.gbw.addr = WAW'(I.g_base[WAW+3:4] + (WAW)'(a) * (WAW)'(I.ci) + (WAW)'(b));
          end
          default: begin // OP_FC_BW
            uop.grng_bwd = 1'b1;
            uop.wrd.en   = 1'b1;
            uop.upd      = I.update;
          end
        endcase
      end

      P_FC_DRAIN: begin
        uop.nbw.en    = 1'b1;
        uop.nbw.sel   = I.dst_sel;
        uop.nbw.base  = I.dst_base;
        uop.nbw.pitch = dp;
        uop.nbw.y     = '0;
        uop.nbw.x0    = DIMW'(a) * DIMW'(NPE) + DIMW'(cnt) * DIMW'(TILE);
        uop.nbw.h     = 1;
        uop.nbw.w     = I.co;
        uop.nbw.row   = cnt[1:0];
        uop.nbw.relu  = I.relu;
      end

      default: ;
    endcase
  end

endmodule
