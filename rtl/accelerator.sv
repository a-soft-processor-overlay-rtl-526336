// accelerator: an example auxiliary architecture for the tightly-coupled overlay.
//
// It is launched by the processor's BAA instruction (start pulse, arg_addr = the
// BAA's base + offset) and works on the shared DMEM through the Aux_Mem port while
// it holds `stall` high; the processor's control path gives it the DMEM port for
// exactly that time. `stall` rises combinationally with `start` and falls in the
// cycle after the last result has been written.
//
// Argument array in DMEM at arg_addr, one 32-bit word each:
//   [0] count: number of words that follow (extra words are read and ignored)
//   [1] kernel: 0 = strided dot products, 1 = Sobel tile, 2 = K-means assignment
//   [2..] kernel arguments (below). Bases are byte addresses, strides count words.
//
// Kernel 0, strided dot products (MM and FIR loop bodies), count = 10:
//   [2] x_base [3] x_ostride [4] x_istride [5] h_base [6] h_ostride [7] h_istride
//   [8] y_base [9] n_out [10] n_in
//   y[o] = sum_{k<n_in} x[x_base + o*x_ostride + k*x_istride]
//                     * h[h_base + o*h_ostride + k*h_istride], y[o] at y_base + 4*o.
//   MM, one row of A times n_out columns of B: x strides (0, 1), h strides (1, N).
//   FIR block: x strides (1, 1), h strides (0, 1).
// Kernel 1, Sobel on a tile (SE loop body), count = 7:
//   [2] in_base (top-left pixel of the tile's input window) [3] in_stride
//   [4] out_base [5] out_stride [6] n_rows [7] n_cols
//   out[r][c] = |Gx| + |Gy| of the 3x3 window whose top-left is in[r][c], with
//   Gx = (p02 + 2 p12 + p22) - (p00 + 2 p10 + p20),
//   Gy = (p20 + 2 p21 + p22) - (p00 + 2 p01 + p02).
// Kernel 2, K-means assignment step (KM loop body), count = 7:
//   [2] pts_base [3] n_pts [4] cent_base [5] n_cent [6] dim [7] label_base
//   label[i] = index of the centroid with the smallest squared Euclidean distance
//   to point i (ties go to the lower index); points and centroids are row-major
//   arrays of `dim` words.
// All arithmetic is 32-bit wrap-around on words read as signed integers.
//
// Timing: one DMEM access per cycle. The launch cycle, then 1 + count cycles
// reading the arguments, one set-up cycle, then the kernel:
//   dot:     2*n_in + 1 cycles per output   (stall = 13 + n_out*(2*n_in + 1))
//   Sobel:   8 reads + 1 write per pixel   (stall = 10 + 9*n_rows*n_cols)
//   K-means: 2*dim reads per centroid + 1 write per point
//            (stall = 10 + n_pts*(2*dim*n_cent + 1))
// with count = 10, 7 and 7 respectively. A count of 0 ends the call after reading
// it; a zero output count (n_out, n_rows or n_cols, n_pts) or an unknown kernel
// number ends it after set-up.
//
// From the paper: the interface (Stall, Aux_Mem_Addr, Aux_Mem_WrData,
// Aux_Mem_RdData), the launch by BAA with a pointer to an argument array whose
// first word is its element count, and the kernels' functions (the MM, FIR, KM and
// SE loop bodies it accelerates). The paper's accelerators are hand-made per
// application and not described; this sequential engine, the kernel word, the
// argument layouts and the Sobel magnitude |Gx| + |Gy| are this design's own.
module accelerator (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] arg_addr,
  output logic        stall,
  output logic [31:0] mem_addr,
  output logic        mem_we,
  output logic [31:0] mem_wdata,
  input  logic [31:0] mem_rdata
);
  localparam int unsigned NARGS = 10;

  typedef enum logic [1:0] { K_DOT = 2'd0, K_SOBEL = 2'd1, K_KMEANS = 2'd2 } kernel_e;

  typedef enum logic [3:0] {
    S_IDLE, S_ARGS, S_SETUP,
    S_RDX, S_RDH, S_WR,          // dot products
    S_SB_RD, S_SB_WR,            // Sobel
    S_KM_RDP, S_KM_RDC, S_KM_WR  // K-means
  } state_e;
  state_e state;

  logic [31:0] arg_ptr, count, idx;
  logic [31:0] args [NARGS];     // words 1..10 of the argument array

  // argument names (dot-product layout; the other kernels reuse the slots)
  logic [31:0] kernel, a2, a3, a4, a5, a6, a7, a8, a9, a10;
  assign kernel = args[0];
  assign a2  = args[1];
  assign a3  = args[2];
  assign a4  = args[3];
  assign a5  = args[4];
  assign a6  = args[5];
  assign a7  = args[6];
  assign a8  = args[7];
  assign a9  = args[8];
  assign a10 = args[9];

  // ---- dot products
  logic [31:0] x_row, h_row, x_ptr, h_ptr, y_ptr;  // byte addresses
  logic [31:0] o_cnt, k_cnt, xv, acc;

  // ---- Sobel: 8 taps of the 3x3 window (the centre has weight 0 in both)
  logic [2:0]  tap;
  logic [31:0] win_ptr, row_in, row_out, out_ptr, r_cnt, c_cnt;
  logic signed [31:0] gx, gy;
  logic [1:0]  tap_dr, tap_dc;
  logic signed [2:0] tap_wx, tap_wy;
  logic [31:0] s4;               // input row stride in bytes

  always_comb begin
    unique case (tap)
      3'd0: begin tap_dr = 2'd0; tap_dc = 2'd0; tap_wx = -3'sd1; tap_wy = -3'sd1; end
      3'd1: begin tap_dr = 2'd0; tap_dc = 2'd1; tap_wx =  3'sd0; tap_wy = -3'sd2; end
      3'd2: begin tap_dr = 2'd0; tap_dc = 2'd2; tap_wx =  3'sd1; tap_wy = -3'sd1; end
      3'd3: begin tap_dr = 2'd1; tap_dc = 2'd0; tap_wx = -3'sd2; tap_wy =  3'sd0; end
      3'd4: begin tap_dr = 2'd1; tap_dc = 2'd2; tap_wx =  3'sd2; tap_wy =  3'sd0; end
      3'd5: begin tap_dr = 2'd2; tap_dc = 2'd0; tap_wx = -3'sd1; tap_wy =  3'sd1; end
      3'd6: begin tap_dr = 2'd2; tap_dc = 2'd1; tap_wx =  3'sd0; tap_wy =  3'sd2; end
      default: begin tap_dr = 2'd2; tap_dc = 2'd2; tap_wx = 3'sd1; tap_wy = 3'sd1; end
    endcase
  end

  // weight in {-2,-1,0,1,2} times a pixel, by shift and negate
  function automatic logic signed [31:0] wmul(input logic signed [2:0] w, input logic [31:0] p);
    unique case (w)
      -3'sd2:  return -(p << 1);
      -3'sd1:  return -p;
       3'sd1:  return p;
       3'sd2:  return p << 1;
      default: return '0;
    endcase
  endfunction

  function automatic logic [31:0] absv(input logic signed [31:0] v);
    return v[31] ? -v : v;
  endfunction

  logic [31:0] sb_addr, sb_pix_gx, sb_pix_gy, sb_out;
  assign s4        = a3 << 2;
  assign sb_addr   = win_ptr + ((tap_dr == 2'd0) ? 32'd0 : (tap_dr == 2'd1) ? s4 : (s4 << 1))
                     + {28'd0, tap_dc, 2'b00};
  assign sb_pix_gx = gx + wmul(tap_wx, mem_rdata);
  assign sb_pix_gy = gy + wmul(tap_wy, mem_rdata);
  assign sb_out    = absv(gx) + absv(gy);

  // ---- K-means
  logic [31:0] p_ptr, p_row, c_ptr, i_cnt, j_cnt, d_cnt, pv, sqd, best, best_j, lab_ptr;
  logic [31:0] diff, sqd_next;
  assign diff      = pv - mem_rdata;
  assign sqd_next = sqd + diff * diff;

  assign stall = (state != S_IDLE) || start;

  always_comb begin
    mem_we    = 1'b0;
    mem_wdata = acc;
    unique case (state)
      S_ARGS:   mem_addr = arg_ptr + (idx << 2);
      S_RDX:    mem_addr = x_ptr;
      S_RDH:    mem_addr = h_ptr;
      S_WR: begin
        mem_addr = y_ptr;
        mem_we   = 1'b1;
      end
      S_SB_RD:  mem_addr = sb_addr;
      S_SB_WR: begin
        mem_addr  = out_ptr;
        mem_we    = 1'b1;
        mem_wdata = sb_out;
      end
      S_KM_RDP: mem_addr = p_ptr;
      S_KM_RDC: mem_addr = c_ptr;
      S_KM_WR: begin
        mem_addr  = lab_ptr;
        mem_we    = 1'b1;
        mem_wdata = best_j;
      end
      default:  mem_addr = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      arg_ptr <= '0;
      count   <= '0;
      idx     <= '0;
      o_cnt   <= '0;
      k_cnt   <= '0;
      xv      <= '0;
      acc     <= '0;
      x_row   <= '0;
      h_row   <= '0;
      x_ptr   <= '0;
      h_ptr   <= '0;
      y_ptr   <= '0;
      tap     <= '0;
      win_ptr <= '0;
      row_in  <= '0;
      row_out <= '0;
      out_ptr <= '0;
      r_cnt   <= '0;
      c_cnt   <= '0;
      gx      <= '0;
      gy      <= '0;
      p_ptr   <= '0;
      p_row   <= '0;
      c_ptr   <= '0;
      i_cnt   <= '0;
      j_cnt   <= '0;
      d_cnt   <= '0;
      pv      <= '0;
      sqd     <= '0;
      best    <= '0;
      best_j  <= '0;
      lab_ptr <= '0;
      for (int i = 0; i < NARGS; i++) args[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          arg_ptr <= arg_addr;
          idx     <= '0;
          state   <= S_ARGS;
        end
        S_ARGS: begin
          if (idx == 0) begin
            count <= mem_rdata;
            idx   <= 32'd1;
            if (mem_rdata == 0) state <= S_IDLE;
          end else begin
            if (idx <= NARGS) args[idx-1] <= mem_rdata;
            idx <= idx + 32'd1;
            if (idx == count) state <= S_SETUP;
          end
        end
        S_SETUP: begin
          case (kernel)
            32'(K_SOBEL): begin
              // a2 in_base, a3 in_stride, a4 out_base, a5 out_stride, a6 rows, a7 cols
              tap     <= '0;
              gx      <= '0;
              gy      <= '0;
              win_ptr <= a2;
              row_in  <= a2;
              out_ptr <= a4;
              row_out <= a4;
              r_cnt   <= '0;
              c_cnt   <= '0;
              state   <= (a6 == 0 || a7 == 0) ? S_IDLE : S_SB_RD;
            end
            32'(K_KMEANS): begin
              // a2 pts_base, a3 n_pts, a4 cent_base, a5 n_cent, a6 dim, a7 label_base
              p_ptr   <= a2;
              p_row   <= a2;
              c_ptr   <= a4;
              lab_ptr <= a7;
              i_cnt   <= '0;
              j_cnt   <= '0;
              d_cnt   <= '0;
              sqd     <= '0;
              best    <= '1;
              best_j  <= '0;
              if (a3 == 0)                  state <= S_IDLE;
              else if (a5 == 0 || a6 == 0)  state <= S_KM_WR;
              else                          state <= S_KM_RDP;
            end
            32'(K_DOT): begin
              // a2 x_base ... a10 n_in
              o_cnt <= '0;
              k_cnt <= '0;
              acc   <= '0;
              x_row <= a2;
              h_row <= a5;
              x_ptr <= a2;
              h_ptr <= a5;
              y_ptr <= a8;
              if (a9 == 0)       state <= S_IDLE;
              else if (a10 == 0) state <= S_WR;
              else               state <= S_RDX;
            end
            default: state <= S_IDLE;   // unknown kernel: the call ends
          endcase
        end
        // ------------------------------------------------ dot products
        S_RDX: begin
          xv    <= mem_rdata;
          x_ptr <= x_ptr + (a4 << 2);
          state <= S_RDH;
        end
        S_RDH: begin
          acc   <= acc + xv * mem_rdata;
          h_ptr <= h_ptr + (a7 << 2);
          k_cnt <= k_cnt + 32'd1;
          state <= (k_cnt + 32'd1 >= a10) ? S_WR : S_RDX;
        end
        S_WR: begin
          acc   <= '0;
          k_cnt <= '0;
          o_cnt <= o_cnt + 32'd1;
          y_ptr <= y_ptr + 32'd4;
          x_row <= x_row + (a3 << 2);
          h_row <= h_row + (a6 << 2);
          x_ptr <= x_row + (a3 << 2);
          h_ptr <= h_row + (a6 << 2);
          if (o_cnt + 32'd1 >= a9) state <= S_IDLE;
          else if (a10 == 0)       state <= S_WR;
          else                     state <= S_RDX;
        end
        // ------------------------------------------------ Sobel
        S_SB_RD: begin
          gx  <= sb_pix_gx;
          gy  <= sb_pix_gy;
          tap <= tap + 3'd1;
          if (tap == 3'd7) state <= S_SB_WR;
        end
        S_SB_WR: begin
          gx  <= '0;
          gy  <= '0;
          tap <= '0;
          if (c_cnt + 32'd1 >= a7) begin
            c_cnt   <= '0;
            r_cnt   <= r_cnt + 32'd1;
            row_in  <= row_in + s4;
            win_ptr <= row_in + s4;
            row_out <= row_out + (a5 << 2);
            out_ptr <= row_out + (a5 << 2);
            state   <= (r_cnt + 32'd1 >= a6) ? S_IDLE : S_SB_RD;
          end else begin
            c_cnt   <= c_cnt + 32'd1;
            win_ptr <= win_ptr + 32'd4;
            out_ptr <= out_ptr + 32'd4;
            state   <= S_SB_RD;
          end
        end
        // ------------------------------------------------ K-means assignment
        S_KM_RDP: begin
          pv    <= mem_rdata;
          p_ptr <= p_ptr + 32'd4;
          state <= S_KM_RDC;
        end
        S_KM_RDC: begin
          c_ptr <= c_ptr + 32'd4;
          if (d_cnt + 32'd1 >= a6) begin
            // distance to centroid j complete
            d_cnt <= '0;
            sqd  <= '0;
            if (sqd_next < best) begin
              best   <= sqd_next;
              best_j <= j_cnt;
            end
            if (j_cnt + 32'd1 >= a5) begin
              state <= S_KM_WR;
            end else begin
              j_cnt <= j_cnt + 32'd1;
              p_ptr <= p_row;           // same point, next centroid
              state <= S_KM_RDP;
            end
          end else begin
            d_cnt <= d_cnt + 32'd1;
            sqd  <= sqd_next;
            state <= S_KM_RDP;
          end
        end
        S_KM_WR: begin
          lab_ptr <= lab_ptr + 32'd4;
          i_cnt   <= i_cnt + 32'd1;
          j_cnt   <= '0;
          best    <= '1;
          best_j  <= '0;
          p_row   <= p_row + (a6 << 2);
          p_ptr   <= p_row + (a6 << 2);
          c_ptr   <= a4;
          if (i_cnt + 32'd1 >= a3)      state <= S_IDLE;
          else if (a5 == 0 || a6 == 0)  state <= S_KM_WR;
          else                          state <= S_KM_RDP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
