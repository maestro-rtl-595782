// Vector-Tensor Unit (VTU): RedMulE-style tensor engine fed from the vector register file.
//
// Computes one tile  Z[12][16] = Y[12][16] + X[12][N] * W[N][16]  in FP16 on a grid of
// 12 rows x 4 columns of computing elements (48 FMA per cycle), N = 4 * n_groups, N <= 16.
// Operands and result live in the VRF register groups named at start (the paper uses V0 for X,
// V8 for Y, V16 for W and V24 for Z, each an LMUL = 8 group of 16 words of 256 bit):
//   X word 3g+q : rows 4q..4q+3, columns 4g..4g+3, element 4*(row-4q)+(col-4g) at bits 16e
//   Y, W, Z word r : row r, element k at bits 16k
// (the VRF data organisation of the paper's execution-flow figure).
//
// Dataflow. Row i of the grid works on row i of Z. Column h of row i holds x[i][4g+h] for 16
// cycles while W row 4g+h streams through W shift register h, one element per cycle; its
// result flows to column h+1 four cycles later, so the columns start 0, 4, 8 and 12 cycles
// apart. The output of column 3 for Z column k comes back to column 0 exactly when the next
// group g+1 starts on k (4 columns x 4 cycles = 16 = number of Z columns), so partial sums
// circulate without a buffer. Group 0 takes its accumulator from the Y/Z buffer; after the last
// group the results are written into the same buffer and streamed back to the VRF.
//
// Buffers (paper sizes): W buffer 4 shift registers x 16 x 16 bit = 128 B; Y/Z buffer
// 12 x 16 x 16 bit = 384 B, first the Y pre-load then the Z output; X buffer: each CE has the
// value in use and a second register that holds the next group's value until its column
// switches (the staggered-start register the paper describes).
//
// Transfer unit: one 256-bit VRF read per cycle at most (the VS1 path in tensor mode) and one
// 256-bit write (the port shared with the VAU). Schedule per 16-cycle window of group g,
// relative cycle r: W rows at r = 0, 4, 8, 12 (one per column), the three X words of group g+1
// at r = 13, 14, 15. A job is: load 12 Y words and 3 X words (15 cycles), compute
// 16*n_groups + 17 cycles, write 12 Z words. A refused VRF access stalls the whole unit.
// The serial load/compute/write order per job (no overlap between jobs) is this design's choice.
module vtu
  import maestro_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,          // clock enable from the tensor CSR
  input  logic        start_i,
  input  logic [4:0]  x_reg_i,
  input  logic [4:0]  w_reg_i,
  input  logic [4:0]  y_reg_i,
  input  logic [4:0]  z_reg_i,
  input  logic [2:0]  n_groups_i,    // N / 4, 1..4
  output logic        busy_o,
  output logic        done_o,
  // VRF access
  output logic        rd_req_o,
  output vaddr_t      rd_addr_o,
  input  logic        rd_gnt_i,
  input  vword_t      rd_data_i,
  output logic        wr_req_o,
  output vaddr_t      wr_addr_o,
  output vword_t      wr_data_o,
  input  logic        wr_gnt_i,
  output logic [31:0] stall_cycles_o
);

  localparam int unsigned L = VTU_ROWS;   // 12
  localparam int unsigned H = VTU_COLS;   // 4
  localparam int unsigned P = VTU_PIPE;   // 4
  localparam int unsigned K = VTU_K;      // 16

  typedef enum logic [1:0] { T_IDLE, T_LOAD, T_COMP, T_WRITE } tstate_e;
  tstate_e state_q;

  logic [4:0]  xr_q, wr_q, yr_q, zr_q;
  logic [2:0]  ng_q;
  logic [4:0]  lcnt_q;                 // load / write word counter
  logic [7:0]  t_q;                    // compute cycle

  logic [15:0] xcur_q  [L][H];
  logic [15:0] xnext_q [L][H];
  logic [15:0] wsh_q   [H][K];
  logic [15:0] yz_q    [L][K];
  logic [15:0] ce_out  [L][H];
  logic [15:0] ce_acc  [L][H];

  // ---------------- transfer unit: what to access this cycle ----------------
  logic [3:0] r;        // position in the 16-cycle window
  logic [3:0] g;        // group of the window
  logic       w_rd, x_rd, stall, adv;
  assign r = t_q[3:0];
  assign g = t_q[7:4];

  always_comb begin
    w_rd = 1'b0;
    x_rd = 1'b0;
    rd_req_o  = 1'b0;
    rd_addr_o = '0;
    wr_req_o  = 1'b0;
    wr_addr_o = '0;
    wr_data_o = '0;
    unique case (state_q)
      T_LOAD: begin
        rd_req_o = 1'b1;
        if (lcnt_q < 5'(L)) rd_addr_o = vrf_word(yr_q, int'(lcnt_q));
        else                rd_addr_o = vrf_word(xr_q, int'(lcnt_q) - int'(L));
      end
      T_COMP: begin
        w_rd = (r[1:0] == 2'd0) && (g < 4'(ng_q));
        x_rd = (r >= 4'd13) && (g + 4'd1 < 4'(ng_q));
        rd_req_o = w_rd || x_rd;
        if (w_rd) rd_addr_o = vrf_word(wr_q, 4 * int'(g) + int'(r[3:2]));
        else      rd_addr_o = vrf_word(xr_q, 3 * (int'(g) + 1) + int'(r) - 13);
      end
      T_WRITE: begin
        wr_req_o  = 1'b1;
        wr_addr_o = vrf_word(zr_q, int'(lcnt_q));
        for (int k = 0; k < int'(K); k++) wr_data_o[16*k +: 16] = yz_q[lcnt_q[3:0]][k];
      end
      default: ;
    endcase
  end

  assign stall = en_i && state_q == T_COMP && rd_req_o && !rd_gnt_i;
  assign adv   = en_i && !stall;

  // ---------------- CE grid ----------------
  for (genvar i = 0; i < L; i++) begin : g_row
    for (genvar h = 0; h < H; h++) begin : g_col
      if (h == 0) begin : g_first
        // group 0 starts from Y, later groups from the circulating partial sum
        assign ce_acc[i][h] = (t_q <= 8'd16) ? yz_q[i][4'(t_q - 8'd1)] : ce_out[i][H-1];
      end else begin : g_next
        assign ce_acc[i][h] = ce_out[i][h-1];
      end
      vtu_ce #(.PIPE(P)) i_ce (
        .clk_i, .rst_ni, .en_i(adv && state_q == T_COMP),
        .x_i(xcur_q[i][h]), .w_i(wsh_q[h][0]), .acc_i(ce_acc[i][h]), .acc_o(ce_out[i][h])
      );
    end
  end

  // ---------------- sequencing and buffers ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= T_IDLE;
      xr_q <= '0; wr_q <= '0; yr_q <= '0; zr_q <= '0; ng_q <= 3'd1;
      lcnt_q <= '0; t_q <= '0;
      xcur_q  <= '{default: '0};
      xnext_q <= '{default: '0};
      wsh_q   <= '{default: '0};
      yz_q    <= '{default: '0};
      done_o  <= 1'b0;
      stall_cycles_o <= '0;
    end else begin
      done_o <= 1'b0;
      if (stall) stall_cycles_o <= stall_cycles_o + 1;
      // In tensor mode the VS1 path has top priority, so compute-phase reads are never refused.
      a_no_stall: assert (!stall) else $warning("VTU stalled on a refused VRF read");
      if (adv) begin
        unique case (state_q)
          T_IDLE: if (start_i) begin
            xr_q <= x_reg_i; wr_q <= w_reg_i; yr_q <= y_reg_i; zr_q <= z_reg_i;
            ng_q <= (n_groups_i == 0) ? 3'd1 : (n_groups_i > 3'd4 ? 3'd4 : n_groups_i);
            lcnt_q  <= '0;
            state_q <= T_LOAD;
          end
          T_LOAD: if (rd_gnt_i) begin
            if (lcnt_q < 5'(L)) begin
              for (int k = 0; k < int'(K); k++) yz_q[lcnt_q[3:0]][k] <= rd_data_i[16*k +: 16];
            end else begin
              for (int e = 0; e < 16; e++)
                xnext_q[4 * (int'(lcnt_q) - int'(L)) + e / 4][e % 4] <= rd_data_i[16*e +: 16];
            end
            lcnt_q <= lcnt_q + 5'd1;
            if (lcnt_q == 5'(L + 2)) begin
              state_q <= T_COMP;
              t_q     <= '0;
            end
          end
          T_COMP: begin
            // W shift registers: parallel load for the starting column, shift the others
            for (int h = 0; h < int'(H); h++) begin
              if (w_rd && int'(r[3:2]) == h) begin
                for (int k = 0; k < int'(K); k++) wsh_q[h][k] <= rd_data_i[16*k +: 16];
              end else begin
                for (int k = 0; k < int'(K) - 1; k++) wsh_q[h][k] <= wsh_q[h][k+1];
                wsh_q[h][K-1] <= '0;
              end
              // X switch of column h at the start of its window
              if (r == 4'(4 * h) && g < 4'(ng_q))
                for (int i = 0; i < int'(L); i++) xcur_q[i][h] <= xnext_q[i][h];
            end
            if (x_rd) begin
              for (int e = 0; e < 16; e++)
                xnext_q[4 * (int'(r) - 13) + e / 4][e % 4] <= rd_data_i[16*e +: 16];
            end
            // results of the last group leave column 3 in cycles 16G+1 .. 16G+16
            if (t_q > 8'(16 * ng_q)) begin
              for (int i = 0; i < int'(L); i++)
                yz_q[i][4'(t_q - 8'd1)] <= ce_out[i][H-1];
            end
            t_q <= t_q + 8'd1;
            if (t_q == 8'(16 * ng_q + 16)) begin
              state_q <= T_WRITE;
              lcnt_q  <= '0;
            end
          end
          T_WRITE: if (wr_gnt_i) begin
            lcnt_q <= lcnt_q + 5'd1;
            if (lcnt_q == 5'(L - 1)) begin
              state_q <= T_IDLE;
              done_o  <= 1'b1;
            end
          end
          default: state_q <= T_IDLE;
        endcase
      end
    end
  end

  assign busy_o = state_q != T_IDLE;

endmodule
