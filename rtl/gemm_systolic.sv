// gemm_systolic: C = A * B on a PR x PC systolic array of processing elements.
//
// Organisation (after the source's systolic GEMM): a chain of PR A-feeders
// along the left edge, a chain of PC B-feeders along the top, the PR x PC
// grid of gemm_pe, and a chain of PC drainers above the top row that leads
// to the output. C is computed in memory tiles of TR x TC elements; each PE
// owns E = (TR/PR)*(TC/PC) elements of a tile and revisits each of them
// every E cycles.
//
// Input order (what the read helpers must send), for each C tile (tile rows
// outer, tile columns inner) and each k = 0 .. k_len-1:
//   A: TR/PR beats, beat ti = A[tile_row*TR + ti*PR + r][k], r = 0..PR-1
//   B: TC/PC beats, beat tj = B[k][tile_col*TC + tj*PC + c], c = 0..PC-1
// A is therefore sent once per tile column and B once per tile row.
// Compute: one "k-slab" (the beats of one k) sits in a feeder bank; the
// controller issues E steps for it, step (ti, tj) pairing A slot ti with B
// slot tj in every PE, while the next slab loads into the other bank.
// After the last slab of a tile the array is flushed (PR+PC+2 cycles) and
// drained: for each local element e = ti*(TC/PC)+tj, all PEs copy it into
// their drain registers and the columns shift PR times toward the drainers.
// Output order: for e, for r = 0..PR-1, one beat of PC elements
//   C[tile_row*TR + ti*PR + r][tile_col*TC + tj*PC + c], c = 0..PC-1.
// Interface: valid/ready streams a (PR elements), b (PC elements), c (PC
// elements); tiles_r = N/TR, tiles_c = M/TC and k_len held stable during a
// call. Timing: a tile takes k_len*E compute cycles when loads keep up, plus
// the flush and E*(PR+1) drain cycles, during which no compute is issued.
// Defaults are the single-precision array of the source's CPU comparison
// (40 x 80 PEs, 960 x 960 memory tile). Scaling C by alpha/beta is left to
// the store helper; tags, banking and the drain sequence are this design's.
module gemm_systolic
  import fblas_pkg::*;
#(
  parameter int PR = 40,
  parameter int PC = 80,
  parameter int TR = 960,
  parameter int TC = 960,
  parameter int CW = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CW-1:0]    tiles_r,
  input  logic [CW-1:0]    tiles_c,
  input  logic [CW-1:0]    k_len,
  input  logic             a_valid,
  output logic             a_ready,
  input  fp32_t [PR-1:0]   a_data,
  input  logic             b_valid,
  output logic             b_ready,
  input  fp32_t [PC-1:0]   b_data,
  output logic             c_valid,
  input  logic             c_ready,
  output fp32_t [PC-1:0]   c_data
);
  localparam int DA = TR / PR;
  localparam int DB = TC / PC;
  localparam int E  = DA * DB;
  localparam int DAW = clog2i(DA) > 0 ? clog2i(DA) : 1;
  localparam int DBW = clog2i(DB) > 0 ? clog2i(DB) : 1;
  localparam int EW  = clog2i(E) > 0 ? clog2i(E) : 1;
  localparam int RW  = clog2i(PR) + 1;
  localparam int FLUSH = PR + PC + 2;
  localparam int FW  = clog2i(FLUSH) + 1;

  // ---------------------------------------------------------------- loads
  logic           la_bank, lb_bank;
  logic [DAW-1:0] la_idx;
  logic [DBW-1:0] lb_idx;
  logic [1:0]     a_owned, b_owned, a_full, b_full;
  logic           a_fire, b_fire;

  assign a_ready = !a_owned[la_bank];
  assign b_ready = !b_owned[lb_bank];
  assign a_fire  = a_valid && a_ready;
  assign b_fire  = b_valid && b_ready;

  // feeder chains
  logic            fa_v [PR+1];
  logic            fa_b [PR+1];
  logic [DAW-1:0]  fa_i [PR+1];
  logic            fa_l [PR+1];
  fp32_t [PR-1:0]  fa_d [PR+1];
  logic            fb_v [PC+1];
  logic            fb_b [PC+1];
  logic [DBW-1:0]  fb_i [PC+1];
  logic            fb_l [PC+1];
  fp32_t [PC-1:0]  fb_d [PC+1];

  assign fa_v[0] = a_fire;
  assign fa_b[0] = la_bank;
  assign fa_i[0] = la_idx;
  assign fa_l[0] = (la_idx == DAW'(DA-1));
  assign fa_d[0] = a_data;
  assign fb_v[0] = b_fire;
  assign fb_b[0] = lb_bank;
  assign fb_i[0] = lb_idx;
  assign fb_l[0] = (lb_idx == DBW'(DB-1));
  assign fb_d[0] = b_data;

  // ------------------------------------------------------------- control
  typedef enum logic [1:0] {ST_COMP, ST_FLUSH, ST_DRAIN} state_t;
  typedef enum logic {DR_LOAD, DR_SHIFT} dstate_t;
  state_t         state;
  dstate_t        dstate;
  logic           cb;
  logic [DAW-1:0] ti;
  logic [DBW-1:0] tj;
  logic [EW-1:0]  e_cnt, de;
  logic [CW-1:0]  kk, tr, tc;
  logic [FW-1:0]  fl;
  logic [RW-1:0]  dr;
  logic           step, last_step, drain_load, drain_shift, dr_done;

  assign step       = (state == ST_COMP) && a_full[cb] && b_full[cb];
  assign last_step  = step && (ti == DAW'(DA-1)) && (tj == DBW'(DB-1));
  assign drain_load  = (state == ST_DRAIN) && (dstate == DR_LOAD);
  assign drain_shift = (state == ST_DRAIN) && (dstate == DR_SHIFT) && (!c_valid || c_ready);
  assign dr_done     = drain_shift && (dr == RW'(PR-1)) && (de == EW'(E-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      la_bank <= 1'b0; lb_bank <= 1'b0; la_idx <= '0; lb_idx <= '0;
      a_owned <= '0; b_owned <= '0; a_full <= '0; b_full <= '0;
      state <= ST_COMP; dstate <= DR_LOAD;
      cb <= 1'b0; ti <= '0; tj <= '0; e_cnt <= '0; de <= '0;
      kk <= '0; tr <= '0; tc <= '0; fl <= '0; dr <= '0;
      c_valid <= 1'b0;
    end else begin
      // loading side
      if (a_fire) begin
        if (la_idx == DAW'(DA-1)) begin
          la_idx <= '0; a_owned[la_bank] <= 1'b1; la_bank <= ~la_bank;
        end else la_idx <= la_idx + DAW'(1);
      end
      if (b_fire) begin
        if (lb_idx == DBW'(DB-1)) begin
          lb_idx <= '0; b_owned[lb_bank] <= 1'b1; lb_bank <= ~lb_bank;
        end else lb_idx <= lb_idx + DBW'(1);
      end
      if (fa_v[PR] && fa_l[PR]) a_full[fa_b[PR]] <= 1'b1;
      if (fb_v[PC] && fb_l[PC]) b_full[fb_b[PC]] <= 1'b1;
      // output register
      if (c_valid && c_ready) c_valid <= 1'b0;
      if (drain_shift) c_valid <= 1'b1;

      unique case (state)
        ST_COMP: if (step) begin
          if (tj == DBW'(DB-1)) begin
            tj <= '0;
            ti <= (ti == DAW'(DA-1)) ? '0 : ti + DAW'(1);
          end else tj <= tj + DBW'(1);
          e_cnt <= last_step ? '0 : e_cnt + EW'(1);
          if (last_step) begin
            a_owned[cb] <= 1'b0; a_full[cb] <= 1'b0;
            b_owned[cb] <= 1'b0; b_full[cb] <= 1'b0;
            cb <= ~cb;
            if (kk == k_len - CW'(1)) begin
              kk <= '0; state <= ST_FLUSH; fl <= '0;
            end else kk <= kk + CW'(1);
          end
        end
        ST_FLUSH: begin
          if (fl == FW'(FLUSH-1)) begin
            state <= ST_DRAIN; dstate <= DR_LOAD; de <= '0; dr <= '0;
          end else fl <= fl + FW'(1);
        end
        ST_DRAIN: begin
          if (drain_load) begin
            dstate <= DR_SHIFT; dr <= '0;
          end else if (drain_shift) begin
            if (dr == RW'(PR-1)) begin
              dstate <= DR_LOAD;
              de     <= de + EW'(1);
            end else dr <= dr + RW'(1);
          end
          if (dr_done) begin
            state <= ST_COMP;
            if (tc == tiles_c - CW'(1)) begin
              tc <= '0;
              tr <= (tr == tiles_r - CW'(1)) ? '0 : tr + CW'(1);
            end else tc <= tc + CW'(1);
          end
        end
        default: state <= ST_COMP;
      endcase
    end
  end

  // ---------------------------------------------------------------- array
  // operands entering each PE: A (with control) from the left, B from above
  logic          pa_v [PR][PC+1];
  logic          pa_f [PR][PC+1];
  logic [EW-1:0] pa_e [PR][PC+1];
  fp32_t         pa_d [PR][PC+1];
  fp32_t         pb_d [PR+1][PC];
  fp32_t         pdr  [PR+1][PC];   // drain value leaving PE (r,c) upward is pdr[r][c]
  fp32_t [PC-1:0] dchain [PC+1];

  for (genvar r = 0; r < PR; r++) begin : g_fa
    gemm_feeder #(.LEN(PR), .IDX(r), .DEPTH(DA), .DW(DAW), .EW(EW)) u_feed_a (
      .clk, .rst_n,
      .ld_valid_in (fa_v[r]),   .ld_bank_in (fa_b[r]),   .ld_idx_in (fa_i[r]),
      .ld_last_in  (fa_l[r]),   .ld_data_in (fa_d[r]),
      .ld_valid_out(fa_v[r+1]), .ld_bank_out(fa_b[r+1]), .ld_idx_out(fa_i[r+1]),
      .ld_last_out (fa_l[r+1]), .ld_data_out(fa_d[r+1]),
      .rd_valid (step), .rd_bank (cb), .rd_idx (ti), .rd_first (kk == '0), .rd_e (e_cnt),
      .pe_valid (pa_v[r][0]), .pe_first (pa_f[r][0]), .pe_e (pa_e[r][0]), .pe_data (pa_d[r][0])
    );
  end

  for (genvar c = 0; c < PC; c++) begin : g_fb
    logic          unused_v, unused_f;
    logic [EW-1:0] unused_e;
    gemm_feeder #(.LEN(PC), .IDX(c), .DEPTH(DB), .DW(DBW), .EW(EW)) u_feed_b (
      .clk, .rst_n,
      .ld_valid_in (fb_v[c]),   .ld_bank_in (fb_b[c]),   .ld_idx_in (fb_i[c]),
      .ld_last_in  (fb_l[c]),   .ld_data_in (fb_d[c]),
      .ld_valid_out(fb_v[c+1]), .ld_bank_out(fb_b[c+1]), .ld_idx_out(fb_i[c+1]),
      .ld_last_out (fb_l[c+1]), .ld_data_out(fb_d[c+1]),
      .rd_valid (step), .rd_bank (cb), .rd_idx (tj), .rd_first (1'b0), .rd_e ('0),
      .pe_valid (unused_v), .pe_first (unused_f), .pe_e (unused_e), .pe_data (pb_d[0][c])
    );
  end

  for (genvar r = 0; r < PR; r++) begin : g_row
    for (genvar c = 0; c < PC; c++) begin : g_col
      gemm_pe #(.E(E), .EW(EW)) u_pe (
        .clk, .rst_n,
        .a_valid_in (pa_v[r][c]),   .first_in (pa_f[r][c]),   .e_in (pa_e[r][c]),
        .a_in (pa_d[r][c]),         .b_in (pb_d[r][c]),
        .a_valid_out(pa_v[r][c+1]), .first_out(pa_f[r][c+1]), .e_out(pa_e[r][c+1]),
        .a_out (pa_d[r][c+1]),      .b_out (pb_d[r+1][c]),
        .drain_load, .drain_shift, .drain_e (de),
        .drain_in (pdr[r+1][c]),    .drain_out (pdr[r][c])
      );
    end
  end

  for (genvar c = 0; c < PC; c++) begin : g_bottom
    assign pdr[PR][c] = FP_ZERO;
  end

  assign dchain[PC] = '0;
  for (genvar c = 0; c < PC; c++) begin : g_dr
    gemm_drainer #(.LEN(PC), .IDX(c)) u_drain (
      .clk, .shift (drain_shift), .col_in (pdr[0][c]),
      .chain_in (dchain[c+1]), .chain_out (dchain[c])
    );
  end
  assign c_data = dchain[0];

  // the controller never loads a bank it is still computing from
  a_bank_safe: assert property (@(posedge clk) disable iff (!rst_n)
                                !(a_fire && state == ST_COMP && la_bank == cb && a_full[cb]));
endmodule
