// psi_unit: the Psi6(g1) / Psi4(g2) functional of the PLUGIN selector,
//
//   Psi_r(g) = [ 2 * sum_{i<j} K_r((X_i - X_j) / g) + n K_r(0) ] / (n^2 g^(r+1)),
//
// with r = ORDER (6 or 4). This is the O(n^2) part of the algorithm.
//
// Structure, following the paper's block diagram of the Psi4 unit and its
// "fast" loop: the reciprocal 1/g is formed once so that every division
// becomes a multiplication; n^2 and g^(r+1) are multiplied and their
// reciprocal taken; the unrolled part (SUB, MUL by 1/g, K routine, ADD) is
// replicated LANES times (the paper unrolls by two), so LANES pairs (i, j),
// (i, j+1), ... enter the pipeline each clock; lanes past j = n-1 are
// masked. The lane sums are accumulated, doubled, n K_r(0) (input nk0) is
// added and the total multiplied by 1/(n^2 g^(r+1)). Reciprocals are taken
// from the shared Newton reciprocal through the math_req/math_rsp port.
//
// Own choices: X_i is read on read port 0 in one extra clock at the start
// of each row i and held in a register; the pipeline is not drained between
// rows, only once at the end (DRAIN clocks). The paper's block diagram adds
// n K(0) after the final multiplication; this unit follows the paper's
// equation, adding it before.
//
// Timing: pulse start; done pulses with psi. The pair loop takes
// sum_{i=0}^{n-2} (1 + ceil((n-1-i)/LANES)) clocks.
module psi_unit
  import plugin_pkg::*;
#(
  parameter int ORDER = 4,
  parameter int LANES = 2,
  parameter int DEPTH = 1024,
  localparam int AW   = $clog2(DEPTH),
  localparam int NW   = AW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  fix_t          g,
  input  logic [NW-1:0] n,
  input  fix_t          nk0,        // n * K_r(0)
  output math_req_t     mreq,
  input  math_rsp_t     mrsp,
  output logic [AW-1:0] rd_addr [LANES],
  input  fix_t          rd_data [LANES],
  output logic          busy,
  output logic          done,
  output fix_t          psi
);

  localparam int KLAT  = 14;
  localparam int DRAIN = KLAT + 5;

  typedef enum logic [3:0] {
    S_IDLE, S_RG_REQ, S_RG_WAIT, S_POW, S_DEN, S_RD_REQ, S_RD_WAIT,
    S_LOOP, S_DRAIN, S_FIN1, S_FIN2
  } state_e;
  state_e state;

  fix_t          g_q, nk0_q, rg, gp, den, rden, acc, tot;
  logic [NW-1:0] n_q;
  logic [3:0]    pc;
  logic [NW-1:0] i, j;
  logic          row_phase;
  logic [5:0]    dcnt;

  // issue-stage tags, aligned with the memory read
  logic          t_row, t_pair;
  logic [LANES-1:0] t_ok;
  // difference and multiply stages
  fix_t          xi;
  fix_t          d   [LANES];
  logic [LANES-1:0] dv;
  fix_t          uu  [LANES];
  logic [LANES-1:0] uv;
  // kernel outputs
  fix_t          kk  [LANES];
  logic [LANES-1:0] kv;
  fix_t          lsum;
  logic          lsv;

  // ---------------------------------------------------------------- issue
  logic last_group;
  assign last_group = (32'(j) + LANES >= 32'(n_q));

  always_comb begin
    for (int l = 0; l < LANES; l++) rd_addr[l] = AW'(j + NW'(l));
    if (state == S_LOOP && row_phase) rd_addr[0] = AW'(i);
  end

  // --------------------------------------------------------- math requests
  always_comb begin
    mreq.valid = (state == S_RG_REQ) || (state == S_RD_REQ);
    mreq.fn    = MF_RCP;
    mreq.a     = (state == S_RG_REQ) ? g_q : den;
  end

  // ------------------------------------------------------------- kernels
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    kernel_deriv #(.ORDER(ORDER)) u_k (
      .clk, .rst_n,
      .in_valid (uv[l]),
      .u        (uu[l]),
      .out_valid(kv[l]),
      .k        (kk[l])
    );
  end

  fix_t lsum_new;
  always_comb begin
    lsum_new = '0;
    for (int l = 0; l < LANES; l++)
      if (kv[l]) lsum_new = fx_add(lsum_new, kk[l]);
  end

  // ------------------------------------------------------------ datapath
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_row <= 1'b0; t_pair <= 1'b0; t_ok <= '0;
      xi <= '0; dv <= '0; uv <= '0;
      for (int l = 0; l < LANES; l++) begin d[l] <= '0; uu[l] <= '0; end
      lsum <= '0; lsv <= 1'b0;
    end else begin
      t_row  <= (state == S_LOOP) && row_phase;
      t_pair <= (state == S_LOOP) && !row_phase;
      for (int l = 0; l < LANES; l++)
        t_ok[l] <= (32'(j) + l < 32'(n_q));
      if (t_row) xi <= rd_data[0];
      for (int l = 0; l < LANES; l++) begin
        d[l]  <= fx_add(xi, -rd_data[l]);                 // SUB
        dv[l] <= t_pair && t_ok[l];
        uu[l] <= fx_mul(d[l], rg);                        // MUL by 1/g
        uv[l] <= dv[l];
      end
      lsum <= lsum_new;                                   // lane ADD
      lsv  <= |kv;
    end
  end

  // ---------------------------------------------------------- controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      psi   <= '0;
      g_q <= '0; nk0_q <= '0; n_q <= '0;
      rg <= '0; gp <= '0; den <= '0; rden <= '0; acc <= '0; tot <= '0;
      pc <= '0; i <= '0; j <= '0; row_phase <= 1'b0; dcnt <= '0;
    end else begin
      done <= 1'b0;
      if (lsv) acc <= fx_add(acc, lsum);                  // accumulator ADD
      unique case (state)
        S_IDLE: if (start) begin
          g_q   <= g;
          n_q   <= n;
          nk0_q <= nk0;
          acc   <= '0;
          state <= S_RG_REQ;
        end
        S_RG_REQ: state <= S_RG_WAIT;
        S_RG_WAIT: if (mrsp.done) begin
          rg    <= mrsp.y;
          gp    <= g_q;
          pc    <= 4'd1;
          state <= S_POW;
        end
        S_POW: begin                                      // g^(ORDER+1)
          if (32'(pc) == ORDER + 1) state <= S_DEN;
          else begin
            gp <= fx_mul(gp, g_q);
            pc <= pc + 1'b1;
          end
        end
        S_DEN: begin                                      // n^2 g^(ORDER+1)
          den   <= fx_mul(fx_from_int(32'(n_q) * 32'(n_q)), gp);
          state <= S_RD_REQ;
        end
        S_RD_REQ: state <= S_RD_WAIT;
        S_RD_WAIT: if (mrsp.done) begin
          rden      <= mrsp.y;
          i         <= '0;
          j         <= '0;
          row_phase <= 1'b1;
          dcnt      <= '0;
          state     <= (n_q >= NW'(2)) ? S_LOOP : S_DRAIN;
        end
        S_LOOP: begin
          if (row_phase) begin
            row_phase <= 1'b0;
            j         <= i + 1'b1;
          end else if (last_group) begin
            row_phase <= 1'b1;
            i         <= i + 1'b1;
            j         <= '0;
            if (i + 1'b1 == n_q - 1'b1) state <= S_DRAIN;
          end else begin
            j <= j + NW'(LANES);
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (32'(dcnt) == DRAIN) state <= S_FIN1;
        end
        S_FIN1: begin
          tot   <= fx_add(acc <<< 1, nk0_q);
          state <= S_FIN2;
        end
        S_FIN2: begin
          psi   <= fx_mul(tot, rden);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
