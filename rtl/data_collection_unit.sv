// data_collection_unit: averages integration results over rounds.
//
// Collects K consecutive integration results S_(i,j) (i = 0..K-1) in each of N rounds
// and computes  S_avg[i] = (sum_j S_(i,j)) / N,  which the host reads back afterwards.
// In the AllXY experiment K = 42 (21 gate pairs, each measured twice) and N = 25600.
// arm (a configuration write) clears the unit and starts a collection. Result i of
// round 0 is stored, later rounds add to it (ACC_W-bit signed sums). After the last
// result of round N-1 a serial restoring divider replaces each sum by its average
// (quotient of the magnitude, sign restored: rounding toward zero), one bit per cycle,
// ACC_W+1 cycles per entry; then done is set and rd_data = S_avg[rd_addr].
// Configuration: addr[1:0]=0 K, 1 N, 2 arm. Reset values K = 42, N = 25600.
// The paper gives the averaging function and K and N. In the control box this unit
// runs at 50 MHz; here it shares the single clock. The divider, the widths and the
// read port are this design's choices.
module data_collection_unit #(
  parameter int unsigned K_MAX     = 64,
  parameter int unsigned ACC_W     = 48,
  parameter int unsigned DEFAULT_K = 42,
  parameter int unsigned DEFAULT_N = 25600
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [1:0]               cfg_addr,
  input  logic [31:0]              cfg_wdata,
  input  logic                     s_valid,
  input  logic signed [31:0]       s,
  input  logic [$clog2(K_MAX)-1:0] rd_addr,
  output logic signed [ACC_W-1:0]  rd_data,
  output logic                     collecting,
  output logic                     done,
  output logic [31:0]              rounds_done
);
  localparam int unsigned KAW = $clog2(K_MAX);

  logic signed [ACC_W-1:0] acc [K_MAX];
  logic [KAW:0]            k_cfg;
  logic [31:0]             n_cfg;
  logic [KAW:0]            k;

  // divider state
  logic                    dividing;
  logic [KAW:0]            d_idx;
  logic [$clog2(ACC_W+1):0] d_bit;
  logic [ACC_W-1:0]        d_num;   // magnitude being shifted out
  logic [ACC_W-1:0]        d_quo;
  logic [32:0]             d_rem;
  logic                    d_neg;
  logic                    d_load;

  assign rd_data = acc[rd_addr];

  logic arm;
  assign arm = cfg_we && cfg_addr == 2'd2;

  logic [32:0] rem_sh;
  assign rem_sh = {d_rem[31:0], d_num[ACC_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_cfg       <= (KAW+1)'(DEFAULT_K);
      n_cfg       <= 32'(DEFAULT_N);
      k           <= '0;
      rounds_done <= '0;
      collecting  <= 1'b0;
      done        <= 1'b0;
      dividing    <= 1'b0;
      d_idx       <= '0;
      d_bit       <= '0;
      d_num       <= '0;
      d_quo       <= '0;
      d_rem       <= '0;
      d_neg       <= 1'b0;
      d_load      <= 1'b0;
    end else begin
      if (cfg_we && cfg_addr == 2'd0) k_cfg <= (cfg_wdata > K_MAX) ? (KAW+1)'(K_MAX) : cfg_wdata[KAW:0];
      if (cfg_we && cfg_addr == 2'd1) n_cfg <= cfg_wdata;
      if (arm) begin
        collecting  <= (k_cfg != 0) && (n_cfg != 0);
        done        <= 1'b0;
        dividing    <= 1'b0;
        k           <= '0;
        rounds_done <= '0;
      end else if (collecting && s_valid) begin
        acc[k[KAW-1:0]] <= (rounds_done == 0) ? ACC_W'(s) : acc[k[KAW-1:0]] + ACC_W'(s);
        if (k == k_cfg - 1'b1) begin
          k           <= '0;
          rounds_done <= rounds_done + 1'b1;
          if (rounds_done == n_cfg - 1) begin
            collecting <= 1'b0;
            dividing   <= 1'b1;
            d_idx      <= '0;
            d_load     <= 1'b1;
          end
        end else begin
          k <= k + 1'b1;
        end
      end else if (dividing) begin
        if (d_load) begin
          // load entry d_idx
          d_neg  <= acc[d_idx[KAW-1:0]][ACC_W-1];
          d_num  <= acc[d_idx[KAW-1:0]][ACC_W-1] ? ACC_W'(-acc[d_idx[KAW-1:0]]) : acc[d_idx[KAW-1:0]];
          d_quo  <= '0;
          d_rem  <= '0;
          d_bit  <= '0;
          d_load <= 1'b0;
        end else if (d_bit < ($clog2(ACC_W+1)+1)'(ACC_W)) begin
          // one restoring-division step
          d_num <= d_num << 1;
          if (rem_sh >= {1'b0, n_cfg}) begin
            d_rem <= rem_sh - {1'b0, n_cfg};
            d_quo <= {d_quo[ACC_W-2:0], 1'b1};
          end else begin
            d_rem <= rem_sh;
            d_quo <= {d_quo[ACC_W-2:0], 1'b0};
          end
          d_bit <= d_bit + 1'b1;
        end else begin
          acc[d_idx[KAW-1:0]] <= d_neg ? -signed'(d_quo) : signed'(d_quo);
          if (d_idx == k_cfg - 1'b1) begin
            dividing <= 1'b0;
            done     <= 1'b1;
          end else begin
            d_idx  <= d_idx + 1'b1;
            d_load <= 1'b1;
          end
        end
      end
    end
  end
endmodule
