// dpnet_ctrl: sequencer for one compressed matrix-vector multiplication.
//
// For every matrix row it runs two phases. In the accumulate phase it walks
// the row's columns, one per cycle, reading the weight's cluster index and
// the matching vector element; one cycle later (read latency) the pair is
// added into the cluster sums. In the center phase it reads the row's K
// centers, one per cycle, and feeds each with its cluster sum to the
// multiply-accumulate unit. After one cycle for the last product the row
// result is presented with y_valid, the sums and the accumulator are cleared,
// and the next row starts.
//
// Timing: start is accepted in IDLE (rows and cols are sampled then). A row
// takes cols + K + 2 cycles (cols accumulate, K center, one wait, one output
// cycle) and done pulses one cycle after the last row's output, that is
// rows*(cols+K+2) + 1 cycles after the start edge. busy is high from the
// cycle after start until done. A start with rows or cols equal to zero only
// produces done. The two-phase schedule without overlap between rows is this
// design's own choice; the principle of summing per cluster first and
// multiplying K times per row is the one the design follows.
module dpnet_ctrl
  import dpnet_pkg::*;
#(
  parameter int unsigned K         = 16,
  parameter int unsigned MAX_ROWS  = 1000,
  parameter int unsigned MAX_COLS  = 1728,
  parameter int unsigned IDX_DEPTH = 1024000,
  localparam int unsigned KW  = $clog2(K),
  localparam int unsigned RW  = $clog2(MAX_ROWS + 1),
  localparam int unsigned CW  = $clog2(MAX_COLS + 1),
  localparam int unsigned IAW = $clog2(IDX_DEPTH),
  localparam int unsigned VAW = $clog2(MAX_COLS),
  localparam int unsigned CAW = $clog2(MAX_ROWS * K)
) (
  input  logic           clk,
  input  logic           rst_n,
  // run control
  input  logic           start,
  input  logic [RW-1:0]  rows,
  input  logic [CW-1:0]  cols,
  output logic           busy,
  output logic           done,
  // memory read addresses
  output logic [IAW-1:0] idx_raddr,
  output logic [VAW-1:0] vec_raddr,
  output logic [CAW-1:0] ctr_raddr,
  // cluster sums
  output logic           acc_clear,
  output logic           acc_en,
  output logic [KW-1:0]  bin_sel,
  // center multiply-accumulate
  output logic           mac_clear,
  output logic           mac_en,
  // result
  output logic           y_valid,
  output logic [RW-1:0]  y_row
);

  ctrl_state_t    state;
  logic [RW-1:0]  n_rows, row;
  logic [CW-1:0]  n_cols, col;
  logic [KW-1:0]  k, k_q;
  logic [IAW-1:0] idx_ptr;
  logic [CAW-1:0] ctr_base;
  logic           acc_en_q, mac_en_q;
  logic           last_row;

  assign last_row = (row == n_rows - RW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      n_rows   <= '0;
      n_cols   <= '0;
      row      <= '0;
      col      <= '0;
      k        <= '0;
      k_q      <= '0;
      idx_ptr  <= '0;
      ctr_base <= '0;
      acc_en_q <= 1'b0;
      mac_en_q <= 1'b0;
      done     <= 1'b0;
    end else begin
      acc_en_q <= (state == ST_ACC);
      mac_en_q <= (state == ST_MAC);
      k_q      <= k;
      done     <= 1'b0;
      unique case (state)
        ST_IDLE: begin
          if (start) begin
            n_rows   <= rows;
            n_cols   <= cols;
            row      <= '0;
            col      <= '0;
            k        <= '0;
            idx_ptr  <= '0;
            ctr_base <= '0;
            if (rows == '0 || cols == '0) done  <= 1'b1;
            else                          state <= ST_ACC;
          end
        end
        ST_ACC: begin
          idx_ptr <= idx_ptr + IAW'(1);
          if (col == n_cols - CW'(1)) begin
            col   <= '0;
            k     <= '0;
            state <= ST_MAC;
          end else begin
            col <= col + CW'(1);
          end
        end
        ST_MAC: begin
          if (k == KW'(K - 1)) state <= ST_WAIT;
          else                 k     <= k + KW'(1);
        end
        ST_WAIT: state <= ST_OUT;
        ST_OUT: begin
          ctr_base <= ctr_base + CAW'(K);
          k        <= '0;
          if (last_row) begin
            done  <= 1'b1;
            state <= ST_IDLE;
          end else begin
            row   <= row + RW'(1);
            state <= ST_ACC;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy      = (state != ST_IDLE);
  assign idx_raddr = idx_ptr;
  assign vec_raddr = VAW'(col);
  assign ctr_raddr = ctr_base + CAW'(k);
  assign acc_en    = acc_en_q;
  assign bin_sel   = k_q;
  assign mac_en    = mac_en_q;
  assign acc_clear = ((state == ST_IDLE) && start) || (state == ST_OUT);
  assign mac_clear = acc_clear;
  assign y_valid   = (state == ST_OUT);
  assign y_row     = row;

  // A run must fit the memories it reads.
  a_start_fits: assert property (@(posedge clk)
    (start && state == ST_IDLE) |->
      (rows <= RW'(MAX_ROWS)) && (cols <= CW'(MAX_COLS)) &&
      (32'(rows) * 32'(cols) <= 32'(IDX_DEPTH)))
    else $error("dpnet_ctrl: run of %0d x %0d does not fit", rows, cols);

  // The sums and the accumulator are only used while a run is in progress.
  a_en_busy: assert property (@(posedge clk)
    (acc_en || mac_en) |-> (state != ST_IDLE));

endmodule
