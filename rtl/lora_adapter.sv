// lora_adapter -- digital domain adapter (LoRA branch) of one Transformer layer.
//
// Adds a low-rank correction B (A x) to a frozen ternary projection W x, so
// that a chip whose weights are fixed in ROM can still be tuned to a task.
// The arithmetic is one 4-input multiplier-and-adder: four signed 6-bit
// weights times four signed 8-bit operands, summed and accumulated.
//
// Operation, driven by the controller:
//   * x_we writes the layer's 8-bit input activations, 4 per word, into a
//     local buffer (the same words the ROM macros receive).
//   * down_start, k_words = K/4: the A matrix streams in row by row on
//     w_valid/w_ready, 4 weights per word (byte lanes, low 6 bits used).
//     Each rank row r takes k_words words; at its end h[r] =
//     sat8(acc >>> h_shift), round toward minus infinity. After RANK rows the
//     adapter is idle.
//   * up_start, n_out: for each output channel, RANK/4 words of the B row
//     stream in and the adapter offers y = sum B[n][r]*h[r] on
//     y_valid/y_ready (32-bit). The macro adds y >>> lora_shift to its sum.
// Throughput: one weight word per cycle while w_valid is high; in the up
// phase the next output's words are accepted only after y is taken.
// From the paper: rank 16, 6-bit weights, 8-bit activations, the 4-input
// multiplier-and-adder, the output joining the macro's global sum. This
// design's choices: the streaming order, the local activation buffer, the
// 8-bit saturation of the rank vector h and all shifts.
module lora_adapter #(
  parameter int unsigned RANK  = 16,
  parameter int unsigned LANES = 4,
  parameter int unsigned W_W   = 6,
  parameter int unsigned X_W   = 8,
  parameter int unsigned K_MAX = 8192,
  localparam int unsigned XAW  = $clog2(K_MAX / LANES),
  localparam int unsigned RQ   = RANK / LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    x_we,
  input  logic [XAW-1:0]          x_waddr,
  input  logic [LANES*8-1:0]      x_wdata,
  input  logic                    down_start,
  input  logic [XAW:0]            k_words,
  input  logic [4:0]              h_shift,
  input  logic                    up_start,
  input  logic [13:0]             n_out,
  input  logic                    w_valid,
  input  logic [LANES*8-1:0]      w_data,
  output logic                    w_ready,
  output logic                    y_valid,
  output logic signed [31:0]      y_data,
  input  logic                    y_ready,
  output logic                    busy,
  output logic signed [X_W-1:0]   h [RANK]
);

  typedef enum logic [1:0] {A_IDLE, A_DOWN, A_UP, A_OUT} astate_t;
  astate_t state;

  logic [LANES*8-1:0] xbuf [K_MAX / LANES];
  always_ff @(posedge clk) if (x_we) xbuf[x_waddr] <= x_wdata;

  logic [XAW:0]        kw_q, widx;
  logic [4:0]          hs_q;
  logic [13:0]         nout_q, oidx;
  logic [$clog2(RANK):0] r;
  logic signed [31:0]  acc;

  // ---------------------------------------------- 4-input multiplier-adder
  logic signed [X_W-1:0] opnd [LANES];
  logic signed [31:0]    dot;
  logic [LANES*8-1:0]    xw;

  always_comb begin
    xw  = xbuf[widx[XAW-1:0]];
    dot = '0;
    for (int i = 0; i < LANES; i++) begin
      logic signed [W_W-1:0] wi;
      wi      = w_data[8*i +: W_W];
      opnd[i] = (state == A_UP) ? h[(int'(widx) * LANES + i) % RANK]
                                : $signed(xw[8*i +: X_W]);
      dot     = dot + 32'(wi * opnd[i]);
    end
  end

  logic signed [31:0] acc_next, shifted;
  always_comb begin
    acc_next = acc + dot;
    shifted  = acc_next >>> hs_q;
  end

  function automatic logic signed [X_W-1:0] sat(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return v[X_W-1:0];
  endfunction

  assign w_ready = (state == A_DOWN) || (state == A_UP);
  assign y_valid = (state == A_OUT);
  assign busy    = (state != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= A_IDLE;
      kw_q   <= '0;
      widx   <= '0;
      hs_q   <= '0;
      nout_q <= '0;
      oidx   <= '0;
      r      <= '0;
      acc    <= '0;
      y_data <= '0;
      for (int i = 0; i < RANK; i++) h[i] <= '0;
    end else begin
      unique case (state)
        A_IDLE: begin
          widx <= '0;
          r    <= '0;
          acc  <= '0;
          oidx <= '0;
          if (down_start) begin
            kw_q  <= k_words;
            hs_q  <= h_shift;
            state <= A_DOWN;
          end else if (up_start) begin
            nout_q <= n_out;
            state  <= A_UP;
          end
        end
        A_DOWN: if (w_valid) begin
          if (widx == kw_q - 1'b1) begin
            h[r[$clog2(RANK)-1:0]] <= sat(shifted);
            acc  <= '0;
            widx <= '0;
            r    <= r + 1'b1;
            if (r == ($clog2(RANK)+1)'(RANK - 1)) state <= A_IDLE;
          end else begin
            acc  <= acc_next;
            widx <= widx + 1'b1;
          end
        end
        A_UP: if (w_valid) begin
          if (widx == (XAW+1)'(RQ - 1)) begin
            y_data <= acc_next;
            acc    <= '0;
            widx   <= '0;
            state  <= A_OUT;
          end else begin
            acc  <= acc_next;
            widx <= widx + 1'b1;
          end
        end
        A_OUT: if (y_ready) begin
          oidx  <= oidx + 1'b1;
          state <= (oidx == nout_q - 1'b1) ? A_IDLE : A_UP;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

endmodule
