// bitrom_ctrl -- control logic of the BitROM accelerator.
//
// Executes host commands (cmd_t, one at a time, cmd_valid/cmd_ready) by
// moving data between the IO buffer, the macro partitions, the LoRA
// adapters, the auxiliary arithmetic unit and the KV-cache manager:
//   OP_LOAD_ACT  : read `count` words from src_addr and write them, word i
//                  at activation address i, to layer `layer` of every
//                  partition in part_mask.
//   OP_LORA_DOWN : in the lowest partition of part_mask, stream 16 x `count`
//                  words of the A matrix from src_addr into the adapter of
//                  `layer`, which keeps h = sat(A x >>> h_shift).
//   OP_RUN       : start macro (`layer`, `macro`) in every partition of
//                  part_mask at once, each on its own batch; with lora_en
//                  (single partition) also stream the 4-word B rows from
//                  src_addr. Results of the partitions are taken round robin,
//                  requantized in the auxiliary unit and written either to
//                  external word dst_addr + p*count + n, or (dest_kv) to the
//                  KV-cache as element n%256 of KV head n/256, token `token`,
//                  K or V by kv_sel, layer p*3+`layer`.
//   OP_KV_READ   : one decode step of one KV head: mark decode_step, then
//                  read elements 0..255 of tokens 0..count-1 and stream them
//                  out on kv_out_*.
//   OP_NEXT_SLOT : advance the batch pipeline. In slot s partition p serves
//                  batch (s - p) mod 6, so six batches flow through the six
//                  partitions (three layers each) like a six-stage pipeline.
// The IO buffer's read side belongs to the KV manager during OP_KV_READ and
// its write side during a RUN with dest_kv (io_rd_kv, io_wr_kv); otherwise
// to this unit. res_stalls counts cycles in which a finished macro waited
// for its result to be taken.
// From the paper: a control unit coordinating the system, six partitions of
// three layers with a six-stage batch pipeline. This design's choices: the
// command set, the data movement and all handshakes.
module bitrom_ctrl
  import bitrom_pkg::*;
#(
  parameter int unsigned NP  = 6,
  parameter int unsigned LPP = 3,
  parameter int unsigned NB  = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  // partitions
  output logic [1:0]         sel_layer,
  output logic [3:0]         sel_macro,
  output logic [NP-1:0]      act_we,
  output logic [10:0]        act_waddr,
  output logic [31:0]        act_wdata,
  output logic [NP-1:0]      run_start,
  output logic [13:0]        n_out,
  output logic [3:0]         n_steps,
  output logic [11:0]        row_base,
  output act_mode_t          act_mode,
  output logic               lora_en,
  output logic [4:0]         lora_shift,
  input  logic [NP-1:0]      p_res_valid,
  output logic [NP-1:0]      p_res_ready,
  input  logic signed [23:0] p_res_data [NP],
  input  logic [13:0]        p_res_idx  [NP],
  output logic [NP-1:0]      down_start,
  output logic [NP-1:0]      up_start,
  output logic [11:0]        k_words,
  output logic [4:0]         h_shift,
  output logic [NP-1:0]      w_valid,
  output logic [31:0]        w_data,
  input  logic [NP-1:0]      p_w_ready,
  input  logic [NP-1:0]      p_busy,
  // auxiliary arithmetic
  output logic               aux_in_valid,
  input  logic               aux_in_ready,
  output logic signed [23:0] aux_in_data,
  output logic [7:0]         aux_scale,
  output logic [4:0]         aux_shift,
  output qmode_t             aux_mode,
  input  logic               aux_out_valid,
  output logic               aux_out_ready,
  input  logic signed [15:0] aux_out_data,
  // IO buffer (this unit's side)
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic [31:0]        rd_req_addr,
  input  logic               rd_data_valid,
  output logic               rd_data_ready,
  input  logic [31:0]        rd_data,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [31:0]        wr_addr,
  output logic [31:0]        wr_data,
  output logic               io_rd_kv,
  output logic               io_wr_kv,
  // KV-cache manager
  output logic               kv_req_valid,
  input  logic               kv_req_ready,
  output logic               kv_req_we,
  output kv_addr_t           kv_req_addr,
  output logic [15:0]        kv_req_wdata,
  input  logic               kv_rsp_valid,
  input  logic [15:0]        kv_rsp_data,
  input  logic               kv_rsp_err,
  output logic               decode_step,
  // KV read stream out
  output logic               kv_out_valid,
  output logic [15:0]        kv_out_data,
  output logic               kv_out_err,
  // status
  output logic               busy,
  output logic [2:0]         slot,
  output logic [31:0]        res_stalls
);

  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_LDOWN, C_RUN, C_KVRD} cstate_t;
  cstate_t state;
  cmd_t    c;
  logic    first;                  // first cycle of a command

  logic [31:0] issued, recvd, total;
  logic [NP-1:0] pmask;
  logic [$clog2(NP)-1:0] p0;       // lowest partition of the mask
  logic [$clog2(NP)-1:0] rr;       // round-robin pointer
  logic [$clog2(NP)-1:0] tag_p;
  logic [13:0]           tag_idx;

  function automatic logic [$clog2(NP)-1:0] lowest(input logic [NP-1:0] m);
    for (int i = NP - 1; i >= 0; i--) if (m[i]) lowest = ($clog2(NP))'(i);
    if (m == '0) lowest = '0;
  endfunction

  function automatic logic [2:0] batch_of(input logic [2:0] s, input int p);
    return 3'((int'(s) + NB - p) % NB);
  endfunction

  function automatic logic [31:0] popcount(input logic [NP-1:0] m);
    popcount = '0;
    for (int i = 0; i < NP; i++) popcount += 32'(m[i]);
  endfunction

  // ------------------------------------------------------------ arbitration
  logic                  gnt_any;
  logic [$clog2(NP)-1:0] gnt;
  always_comb begin
    gnt_any = 1'b0;
    gnt     = '0;
    for (int k = 0; k < NP; k++) begin
      int i;
      i = (int'(rr) + k) % NP;
      if (!gnt_any && p_res_valid[i]) begin
        gnt_any = 1'b1;
        gnt     = ($clog2(NP))'(i);
      end
    end
  end

  // ------------------------------------------------------------ datapath
  always_comb begin
    cmd_ready    = (state == C_IDLE);
    sel_layer    = c.layer;
    sel_macro    = c.macro;
    n_out        = c.count;
    n_steps      = c.n_steps;
    row_base     = c.row_base;
    act_mode     = c.act_mode;
    lora_en      = c.lora_en;
    lora_shift   = c.lora_shift;
    k_words      = c.count[11:0];
    h_shift      = c.h_shift;
    aux_scale    = c.q_scale;
    aux_shift    = c.q_shift;
    aux_mode     = c.q_mode;
    io_rd_kv     = (state == C_KVRD);
    io_wr_kv     = (state == C_RUN) && c.dest_kv;

    act_we       = '0;
    act_waddr    = recvd[10:0];
    act_wdata    = rd_data;
    run_start    = '0;
    down_start   = '0;
    up_start     = '0;
    w_valid      = '0;
    w_data       = rd_data;
    rd_req_valid = 1'b0;
    rd_req_addr  = c.src_addr + issued;
    rd_data_ready = 1'b0;
    p_res_ready  = '0;
    aux_in_valid = 1'b0;
    aux_in_data  = p_res_data[gnt];
    aux_out_ready = 1'b0;
    wr_valid     = 1'b0;
    wr_addr      = c.dst_addr + 32'(tag_p) * 32'(c.count) + 32'(tag_idx);
    wr_data      = 32'(aux_out_data);
    kv_req_valid = 1'b0;
    kv_req_we    = 1'b0;
    kv_req_wdata = aux_out_data;
    kv_req_addr  = '0;
    decode_step  = 1'b0;

    unique case (state)
      C_LOAD: begin
        rd_req_valid  = issued < total;
        rd_data_ready = 1'b1;
        act_we        = rd_data_valid ? pmask : '0;
      end
      C_LDOWN: begin
        down_start[p0] = first;
        rd_req_valid   = !first && issued < total;
        w_valid[p0]    = !first && rd_data_valid;
        rd_data_ready  = !first && p_w_ready[p0];
      end
      C_RUN: begin
        run_start      = first ? pmask : '0;
        up_start[p0]   = first && c.lora_en;
        rd_req_valid   = !first && c.lora_en && issued < total;
        w_valid[p0]    = !first && rd_data_valid;
        rd_data_ready  = !first && p_w_ready[p0];
        aux_in_valid   = gnt_any;
        p_res_ready[gnt] = gnt_any && aux_in_ready;
        if (c.dest_kv) begin
          kv_req_valid        = aux_out_valid;
          kv_req_we           = 1'b1;
          kv_req_addr.batch   = batch_of(slot, int'(tag_p));
          kv_req_addr.layer   = 5'(int'(tag_p) * LPP + int'(c.layer));
          kv_req_addr.head    = tag_idx[9:8];
          kv_req_addr.kv      = c.kv_sel;
          kv_req_addr.token   = c.token;
          kv_req_addr.elem    = tag_idx[7:0];
          aux_out_ready       = kv_req_ready;
        end else begin
          wr_valid      = aux_out_valid;
          aux_out_ready = wr_ready;
        end
      end
      C_KVRD: begin
        decode_step        = first;
        kv_req_valid       = !first && issued < total;
        kv_req_addr.batch  = batch_of(slot, int'(p0));
        kv_req_addr.layer  = 5'(int'(p0) * LPP + int'(c.layer));
        kv_req_addr.head   = c.head;
        kv_req_addr.kv     = c.kv_sel;
        kv_req_addr.token  = issued[15:8];
        kv_req_addr.elem   = issued[7:0];
      end
      default: ;
    endcase
  end

  assign kv_out_valid = (state == C_KVRD) && kv_rsp_valid;
  assign kv_out_data  = kv_rsp_data;
  assign kv_out_err   = kv_rsp_err;
  assign busy         = (state != C_IDLE);

  // ------------------------------------------------------------ sequencing
  logic rd_fire, dat_fire, out_fire, kv_fire;
  assign rd_fire  = rd_req_valid && rd_req_ready;
  assign dat_fire = rd_data_valid && rd_data_ready;
  assign out_fire = aux_out_valid && aux_out_ready;
  assign kv_fire  = kv_req_valid && kv_req_ready;

  logic [31:0] drained, stalls_now;
  always_comb begin
    stalls_now = '0;
    if (state == C_RUN)
      for (int i = 0; i < NP; i++)
        stalls_now += 32'(p_res_valid[i] && !p_res_ready[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      c          <= '0;
      first      <= 1'b0;
      issued     <= '0;
      recvd      <= '0;
      total      <= '0;
      drained    <= '0;
      pmask      <= '0;
      p0         <= '0;
      rr         <= '0;
      tag_p      <= '0;
      tag_idx    <= '0;
      slot       <= '0;
      res_stalls <= '0;
    end else begin
      first      <= 1'b0;
      res_stalls <= res_stalls + stalls_now;
      if (rd_fire || (state == C_KVRD && kv_fire)) issued <= issued + 32'd1;
      if (dat_fire || (state == C_KVRD && kv_rsp_valid)) recvd <= recvd + 32'd1;
      if (out_fire) drained <= drained + 32'd1;
      if (aux_in_valid && aux_in_ready) begin
        tag_p   <= gnt;
        tag_idx <= p_res_idx[gnt];
        rr      <= ($clog2(NP))'((int'(gnt) + 1) % NP);
      end

      unique case (state)
        C_IDLE: if (cmd_valid) begin
          c       <= cmd;
          pmask   <= cmd.part_mask[NP-1:0];
          p0      <= lowest(cmd.part_mask[NP-1:0]);
          issued  <= '0;
          recvd   <= '0;
          drained <= '0;
          first   <= 1'b1;
          unique case (cmd.op)
            OP_LOAD_ACT: begin
              total <= 32'(cmd.count);
              state <= C_LOAD;
            end
            OP_LORA_DOWN: begin
              total <= 32'(cmd.count) * 32'd16;
              state <= C_LDOWN;
            end
            OP_RUN: begin
              total <= 32'(cmd.count) * 32'd4;
              state <= C_RUN;
            end
            OP_KV_READ: begin
              total <= 32'(cmd.count) * 32'(HEAD_DIM);
              state <= C_KVRD;
            end
            default: begin   // OP_NEXT_SLOT
              slot  <= (slot == 3'(NB - 1)) ? '0 : slot + 3'd1;
              state <= C_IDLE;
            end
          endcase
        end
        C_LOAD:  if (dat_fire && recvd == total - 1) state <= C_IDLE;
        C_LDOWN: if (!first && recvd == total && !p_busy[p0]) state <= C_IDLE;
        C_RUN: begin
          if (!first && drained == 32'(c.count) * popcount(pmask) && !(|(p_busy & pmask)))
            state <= C_IDLE;
        end
        C_KVRD:  if (!first && recvd == total) state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  // a LoRA run uses one partition's adapter
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == C_IDLE && cmd_valid && cmd.op == OP_RUN && cmd.lora_en)
                   |-> $onehot(cmd.part_mask[NP-1:0]));

endmodule
