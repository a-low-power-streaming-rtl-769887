// mem_ctrl -- memory controller between the off-chip interface and the
// on-chip memories. Only the input and output of a frame, the weights, the
// biases and the program cross the chip boundary; feature maps stay inside.
//
// The off-chip side is two 80-bit streams with valid/ready handshakes, one
// in and one out, as in the system architecture. A command (from the
// controller) moves `count` 80-bit words:
//   load  data   : input word -> data bank `bank`, addresses addr, addr+1, ...
//   load  weight : input word -> weight bank `bank[1:0]`
//   load  bias   : each input word carries 8 FP10 biases (lane 0 first),
//                  written to bias bank `bank[0]` at 8 consecutive addresses
//   load  instr  : each input word carries 2 instructions (bits 31:0, 63:32)
//   store        : data bank `bank` -> output stream
// Commands run in the background, so weights for the next layer can be
// loaded into the idle half of a ping-pong buffer while the datapath runs.
// Data-SRAM accesses are requests that the data SRAM may refuse for a cycle
// when the datapath uses the same bank; `stall` shows such a cycle.
// The command set, the packing of biases and instructions, and the
// handshakes are this design's choices.
// Timing: one input word is taken at most every other cycle; bias words take
// 8 cycles; a store produces one word every 3 cycles at best.
module mem_ctrl
  import fp10_pkg::*;
  import se_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic        cmd_store,
  input  target_e     cmd_target,
  input  logic [2:0]  cmd_bank,
  input  logic [8:0]  cmd_addr,
  input  logic [9:0]  cmd_count,
  output logic        busy,
  output logic        stall,
  // off-chip streams
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  // data SRAM
  output logic        d_rreq,
  output logic [2:0]  d_rbank,
  output logic [8:0]  d_raddr,
  input  logic        d_rgnt,
  input  word_t       d_rdata,
  output logic        d_wreq,
  output logic [2:0]  d_wbank,
  output logic [8:0]  d_waddr,
  output word_t       d_wdata,
  input  logic        d_wgnt,
  // weight SRAM
  output logic        w_we,
  output logic [1:0]  w_bank,
  output logic [8:0]  w_addr,
  output word_t       w_data,
  // bias SRAM
  output logic        b_we,
  output logic        b_bank,
  output logic [8:0]  b_addr,
  output fp10_t       b_data,
  // instruction register
  output logic        i_we,
  output logic [4:0]  i_addr,
  output logic [63:0] i_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RD, S_RWAIT, S_OUT} state_e;
  state_e     state;
  target_e    tgt;
  logic [2:0] bank;
  logic [8:0] addr;
  logic [9:0] left;       // words still to move
  word_t      buf_q;
  logic       buf_full;
  logic [2:0] sub;        // bias lane within the held word
  logic       drain;      // the held word is written this cycle

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  always_comb begin
    drain = 1'b0;
    if (state == S_LOAD && buf_full) begin
      unique case (tgt)
        TGT_DATA:   drain = d_wgnt;
        TGT_BIAS:   drain = (sub == 3'd7);
        default:    drain = 1'b1;
      endcase
    end
  end

  assign in_ready = (state == S_LOAD) && !buf_full && (left != 10'd0);

  assign d_wreq  = (state == S_LOAD) && buf_full && (tgt == TGT_DATA);
  assign d_wbank = bank;
  assign d_waddr = addr;
  assign d_wdata = buf_q;
  assign w_we    = (state == S_LOAD) && buf_full && (tgt == TGT_WEIGHT);
  assign w_bank  = bank[1:0];
  assign w_addr  = addr;
  assign w_data  = buf_q;
  assign b_we    = (state == S_LOAD) && buf_full && (tgt == TGT_BIAS);
  assign b_bank  = bank[0];
  assign b_addr  = addr;
  assign b_data  = buf_q[sub*10 +: 10];
  assign i_we    = (state == S_LOAD) && buf_full && (tgt == TGT_INSTR);
  assign i_addr  = addr[4:0];
  assign i_data  = buf_q[63:0];

  assign d_rreq  = (state == S_RD);
  assign d_rbank = bank;
  assign d_raddr = addr;
  assign stall   = (d_wreq && !d_wgnt) || (d_rreq && !d_rgnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tgt       <= TGT_DATA;
      bank      <= '0;
      addr      <= '0;
      left      <= '0;
      buf_q     <= '0;
      buf_full  <= 1'b0;
      sub       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          tgt   <= cmd_target;
          bank  <= cmd_bank;
          addr  <= cmd_addr;
          left  <= cmd_count;
          sub   <= '0;
          if (cmd_count != 10'd0) state <= cmd_store ? S_RD : S_LOAD;
        end
        S_LOAD: begin
          if (in_valid && in_ready) begin
            buf_q    <= in_data;
            buf_full <= 1'b1;
            left     <= left - 10'd1;
          end
          if (buf_full) begin
            if (tgt == TGT_BIAS) begin
              sub  <= sub + 3'd1;
              addr <= addr + 9'd1;
            end else if (drain) begin
              addr <= (tgt == TGT_INSTR) ? addr + 9'd2 : addr + 9'd1;
            end
            if (drain) begin
              buf_full <= 1'b0;
              if (left == 10'd0) state <= S_IDLE;
            end
          end
        end
        S_RD: if (d_rgnt) state <= S_RWAIT;
        S_RWAIT: begin
          out_data  <= d_rdata;
          out_valid <= 1'b1;
          state     <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          addr      <= addr + 9'd1;
          left      <= left - 10'd1;
          state     <= (left == 10'd1) ? S_IDLE : S_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
