// dcnn_ctrl: sequencer of one inference.
//
// After ap_start the controller walks the network step by step:
//   IMG  stream 784 pixels into the image buffer
//   C1   for each conv1 filter group: stream the group's weights and biases
//        into the conv1 slot, then run conv1 on that group (writing output
//        channels base .. base+n-1); groups are c1_group filters wide, so with
//        c1_group = 4 conv1 runs as a 4-filter pass and a 2-filter pass
//   S2   max pool
//   C3   stream conv2 parameters if dyn_mask[0], run conv2
//   S4   max pool
//   F5   stream fc1 parameters if dyn_mask[1], run fc1
//   F6   stream fc2 parameters if dyn_mask[2], run fc2
//   F7   stream fc3 parameters if dyn_mask[3], run fc3
//   OUT  send the 10 class scores on the output AXI4-Stream (tlast on the
//        last), then pulse ap_done.
// Each layer's parameters are streamed right before the layer runs, so the
// input stream is: image, conv1 group 0, conv1 group 1, ..., then the
// parameter blocks of the streamed layers in network order. The last of these
// blocks is marked so the loader can check tlast.
//
// Handshake with the datapath: ld_start / run_start[step] are one-clock
// pulses; the controller waits for ld_done / layer_done[step]. ap_idle is high
// between inferences; cycles holds the length of the last inference.
// Streaming parameters layer by layer and choosing the layers by dyn_mask
// follow the source work's three methods; the ordering and the handshake are
// this design's own choices.
module dcnn_ctrl
  import dcnn_pkg::*;
#(
  parameter int C1_SLOT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ap_start,
  output logic        ap_done,
  output logic        ap_idle,
  input  logic [3:0]  dyn_mask,
  input  logic [7:0]  c1_group,
  output logic [31:0] cycles,
  // loader
  output logic        ld_start,
  output logic [15:0] ld_count,
  output logic [3:0]  ld_target,
  output logic        ld_expect_last,
  output logic        ld_clear_err,
  input  logic        ld_done,
  // layers
  output logic [8:0]  run_start,
  input  logic [8:0]  layer_done,
  output logic [7:0]  c1_base,
  output logic [7:0]  c1_cnt,
  // output stream
  output logic [3:0]  o_raddr,
  input  data_t       o_rdata,
  output word_t       m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast
);

  // step numbers (2 and 4 are the pooling steps, which load nothing)
  localparam logic [3:0] ST_IMG = 4'd0, ST_C1 = 4'd1, ST_C3 = 4'd3,
                         ST_F5 = 4'd5, ST_F6 = 4'd6, ST_F7 = 4'd7, ST_OUT = 4'd8;

  typedef enum logic [2:0] {PH_IDLE, PH_LOAD, PH_LWAIT, PH_RUN, PH_RWAIT, PH_ORD, PH_OVAL} phase_e;

  phase_e     phase;
  logic [3:0] step;
  logic [3:0] mask_q;
  logic [7:0] group_q;

  // conv1 group of the current pass
  always_comb begin
    c1_cnt = (int'(group_q) < C1_NF - int'(c1_base)) ? group_q : 8'(C1_NF - int'(c1_base));
  end

  function automatic logic needs_load(input logic [3:0] s, input logic [3:0] m);
    case (s)
      ST_IMG, ST_C1: return 1'b1;
      ST_C3:         return m[0];
      ST_F5:         return m[1];
      ST_F6:         return m[2];
      ST_F7:         return m[3];
      default:       return 1'b0;
    endcase
  endfunction

  function automatic logic [15:0] load_words(input logic [3:0] s, input logic [7:0] n);
    case (s)
      ST_IMG:  return 16'(IMG_WORDS);
      ST_C1:   return 16'(int'(n) * (KSZ * KSZ + 1));
      ST_C3:   return 16'(C3_NF * (C1_NF * KSZ * KSZ + 1));
      ST_F5:   return 16'(F5_N * (C3_NF * S4_HO * S4_HO + 1));
      ST_F6:   return 16'(F6_N * (F5_N + 1));
      ST_F7:   return 16'(F7_N * (F6_N + 1));
      default: return 16'd0;
    endcase
  endfunction

  // is there any parameter block after the current one?
  logic later_load;
  always_comb begin
    later_load = 1'b0;
    if (step == ST_IMG) later_load = 1'b1;
    if (step == ST_C1 && int'(c1_base) + int'(c1_cnt) < C1_NF) later_load = 1'b1;
    if (step < ST_C3 && mask_q[0]) later_load = 1'b1;
    if (step < ST_F5 && mask_q[1]) later_load = 1'b1;
    if (step < ST_F6 && mask_q[2]) later_load = 1'b1;
    if (step < ST_F7 && mask_q[3]) later_load = 1'b1;
  end

  logic [3:0] next_step;
  assign next_step = step + 4'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase          <= PH_IDLE;
      step           <= ST_IMG;
      mask_q         <= '0;
      group_q        <= 8'd1;
      c1_base        <= '0;
      ld_start       <= 1'b0;
      ld_count       <= '0;
      ld_target      <= '0;
      ld_expect_last <= 1'b0;
      ld_clear_err   <= 1'b0;
      run_start      <= '0;
      o_raddr        <= '0;
      ap_done        <= 1'b0;
      cycles         <= '0;
    end else begin
      ld_start     <= 1'b0;
      ld_clear_err <= 1'b0;
      run_start    <= '0;
      ap_done      <= 1'b0;
      if (phase != PH_IDLE) cycles <= cycles + 32'd1;
      unique case (phase)
        PH_IDLE: if (ap_start) begin
          phase        <= PH_LOAD;
          step         <= ST_IMG;
          mask_q       <= dyn_mask;
          group_q      <= (c1_group == 0) ? 8'd1 :
                          (int'(c1_group) > C1_SLOT) ? 8'(C1_SLOT) : c1_group;
          c1_base      <= '0;
          cycles       <= '0;
          ld_clear_err <= 1'b1;
        end
        PH_LOAD: begin
          ld_start       <= 1'b1;
          ld_count       <= load_words(step, c1_cnt);
          ld_target      <= step;
          ld_expect_last <= !later_load;
          phase          <= PH_LWAIT;
        end
        PH_LWAIT: if (ld_done) begin
          if (step == ST_IMG) begin
            step  <= ST_C1;
            phase <= PH_LOAD;
          end else begin
            phase <= PH_RUN;
          end
        end
        PH_RUN: begin
          run_start[step] <= 1'b1;
          phase           <= PH_RWAIT;
        end
        PH_RWAIT: if (layer_done[step]) begin
          if (step == ST_C1 && int'(c1_base) + int'(c1_cnt) < C1_NF) begin
            c1_base <= c1_base + c1_cnt;
            phase   <= PH_LOAD;
          end else begin
            step <= next_step;
            if (next_step == ST_OUT) begin
              o_raddr <= '0;
              phase   <= PH_ORD;
            end else if (needs_load(next_step, mask_q)) begin
              phase <= PH_LOAD;
            end else begin
              phase <= PH_RUN;
            end
          end
        end
        PH_ORD: phase <= PH_OVAL;
        PH_OVAL: if (m_tready) begin
          if (int'(o_raddr) == F7_N - 1) begin
            ap_done <= 1'b1;
            phase   <= PH_IDLE;
          end else begin
            o_raddr <= o_raddr + 4'd1;
            phase   <= PH_ORD;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  assign ap_idle  = (phase == PH_IDLE);
  assign m_tvalid = (phase == PH_OVAL);
  assign m_tlast  = (phase == PH_OVAL) && (int'(o_raddr) == F7_N - 1);
  assign m_tdata  = word_t'(o_rdata);

endmodule
