// gp_tb_pkg: program builders shared by the NALE, array and system tests.
//
// build_sssp_node() produces the program one NALE runs for one node of a
// shortest-path computation on a directed acyclic grid graph (edges point
// east and south). It plays the part of the compiler: the node's incoming
// ports, outgoing directions and whether it is the source are known ahead.
// Data memory layout the program expects:
//   [0..3]  weight of the edge arriving on port N, E, S, W
//   [5]     scale factor for the second result record
//   [6]     edge weight along the node-cluster tail chain
//   [8]     running best distance     [10] loop counter
// The program
//   1. loads the weights into bank B and receives one value per input port
//      (the sender's message ID is the receiving port, so RECV with use_id
//      puts it in A[port]);
//   2. relaxes: best = min over ports of A[p] + B[p] (CMP with min),
//      starting from 0 for the source and INF = 4095 otherwise;
//   3. sends best to each outgoing neighbour, then two result records to
//      the output logic: ID 0 = best, ID 1 = best * scale (MUL, Lo);
//   4. if tail > 0 (node-cluster mode), emulates a chain of `tail` further
//      nodes, each `w6` farther than the previous, passing the value to
//      itself through the internal FIFO in a counted loop, and sends each
//      chain node's distance with ID 2.
package gp_tb_pkg;
  import gp_pkg::*;

  typedef logic [15:0] prog_t[$];

  localparam int INF = 4095;

  function automatic logic [2:0] opp(input int d);
    return 3'((d + 2) % 4);
  endfunction

  function automatic prog_t build_sssp_node(input logic [3:0] in_mask, input logic [3:0] out_mask,
                                            input bit is_source, input int tail);
    prog_t p;
    int loop_pc;
    for (int k = 0; k < 4; k++) if (in_mask[k]) p.push_back(i_ld(1'b1, 3'(k), 8'(k)));
    for (int k = 0; k < 4; k++) if (in_mask[k]) p.push_back(i_recv(1'b0, 1'b0, 3'd0, 1'b1));
    p.push_back(i_ldi(is_source ? 12'd0 : 12'(INF)));
    p.push_back(i_st(8'd8));
    for (int k = 0; k < 4; k++) if (in_mask[k]) begin
      p.push_back(i_ld(1'b1, 3'd7, 8'd8));
      p.push_back(i_acc(1'b0, SEL_A, 3'(k), 3'(k)));
      p.push_back(i_acc(1'b1, SEL_B, 3'(k), 3'(k)));
      p.push_back(i_cmp(1'b1, SEL_B, 3'd0, 3'd7));
      p.push_back(i_st(8'd8));
    end
    for (int d = 0; d < 4; d++) if (out_mask[d]) p.push_back(i_send(3'(d), opp(d)));
    p.push_back(i_send(DEST_OUT, 3'd0));
    p.push_back(i_ld(1'b0, 3'd5, 8'd8));
    p.push_back(i_ld(1'b1, 3'd5, 8'd5));
    p.push_back(i_mul(3'd5, 3'd5));
    p.push_back(i_acc(1'b0, SEL_LO, 3'd0, 3'd0));
    p.push_back(i_send(DEST_OUT, 3'd1));
    if (tail > 0) begin
      p.push_back(i_acc(1'b0, SEL_A, 3'd5, 3'd0));
      p.push_back(i_send(DEST_SELF, 3'd1));
      p.push_back(i_ldi(12'(tail)));
      p.push_back(i_st(8'd10));
      p.push_back(i_ld(1'b1, 3'd2, 8'd10));
      p.push_back(i_ld(1'b1, 3'd6, 8'd6));
      loop_pc = p.size();
      p.push_back(i_recv(1'b1, 1'b0, 3'd0, 1'b1));
      p.push_back(i_acc(1'b0, SEL_A, 3'd1, 3'd0));
      p.push_back(i_acc(1'b1, SEL_B, 3'd0, 3'd6));
      p.push_back(i_send(DEST_OUT, 3'd2));
      p.push_back(i_send(DEST_SELF, 3'd1));
      p.push_back(i_acc(1'b0, SEL_B, 3'd0, 3'd2));
      p.push_back(i_addi(12'hFFF));
      p.push_back(i_st(8'd10));
      p.push_back(i_ld(1'b1, 3'd2, 8'd10));
      p.push_back(i_cmp(1'b0, SEL_IMM, 3'd0, 3'd0));
      p.push_back(i_br(CMP_EQ, 1'b0, 8'(p.size() + 2)));
      p.push_back(i_jmp(8'(loop_pc)));
    end
    p.push_back(i_halt());
    return p;
  endfunction

  // Straight-line weighted sum over the four input ports:
  // result = sum_p A[p] * B[p], B[p] = dmem[p]; sent with ID 5, stored at 20.
  function automatic prog_t build_wsum();
    prog_t p;
    for (int k = 0; k < 4; k++) p.push_back(i_ld(1'b1, 3'(k), 8'(k)));
    for (int k = 0; k < 4; k++) p.push_back(i_recv(1'b0, 1'b0, 3'd0, 1'b1));
    for (int k = 0; k < 4; k++) begin
      p.push_back(i_mul(3'(k), 3'(k)));
      p.push_back(i_acc(k != 0, SEL_LO, 3'd0, 3'd0));
    end
    p.push_back(i_send(DEST_OUT, 3'd5));
    p.push_back(i_st(8'd20));
    p.push_back(i_halt());
    return p;
  endfunction
  // Connected components by min-label propagation on an undirected mesh
  // subgraph: `rounds` times, send the current label to every neighbour in
  // nbr_mask, receive one label per neighbour and keep the minimum. The
  // initial label is dmem[8]; the final label goes to the output with ID 0.
  // Rounds of neighbouring NALEs may overlap by one; the minimum is
  // unaffected by the order in which labels are taken.
  function automatic prog_t build_cc_node(input logic [3:0] nbr_mask, input int rounds);
    prog_t p;
    int loop_pc, exit_at;
    p.push_back(i_ldi(12'(rounds)));
    p.push_back(i_st(8'd10));
    p.push_back(i_ld(1'b1, 3'd2, 8'd10));
    loop_pc = p.size();
    p.push_back(i_ld(1'b0, 3'd5, 8'd8));
    p.push_back(i_acc(1'b0, SEL_A, 3'd5, 3'd0));
    for (int d = 0; d < 4; d++) if (nbr_mask[d]) p.push_back(i_send(3'(d), opp(d)));
    for (int d = 0; d < 4; d++) if (nbr_mask[d]) p.push_back(i_recv(1'b0, 1'b0, 3'd0, 1'b1));
    for (int d = 0; d < 4; d++) if (nbr_mask[d]) p.push_back(i_cmp(1'b1, SEL_A, 3'(d), 3'd0));
    p.push_back(i_st(8'd8));
    p.push_back(i_acc(1'b0, SEL_B, 3'd0, 3'd2));
    p.push_back(i_addi(12'hFFF));
    p.push_back(i_st(8'd10));
    p.push_back(i_ld(1'b1, 3'd2, 8'd10));
    p.push_back(i_cmp(1'b0, SEL_IMM, 3'd0, 3'd0));
    exit_at = p.size() + 2;
    p.push_back(i_br(CMP_EQ, 1'b0, 8'(exit_at)));
    p.push_back(i_jmp(8'(loop_pc)));
    p.push_back(i_ld(1'b0, 3'd5, 8'd8));
    p.push_back(i_acc(1'b0, SEL_A, 3'd5, 3'd0));
    p.push_back(i_send(DEST_OUT, 3'd0));
    p.push_back(i_halt());
    return p;
  endfunction

  // One PageRank-style step: send own rank (dmem[8]) to every neighbour in
  // nbr_mask, receive the neighbours' ranks and form
  //   base (dmem[9]) + sum_p rank[p] * weight[p]   (weight[p] = dmem[p])
  // in 32-bit fixed point, sent to the output with ID 4.
  function automatic prog_t build_pr_node(input logic [3:0] nbr_mask);
    prog_t p;
    p.push_back(i_ld(1'b0, 3'd5, 8'd8));
    p.push_back(i_acc(1'b0, SEL_A, 3'd5, 3'd0));
    for (int d = 0; d < 4; d++) if (nbr_mask[d]) p.push_back(i_send(3'(d), opp(d)));
    for (int d = 0; d < 4; d++) if (nbr_mask[d]) p.push_back(i_ld(1'b1, 3'(d), 8'(d)));
    for (int d = 0; d < 4; d++) if (nbr_mask[d]) p.push_back(i_recv(1'b0, 1'b0, 3'd0, 1'b1));
    p.push_back(i_ld(1'b1, 3'd6, 8'd9));
    p.push_back(i_acc(1'b0, SEL_B, 3'd0, 3'd6));
    for (int d = 0; d < 4; d++) if (nbr_mask[d]) begin
      p.push_back(i_mul(3'(d), 3'(d)));
      p.push_back(i_acc(1'b1, SEL_LO, 3'd0, 3'd0));
    end
    p.push_back(i_send(DEST_OUT, 3'd4));
    p.push_back(i_halt());
    return p;
  endfunction
endpackage
