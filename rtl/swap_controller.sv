// swap_controller: performs two consecutive RC4 swaps in one clock.
//
// In the 2-bytes-per-clock mode the S-box goes from S_{n-1} straight to
// S_{n+1}: first S[i_n] <-> S[j_n], then S[i_{n+1}] <-> S[j_{n+1}] on the
// result. The quad-selecting MUX of the storage block delivers the four
// pre-swap bytes a = S[i_n], b = S[j_n], c = S[i_{n+1}], d = S[j_{n+1}]
// (all read from S_{n-1}). The three index equalities i_{n+1} = j_n,
// i_n = j_{n+1} and j_{n+1} = j_n select one of the seven reachable rows of
// the data-movement table of the paper, and the controller routes a..d to
// the four write ports of the quad-selecting DEMUX accordingly:
//
//   row  i_{n+1}=j_n  i_n=j_{n+1}  j_{n+1}=j_n   writes (addr <- data)
//    1       0            0            0         i_n<-b  j_n<-a  i_{n+1}<-d  j_{n+1}<-c
//    2       0            0            1         i_n<-b  j_n<-c  i_{n+1}<-a
//    3       0            1            0         i_n<-c  j_n<-a  i_{n+1}<-b
//    4       0            1            1         i_n<-c          i_{n+1}<-a
//    5       1            0            0         i_n<-b  j_n<-d  j_{n+1}<-a
//    6       1            0            1         i_n<-b  j_n<-a
//    7       1            1            0         no write
//
// (the eighth combination needs i_n = i_{n+1} and cannot occur). The table
// is the paper's; dropping the write port whose address coincides with
// another port, so that no location receives two values, is this design's
// choice. The controller also returns S_{n+1}[i_{n+1}] and S_{n+1}[j_{n+1}],
// which the Z circuit adds to form t_{n+1}. Purely combinational.
module swap_controller
  import rc4_pkg::*;
(
  input  byte_t               i_n,
  input  byte_t               j_n,
  input  byte_t               i_n1,
  input  byte_t               j_n1,
  input  byte_t               s_i_n,     // a
  input  byte_t               s_j_n,     // b
  input  byte_t               s_i_n1,    // c
  input  byte_t               s_j_n1,    // d
  output sbox_wr_t [3:0]      wr,        // 0: i_n, 1: j_n, 2: i_n1, 3: j_n1
  output byte_t               post_i_n1, // S_{n+1}[i_{n+1}]
  output byte_t               post_j_n1, // S_{n+1}[j_{n+1}]
  output logic [2:0]          case_no
);

  logic eq_in1_jn, eq_in_jn1, eq_jn1_jn;
  byte_t a, b, c, d;

  assign a = s_i_n;
  assign b = s_j_n;
  assign c = s_i_n1;
  assign d = s_j_n1;

  assign eq_in1_jn = (i_n1 == j_n);
  assign eq_in_jn1 = (i_n == j_n1);
  assign eq_jn1_jn = (j_n1 == j_n);

  always_comb begin
    wr[0] = '{en: 1'b0, addr: i_n,  data: '0};
    wr[1] = '{en: 1'b0, addr: j_n,  data: '0};
    wr[2] = '{en: 1'b0, addr: i_n1, data: '0};
    wr[3] = '{en: 1'b0, addr: j_n1, data: '0};
    post_i_n1 = c;
    post_j_n1 = d;
    case_no   = 3'd0;
    unique case ({eq_in1_jn, eq_in_jn1, eq_jn1_jn})
      3'b000: begin
        case_no = 3'd1;
        wr[0].en = 1'b1; wr[0].data = b;
        wr[1].en = 1'b1; wr[1].data = a;
        wr[2].en = 1'b1; wr[2].data = d;
        wr[3].en = 1'b1; wr[3].data = c;
        post_i_n1 = d; post_j_n1 = c;
      end
      3'b001: begin
        case_no = 3'd2;
        wr[0].en = 1'b1; wr[0].data = b;
        wr[1].en = 1'b1; wr[1].data = c;
        wr[2].en = 1'b1; wr[2].data = a;
        post_i_n1 = a; post_j_n1 = c;
      end
      3'b010: begin
        case_no = 3'd3;
        wr[0].en = 1'b1; wr[0].data = c;
        wr[1].en = 1'b1; wr[1].data = a;
        wr[2].en = 1'b1; wr[2].data = b;
        post_i_n1 = b; post_j_n1 = c;
      end
      3'b011: begin
        case_no = 3'd4;
        wr[0].en = 1'b1; wr[0].data = c;
        wr[2].en = 1'b1; wr[2].data = a;
        post_i_n1 = a; post_j_n1 = c;
      end
      3'b100: begin
        case_no = 3'd5;
        wr[0].en = 1'b1; wr[0].data = b;
        wr[1].en = 1'b1; wr[1].data = d;
        wr[3].en = 1'b1; wr[3].data = a;
        post_i_n1 = d; post_j_n1 = a;
      end
      3'b101: begin
        case_no = 3'd6;
        wr[0].en = 1'b1; wr[0].data = b;
        wr[1].en = 1'b1; wr[1].data = a;
        post_i_n1 = a; post_j_n1 = a;
      end
      3'b110: begin
        case_no = 3'd7;
        post_i_n1 = b; post_j_n1 = a;
      end
      default: begin
        // row 8: would need i_n = i_{n+1}; unreachable
        case_no = 3'd0;
      end
    endcase
  end

endmodule
