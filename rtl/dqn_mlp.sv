// dqn_mlp: inference of the deep Q-network of one RACE agent.
//
// A fully connected network with N_IN = 8 inputs (the credit counts of the
// two routers' four output ports), N_HID = 5 hidden neurons and N_OUT = 3
// outputs, one Q value per action; these sizes follow the paper. The action
// with the largest Q value is returned. The paper does not give the
// activation, number format or datapath; here the hidden layer uses ReLU,
// weights and biases are signed fixed point with FRAC fraction bits (Q8.8 by
// default), inputs are unsigned integers, and ties are broken towards the
// balanced action (index N_OUT/2), then the lowest index.
//
// Datapath: N_HID multiply-accumulate units compute the hidden layer one
// input per cycle (N_IN cycles), then N_OUT units compute the output layer
// one hidden neuron per cycle (N_HID cycles). A start pulse latches the
// inputs; done pulses N_IN + N_HID + 2 cycles later with action and q valid
// (15 cycles for 8-5-3, well inside a 50-cycle epoch).
//
// Weights are trained offline, so they are written through a register port:
//   W1[h][i] at h*N_IN + i, b1[h] at N_HID*N_IN + h,
//   W2[o][h] at N_HID*(N_IN+1) + o*N_HID + h, b2[o] after them.
// All weights reset to zero.
module dqn_mlp #(
  parameter int unsigned N_IN  = 8,
  parameter int unsigned N_HID = 5,
  parameter int unsigned N_OUT = 3,
  parameter int unsigned IN_W  = 4,      // input (credit) width, unsigned
  parameter int unsigned W_W   = 16,     // weight / bias / activation width
  parameter int unsigned FRAC  = 8,      // fraction bits of weights
  parameter int unsigned ACC_W = 40,     // accumulator width
  parameter int unsigned NW    = N_HID * (N_IN + 1) + N_OUT * (N_HID + 1),
  parameter int unsigned AW    = $clog2(NW),
  parameter int unsigned OW    = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // weight load port
  input  logic                   w_we,
  input  logic [AW-1:0]          w_addr,
  input  logic signed [W_W-1:0]  w_data,
  // inference
  input  logic                   start,
  input  logic [IN_W-1:0]        x [N_IN],
  output logic                   busy,
  output logic                   done,
  output logic [OW-1:0]          action,
  output logic signed [ACC_W-1:0] q [N_OUT]   // Q values, FRAC fraction bits
);

  localparam int unsigned B1  = N_HID * N_IN;
  localparam int unsigned W2  = N_HID * (N_IN + 1);
  localparam int unsigned B2  = W2 + N_OUT * N_HID;
  localparam int unsigned CW  = $clog2(((N_IN > N_HID) ? N_IN : N_HID) + 1);

  typedef enum logic [2:0] { S_IDLE, S_L1, S_ACT, S_L2, S_OUT } state_e;

  logic signed [W_W-1:0]   wmem [NW];
  logic [IN_W-1:0]         xr   [N_IN];
  logic signed [ACC_W-1:0] acc1 [N_HID];
  logic signed [W_W-1:0]   hid  [N_HID];
  logic signed [ACC_W-1:0] acc2 [N_OUT];
  state_e                  st;
  logic [CW-1:0]           k;

  localparam logic signed [ACC_W-1:0] HMAX = ACC_W'((1 << (W_W - 1)) - 1);

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NW; n++) wmem[n] <= '0;
    end else if (w_we && w_addr < AW'(NW)) begin
      wmem[w_addr] <= w_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      k      <= '0;
      done   <= 1'b0;
      action <= OW'(N_OUT / 2);
      for (int i = 0; i < N_IN;  i++) xr[i]   <= '0;
      for (int h = 0; h < N_HID; h++) begin acc1[h] <= '0; hid[h] <= '0; end
      for (int o = 0; o < N_OUT; o++) begin acc2[o] <= '0; q[o] <= '0; end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          for (int i = 0; i < N_IN;  i++) xr[i]   <= x[i];
          for (int h = 0; h < N_HID; h++) acc1[h] <= '0;
          k  <= '0;
          st <= S_L1;
        end
        S_L1: begin
          // acc1[h] += W1[h][k] * x[k]   (FRAC fraction bits)
          for (int h = 0; h < N_HID; h++)
            acc1[h] <= acc1[h] + ACC_W'(wmem[h * N_IN + int'(k)])
                               * signed'(ACC_W'(xr[int'(k)]));
          if (k == CW'(N_IN - 1)) st <= S_ACT;
          else                    k  <= k + 1'b1;
        end
        S_ACT: begin
          // bias, ReLU, saturate to W_W bits
          for (int h = 0; h < N_HID; h++) begin
            logic signed [ACC_W-1:0] s;
            s = acc1[h] + ACC_W'(wmem[B1 + h]);
            if (s < 0)         hid[h] <= '0;
            else if (s > HMAX) hid[h] <= W_W'(HMAX);
            else               hid[h] <= W_W'(s);
          end
          for (int o = 0; o < N_OUT; o++) acc2[o] <= '0;
          k  <= '0;
          st <= S_L2;
        end
        S_L2: begin
          // acc2[o] += W2[o][k] * hid[k]  (2*FRAC fraction bits)
          for (int o = 0; o < N_OUT; o++)
            acc2[o] <= acc2[o] + ACC_W'(wmem[W2 + o * N_HID + int'(k)])
                               * ACC_W'(hid[int'(k)]);
          if (k == CW'(N_HID - 1)) st <= S_OUT;
          else                     k  <= k + 1'b1;
        end
        S_OUT: begin
          logic signed [ACC_W-1:0] qv [N_OUT];
          logic [OW-1:0]           best;
          for (int o = 0; o < N_OUT; o++) begin
            qv[o] = (acc2[o] >>> FRAC) + ACC_W'(wmem[B2 + o]);
            q[o] <= qv[o];
          end
          best = OW'(N_OUT / 2);
          for (int o = 0; o < N_OUT; o++)
            if (qv[o] > qv[best]) best = OW'(o);
          action <= best;
          done   <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
