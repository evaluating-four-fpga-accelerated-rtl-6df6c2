// mms_host: drives one MMS core (LogisticNet, ReducedNet or BaselineNet)
// the way the host software does, and checks its logits.
//
// Owns the behavioural DRAM of the core: the input tensor at BASE and the
// parameter buffer right after it (word 16384). Task infer() writes a fresh
// random input, optionally fresh random parameters (then it also sets the
// load flag), writes the addresses, starts the core, polls done, reads the
// four logits and compares them with the double-precision reference.
// Counters record checks, failures and the mechanisms seen.
module mms_host
  import axi_pkg::*;
  import tb_fp_pkg::*;
  import tb_mms_pkg::*;
#(
  parameter int NET      = 0,
  parameter int N_CH     = 32,
  parameter int N_HIDDEN = 128
) (
  input  logic        clk,
  output axil_req_t   req,
  input  axil_rsp_t   rsp,
  input  axi_rd_req_t m_req,
  output axi_rd_rsp_t m_rsp
);
  localparam int          N_IN  = 16384;
  localparam int          N_P   = n_params(NET, N_CH, N_HIDDEN);
  localparam logic [63:0] BASE  = 64'h0000_0000_4000_0000;
  localparam logic [63:0] W_ADR = BASE + 64'(4 * N_IN);

  int checks = 0, failures = 0, runs = 0, loads = 0, relu_zeros = 0;
  int last_cycles = 0, last_reads = 0;
  real p [];

  axil_host host (.clk, .req, .rsp);
  axi_mem_model #(.WORDS(N_IN + N_P), .BASE(BASE)) dram (.clk, .req(m_req), .rsp(m_rsp));

  task automatic infer(input bit new_params);
    real x [], y [], mag [];
    int z, polls, t0, r0;
    logic [31:0] v;
    x = new[N_IN];
    for (int i = 0; i < N_IN; i++) begin x[i] = q(urand(0.0, 1.0)); dram.mem[i] = r2f(x[i]); end
    if (new_params || p.size() == 0) begin
      p = new[N_P];
      for (int i = 0; i < N_P; i++) begin p[i] = q(urand(-0.25, 0.25)); dram.mem[N_IN + i] = r2f(p[i]); end
      loads++;
    end
    mms_ref(NET, x, p, N_CH, N_HIDDEN, y, mag, z);
    relu_zeros += z;
    host.write(REG_ARG_BASE + 0, BASE[31:0]);
    host.write(REG_ARG_BASE + 4, BASE[63:32]);
    host.write(REG_ARG_BASE + 8, W_ADR[31:0]);
    host.write(REG_ARG_BASE + 12, W_ADR[63:32]);
    host.write(REG_ARG_BASE + 16, 32'(new_params));
    t0 = $time; r0 = dram.reads;
    host.run(polls);
    last_cycles = int'(($time - t0) / 10);
    last_reads = dram.reads - r0;
    for (int k = 0; k < 4; k++) begin
      host.read(REG_RES_BASE + 12'(4 * k), v);
      checks++;
      if (!close(f2r(v), y[k], 2e-5, mag[k], 1e-6)) begin
        failures++;
        $display("FAIL net %0d logit %0d: got %g want %g", NET, k, f2r(v), y[k]);
      end
    end
    runs++;
  endtask
endmodule
