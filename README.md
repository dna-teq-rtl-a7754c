# DNA-TEQ accelerator in SystemVerilog

This is a synthesizable RTL model of the DNA-TEQ accelerator. DNA-TEQ is a DNN inference engine for exponentially quantized networks. It sits on the logic die of a 3D-stacked DRAM and has one processing element (PE) per memory vault. The PE computes dot products by counting exponents instead of multiplying.

The design follows the architecture published with DNA-TEQ: the Fig. 8 tile organisation and the Fig. 9 PE datapath. Where that description stops, the details are my own, and each one is listed below.

## 1. The arithmetic

Each tensor element is quantized as

    x̄ = S · (α · b^i + β)

- S is the sign: −1, 0 or +1.
- b is a per-layer base.
- i is a signed n-bit exponent, with n between 3 and 7.
- α and β are a per-tensor scale and offset.

Exponents run from −(2^(n−1)−1) to +(2^(n−1)−1). The remaining code, −2^(n−1), means "zero". Activations and weights of a layer share n and b.

A dot product Σ A·W splits into four terms:

    O = αAαW · Σ SA·SW · b^(iA+iW)     (term 1)
      + αWβA · Σ SA·SW · b^(iW)        (term 2)
      + αAβW · Σ SA·SW · b^(iA)        (term 3)
      + βAβW · Σ SA·SW                 (term 4)

Each sum only needs to know how often each exponent (or sum of exponents) occurred with a positive or negative sign product. The hardware therefore keeps counters:

- AC1: 2^(n+1) counters, indexed by iA+iW, for term 1.
- AC2: 2^n counters, indexed by iW, for term 2.
- AC3: 2^n counters, indexed by iA, for term 3.
- Acc: one accumulator for term 4.

A pair whose sign product is −1 decrements the counter. A pair with a zero operand changes nothing. After all inputs have been counted, a dequantizer forms each term as Σ count[k]·b^k. It reads the powers of b from a lookup table (BLUT), scales each term by its coefficient, and adds the four terms in FP16.

Terms 2 and 4 do not depend on the activations' exponents, so the host may precompute them offline. Each term has an enable bit, so a layer can skip any term.

## 2. Block overview

```
dnateq_top      4 x 4 mesh of tiles (one per vault)
 └ dnateq_tile  PE + memory controller + router
    ├ pe
    │  ├ quantizer        (boundary_buffer, 8 x quant_cmp)      pre-processing
    │  ├ input_shift_reg, weight_buffer                          operand staging
    │  ├ 16 x counter_set (3 x array_counter + Acc)              counting
    │  ├ dq_tables (BLUT, scale register)                        post-processing
    │  ├ 2 x dequantizer, output_buffer
    │  └ pe_ctrl
    ├ mem_ctrl (2 x async_fifo, vault FSM)
    └ router (5-port, XY)
```

`dnateq_pkg` holds the shared types and the FP16 multiply and add functions.

### Quantizer (pre-processing)

Activations arrive as FP16 values and are quantized at run time, without a logarithm. The host loads the sorted interval boundaries of the layer into a 16-row × 8-entry boundary buffer. A layer with n-bit exponents uses the first 2^(n−3) rows; the other rows are flagged for power gating.

Eight activations are quantized together:

1. One boundary row is read per cycle and sent to eight comparator blocks, one per activation.
2. Each block produces a thermometer vector (|A| < boundary[j]). A priority encoder turns it into the position of the first boundary above |A|.
3. The row number acts as a bias on top of that position, so the interval number is 8·row + position.
4. A magnitude at or above the last boundary clips to interval 2^n−1.
5. The interval q becomes the exponent q − 2^(n−1). The host chooses the first boundary so that only values that should become zero lie below it, because q = 0 is the zero code.

FP16 magnitudes are compared as 15-bit unsigned integers, which orders them correctly. Results are ready 2^(n−3) + 2 cycles after the fourth activation word is accepted.

### Counting stage

A counting step takes the next quantized activation from the input shift register and broadcasts it to all 16 counter sets. Each counter set pairs the activation with its own weight for that input, held in the weight buffer.

Each counter set holds:

- an exponent adder;
- a sign XOR;
- three array counters, addressed as:
  - AC1: iA + iW + 2^n
  - AC2: iW + 2^(n−1)
  - AC3: iA + 2^(n−1)
- a 16-bit sign-product accumulator.

Each array counter is an SRAM of 16 banks with 8-bit entries. The counter's adder takes +1 or −1 from a mux driven by the sign product, and the read-modify-write completes in one cycle. Only 2^(n−3) banks are in use, and the others are flagged for power gating.

One step completes every cycle while operands are available. A batch of 8 inputs therefore takes 8 cycles, and the next batch's operands load in parallel.

### Post-processing

Two dequantizers serve the 16 counter sets: dequantizer 0 handles counter sets 0–7 and dequantizer 1 handles 8–15. Both share:

- the BLUT: 256 FP16 entries, BLUT[k] = b^(k − 2^n), loaded by the host;
- the scale register: four FP16 term coefficients.

For each enabled term the dequantizer:

1. reads the counts one per cycle, with each read also clearing the counter;
2. converts each count to FP16, multiplies it by its BLUT entry and accumulates;
3. multiplies the term sum by the term's coefficient and adds it to the output.

One multiplier and one adder do all of this, selected by operand multiplexers. A term with L counters takes L + 2 cycles. For example, a 7-bit layer with all four terms takes 2 + 258 + 130 + 130 + 3 cycles per counter set.

The two results go into the output buffer as one 32-bit word, {O_j+8, O_j}.

FP16 arithmetic rounds to nearest-even. Subnormal results flush to zero, and overflow goes to infinity.

### Memory controller, router and mesh

**Memory controller.** Each tile's controller serves one vault through two asynchronous FIFOs with Gray-coded pointers. These FIFOs are the crossing between the logic clock and the DRAM clock.

- A request multiplexer feeds FIFO Write from two sources: the PE side (reads for the PE, writes of PE results) and the router (remote writes). Router traffic has priority, so the network always drains.
- An FSM in the DRAM clock domain performs one vault access at a time.
- Read data returns through FIFO Read to a demultiplexer, which delivers it to the PE or to the router.

**Router.** A 5-port router (N, E, S, W, local) with:

- dimension-order XY routing (x first, then y; y grows southwards);
- 2-entry input FIFOs;
- round-robin output arbitration.

Packets are single flits `{dst_x, dst_y, addr, data}`.

**Host commands.** The host drives each tile with three commands:

| command | effect |
|---|---|
| `MC_RD_PE addr len` | stream `len` words from the vault into the PE |
| `MC_WR_PE addr len` | write the next `len` PE result words to the vault |
| `MC_RD_NET addr len dx dy daddr` | copy `len` words to vault (dx,dy) starting at `daddr` |

## 3. Using a PE

Configuration uses the PE's `cfg_we/cfg_addr/cfg_data` port, writing one 16-bit value per cycle. The address map is:

| address | content |
|---|---|
| 0x000–0x07F | interval boundaries (FP16, sorted; row r = addresses 8r..8r+7) |
| 0x100–0x1FF | BLUT entry k = b^(k−2^n) (FP16) |
| 0x200–0x203 | coefficients of terms 1..4 (αAαW, αWβA, αAβW, βAβW) |
| 0x300 | n (3..7) |
| 0x301 | number of 8-input batches |
| 0x302 | term enables, bit k−1 = term k |

A job computes 16 output neurons over 8 × batches inputs. After `start`, the input stream holds 36 words per batch:

- 4 activation words, each holding two FP16 activations, low half first;
- then 32 weight words. Input i of the batch uses words 4i..4i+3, and byte j of word 4i+k is the weight of neuron 4k+j.

A weight byte is {sign, 7-bit exponent, sign-extended}. The PE returns 8 result words. `pg_banks` reports the boundary rows (and counter banks) that the layer does not need.

The top level brings out, for each tile, the host command port, the PE configuration and status signals, and the vault interface. A vault interface is req/we/addr/wdata with gnt; read data returns later with rvalid/rdata. The interface accepts any latency and any stalls.

## 4. Verification

Every block has a self-checking testbench in `tb/`, and each prints `TB_RESULT checks=N failures=M`. The reference models in `tb_ref_pkg` compute in double precision and round to FP16 after every operation. They do not reuse any RTL code.

| testbench | what it covers |
|---|---|
| tb_array_counter, tb_counter_set | random ±1 counting against a model, read-and-clear, zero-code skip, term enables |
| tb_quant_cmp, tb_boundary_buffer, tb_quantizer | interval search for n = 3..7, clipping, zero code, latency 2^(n−3)+2 |
| tb_input_shift_reg, tb_weight_buffer, tb_output_buffer, tb_dq_tables | ordering and back-pressure |
| tb_dequantizer | FP16 term sums for random counts, all widths and term subsets, exact latency |
| tb_pe | three full jobs (n = 3, 5, 7; with and without terms 2 and 4) bit-exact against the reference |
| tb_async_fifo, tb_mem_ctrl, tb_router | clock crossing, the three commands with remote writes interleaved, 1000 random flits through all ports |
| tb_dnateq_top | full 4 × 4 die at default parameters with a vault model on every tile |

In tb_dnateq_top, two PE jobs with different widths and term sets run from their vaults while two vault-to-vault copies cross the mesh. The testbench counts zero skips, negative products, clipped activations, width switching, disabled terms, remote writes and vault stalls, and fails if any count is zero.

Each testbench was also run against a deliberately broken copy of its block, and every broken copy was caught.

To simulate with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dnateq_pkg.sv tb/tb_ref_pkg.sv tb/tb_pe.sv --top-module tb_pe
./obj_dir/Vtb_pe
```

The largest configuration simulated is the full default design (16 tiles, 16 counter sets per PE). Its test runs in well under a second.

## 5. What is this design's own, and what is missing

These choices are my own. They stay within the published description but are not specified by it:

- **Weight storage.** Weights are stored in 8-bit containers ({sign, exponent}), not packed to n+1 bits. Compression in DRAM is therefore not modelled.
- **Counters.** Entries are 8-bit two's complement and wrap on overflow. The published design also uses 8 bits and reports no instability on its benchmarks. Counters are cleared as they are read. The term-4 accumulator is 16 bits.
- **Interval mapping.** Interval number q maps to exponent q − 2^(n−1), with q = 0 as the zero code. Boundaries are compared by magnitude, and the sign bypasses the quantizer.
- **Interfaces.** The stream formats, configuration map, host commands, handshakes and FIFO depths are all mine. So are the counter-set-to-dequantizer pairing, the XY routing and the single-flit packets.
- **Remote data.** A PE reads only its own vault. Remote data is first copied between vaults over the mesh.
- **FP16 details.** Subnormals flush to zero, and the BLUT and coefficients are FP16.

These parts are not implemented:

- The DRAM dies themselves. The testbenches use a behavioural vault model with latency and refresh stalls.
- The offline parameter search (choosing b, α, β and n per layer).
- Any scheduler that splits whole networks into PE jobs. The host does this, and convolutions must be presented as dot products.
- The SIMD software version.
- Power gating itself. The design only produces the masks.

Workload capacity at default parameters is as follows. AlexNet, ResNet-50 and the Transformer, with weights in 8-bit containers, need well under 100 MB of the 4 GB stack. Their largest dot products (9216, 4608 and 2048 inputs) are far below the batch register's limit of 65535 × 8 inputs.
