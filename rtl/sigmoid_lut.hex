2000
2100
21ff
22fe
23fb
24f6
25ee
26e4
27d6
28c5
29b0
2a96
2b78
2c54
2d2c
2dfd
2eca
2f90
3051
310b
31bf
326d
3315
33b7
3453
34e9
3579
3602
3686
3705
377e
37f1
385f
38c8
392c
398b
39e6
3a3c
3a8e
3adb
3b25
3b6b
3bad
3bec
3c28
3c60
3c95
3cc7
3cf7
3d24
3d4e
3d77
3d9c
3dc0
3de2
3e02
3e20
3e3c
3e57
3e70
3e88
3e9e
3eb3
3ec7
3ed9
3eeb
3efb
3f0b
3f1a
3f27
3f34
3f41
3f4c
3f57
3f61
3f6a
3f73
3f7c
3f84
3f8b
3f92
3f99
3f9f
3fa5
3faa
3fb0
3fb4
3fb9
3fbd
3fc1
3fc5
3fc9
3fcc
3fcf
3fd2
3fd5
3fd7
3fda
3fdc
3fde
3fe0
3fe2
3fe4
3fe6
3fe7
3fe9
3fea
3fec
3fed
3fee
3fef
3ff0
3ff1
3ff2
3ff3
3ff4
3ff4
3ff5
3ff6
3ff6
3ff7
3ff7
3ff8
3ff8
3ff9
3ff9
3ffa
3ffa
