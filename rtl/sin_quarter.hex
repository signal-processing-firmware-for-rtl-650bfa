0000
0032
0065
0097
00c9
00fb
012e
0160
0192
01c4
01f7
0229
025b
028d
02c0
02f2
0324
0356
0389
03bb
03ed
041f
0452
0484
04b6
04e8
051b
054d
057f
05b1
05e3
0616
0648
067a
06ac
06de
0711
0743
0775
07a7
07d9
080b
083e
0870
08a2
08d4
0906
0938
096a
099d
09cf
0a01
0a33
0a65
0a97
0ac9
0afb
0b2d
0b5f
0b92
0bc4
0bf6
0c28
0c5a
0c8c
0cbe
0cf0
0d22
0d54
0d86
0db8
0dea
0e1c
0e4e
0e80
0eb1
0ee3
0f15
0f47
0f79
0fab
0fdd
100f
1041
1072
10a4
10d6
1108
113a
116c
119d
11cf
1201
1233
1264
1296
12c8
12fa
132b
135d
138f
13c0
13f2
1424
1455
1487
14b9
14ea
151c
154d
157f
15b0
15e2
1613
1645
1676
16a8
16d9
170b
173c
176e
179f
17d0
1802
1833
1865
1896
18c7
18f9
192a
195b
198c
19be
19ef
1a20
1a51
1a82
1ab4
1ae5
1b16
1b47
1b78
1ba9
1bda
1c0b
1c3c
1c6d
1c9e
1ccf
1d00
1d31
1d62
1d93
1dc4
1df5
1e26
1e57
1e87
1eb8
1ee9
1f1a
1f4a
1f7b
1fac
1fdd
200d
203e
206f
209f
20d0
2100
2131
2161
2192
21c2
21f3
2223
2254
2284
22b5
22e5
2315
2346
2376
23a6
23d7
2407
2437
2467
2497
24c8
24f8
2528
2558
2588
25b8
25e8
2618
2648
2678
26a8
26d8
2708
2737
2767
2797
27c7
27f7
2826
2856
2886
28b5
28e5
2915
2944
2974
29a3
29d3
2a02
2a32
2a61
2a91
2ac0
2af0
2b1f
2b4e
2b7d
2bad
2bdc
2c0b
2c3a
2c6a
2c99
2cc8
2cf7
2d26
2d55
2d84
2db3
2de2
2e11
2e40
2e6e
2e9d
2ecc
2efb
2f2a
2f58
2f87
2fb6
2fe4
3013
3041
3070
309e
30cd
30fb
312a
3158
3187
31b5
31e3
3211
3240
326e
329c
32ca
32f8
3326
3355
3383
33b1
33df
340c
343a
3468
3496
34c4
34f2
351f
354d
357b
35a8
35d6
3604
3631
365f
368c
36ba
36e7
3715
3742
376f
379c
37ca
37f7
3824
3851
387e
38ab
38d9
3906
3933
3960
398c
39b9
39e6
3a13
3a40
3a6c
3a99
3ac6
3af2
3b1f
3b4c
3b78
3ba5
3bd1
3bfe
3c2a
3c56
3c83
3caf
3cdb
3d07
3d33
3d60
3d8c
3db8
3de4
3e10
3e3c
3e68
3e93
3ebf
3eeb
3f17
3f43
3f6e
3f9a
3fc5
3ff1
401d
4048
4073
409f
40ca
40f6
4121
414c
4177
41a2
41ce
41f9
4224
424f
427a
42a5
42d0
42fa
4325
4350
437b
43a5
43d0
43fb
4425
4450
447a
44a5
44cf
44f9
4524
454e
4578
45a3
45cd
45f7
4621
464b
4675
469f
46c9
46f3
471c
4746
4770
479a
47c3
47ed
4816
4840
4869
4893
48bc
48e5
490f
4938
4961
498a
49b4
49dd
4a06
4a2f
4a58
4a80
4aa9
4ad2
4afb
4b24
4b4c
4b75
4b9d
4bc6
4bee
4c17
4c3f
4c68
4c90
4cb8
4ce0
4d09
4d31
4d59
4d81
4da9
4dd1
4df9
4e20
4e48
4e70
4e98
4ebf
4ee7
4f0e
4f36
4f5d
4f85
4fac
4fd4
4ffb
5022
5049
5070
5097
50be
50e5
510c
5133
515a
5181
51a8
51ce
51f5
521b
5242
5268
528f
52b5
52dc
5302
5328
534e
5374
539b
53c1
53e7
540c
5432
5458
547e
54a4
54c9
54ef
5515
553a
5560
5585
55aa
55d0
55f5
561a
563f
5664
568a
56af
56d3
56f8
571d
5742
5767
578b
57b0
57d5
57f9
581e
5842
5867
588b
58af
58d3
58f8
591c
5940
5964
5988
59ac
59cf
59f3
5a17
5a3b
5a5e
5a82
5aa5
5ac9
5aec
5b0f
5b33
5b56
5b79
5b9c
5bbf
5be2
5c05
5c28
5c4b
5c6e
5c91
5cb3
5cd6
5cf9
5d1b
5d3e
5d60
5d82
5da5
5dc7
5de9
5e0b
5e2d
5e4f
5e71
5e93
5eb5
5ed7
5ef8
5f1a
5f3c
5f5d
5f7f
5fa0
5fc2
5fe3
6004
6025
6047
6068
6089
60aa
60cb
60eb
610c
612d
614e
616e
618f
61af
61d0
61f0
6211
6231
6251
6271
6291
62b1
62d1
62f1
6311
6331
6351
6370
6390
63af
63cf
63ee
640e
642d
644c
646c
648b
64aa
64c9
64e8
6507
6525
6544
6563
6582
65a0
65bf
65dd
65fc
661a
6638
6656
6675
6693
66b1
66cf
66ed
670a
6728
6746
6764
6781
679f
67bc
67da
67f7
6814
6832
684f
686c
6889
68a6
68c3
68e0
68fc
6919
6936
6952
696f
698b
69a8
69c4
69e0
69fd
6a19
6a35
6a51
6a6d
6a89
6aa4
6ac0
6adc
6af8
6b13
6b2f
6b4a
6b65
6b81
6b9c
6bb7
6bd2
6bed
6c08
6c23
6c3e
6c59
6c74
6c8e
6ca9
6cc3
6cde
6cf8
6d13
6d2d
6d47
6d61
6d7b
6d95
6daf
6dc9
6de3
6dfd
6e16
6e30
6e4a
6e63
6e7c
6e96
6eaf
6ec8
6ee1
6efb
6f14
6f2c
6f45
6f5e
6f77
6f90
6fa8
6fc1
6fd9
6ff2
700a
7022
703a
7053
706b
7083
709b
70b2
70ca
70e2
70fa
7111
7129
7140
7158
716f
7186
719d
71b4
71cb
71e2
71f9
7210
7227
723e
7254
726b
7281
7298
72ae
72c4
72db
72f1
7307
731d
7333
7349
735e
7374
738a
739f
73b5
73ca
73e0
73f5
740a
7420
7435
744a
745f
7474
7488
749d
74b2
74c6
74db
74f0
7504
7518
752d
7541
7555
7569
757d
7591
75a5
75b8
75cc
75e0
75f3
7607
761a
762d
7641
7654
7667
767a
768d
76a0
76b3
76c6
76d8
76eb
76fe
7710
7722
7735
7747
7759
776b
777d
778f
77a1
77b3
77c5
77d7
77e8
77fa
780b
781d
782e
783f
7850
7862
7873
7884
7894
78a5
78b6
78c7
78d7
78e8
78f8
7909
7919
7929
7939
794a
795a
796a
7979
7989
7999
79a9
79b8
79c8
79d7
79e6
79f6
7a05
7a14
7a23
7a32
7a41
7a50
7a5f
7a6d
7a7c
7a8b
7a99
7aa8
7ab6
7ac4
7ad2
7ae0
7aee
7afc
7b0a
7b18
7b26
7b33
7b41
7b4f
7b5c
7b69
7b77
7b84
7b91
7b9e
7bab
7bb8
7bc5
7bd2
7bde
7beb
7bf8
7c04
7c10
7c1d
7c29
7c35
7c41
7c4d
7c59
7c65
7c71
7c7d
7c88
7c94
7c9f
7cab
7cb6
7cc1
7ccd
7cd8
7ce3
7cee
7cf9
7d04
7d0e
7d19
7d24
7d2e
7d39
7d43
7d4d
7d57
7d62
7d6c
7d76
7d80
7d89
7d93
7d9d
7da6
7db0
7db9
7dc3
7dcc
7dd5
7ddf
7de8
7df1
7dfa
7e02
7e0b
7e14
7e1d
7e25
7e2e
7e36
7e3e
7e47
7e4f
7e57
7e5f
7e67
7e6f
7e77
7e7e
7e86
7e8d
7e95
7e9c
7ea4
7eab
7eb2
7eb9
7ec0
7ec7
7ece
7ed5
7edc
7ee2
7ee9
7eef
7ef6
7efc
7f02
7f09
7f0f
7f15
7f1b
7f21
7f26
7f2c
7f32
7f37
7f3d
7f42
7f48
7f4d
7f52
7f57
7f5c
7f61
7f66
7f6b
7f70
7f74
7f79
7f7d
7f82
7f86
7f8a
7f8f
7f93
7f97
7f9b
7f9f
7fa2
7fa6
7faa
7fad
7fb1
7fb4
7fb8
7fbb
7fbe
7fc1
7fc4
7fc7
7fca
7fcd
7fd0
7fd2
7fd5
7fd8
7fda
7fdc
7fdf
7fe1
7fe3
7fe5
7fe7
7fe9
7feb
7fec
7fee
7ff0
7ff1
7ff3
7ff4
7ff5
7ff6
7ff7
7ff8
7ff9
7ffa
7ffb
7ffc
7ffd
7ffd
7ffe
7ffe
7ffe
7fff
7fff
7fff
7fff
