0000
00c9
0192
025b
0324
03ed
04b6
057f
0648
0711
07d9
08a2
096a
0a33
0afb
0bc4
0c8c
0d54
0e1c
0ee3
0fab
1072
113a
1201
12c8
138f
1455
151c
15e2
16a8
176e
1833
18f9
19be
1a82
1b47
1c0b
1ccf
1d93
1e57
1f1a
1fdd
209f
2161
2223
22e5
23a6
2467
2528
25e8
26a8
2767
2826
28e5
29a3
2a61
2b1f
2bdc
2c99
2d55
2e11
2ecc
2f87
3041
30fb
31b5
326e
3326
33df
3496
354d
3604
36ba
376f
3824
38d9
398c
3a40
3af2
3ba5
3c56
3d07
3db8
3e68
3f17
3fc5
4073
4121
41ce
427a
4325
43d0
447a
4524
45cd
4675
471c
47c3
4869
490f
49b4
4a58
4afb
4b9d
4c3f
4ce0
4d81
4e20
4ebf
4f5d
4ffb
5097
5133
51ce
5268
5302
539b
5432
54c9
5560
55f5
568a
571d
57b0
5842
58d3
5964
59f3
5a82
5b0f
5b9c
5c28
5cb3
5d3e
5dc7
5e4f
5ed7
5f5d
5fe3
6068
60eb
616e
61f0
6271
62f1
6370
63ee
646c
64e8
6563
65dd
6656
66cf
6746
67bc
6832
68a6
6919
698b
69fd
6a6d
6adc
6b4a
6bb7
6c23
6c8e
6cf8
6d61
6dc9
6e30
6e96
6efb
6f5e
6fc1
7022
7083
70e2
7140
719d
71f9
7254
72ae
7307
735e
73b5
740a
745f
74b2
7504
7555
75a5
75f3
7641
768d
76d8
7722
776b
77b3
77fa
783f
7884
78c7
7909
794a
7989
79c8
7a05
7a41
7a7c
7ab6
7aee
7b26
7b5c
7b91
7bc5
7bf8
7c29
7c59
7c88
7cb6
7ce3
7d0e
7d39
7d62
7d89
7db0
7dd5
7dfa
7e1d
7e3e
7e5f
7e7e
7e9c
7eb9
7ed5
7eef
7f09
7f21
7f37
7f4d
7f61
7f74
7f86
7f97
7fa6
7fb4
7fc1
7fcd
7fd8
7fe1
7fe9
7ff0
7ff5
7ff9
7ffd
7ffe
7fff
