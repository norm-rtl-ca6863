0000
003c
0078
00b4
00f0
012c
0140
0154
0168
017c
0190
0189
0182
017b
0174
016d
0166
015f
0158
0151
014a
0166
0182
019e
01ba
01d6
01cd
01c4
01bb
01b2
01a9
01a0
0197
018e
0185
017c
0175
016f
0168
0161
015b
0154
014d
0147
0140
0139
0133
012c
0125
011f
0118
0112
010c
0106
0100
00fa
00f4
00ee
00e8
00e2
00dc
00da
00d8
00d6
00d4
00d2
00d0
00ce
00cc
00ca
00c8
00c6
00c4
00c2
00c0
00be
00bc
00ba
00b8
00b6
00b4
00b9
00be
00c3
00c8
00cd
00d2
00d7
00dc
00e1
00e6
00eb
00f0
00f5
00fa
00ff
0104
0109
010e
0113
0118
0116
0115
0114
0112
0110
010f
010e
010c
010a
0109
0108
0106
0104
0103
0102
0100
00fe
00fd
00fc
00fa
0102
010a
0112
011a
0122
012a
0132
013a
0142
014a
0145
0140
013b
0136
0131
012c
0127
0122
011d
0118
0113
010e
0109
0104
00ff
00fa
00f5
00f0
00eb
00e6
00ea
00ed
00f0
00f4
00f8
00fb
00fe
0102
0106
0109
010c
0110
0114
0117
011a
011e
0122
0125
0128
012c
0131
0136
013b
0140
0145
014a
014f
0154
0159
015e
0159
0154
014f
014a
0145
0140
013b
0136
0131
012c
0154
017c
01a4
01cc
01f4
021c
0244
026c
0294
02bc
02cb
02da
02e9
02f8
0307
0316
0325
0334
0343
0352
0361
0370
037f
038e
039d
03ac
03bb
03ca
03d9
03e8
0401
041a
0433
044c
0465
047e
0497
04b0
04c9
04e2
04e4
04e5
04e7
04e9
04ea
04ec
04ee
04ef
04f1
04f3
04f4
04f6
04f8
04f9
04fb
04fd
04fe
0500
0502
0503
0505
0507
0508
050a
050c
050d
050f
0511
0512
0514
050a
0500
04f6
04ec
04e2
052d
0578
05c3
060e
0659
06a4
06ef
073a
0785
07d0
07bc
07a8
0794
0780
076c
0758
0744
0730
071c
0708
06f4
06e0
06cc
06b8
06a4
06cc
06f4
071c
0744
076c
0794
07bc
07e4
080c
0834
081b
0802
07e9
07d0
07b7
079e
0785
076c
0753
073a
0721
0708
06ef
06d6
06bd
06a4
068b
0672
0659
0640
0622
0604
05e6
05c8
05aa
058c
056e
0550
0532
0514
0528
053c
0550
0564
0578
058c
05a0
05b4
05c8
05dc
05f0
0604
0618
062c
0640
0654
0668
067c
0690
06a4
06c7
06ea
070d
0730
0753
0776
0799
07bc
07df
0802
07ec
07d5
07be
07a8
0792
077b
0764
074e
0738
0721
070a
06f4
06de
06c7
06b0
069a
0684
066d
0656
0640
0642
0645
0648
064a
064c
064f
0652
0654
0656
0659
065c
065e
0660
0663
0666
0668
066a
066d
0670
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0672
0695
06b8
06db
06fe
0721
0744
0767
078a
07ad
07d0
07df
07ee
07fd
080c
081b
082a
0839
0848
0857
0866
0875
0884
0893
08a2
08b1
08c0
08cf
08de
08ed
08fc
0a14
0b2c
0c44
0d5c
0e74
0e17
0db9
0d5c
0cff
0ca1
0c44
0be7
0b89
0b2c
0acf
0a71
0a14
09b7
0959
08fc
08e8
08d4
08c0
08ac
0898
0884
0870
085c
0848
0834
08b6
0938
09ba
0a3c
0abe
0b40
0bc2
0c44
0cc6
0d48
0cee
0c94
0c3a
0be0
0b86
0b2c
0ad2
0a78
0a1e
09c4
09a8
098d
0972
0956
093a
091f
0904
08e8
08cc
08b1
0896
087a
085e
0843
0828
080c
07f0
07d5
07ba
079e
07da
0816
0852
088e
08ca
0906
0942
097e
09ba
09f6
09c9
099c
096f
0942
0915
08e8
08bb
088e
0861
0834
08d4
0974
0a14
0ab4
0b54
0bf4
0c94
0d34
0dd4
0e74
0e88
0e9c
0eb0
0ec4
0ed8
0e74
0e10
0dac
0d48
0ce4
0c80
0c1c
0bb8
0b54
0af0
0a8c
0a28
09c4
0960
08fc
08ed
08de
08cf
08c0
08b1
08a2
0893
0884
0875
0866
0857
0848
0839
082a
081b
080c
07fd
07ee
07df
07d0
081b
0866
08b1
08fc
0947
0992
09dd
0a28
0a73
0abe
0a87
0a50
0a19
09e2
09ab
0974
093d
0906
08cf
0898
096a
0a3c
0b0e
0be0
0cb2
0d84
0e56
0f28
0ffa
10cc
1108
1144
1180
11bc
11f8
1144
1090
0fdc
0f28
0e74
0dc0
0d0c
0c58
0ba4
0af0
0ad4
0ab8
0a9c
0a80
0a64
0a48
0a2c
0a10
09f4
09d8
09bc
09a0
0984
0968
094c
0930
0914
08f8
08dc
08c0
08a4
0888
086c
0850
0834
082f
082a
0825
0820
081b
0816
0811
080c
0807
0802
08e3
09c4
0aa5
0b86
0c67
0d48
0e29
0f0a
0feb
10cc
104a
0fc8
0f46
0ec4
0e42
0dc0
0d3e
0cbc
0c3a
0bb8
0b86
0b54
0b22
0af0
0abe
0a8c
0a5a
0a28
09f6
09c4
0aaa
0b90
0c76
0d5c
0e42
0f28
100e
10f4
11da
12c0
12f8
1330
1369
13a1
13d9
1412
144a
1482
13c6
130b
1250
1194
10d8
101d
0f62
0ea6
0dea
0d2f
0c74
0bb8
0b40
0ac8
0a50
09d8
0960
09f9
0a93
0b2c
0bc5
0c5f
0cf8
0d91
0e2b
0ec4
0f5d
0ff7
1090
1129
11c3
125c
11e4
116c
10f4
107c
1004
0f8c
0f14
0e9c
0e24
0dac
0d34
0cbc
0c44
0bcc
0b54
0c08
0cbc
0d70
0e24
0ed8
0e74
0e10
0dac
0d48
0ce4
0c80
0c1c
0bb8
0b54
0af0
0b5e
0bcc
0c3a
0ca8
0d16
0d84
0df2
0e60
0ece
0f3c
0ece
0e60
0df2
0d84
0d16
0ca8
0c3a
0bcc
0b5e
0af0
0ae6
0adc
0ad2
0ac8
0abe
0ab4
0aaa
0aa0
0a96
0a8c
0bf4
0d5c
0ec4
102c
1194
1123
10b1
1040
0fcf
0f5d
0eec
0e7b
0e09
0d98
0d27
0cb5
0c44
0bd3
0b61
0af0
0aa0
0a50
0a00
09b0
0960
0910
08c0
0870
0820
07d0
07c6
07bc
07b2
07a8
079e
0794
078a
0780
0776
076c
0762
0758
074e
0744
073a
0730
0726
071c
0712
0708
0717
0726
0735
0744
0753
0762
0771
0780
078f
079e
077b
0758
0735
0712
06ef
06cc
06a9
0686
0663
0640
064f
065e
066d
067c
068b
069a
06a9
06b8
06c7
06d6
06c4
06b3
06a2
0690
067e
066d
065c
064a
0638
0627
0616
0604
05f2
05e1
05d0
05be
05ac
059b
058a
0578
0596
05b4
05d2
05f0
060e
062c
064a
0668
0686
06a4
06a2
069f
069c
069a
0698
0695
0692
0690
068e
068b
0688
0686
0684
0681
067e
067c
067a
0677
0674
0672
0695
06b8
06db
06fe
0721
0744
0767
078a
07ad
07d0
0802
0834
0866
0898
08ca
08fc
092e
0960
0992
09c4
099c
0974
094c
0924
08fc
08d4
08ac
0884
085c
0834
0857
087a
089d
08c0
08e3
0906
0929
094c
096f
0992
09b5
09d8
09fb
0a1e
0a41
0a64
0a87
0aaa
0acd
0af0
0ae8
0ae1
0ada
0ad2
0aca
0ac3
0abc
0ab4
0aac
0aa5
0a9e
0a96
0a8e
0a87
0a80
0a78
0a70
0a69
0a62
0a5a
0a61
0a67
0a6e
0a75
0a7b
0a82
0a89
0a8f
0a96
0a9d
0aa3
0aaa
0ab1
0ab7
0abe
0b7c
0c3a
0cf8
0db6
0e74
0e2b
0de1
0d98
0d4f
0d05
0cbc
0c73
0c29
0be0
0b97
0b4d
0b04
0abb
0a71
0a28
0a1b
0a0d
0a00
09f3
09e5
09d8
09cb
09bd
09b0
09a3
0995
0988
097b
096d
0960
0956
094c
0942
0938
092e
0924
091a
0910
0906
08fc
08f2
08e8
08de
08d4
08ca
08c0
08b6
08ac
08a2
0898
08c0
08e8
0910
0938
0960
0988
09b0
09d8
0a00
0a28
0a00
09d8
09b0
0988
0960
0938
0910
08e8
08c0
0898
0974
0a50
0b2c
0c08
0ce4
0cc6
0ca8
0c8a
0c6c
0c4e
0c30
0c12
0bf4
0bd6
0bb8
0c6c
0d20
0dd4
0e88
0f3c
0f78
0fb4
0ff0
102c
1068
10a4
10e0
111c
1158
1194
1194
1194
1194
1194
1194
10fe
1068
0fd2
0f3c
0ea6
0e10
0d7a
0ce4
0c4e
0bb8
0b83
0b4d
0b18
0ae3
0aad
0a78
0a43
0a0d
09d8
09a3
096d
0938
0903
08cd
0898
0889
087a
086b
085c
084d
083e
082f
0820
0811
0802
082f
085c
0889
08b6
08e3
0910
093d
096a
0997
09c4
09a6
0988
096a
094c
092e
0910
08f2
08d4
08b6
0898
091a
099c
0a1e
0aa0
0b22
0ba4
0c26
0ca8
0d2a
0dac
0e24
0e9c
0f14
0f8c
1004
0f78
0eec
0e60
0dd4
0d48
0d2d
0d13
0cf8
0cdd
0cc3
0ca8
0c8d
0c73
0c58
0c3d
0c23
0c08
0bed
0bd3
0bb8
0cbc
0dc0
0ec4
0fc8
10cc
1036
0fa0
0f0a
0e74
0dde
0d48
0cb2
0c1c
0b86
